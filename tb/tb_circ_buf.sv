`timescale 1ns/1ps
// tb_circ_buf: 32-word banks (AW = 5), write clock 10 ns, read clock 8 ns.
// The writer stores a running sequence number on random valid cycles.
//  1. after a trigger the reader sees ready, and the 32 words read from
//     offset 0..31 are consecutive numbers ending at the last word written
//     around the trigger;
//  2. a second trigger while the reader holds the bank is kept pending: the
//     bank content does not change;
//  3. after read_done the pending trigger swaps again and the new bank holds
//     newer consecutive data.
module tb_circ_buf;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1;
  always #5 wclk = ~wclk;
  always #4 rclk = ~rclk;
  int checks = 0, failures = 0;
  logic [17:0] din;
  logic [3:0] dchan;
  logic dvalid, trigger, pending, ready, read_done;
  logic [4:0] raddr;
  logic [21:0] rdata;
  circ_buf #(.AW(5)) dut (.wclk, .wrst, .din, .dchan, .dvalid, .trigger, .pending,
                          .rclk, .rrst, .raddr, .rdata, .ready, .read_done);

  int seq = 0;
  bit run = 0;
  always @(negedge wclk) begin
    dvalid <= 0;
    if (run && ($urandom % 4 != 0)) begin
      dvalid <= 1; din <= 18'(seq); dchan <= 4'(seq % 16); seq <= seq + 1;
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int rd [32];
  task automatic read_all();
    for (int k = 0; k < 32; k++) begin
      @(negedge rclk); raddr = 5'(k);
      @(negedge rclk); rd[k] = int'(rdata[17:0]);
      check(rdata[21:18] == 4'(rd[k] % 16), "channel field");
    end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int s_trig, first0;
    dvalid = 0; din = 0; dchan = 0; trigger = 0; read_done = 0; raddr = 0;
    repeat (4) @(negedge wclk);
    wrst = 0; rrst = 0; run = 1;
    repeat (100) @(negedge wclk);
    check(!ready, "ready before any trigger");
    // 1. trigger
    trigger = 1; s_trig = seq; @(negedge wclk); trigger = 0;
    repeat (10) @(negedge wclk);
    check(ready, "ready after trigger");
    read_all();
    for (int k = 1; k < 32; k++) check(rd[k] == rd[k-1] + 1, $sformatf("not consecutive at %0d: %0d %0d", k, rd[k-1], rd[k]));
    check(rd[31] >= s_trig - 2 && rd[31] <= s_trig + 2, $sformatf("newest %0d, trigger at %0d", rd[31], s_trig));
    first0 = rd[0];
    // 2. trigger while the reader holds the bank
    repeat (60) @(negedge wclk);
    trigger = 1; @(negedge wclk); trigger = 0;
    repeat (60) @(negedge wclk);
    check(pending, "second trigger not pending");
    read_all();
    check(rd[0] == first0, "held bank changed");
    // 3. release
    s_trig = seq;
    @(negedge rclk); read_done = 1; @(negedge rclk); read_done = 0;
    check(!ready, "ready not dropped by read_done");
    repeat (12) @(negedge wclk);
    check(ready, "pending trigger did not swap after release");
    read_all();
    for (int k = 1; k < 32; k++) check(rd[k] == rd[k-1] + 1, "second bank not consecutive");
    check(rd[31] >= s_trig - 2 && rd[31] <= s_trig + 6, $sformatf("second newest %0d release at %0d", rd[31], s_trig));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
