// circ_buf: double-buffered circular waveform buffer across two clocks.
//
// Write side (wclk, RF clock): every valid word of the serial CIC output,
// {channel, sample}, is written at the write pointer of the current write
// bank, which wraps around (circular buffer).  A 'trigger' is held pending
// until (a) the write bank has been filled completely since it was last
// taken and (b) the reader has released the other bank.  Then the banks
// swap: the filled bank is frozen for reading, its oldest word position is
// recorded, and writing continues in the other bank from address 0.
//
// Read side (rclk, Ethernet clock): 'ready' rises when a frozen bank is
// available; raddr is an offset from the oldest word (0 = oldest, 2^AW-1 =
// newest) and rdata follows one rclk cycle later.  A one-cycle 'read_done'
// releases the bank and drops 'ready'.
//
// Clock crossing: the swap and the release are toggle flags passed through
// two-flip-flop synchronizers; the frozen bank number and start pointer are
// written before the swap toggle and stay constant while the reader holds
// the bank, so they are read directly on rclk.
// The double-buffered circular organisation, the trigger and the two clock
// domains are those of the paper's waveform figure; depth, word format and
// the handshake are this design's.
module circ_buf #(
  parameter int AW  = 11,
  parameter int DW  = 18,
  parameter int CHW = 4
) (
  input  logic                 wclk,
  input  logic                 wrst,
  input  logic [DW-1:0]        din,
  input  logic [CHW-1:0]       dchan,
  input  logic                 dvalid,
  input  logic                 trigger,
  output logic                 pending,
  input  logic                 rclk,
  input  logic                 rrst,
  input  logic [AW-1:0]        raddr,
  output logic [CHW+DW-1:0]    rdata,
  output logic                 ready,
  input  logic                 read_done
);

  // ---------------- write clock domain ----------------
  logic          wbank, rbank;
  logic [AW-1:0] wptr, start_ptr;
  logic          full, busy;
  logic          swap_tgl, done_s1, done_s2, done_s3;
  logic          done_tgl;                 // toggled on rclk by read_done
  logic          swap;

  assign swap = pending && full && !busy;

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbank <= 1'b0; rbank <= 1'b1; wptr <= '0; start_ptr <= '0;
      full <= 1'b0; busy <= 1'b0; pending <= 1'b0; swap_tgl <= 1'b0;
      done_s1 <= 1'b0; done_s2 <= 1'b0; done_s3 <= 1'b0;
    end else begin
      done_s1 <= done_tgl; done_s2 <= done_s1; done_s3 <= done_s2;
      if (done_s2 != done_s3) busy <= 1'b0;
      if (trigger) pending <= 1'b1;
      if (swap) begin
        // the word written in this cycle (if any) still goes to the old bank
        start_ptr <= dvalid ? wptr + 1'b1 : wptr;
        rbank     <= wbank;
        wbank     <= ~wbank;
        wptr      <= '0;
        full      <= 1'b0;
        busy      <= 1'b1;
        pending   <= 1'b0;
        swap_tgl  <= ~swap_tgl;
      end else if (dvalid) begin
        wptr <= wptr + 1'b1;
        if (wptr == '1) full <= 1'b1;
      end
    end
  end

  // ---------------- read clock domain ----------------
  logic swap_s1, swap_s2, swap_s3;

  always_ff @(posedge rclk) begin
    if (rrst) begin
      swap_s1 <= 1'b0; swap_s2 <= 1'b0; swap_s3 <= 1'b0;
      ready <= 1'b0; done_tgl <= 1'b0;
    end else begin
      swap_s1 <= swap_tgl; swap_s2 <= swap_s1; swap_s3 <= swap_s2;
      if (swap_s2 != swap_s3) ready <= 1'b1;
      else if (read_done && ready) begin
        ready    <= 1'b0;
        done_tgl <= ~done_tgl;
      end
    end
  end

  dpram #(.AW(AW + 1), .DW(CHW + DW)) u_mem (
    .wclk  (wclk),
    .we    (dvalid),
    .waddr ({wbank, wptr}),
    .wdata ({dchan, din}),
    .rclk  (rclk),
    .raddr ({rbank, start_ptr + raddr}),
    .rdata (rdata)
  );

endmodule
