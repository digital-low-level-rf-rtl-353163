// dpram: simple dual-port RAM with independent write and read clocks.
//
// One write port (wclk, we, waddr, wdata) and one read port (rclk, raddr,
// rdata) with a registered read: rdata shows mem[raddr] one rclk cycle
// after raddr.  A read of the address being written in the same moment
// returns either word.  Written as an array so that synthesis maps it to
// block RAM; contents are not reset.
module dpram #(
  parameter int AW = 4,
  parameter int DW = 36
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          rclk,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge wclk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge rclk) begin
    rdata <= mem[raddr];
  end

endmodule
