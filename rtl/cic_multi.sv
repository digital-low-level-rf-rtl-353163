// cic_multi: second-order CIC decimator for a time-multiplexed stream.
//
// Input is the serial bus of mux_serializer: one sample per valid cycle,
// channel number on dchan, channels 0..NCH-1 in order within a frame.  Each
// channel has its own two integrators and two comb delays, kept in register
// arrays and updated when that channel's sample passes.  A frame counter
// counts up to 'decim' frames; in the last frame of each period the comb
// section runs and the channel's result, (sum of the two-stage CIC) >>>
// shift, rounded down and saturated to DW bits, is sent out with its
// channel number.  DC gain before the shift is decim^2.
//
// The same module is used twice: with decim and shift from registers as the
// configurable ("dynamic") waveform filter, and with fixed values as the
// "static" filter that feeds the interlock.  Filter order 2 and the
// frame-rate operation are this design's choices; the paper names the two
// CIC filters and says that decimation is configurable.
//
// Timing: one register stage; a result leaves the cycle after its input.
// 'decim' must be at least 1 and is read at frame boundaries.
module cic_multi #(
  parameter int NCH    = 16,
  parameter int DW     = 18,
  parameter int DMAX_W = 12,
  localparam int CHW   = $clog2(NCH)
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [DMAX_W-1:0]     decim,
  input  logic [5:0]            shift,
  input  logic signed [DW-1:0]  din,
  input  logic                  dvalid,
  input  logic [CHW-1:0]        dchan,
  output logic signed [DW-1:0]  dout,
  output logic                  ovalid,
  output logic [CHW-1:0]        ochan
);

  localparam int AW = DW + 2 * DMAX_W;    // growth of decim^2

  logic signed [AW-1:0] int1 [NCH];
  logic signed [AW-1:0] int2 [NCH];
  logic signed [AW-1:0] cd1  [NCH];
  logic signed [AW-1:0] cd2  [NCH];
  logic [DMAX_W-1:0]    fcnt;

  logic signed [AW-1:0] i1, i2, c1, c2, sh;
  logic                 dump;

  assign dump = (fcnt >= decim - 1'b1);
  assign i1 = int1[dchan] + AW'(din);
  assign i2 = int2[dchan] + i1;
  assign c1 = i2 - cd1[dchan];
  assign c2 = c1 - cd2[dchan];
  assign sh = c2 >>> shift;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k < NCH; k++) begin
        int1[k] <= '0; int2[k] <= '0; cd1[k] <= '0; cd2[k] <= '0;
      end
      fcnt   <= '0;
      ovalid <= 1'b0;
      dout   <= '0;
      ochan  <= '0;
    end else begin
      ovalid <= 1'b0;
      if (dvalid) begin
        int1[dchan] <= i1;
        int2[dchan] <= i2;
        if (dump) begin
          cd1[dchan] <= i2;
          cd2[dchan] <= c1;
          ovalid     <= 1'b1;
          ochan      <= dchan;
          if (sh > AW'((1 << (DW - 1)) - 1))      dout <= DW'((1 << (DW - 1)) - 1);
          else if (sh < -AW'(1 << (DW - 1)))      dout <= DW'(-(1 << (DW - 1)));
          else                                    dout <= DW'(sh);
        end
        if (dchan == CHW'(NCH - 1)) fcnt <= dump ? '0 : fcnt + 1'b1;
      end
    end
  end

endmodule
