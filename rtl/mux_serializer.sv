// mux_serializer: time-multiplexes the waveform channels onto one bus.
//
// On a 'sample' strobe all NS input streams (I and Q of each ADC channel,
// stream 2k = I and 2k+1 = Q of ADC k) are latched into a shadow register;
// the following NS cycles send them one per cycle on dout with dvalid = 1
// and the stream number on dchan.  A 'sample' that arrives while a frame is
// still being sent restarts the frame (the word due in that cycle is still
// sent), so the strobe period should be at least NS cycles.
//
// Timing: stream 0 of a frame leaves one cycle after the strobe, stream
// NS-1 NS cycles after it.  The block and its 'sample' input are those of
// the paper's waveform figure; ordering and restart rule are this design's.
module mux_serializer #(
  parameter int NS = 16,
  parameter int DW = 18,
  localparam int CW = $clog2(NS)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 sample,
  input  logic signed [DW-1:0] din [NS],
  output logic signed [DW-1:0] dout,
  output logic                 dvalid,
  output logic        [CW-1:0] dchan
);

  logic signed [DW-1:0] shadow [NS];
  logic [CW-1:0]        cnt;
  logic                 active;

  always_ff @(posedge clk) begin
    if (rst) begin
      active <= 1'b0;
      cnt    <= '0;
      dvalid <= 1'b0;
      dout   <= '0;
      dchan  <= '0;
    end else begin
      if (sample) begin
        shadow <= din;
        cnt    <= '0;
        active <= 1'b1;
      end else if (active) begin
        if (cnt == CW'(NS - 1)) active <= 1'b0;
        cnt <= cnt + 1'b1;
      end
      dvalid <= active;
      dout   <= shadow[cnt];
      dchan  <= cnt;
    end
  end

endmodule
