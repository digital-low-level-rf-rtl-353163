// fdownconvert: non-IQ digital down-conversion of one IF channel.
//
// The IF is sampled at theta = 2*pi*4/11 per sample, so two consecutive
// samples y_n, y_n+1 determine the baseband vector (I, Q) exactly:
//   I = ( sin((n+1)th)*y_n - sin(n*th)*y_n+1 ) / sin(th)
//   Q = (-cos((n+1)th)*y_n + cos(n*th)*y_n+1 ) / sin(th)
// with y_n = I*cos(n*th) + Q*sin(n*th).  The LO inputs carry
// L*cos(n*th), L*sin(n*th) for the ADC sample presented in the same cycle.
// Each cycle one of the two rows is evaluated (I and Q alternate), which
// needs two multipliers, and the result is multiplied by the constant
// INV_SIN = 2^15/sin(th) (43358 for 4/11).  The output is an interleaved
// I/Q stream, iq_sel = 0 for I and 1 for Q, scaled as I*L/2^15.
//
// Timing: an ADC sample entering in cycle t is the newer sample of the
// result leaving in cycle t+8 (DELAY = 8, as printed for this block).  The
// equations follow the paper; the alternation and scaling are this design's.
module fdownconvert #(
  parameter int W       = 16,
  parameter int DW      = 18,
  parameter int INV_SIN = 43358
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic signed [W-1:0]  adc,
  input  logic signed [DW-1:0] lo_cos,
  input  logic signed [DW-1:0] lo_sin,
  output logic signed [DW-1:0] iq,
  output logic                 iq_sel
);

  localparam int PRW = W + DW + 1;          // difference of two products
  localparam int SCW = PRW + 18;            // times INV_SIN (17-bit positive)
  localparam int PAD = 3;                   // pad the pipeline to 8 cycles

  // stage 1: current and previous sample and LO
  logic signed [W-1:0]  y_cur, y_prev;
  logic signed [DW-1:0] c_cur, c_prev, s_cur, s_prev;
  logic                 sel1, sel2, sel3, sel4, sel5;
  // stage 2: products, stage 3: difference, stage 4: times 1/sin, stage 5: round
  logic signed [W+DW-1:0] p1, p2;
  logic signed [PRW-1:0]  d3;
  logic signed [SCW-1:0]  m4;
  logic signed [DW-1:0]   r5;
  logic signed [DW-1:0]   pad_d [PAD];
  logic                   pad_s [PAD];

  logic signed [SCW-1:0] m4_rnd;
  assign m4_rnd = (m4 + (SCW'(1) <<< 29)) >>> 30;

  always_ff @(posedge clk) begin
    if (rst) begin
      y_cur <= '0; y_prev <= '0; c_cur <= '0; c_prev <= '0; s_cur <= '0; s_prev <= '0;
      sel1 <= 1'b0; sel2 <= 1'b0; sel3 <= 1'b0; sel4 <= 1'b0; sel5 <= 1'b0;
      p1 <= '0; p2 <= '0; d3 <= '0; m4 <= '0; r5 <= '0;
    end else begin
      y_cur <= adc;     y_prev <= y_cur;
      c_cur <= lo_cos;  c_prev <= c_cur;
      s_cur <= lo_sin;  s_prev <= s_cur;
      sel1  <= ~sel1;
      // stage 2
      if (!sel1) begin                       // I row
        p1 <= s_cur * y_prev;
        p2 <= s_prev * y_cur;
      end else begin                         // Q row
        p1 <= c_prev * y_cur;
        p2 <= c_cur * y_prev;
      end
      sel2 <= sel1;
      // stage 3
      d3   <= PRW'(p1) - PRW'(p2);
      sel3 <= sel2;
      // stage 4
      m4   <= SCW'(d3) * SCW'(INV_SIN);
      sel4 <= sel3;
      // stage 5: scale by 2^-30 and saturate
      if (m4_rnd > SCW'((1 << (DW - 1)) - 1))  r5 <= DW'((1 << (DW - 1)) - 1);
      else if (m4_rnd < -SCW'(1 << (DW - 1)))  r5 <= DW'(-(1 << (DW - 1)));
      else                                     r5 <= DW'(m4_rnd);
      sel5 <= sel4;
    end
  end

  // stages 6..8: delay padding
  always_ff @(posedge clk) begin
    pad_d[0] <= r5;
    pad_s[0] <= rst ? 1'b0 : sel5;
    for (int k = 1; k < PAD; k++) begin
      pad_d[k] <= pad_d[k-1];
      pad_s[k] <= pad_s[k-1];
    end
  end

  assign iq     = pad_d[PAD-1];
  assign iq_sel = pad_s[PAD-1];

endmodule
