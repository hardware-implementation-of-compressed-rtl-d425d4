// temporal_processor - lifting Haar DWT along time, between two frames.
//
// For the same sub-band coefficient of frame n (x0) and frame n+1 (x1):
//   xl = (x0 + x1) / sqrt(2),   xh = (x1 - x0) / sqrt(2)
// with 1/sqrt(2) replaced by the shifts 1/2 + 1/8 + 1/16 + 1/64 (= 0.703).
// Stage 1 forms the sum and difference and the two partial shift sums of
// each; stage 2 adds the partial sums. Two clocks of latency, one result
// pair per clock, no temporal frame buffer (both spatial processors feed the
// unit at the same time). Shifts and stages follow the source architecture;
// the sign convention xh = x1 - x0 follows its equation, and the arithmetic
// right shifts and 15-bit wrap of the outputs are this design's.
module temporal_processor
  import cs_enc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  coef_t x0,
  input  coef_t x1,
  output logic  out_valid,
  output coef_t xl,
  output coef_t xh
);

  typedef logic signed [COEF_W:0] wide_t;

  wide_t sum, dif;
  wide_t l_a, l_b, h_a, h_b;   // stage-1 registers
  coef_t l_q, h_q;             // stage-2 registers
  logic  v1, v2;

  always_comb begin
    sum = wide_t'(x1) + wide_t'(x0);
    dif = wide_t'(x1) - wide_t'(x0);
  end

  always_ff @(posedge clk) begin
    l_a <= (sum >>> 1) + (sum >>> 3);
    l_b <= (sum >>> 4) + (sum >>> 6);
    h_a <= (dif >>> 1) + (dif >>> 3);
    h_b <= (dif >>> 4) + (dif >>> 6);
    l_q <= coef_t'(l_a + l_b);
    h_q <= coef_t'(h_a + h_b);
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) {v1, v2} <= '0;
    else        {v1, v2} <= {in_valid, v1};

  assign out_valid = v2;
  assign xl = l_q;
  assign xh = h_q;

endmodule
