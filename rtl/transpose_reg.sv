// transpose_reg - one transpose register of the transpose unit.
//
// A row-processor PU delivers one (L, H) pair per clock, row after row of the
// strip. The column processor wants, for one column at a time, the two
// samples of a row pair 2k, 2k+1. This block holds the even row and, in the
// clock in which the odd row arrives, outputs the two H values
// (even = H(2k), odd = H(2k+1)); in the next clock it outputs the two L values
// from its registers. The output therefore alternates H pair, L pair at the
// input rate, as in the source architecture. out_first marks the pair of
// rows 0 and 1 of a strip (passed through from first_pair, which the caller
// raises with row 1).
//
// Three registers (even L, even H, odd L) and two output multiplexers; the
// source drawing shows two registers, which cannot keep the even L value until
// it is sent, so the third register is this design's. The outputs are
// combinational from the registers and the current input.
module transpose_reg
  import cs_enc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  coef_t l_in,
  input  coef_t h_in,
  input  logic  row_odd,
  input  logic  first_pair,
  output logic  out_valid,
  output logic  out_is_h,
  output logic  out_first,
  output coef_t even,
  output coef_t odd
);

  coef_t e_l, e_h, o_l;
  logic  l_pending, first_q;

  always_ff @(posedge clk) begin
    if (in_valid && !row_odd) begin
      e_l <= l_in;
      e_h <= h_in;
    end
    if (in_valid && row_odd) o_l <= l_in;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      l_pending <= 1'b0;
      first_q   <= 1'b0;
    end else begin
      l_pending <= in_valid && row_odd;
      first_q   <= first_pair;
    end

  always_comb begin
    if (in_valid && row_odd) begin
      out_valid = 1'b1;
      out_is_h  = 1'b1;
      out_first = first_pair;
      even      = e_h;
      odd       = h_in;
    end else begin
      out_valid = l_pending;
      out_is_h  = 1'b0;
      out_first = first_q;
      even      = e_l;
      odd       = o_l;
    end
  end

endmodule
