// rearrange_unit - sorts the column-processor outputs into sub-band streams.
//
// The two column PUs deliver, in alternate clocks, (HL, HH) and (LL, LH) of
// their own column (l0/h0 from PU 0, l1/h1 from PU 1). Two registers keep
// PU 1's pair for one clock and four 2:1 multiplexers pick, for each of the
// LL, LH, HL and HH outputs, either PU 0's value of this clock (column 0 of
// the pair) or PU 1's value of the previous clock (column 1). Every sub-band
// output thus carries one coefficient per clock, column 0 and column 1 of
// the strip in turn. HL and HH start one clock before LL and LH, so each
// sub-band has its own valid; sb_col gives the column. The multiplexer
// inputs and select values are those of the source drawing, for P = 2; the
// per-band valid and column flags are this design's. The select follows
// the input phase and, in an idle clock, the phase of the previous clock, so
// the last register pair of a frame is still sent.
module rearrange_unit
  import cs_enc_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_is_h,
  input  coef_t l0,
  input  coef_t h0,
  input  coef_t l1,
  input  coef_t h1,
  output coef_t sb       [4],   // indexed by subband_e
  output logic  sb_valid [4],
  output logic  sb_col   [4]
);

  coef_t reg_l1, reg_h1;
  logic  p_valid, p_is_h;
  logic  sel;

  always_ff @(posedge clk) begin
    reg_l1 <= l1;
    reg_h1 <= h1;
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      p_valid <= 1'b0;
      p_is_h  <= 1'b0;
    end else begin
      p_valid <= in_valid;
      p_is_h  <= in_valid ? in_is_h : 1'b0;
    end

  always_comb begin
    sel = in_valid ? !in_is_h : p_is_h;   // 1 while an L pair is present

    sb[SB_LL] = sel ? l0 : reg_l1;
    sb[SB_LH] = sel ? h0 : reg_h1;
    sb[SB_HL] = sel ? reg_l1 : l0;
    sb[SB_HH] = sel ? reg_h1 : h0;

    sb_valid[SB_LL] = sel ? (in_valid && !in_is_h) : (p_valid && !p_is_h);
    sb_valid[SB_LH] = sb_valid[SB_LL];
    sb_valid[SB_HL] = sel ? (p_valid && p_is_h) : (in_valid && in_is_h);
    sb_valid[SB_HH] = sb_valid[SB_HL];

    sb_col[SB_LL] = !sel;
    sb_col[SB_LH] = !sel;
    sb_col[SB_HL] = sel;
    sb_col[SB_HH] = sel;
  end

endmodule
