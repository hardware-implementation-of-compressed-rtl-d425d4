// dwt_pu - five-stage processing unit of the lifting 9/7 1-D DWT.
//
// Computes, for one triple of input samples X[2n-2], X[2n-1], X[2n] per clock,
// the flipped-lifting steps
//   H1[n] = (X[2n] + X[2n-2]) - |a'| X[2n-1]            (PE_alpha, stage 2)
//   L1[n] = b' X[2n] + (H1[n] + H1[n-1])                 (PE_beta,  stage 3)
//   H2[n] = (L1[n] + L1[n-1]) - |c'| H1[n]               (PE_gama,  stage 4)
//   L2[n] = d' L1[n] + (H2[n] + H2[n-1])                 (PE_delta, stage 5)
//   H[n]  = H2[n] >>> 4,  L[n] = L2[n] >>> 5             (scaling)
// with every constant multiplication done by shifts and adds exactly as drawn
// in the source architecture (a' = -0.6328, b' = 12, c' = -21.375,
// d' = 2.5625). Stage 1 (shift_PE) only forms the two shifted copies of
// X[2n-1] and registers the other samples. No stage has more than two adders
// in series.
//
// The "previous" partials H1[n-1], L1[n-1] and H2[n-1] are inputs, each read
// combinationally in the stage that uses it: h1_prev in stage 3, l1_prev in
// stage 4, h2_prev in stage 5. The caller decides where they come from (the
// neighbouring PU or a row memory in the row processor, a 2-deep shift
// register in the column processor). The unit's own partials leave from the
// stage registers h1 (after stage 2), l1 (after stage 3) and h2 (after
// stage 4); h_out / l_out leave after stage 5, i.e. five clocks after the
// inputs. The pipeline never stalls.
//
// Which operand each subtractor subtracts follows the lifting equations with
// the negative a' and c'; the drawing of the source does not say. Right
// shifts are arithmetic (floor), which is this design's choice.
module dwt_pu
  import cs_enc_pkg::*;
(
  input  logic clk,
  input  acc_t x_m2,     // X[2n-2]
  input  acc_t x_m1,     // X[2n-1]
  input  acc_t x_0,      // X[2n]
  input  acc_t h1_prev,  // H1[n-1], aligned with stage 3
  input  acc_t l1_prev,  // L1[n-1], aligned with stage 4
  input  acc_t h2_prev,  // H2[n-1], aligned with stage 5
  output acc_t h1,       // H1[n]  (stage-2 register)
  output acc_t l1,       // L1[n]  (stage-3 register)
  output acc_t h2,       // H2[n]  (stage-4 register)
  output acc_t h_out,    // H[n]   (stage-5 register)
  output acc_t l_out     // L[n]   (stage-5 register)
);

  // stage 1: shift_PE
  acc_t s1_xp, s1_xpp, s1_m2, s1_0;
  // stage 2: PE_alpha
  acc_t s2_h1, s2_bx;
  // stage 3: PE_beta
  acc_t s3_l1, s3_hp, s3_hpp;
  // stage 4: PE_gama
  acc_t s4_h2, s4_lp, s4_hs;
  // stage 5: PE_delta
  acc_t s5_h, s5_l;

  acc_t beta_sum, gama_sum;

  always_comb begin
    beta_sum = s2_h1 + h1_prev;
    gama_sum = s3_l1 + l1_prev;
  end

  always_ff @(posedge clk) begin
    // shift_PE: X'(2n-1) = X>>7, X''(2n-1) = X>>1 + X>>3
    s1_xp  <= x_m1 >>> 7;
    s1_xpp <= (x_m1 >>> 1) + (x_m1 >>> 3);
    s1_m2  <= x_m2;
    s1_0   <= x_0;

    // PE_alpha: H1 = (X(2n)+X(2n-2)) - (X'+X''), X'(2n) = b' X(2n)
    s2_h1  <= (s1_0 + s1_m2) - (s1_xp + s1_xpp);
    s2_bx  <= (s1_0 <<< 2) + (s1_0 <<< 3);

    // PE_beta: L1 = (H1(n)+H1(n-1)) + X'(2n); H'1 = H1 + 16H1 + 4H1; H''1 = H1/4 + H1/8
    s3_l1  <= beta_sum + s2_bx;
    s3_hp  <= s2_h1 + ((s2_h1 <<< 4) + (s2_h1 <<< 2));
    s3_hpp <= (s2_h1 >>> 2) + (s2_h1 >>> 3);

    // PE_gama: H2 = (L1(n)+L1(n-1)) - (H'1+H''1); L'1 = 2L1 + (L1/2 + L1/16)
    s4_h2  <= gama_sum - (s3_hp + s3_hpp);
    s4_hs  <= (gama_sum - (s3_hp + s3_hpp)) >>> 4;
    s4_lp  <= (s3_l1 <<< 1) + ((s3_l1 >>> 1) + (s3_l1 >>> 4));

    // PE_delta: L2 = L'1 + (H2(n)+H2(n-1)); L = L2 >> 5
    s5_l   <= (s4_lp + (s4_h2 + h2_prev)) >>> 5;
    s5_h   <= s4_hs;
  end

  assign h1    = s2_h1;
  assign l1    = s3_l1;
  assign h2    = s4_h2;
  assign h_out = s5_h;
  assign l_out = s5_l;

endmodule
