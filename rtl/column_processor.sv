// column_processor - column (vertical) pass of the 2-D lifting DWT.
//
// P processing units, one per row-processor PU. Each is time-shared by the
// two columns that its row-processor PU produces: clocks alternate between a
// pair of H samples (rows 2k, 2k+1 of the row-high column) and a pair of L
// samples. Because of this interleave, a partial result of one stage is the
// "[n-1]" input of the same stage two clocks later, so length-2 shift
// registers sit after stages 2, 3 and 4 (H1, L1, H2), and the odd input
// sample goes through a length-2 shift register to serve as X[2n-2] of the
// next pair. The input mapping is X[2n] = row 2k+1, X[2n-1] = row 2k,
// X[2n-2] = row 2k-1.
//
// At the top of a strip (in_first, rows 0 and 1) X[2n-2] is the mirrored
// row 1 and the previous partials are zero; this boundary rule is this
// design's choice, the source does not state one. The input stream must run
// without gaps within a strip (H, L, H, L, ...).
//
// Timing: five clocks from input to output. For an H pair the outputs are
// (l_out, h_out) = (HL, HH); for an L pair they are (LL, LH); out_is_h says
// which. Outputs are cut to COEF_W bits.
module column_processor
  import cs_enc_pkg::*;
#(
  parameter int unsigned P = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_is_h,
  input  logic  in_first,
  input  coef_t even [P],
  input  coef_t odd  [P],
  output logic  out_valid,
  output logic  out_is_h,
  output coef_t l_out [P],
  output coef_t h_out [P]
);

  typedef struct packed {
    logic v;
    logic is_h;
    logic first;
  } tag_t;

  tag_t tag [6];

  assign tag[0] = '{v: in_valid, is_h: in_is_h, first: in_first};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int k = 1; k < 6; k++) tag[k] <= '0;
    else        for (int k = 1; k < 6; k++) tag[k] <= tag[k-1];

  for (genvar p = 0; p < P; p++) begin : g_pu
    acc_t odd_sr [2];
    acc_t h1_sr [2], l1_sr [2], h2_sr [2];
    acc_t h1, l1, h2, hq, lq;
    acc_t x_m2, h1_prev, l1_prev, h2_prev;

    always_ff @(posedge clk) begin
      odd_sr[0] <= acc_t'(odd[p]);
      odd_sr[1] <= odd_sr[0];
      h1_sr[0]  <= h1;  h1_sr[1] <= h1_sr[0];
      l1_sr[0]  <= l1;  l1_sr[1] <= l1_sr[0];
      h2_sr[0]  <= h2;  h2_sr[1] <= h2_sr[0];
    end

    always_comb begin
      x_m2    = in_first     ? acc_t'(odd[p]) : odd_sr[1];
      h1_prev = tag[2].first ? '0 : h1_sr[1];
      l1_prev = tag[3].first ? '0 : l1_sr[1];
      h2_prev = tag[4].first ? '0 : h2_sr[1];
    end

    dwt_pu u_pu (
      .clk,
      .x_m2,
      .x_m1   (acc_t'(even[p])),
      .x_0    (acc_t'(odd[p])),
      .h1_prev,
      .l1_prev,
      .h2_prev,
      .h1,
      .l1,
      .h2,
      .h_out  (hq),
      .l_out  (lq)
    );

    assign l_out[p] = coef_t'(lq);
    assign h_out[p] = coef_t'(hq);
  end

  assign out_valid = tag[5].v;
  assign out_is_h  = tag[5].is_h;

endmodule
