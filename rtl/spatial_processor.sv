// spatial_processor - strip-scanned 2-D lifting 9/7 DWT of one frame.
//
// Chain: row processor (P PUs and three N-word row memories) -> transpose
// unit (P transpose registers) -> column processor (P PUs) -> re-arrange
// unit. The frame arrives as N/(2P) vertical strips of 2P+1 pixels (one
// column of overlap between strips), one strip row per clock, rows 0..N-1
// of strip 0 first. The caller supplies the symmetric-extension column
// X(r, N) = X(r, N-2) in the last strip. Row and strip counters are kept here
// from in_valid; a frame must be streamed without gaps once it has begun
// (an assertion checks this), gaps are allowed between frames.
//
// Outputs: the four sub-bands LL, LH, HL, HH (index subband_e), each one
// coefficient per clock with its own valid, alternating between the two
// columns of the strip (sb_col). Per frame each sub-band carries
// (N/2) x (N/2) coefficients, in strip order: for every strip, row pairs
// k = 0..N/2-1, column 0 then column 1. The HL/HH streams lead LL/LH by one
// clock. Latency from a pixel row to its first coefficient is measured by
// the testbench (row processor 5, transpose 1, column processor 5, plus the
// re-arrange register). Structure after the source architecture with P = 2;
// counters, boundary handling and valid signalling are this design's.
module spatial_processor
  import cs_enc_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned P = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  pix_t  pix [2*P+1],
  output coef_t sb       [4],
  output logic  sb_valid [4],
  output logic  sb_col   [4]
);

  localparam int unsigned RW      = $clog2(N);
  localparam int unsigned STRIPS  = N / (2*P);
  localparam int unsigned SW      = (STRIPS > 1) ? $clog2(STRIPS) : 1;

  initial begin
    assert (P == 2) else $error("re-arrange unit is built for P = 2");
    assert (N % (2*P) == 0) else $error("N must be a multiple of 2P");
  end

  // ---------------- scan position ----------------
  logic [RW-1:0] row_q;
  logic [SW-1:0] strip_q;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      row_q   <= '0;
      strip_q <= '0;
    end else if (in_valid) begin
      if (row_q == RW'(N-1)) begin
        row_q   <= '0;
        strip_q <= (strip_q == SW'(STRIPS-1)) ? '0 : strip_q + 1'b1;
      end else begin
        row_q <= row_q + 1'b1;
      end
    end

  // Once a frame has begun it must arrive without gaps.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (row_q != '0 || strip_q != '0) |-> in_valid)
    else $error("spatial_processor: gap inside a frame");

  // ---------------- row processor ----------------
  logic          rp_valid;
  logic [RW-1:0] rp_row;
  coef_t         rp_h [P], rp_l [P];

  row_processor #(.N(N), .P(P)) u_rp (
    .clk, .rst_n,
    .in_valid,
    .pix,
    .row        (row_q),
    .first_strip(strip_q == '0),
    .out_valid  (rp_valid),
    .h          (rp_h),
    .l          (rp_l),
    .out_row    (rp_row),
    .out_first  ()
  );

  // ---------------- transpose unit ----------------
  logic  tu_valid [P], tu_is_h [P], tu_first [P];
  coef_t tu_even [P], tu_odd [P];

  for (genvar p = 0; p < P; p++) begin : g_tu
    transpose_reg u_tr (
      .clk, .rst_n,
      .in_valid  (rp_valid),
      .l_in      (rp_l[p]),
      .h_in      (rp_h[p]),
      .row_odd   (rp_row[0]),
      .first_pair(rp_row == RW'(1)),
      .out_valid (tu_valid[p]),
      .out_is_h  (tu_is_h[p]),
      .out_first (tu_first[p]),
      .even      (tu_even[p]),
      .odd       (tu_odd[p])
    );
  end

  // ---------------- column processor ----------------
  logic  cp_valid, cp_is_h;
  coef_t cp_l [P], cp_h [P];

  column_processor #(.P(P)) u_cp (
    .clk, .rst_n,
    .in_valid (tu_valid[0]),
    .in_is_h  (tu_is_h[0]),
    .in_first (tu_first[0]),
    .even     (tu_even),
    .odd      (tu_odd),
    .out_valid(cp_valid),
    .out_is_h (cp_is_h),
    .l_out    (cp_l),
    .h_out    (cp_h)
  );

  // ---------------- re-arrange unit ----------------
  rearrange_unit u_ru (
    .clk, .rst_n,
    .in_valid(cp_valid),
    .in_is_h (cp_is_h),
    .l0      (cp_l[0]),
    .h0      (cp_h[0]),
    .l1      (cp_l[P-1]),
    .h1      (cp_h[P-1]),
    .sb, .sb_valid, .sb_col
  );

endmodule
