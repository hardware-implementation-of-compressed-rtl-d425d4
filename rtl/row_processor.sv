// row_processor - row (horizontal) pass of the strip-scanned 2-D lifting DWT.
//
// The frame is read in vertical strips 2P+1 pixels wide that overlap by one
// column: strip s holds columns 2Ps .. 2Ps+2P. Each clock one row of the
// current strip arrives (pix[0] = leftmost column) and the P processing
// units each transform one column triple of it: PU p takes columns 2p, 2p+1,
// 2p+2 as X[2n-2], X[2n-1], X[2n]. The partials H1, L1, H2 of PU p are the
// "[n-1]" inputs of PU p+1 in the same clock; those of the last PU are stored,
// per row, in the three N-word row memories (Memory_alpha/beta/gama) and feed
// PU 0 when the next strip reaches the same row. During strip 0 PU 0 gets
// zero instead (this design's choice; the source does not say).
//
// Timing: five clocks from pix to h/l (the PU pipeline). The row index and
// the strip-0 flag travel with the data through a tag pipeline, which also
// gives each memory the row address of the stage that reads and writes it.
// Outputs are the P (H, L) results of the row, cut to COEF_W bits. The pixel
// source supplies the symmetric-extension column X(r, N) = X(r, N-2) in the
// last strip. This structure follows the source architecture; the widths,
// the zero start and the tags are this design's.
module row_processor
  import cs_enc_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned P = 2
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  pix_t                 pix [2*P+1],
  input  logic [$clog2(N)-1:0] row,
  input  logic                 first_strip,
  output logic                 out_valid,
  output coef_t                h [P],
  output coef_t                l [P],
  output logic [$clog2(N)-1:0] out_row,
  output logic                 out_first
);

  localparam int unsigned RW = $clog2(N);

  typedef struct packed {
    logic          v;
    logic          first;
    logic [RW-1:0] row;
  } tag_t;

  tag_t tag [6];   // tag[k] describes the data in PU stage k (tag[0] = input)

  assign tag[0] = '{v: in_valid, first: first_strip, row: row};

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) for (int k = 1; k < 6; k++) tag[k] <= '0;
    else        for (int k = 1; k < 6; k++) tag[k] <= tag[k-1];

  acc_t pu_h1 [P], pu_l1 [P], pu_h2 [P], pu_h [P], pu_l [P];
  acc_t h1_prev [P], l1_prev [P], h2_prev [P];
  acc_t mem_a_q, mem_b_q, mem_g_q;

  // Row memories: written by the last PU, read by PU 0, one row address each.
  row_mem #(.N(N), .W(ACC_W)) u_mem_alpha (
    .clk, .we(tag[2].v), .addr(tag[2].row), .wdata(pu_h1[P-1]), .rdata(mem_a_q));
  row_mem #(.N(N), .W(ACC_W)) u_mem_beta (
    .clk, .we(tag[3].v), .addr(tag[3].row), .wdata(pu_l1[P-1]), .rdata(mem_b_q));
  row_mem #(.N(N), .W(ACC_W)) u_mem_gama (
    .clk, .we(tag[4].v), .addr(tag[4].row), .wdata(pu_h2[P-1]), .rdata(mem_g_q));

  always_comb begin
    h1_prev[0] = tag[2].first ? '0 : mem_a_q;
    l1_prev[0] = tag[3].first ? '0 : mem_b_q;
    h2_prev[0] = tag[4].first ? '0 : mem_g_q;
    for (int p = 1; p < P; p++) begin
      h1_prev[p] = pu_h1[p-1];
      l1_prev[p] = pu_l1[p-1];
      h2_prev[p] = pu_h2[p-1];
    end
  end

  for (genvar p = 0; p < P; p++) begin : g_pu
    dwt_pu u_pu (
      .clk,
      .x_m2   (acc_t'(pix[2*p])),
      .x_m1   (acc_t'(pix[2*p+1])),
      .x_0    (acc_t'(pix[2*p+2])),
      .h1_prev(h1_prev[p]),
      .l1_prev(l1_prev[p]),
      .h2_prev(h2_prev[p]),
      .h1     (pu_h1[p]),
      .l1     (pu_l1[p]),
      .h2     (pu_h2[p]),
      .h_out  (pu_h[p]),
      .l_out  (pu_l[p])
    );
    assign h[p] = coef_t'(pu_h[p]);
    assign l[p] = coef_t'(pu_l[p]);
  end

  assign out_valid = tag[5].v;
  assign out_row   = tag[5].row;
  assign out_first = tag[5].first;

endmodule
