// dwt3d - one-level 3-D DWT of a frame pair.
//
// Two spatial processors transform frame n (pix0) and frame n+1 (pix1) in
// lockstep, strip row by strip row. Their LL, LH, HL and HH streams go
// straight into four temporal processors, one per sub-band, which apply the
// Haar step between the two frames. The eight results form the L frame
// (LLL, LLH, LHL, LHH) and the H frame (HLL, HLH, HHL, HHH); band[] is
// indexed by band_e, whose value is 4*(temporal H) + spatial sub-band.
// Each band carries one coefficient per clock while its valid is high,
// alternating between the two columns of a strip (band_col), so the block
// delivers 8 coefficients per clock. Latency is that of the spatial
// processor plus 2 clocks. The wiring follows the source architecture.
module dwt3d
  import cs_enc_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned P = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  pix_t  pix0 [2*P+1],
  input  pix_t  pix1 [2*P+1],
  output coef_t band       [8],
  output logic  band_valid [8],
  output logic  band_col   [8]
);

  coef_t sb0 [4], sb1 [4];
  logic  v0 [4], v1 [4], c0 [4], c1 [4];

  spatial_processor #(.N(N), .P(P)) u_sp0 (
    .clk, .rst_n, .in_valid, .pix(pix0), .sb(sb0), .sb_valid(v0), .sb_col(c0));
  spatial_processor #(.N(N), .P(P)) u_sp1 (
    .clk, .rst_n, .in_valid, .pix(pix1), .sb(sb1), .sb_valid(v1), .sb_col(c1));

  for (genvar s = 0; s < 4; s++) begin : g_tp
    logic col_d [2];

    temporal_processor u_tp (
      .clk, .rst_n,
      .in_valid (v0[s]),
      .x0       (sb0[s]),
      .x1       (sb1[s]),
      .out_valid(band_valid[s]),
      .xl       (band[s]),
      .xh       (band[s+4])
    );
    assign band_valid[s+4] = band_valid[s];

    always_ff @(posedge clk) begin
      col_d[0] <= c0[s];
      col_d[1] <= col_d[0];
    end
    assign band_col[s]   = col_d[1];
    assign band_col[s+4] = col_d[1];

    // The two spatial processors run in lockstep.
    assert property (@(posedge clk) disable iff (!rst_n) v0[s] == v1[s] && c0[s] == c1[s])
      else $error("dwt3d: spatial processors out of step");
  end

endmodule
