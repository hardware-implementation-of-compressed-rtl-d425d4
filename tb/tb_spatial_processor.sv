// tb_spatial_processor - checks the 2-D DWT of two 16 x 16 frames.
//
// Frames are streamed strip by strip with an idle gap between them. Every
// LL, LH, HL, HH coefficient is compared in stream order (strip, row pair,
// column) with the golden 2-D lifting model, including its column flag. It
// checks the 10-clock latency from the strip row that completes the first
// row pair (row 1) to the first HL/HH output, and that each sub-band of a
// frame leaves in N*N/4 consecutive clocks (4 coefficients per clock).
module tb_spatial_processor;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;
  localparam int N = 16, P = 2, STRIPS = N / (2*P), F = 2;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  pix_t pix [2*P+1];
  coef_t sb [4];
  logic sb_valid [4], sb_col [4];
  int checks = 0, failures = 0;

  spatial_processor #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;

  img_t img [F];
  img_t ref_sb [F][4];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint t_row1 [F];

  initial begin
    for (int f = 0; f < F; f++) begin
      img[f] = rand_img(N, f);
      dwt2d(img[f], ref_sb[f]);
    end
    foreach (pix[c]) pix[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < F; f++) begin
      for (int s = 0; s < STRIPS; s++)
        for (int r = 0; r < N; r++) begin
          @(negedge clk);
          in_valid = 1'b1;
          foreach (pix[c]) pix[c] = pix_t'(img[f][r][2*P*s + c]);
          if (s == 0 && r == 1) t_row1[f] = cyc;
        end
      @(negedge clk); in_valid = 1'b0;
      repeat (5) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (cnt[s] != F * N * N / 4) failures++;
    end
    $display("first HL %0d clocks after row 1", t_first[SB_HL][0] - t_row1[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [4] = '{default: 0};
  longint t_first [4][F], t_last [4][F];
  always @(posedge clk) if (rst_n)
    for (int s = 0; s < 4; s++) if (sb_valid[s]) begin
      int f, i, st, k, j;
      f = cnt[s] / (N*N/4); i = cnt[s] % (N*N/4);
      st = i / N; k = (i % N) / 2; j = 2*st + (i % 2);
      if (i == 0) t_first[s][f] = cyc;
      if (i == N*N/4 - 1) begin
        t_last[s][f] = cyc;
        checks++;
        if (t_last[s][f] - t_first[s][f] + 1 != N*N/4) failures++;     // no gaps
        checks++;
        if (t_first[s][f] - t_row1[f] != ((s >= 2) ? 10 : 11)) failures++; // latency
      end
      checks += 2;
      if (sb_col[s] != i[0]) failures++;
      if (longint'(sb[s]) != ref_sb[f][s][k][j]) begin
        failures++;
        if (failures < 8) $display("f%0d sb%0d k%0d j%0d got %0d exp %0d", f, s, k, j, sb[s], ref_sb[f][s][k][j]);
      end
      cnt[s]++;
    end

  initial begin
    repeat (F * N * N / 4 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
