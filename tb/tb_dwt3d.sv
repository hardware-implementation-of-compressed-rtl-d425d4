// tb_dwt3d - checks the eight 3-D DWT bands of two 16 x 16 frame pairs
// against the golden model (2-D lifting of each frame, then the Haar step
// between frame n and n+1), and the 12-clock latency of the leading bands
// (13 for the bands from the LL/LH streams, which trail by one clock).
module tb_dwt3d;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;
  localparam int N = 16, P = 2, STRIPS = N / (2*P), PAIRS = 2;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  pix_t pix0 [2*P+1], pix1 [2*P+1];
  coef_t band [8];
  logic band_valid [8], band_col [8];
  int checks = 0, failures = 0;

  dwt3d #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;

  img_t img [2*PAIRS];
  img_t rs [2*PAIRS][4];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint t_row1 [PAIRS];

  function automatic longint expv(int f, int b, int k, int j);
    longint a = rs[2*f][b%4][k][j], c = rs[2*f+1][b%4][k][j];
    return (b < 4) ? haar_l(a, c) : haar_h(a, c);
  endfunction

  initial begin
    for (int f = 0; f < 2*PAIRS; f++) begin
      img[f] = rand_img(N, f % 3);
      dwt2d(img[f], rs[f]);
    end
    foreach (pix0[c]) begin pix0[c] = '0; pix1[c] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < PAIRS; f++) begin
      for (int s = 0; s < STRIPS; s++)
        for (int r = 0; r < N; r++) begin
          @(negedge clk);
          in_valid = 1'b1;
          foreach (pix0[c]) begin
            pix0[c] = pix_t'(img[2*f][r][2*P*s + c]);
            pix1[c] = pix_t'(img[2*f+1][r][2*P*s + c]);
          end
          if (s == 0 && r == 1) t_row1[f] = cyc;
        end
      @(negedge clk); in_valid = 1'b0;
      repeat (3) @(negedge clk);
    end
    repeat (20) @(negedge clk);
    for (int b = 0; b < 8; b++) begin checks++; if (cnt[b] != PAIRS * N * N / 4) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cnt [8] = '{default: 0};
  always @(posedge clk) if (rst_n)
    for (int b = 0; b < 8; b++) if (band_valid[b]) begin
      int f, i, st, k, j;
      f = cnt[b] / (N*N/4); i = cnt[b] % (N*N/4);
      st = i / N; k = (i % N) / 2; j = 2*st + (i % 2);
      if (i == 0) begin
        checks++;
        if (cyc - t_row1[f] != (((b % 4) >= 2) ? 12 : 13)) failures++;
      end
      checks += 2;
      if (band_col[b] != i[0]) failures++;
      if (longint'(band[b]) != expv(f, b, k, j)) begin
        failures++;
        if (failures < 8) $display("pair%0d band%0d k%0d j%0d got %0d exp %0d", f, b, k, j, band[b], expv(f, b, k, j));
      end
      cnt[b]++;
    end

  initial begin
    repeat (PAIRS * N * N / 4 + 200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
