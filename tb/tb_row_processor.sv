// tb_row_processor - checks the row pass on a 16 x 16 frame.
//
// The frame (plus the symmetric-extension column) is streamed strip by
// strip, two frames back to back so that the strip-0 restart of the row
// memories is exercised after a full frame. Each output (H, L of PU p for
// row r of strip s) is compared with the 1-D lifting of row r at position
// j = 2s + p, and must appear exactly 5 clocks after its input row.
module tb_row_processor;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;
  localparam int N = 16, P = 2, STRIPS = N / (2*P);
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, first_strip = 1'b0;
  pix_t pix [2*P+1];
  logic [$clog2(N)-1:0] row = '0, out_row;
  logic out_valid, out_first;
  coef_t h [P], l [P];
  int checks = 0, failures = 0;

  row_processor #(.N(N), .P(P)) dut (.*);
  always #5 clk = ~clk;

  img_t img [2];
  vec_t eh [2][N], el [2][N];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  longint t_in [$];

  initial begin
    for (int f = 0; f < 2; f++) begin
      img[f] = rand_img(N, f == 0 ? 0 : 2);
      for (int r = 0; r < N; r++) begin
        vec_t a, b, c;
        a = new[N/2]; b = new[N/2]; c = new[N/2];
        for (int j = 0; j < N/2; j++) begin
          a[j] = img[f][r][2*j]; b[j] = img[f][r][2*j+1]; c[j] = img[f][r][2*j+2];
        end
        lift(a, b, c, eh[f][r], el[f][r]);
      end
    end
    foreach (pix[c]) pix[c] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < 2; f++)
      for (int s = 0; s < STRIPS; s++)
        for (int r = 0; r < N; r++) begin
          @(negedge clk);
          in_valid = 1'b1; first_strip = (s == 0); row = r[$clog2(N)-1:0];
          foreach (pix[c]) pix[c] = pix_t'(img[f][r][2*P*s + c]);
          t_in.push_back(cyc);
        end
    @(negedge clk); in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != 2 * STRIPS * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    int f, s, r;
    f = n_out / (STRIPS * N); s = (n_out / N) % STRIPS; r = n_out % N;
    checks += 3;
    if (cyc - t_in[n_out] != 5) failures++;
    if (int'(out_row) != r || out_first != (s == 0)) failures++;
    for (int p = 0; p < P; p++) begin
      checks += 2;
      if (longint'(h[p]) != eh[f][r][2*s+p]) failures++;
      if (longint'(l[p]) != el[f][r][2*s+p]) begin
        failures++;
        if (failures < 5) $display("f%0d s%0d r%0d p%0d L got %0d exp %0d", f, s, r, p, l[p], el[f][r][2*s+p]);
      end
    end
    n_out++;
  end

  initial begin
    repeat (2 * N * STRIPS + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
