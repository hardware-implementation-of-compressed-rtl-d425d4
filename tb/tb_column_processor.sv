// tb_column_processor - checks the column pass with its H/L interleave.
//
// For each of the P PUs a random row-high column and row-low column of N
// samples is built (two strips in a row). They are fed as the transpose
// unit does (H pair, L pair, ...) and every output is compared, five clocks
// later, with the 1-D lifting of that column using X[2n] = row 2k+1,
// X[2n-1] = row 2k, X[2n-2] = row 2k-1 (row 1 at the top).
module tb_column_processor;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;
  localparam int N = 16, P = 2, STR = 2;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_is_h = 1'b0, in_first = 1'b0;
  coef_t even [P], odd [P], l_out [P], h_out [P];
  logic out_valid, out_is_h;
  int checks = 0, failures = 0;

  column_processor #(.P(P)) dut (.*);
  always #5 clk = ~clk;

  longint col [STR][P][2][N];            // [strip][pu][is_h][row]
  vec_t   eh [STR][P][2], el [STR][P][2];

  initial begin
    for (int s = 0; s < STR; s++)
      for (int p = 0; p < P; p++)
        for (int q = 0; q < 2; q++) begin
          vec_t a, b, c;
          a = new[N/2]; b = new[N/2]; c = new[N/2];
          for (int r = 0; r < N; r++) col[s][p][q][r] = longint'($urandom_range(0, 8000)) - 4000;
          for (int k = 0; k < N/2; k++) begin
            a[k] = (k == 0) ? col[s][p][q][1] : col[s][p][q][2*k-1];
            b[k] = col[s][p][q][2*k];
            c[k] = col[s][p][q][2*k+1];
          end
          lift(a, b, c, eh[s][p][q], el[s][p][q]);
        end
    foreach (even[p]) begin even[p] = '0; odd[p] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int s = 0; s < STR; s++)
      for (int k = 0; k < N/2; k++)
        for (int q = 1; q >= 0; q--) begin
          @(negedge clk);
          in_valid = 1'b1; in_is_h = q[0]; in_first = (k == 0);
          for (int p = 0; p < P; p++) begin
            even[p] = coef_t'(col[s][p][q][2*k]);
            odd[p]  = coef_t'(col[s][p][q][2*k+1]);
          end
        end
    @(negedge clk); in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (n_out != STR * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_out = 0;
  longint cyc = 0, t_first_in = -1, t_first_out = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && t_first_in < 0) t_first_in = cyc;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    int s, k, q;
    s = n_out / N; k = (n_out % N) / 2; q = (n_out % 2 == 0) ? 1 : 0;
    if (t_first_out < 0) begin
      t_first_out = cyc;
      checks++;
      if (t_first_out - t_first_in != 5) failures++;
    end
    checks++;
    if (out_is_h != q[0]) failures++;
    for (int p = 0; p < P; p++) begin
      checks += 2;
      if (longint'(l_out[p]) != el[s][p][q][k]) failures++;
      if (longint'(h_out[p]) != eh[s][p][q][k]) failures++;
    end
    n_out++;
  end

  initial begin
    repeat (STR * N + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
