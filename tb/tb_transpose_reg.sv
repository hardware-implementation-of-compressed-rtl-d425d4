// tb_transpose_reg - checks the transpose register: after the odd row of a
// pair arrives the two H values leave at once, the two L values one clock
// later, alternately, with out_first on the pair of rows 0 and 1.
module tb_transpose_reg;
  import cs_enc_pkg::*;
  localparam int N = 16;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, row_odd = 1'b0, first_pair = 1'b0;
  coef_t l_in = '0, h_in = '0, even, odd;
  logic out_valid, out_is_h, out_first;
  int checks = 0, failures = 0;

  transpose_reg dut (.*);
  always #5 clk = ~clk;

  coef_t lv [3*N], hv [3*N];
  initial begin
    foreach (lv[i]) begin lv[i] = coef_t'($urandom); hv[i] = coef_t'($urandom); end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3*N + 2; i++) begin
      @(negedge clk);
      in_valid = (i < 3*N);
      if (i < 3*N) begin
        row_odd = i[0]; first_pair = ((i % N) == 1);
        l_in = lv[i]; h_in = hv[i];
      end
      #1;
      if (i < 3*N && i[0]) begin           // odd row arrives: H pair
        checks += 4;
        if (!out_valid || !out_is_h) failures++;
        if (even != hv[i-1] || odd != hv[i]) failures++;
        if (out_first != ((i % N) == 1)) failures++;
        checks--;
      end else if (i > 0 && (i - 1) < 3*N && (i - 1) % 2 == 1) begin   // clock after: L pair
        checks += 3;
        if (!out_valid || out_is_h) failures++;
        if (even != lv[i-2] || odd != lv[i-1]) failures++;
        if (out_first != (((i - 1) % N) == 1)) failures++;
      end else begin
        checks++;
        if (out_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
