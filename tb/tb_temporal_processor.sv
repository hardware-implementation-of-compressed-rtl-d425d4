// tb_temporal_processor - checks the Haar temporal step on random and
// extreme coefficient pairs and its two-clock latency.
module tb_temporal_processor;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  coef_t x0 = '0, x1 = '0, xl, xh;
  logic out_valid;
  int checks = 0, failures = 0;

  temporal_processor dut (.*);
  always #5 clk = ~clk;

  localparam int T = 300;
  longint a [T], b [T];
  initial begin
    for (int t = 0; t < T; t++) begin
      a[t] = longint'($urandom_range(0, 20000)) - 10000;
      b[t] = longint'($urandom_range(0, 20000)) - 10000;
    end
    a[0] = 16383; b[0] = 16383; a[1] = -16384; b[1] = 16383; a[2] = 0; b[2] = -1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < T + 3; t++) begin
      @(negedge clk);
      in_valid = (t < T) && (t % 7 != 3);
      if (t < T) begin x0 = coef_t'(a[t]); x1 = coef_t'(b[t]); end
      #1;
      if (t >= 2) begin
        checks++;
        if (out_valid != ((t - 2 < T) && ((t - 2) % 7 != 3))) failures++;
        if (t - 2 < T) begin
          checks += 2;
          if (longint'(xl) != haar_l(a[t-2], b[t-2])) failures++;
          if (longint'(xh) != haar_h(a[t-2], b[t-2])) failures++;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (T + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
