// tb_cs_module - checks the CS projection on N = 16, M = 4.
//
// Several vectors are streamed back to back, with random +-1 columns and
// random coefficients (including the extremes), and a start pulse is given
// once in the middle of a vector, which must discard the partial sums.
// Each vector's M measurements must appear on y_out, y_0 first, one per
// clock from the clock after the vector's last coefficient, with
// output_ready high for exactly M clocks.
module tb_cs_module;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;
  localparam int N = 16, M = 4, V = 6;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, in_valid = 1'b0;
  coef_t data_in = '0;
  logic [M-1:0] phi_col = '0;
  logic [$clog2(N)-1:0] col_idx;
  meas_t y_out;
  logic output_ready;
  logic [$clog2(M)-1:0] y_index;
  int checks = 0, failures = 0;

  cs_module #(.N(N), .M(M)) dut (.*);
  always #5 clk = ~clk;

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  typedef struct { longint v; int i; longint t; } exp_t;
  exp_t q [$];

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < V; v++) begin
      longint acc [M];
      int kmax;
      foreach (acc[i]) acc[i] = 0;
      // vector 2 is abandoned after 5 samples by a start pulse
      kmax = (v == 2) ? 5 : N;
      for (int k = 0; k < kmax; k++) begin
        @(negedge clk);
        in_valid = 1'b1;
        start = (v == 0 || v == 3) && (k == 0);
        data_in = (k == 3) ? coef_t'(-16384) : (k == 4) ? coef_t'(16383) : coef_t'($urandom);
        phi_col = M'($urandom);
        #1 checks++;
        if (int'(col_idx) != k) failures++;
        for (int i = 0; i < M; i++) acc[i] += phi_col[i] ? -longint'(data_in) : longint'(data_in);
        if (k == N - 1)
          for (int i = 0; i < M; i++) q.push_back('{wrap(acc[i], 16), i, cyc + 1 + i});
      end
      if (v == 1) begin @(negedge clk); in_valid = 1'b0; repeat (3) @(negedge clk); end
    end
    @(negedge clk); in_valid = 1'b0; start = 1'b0;
    repeat (M + 4) @(negedge clk);
    checks++;
    if (q.size() != 0) failures++;
    checks++;
    if (n_ready != (V - 1) * M) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_ready = 0;
  always @(posedge clk) if (rst_n) begin
    if (output_ready) begin
      exp_t e;
      n_ready++;
      checks++;
      if (q.size() == 0) failures++;
      else begin
        e = q.pop_front();
        if (longint'(y_out) != e.v || int'(y_index) != e.i || cyc != e.t) begin
          failures++;
          if (failures < 6) $display("y got %0d[%0d]@%0d exp %0d[%0d]@%0d", y_out, y_index, cyc, e.v, e.i, e.t);
        end
      end
    end else if (q.size() != 0 && q[0].t == cyc) begin
      checks++; failures++;
    end
  end

  initial begin
    repeat (V * N + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
