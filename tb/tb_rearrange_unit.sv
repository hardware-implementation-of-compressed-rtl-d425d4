// tb_rearrange_unit - checks that the interleaved column-processor pairs
// come out as four sub-band streams, column 0 then column 1, HL/HH in the
// H-pair clock and the clock after, LL/LH in the L-pair clock and the clock
// after, including an idle gap after the last pair of a burst.
module tb_rearrange_unit;
  import cs_enc_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_is_h = 1'b0;
  coef_t l0 = '0, h0 = '0, l1 = '0, h1 = '0;
  coef_t sb [4];
  logic sb_valid [4], sb_col [4];
  int checks = 0, failures = 0;

  rearrange_unit dut (.*);
  always #5 clk = ~clk;

  typedef struct { longint v; bit c; longint t; } exp_t;
  exp_t q [4][$];
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int burst = 0; burst < 3; burst++) begin
      for (int i = 0; i < 20; i++) begin
        @(negedge clk);
        in_valid = 1'b1; in_is_h = (i % 2 == 0);
        l0 = coef_t'($urandom); h0 = coef_t'($urandom); l1 = coef_t'($urandom); h1 = coef_t'($urandom);
        if (in_is_h) begin
          q[SB_HL].push_back('{l0, 0, cyc}); q[SB_HL].push_back('{l1, 1, cyc + 1});
          q[SB_HH].push_back('{h0, 0, cyc}); q[SB_HH].push_back('{h1, 1, cyc + 1});
        end else begin
          q[SB_LL].push_back('{l0, 0, cyc}); q[SB_LL].push_back('{l1, 1, cyc + 1});
          q[SB_LH].push_back('{h0, 0, cyc}); q[SB_LH].push_back('{h1, 1, cyc + 1});
        end
      end
      @(negedge clk); in_valid = 1'b0;
      repeat (burst + 1) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    for (int s = 0; s < 4; s++) begin checks++; if (q[s].size() != 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n)
    for (int s = 0; s < 4; s++) if (sb_valid[s]) begin
      exp_t e;
      checks++;
      if (q[s].size() == 0) begin failures++; continue; end
      e = q[s].pop_front();
      if (longint'(sb[s]) != e.v || sb_col[s] != e.c || cyc != e.t) begin
        failures++;
        if (failures < 5) $display("sb %0d: got %0d/%0d at %0d exp %0d/%0d at %0d", s, sb[s], sb_col[s], cyc, e.v, e.c, e.t);
      end
    end

  initial begin
    repeat (200) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
