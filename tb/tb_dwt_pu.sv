// tb_dwt_pu - checks the five-stage lifting processing unit.
//
// Random samples and random "[n-1]" partials are applied every clock; the
// partials are applied in the clock the unit consumes them (h1_prev two,
// l1_prev three, h2_prev four clocks after the samples). The expected H1,
// L1, H2 (after 2, 3, 4 clocks) and H, L (after 5 clocks) are computed from
// the lifting equations with floor divisions. The 5-clock latency is checked
// by comparing at exactly that offset.
module tb_dwt_pu;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;

  logic clk = 1'b0;
  acc_t x_m2, x_m1, x_0, h1_prev, l1_prev, h2_prev;
  acc_t h1, l1, h2, h_out, l_out;

  dwt_pu dut (.*);

  always #5 clk = ~clk;

  localparam int T = 400;
  longint xa [T], xb [T], xc [T], hp [T], lp [T], gp [T];
  longint e_h1 [T], e_l1 [T], e_h2 [T], e_h [T], e_l [T];
  int checks = 0, failures = 0;

  function automatic longint rnd(int lim);
    return longint'($urandom_range(0, 2*lim)) - lim;
  endfunction

  initial begin
    // reference: sample set t, partials applied at t+2, t+3, t+4
    for (int t = 0; t < T; t++) begin
      xa[t] = rnd(4000); xb[t] = rnd(4000); xc[t] = rnd(4000);
      hp[t] = rnd(4000); lp[t] = rnd(20000); gp[t] = rnd(40000);
    end
    for (int t = 0; t + 4 < T; t++) begin
      longint q1, q2, q3, q4;
      q1 = xa[t] + xc[t] - (fl(xb[t],1) + fl(xb[t],3) + fl(xb[t],7));
      q2 = 12*xc[t] + q1 + hp[t+2];
      q3 = q2 + lp[t+3] - (21*q1 + fl(q1,2) + fl(q1,3));
      q4 = 2*q2 + fl(q2,1) + fl(q2,4) + q3 + gp[t+4];
      e_h1[t] = q1; e_l1[t] = q2; e_h2[t] = q3;
      e_h[t] = fl(q3, 4); e_l[t] = fl(q4, 5);
    end
    for (int t = 0; t < T; t++) begin
      @(negedge clk);
      x_m2 = acc_t'(xa[t]); x_m1 = acc_t'(xb[t]); x_0 = acc_t'(xc[t]);
      h1_prev = acc_t'(hp[t]); l1_prev = acc_t'(lp[t]); h2_prev = acc_t'(gp[t]);
      #1;
      if (t >= 2 && t - 2 + 4 < T) begin checks++; if (longint'(h1) != e_h1[t-2]) failures++; end
      if (t >= 3 && t - 3 + 4 < T) begin checks++; if (longint'(l1) != e_l1[t-3]) failures++; end
      if (t >= 4)                  begin checks++; if (longint'(h2) != e_h2[t-4]) failures++; end
      if (t >= 5 && t - 5 + 4 < T) begin
        checks += 2;
        if (longint'(h_out) != e_h[t-5]) failures++;
        if (longint'(l_out) != e_l[t-5]) begin
          failures++;
          if (failures < 5) $display("t=%0d L got %0d exp %0d", t, l_out, e_l[t-5]);
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
