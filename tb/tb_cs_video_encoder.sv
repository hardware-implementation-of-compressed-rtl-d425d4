// tb_cs_video_encoder - end-to-end test of the encoder at its default size
// (N = 256, P = 2, M = 64).
//
// Streams two frame pairs (random pixels, then a ramp and a checkerboard)
// strip by strip, with an idle gap between the pairs, and checks against
// the golden model: every LLL base-layer coefficient in stream order, and
// all M measurements of every strip vector of the seven CS bands. It also
// checks the 3-D DWT latency (12 clocks from the strip row that completes
// the first row pair to the first L/H-frame coefficient), that each frame
// pair is consumed in N*N/(2P) clocks, and counts the mechanisms that must
// occur: strip changes that reuse the row memories, the idle gap between
// frame pairs, CS start pulses (4 leading and 3 trailing bands), vector completions (Y_msr1 -> Y_msr2, seen as Output_Ready rising) and
// measurement shifts.
module tb_cs_video_encoder;
  import cs_enc_pkg::*;
  import enc_ref_pkg::*;

  localparam int N = 256, P = 2, M = N / 4;
  localparam int STRIPS = N / (2*P);
  localparam int PAIRS = 2;
  localparam logic [31:0] SEED = 32'h1D872B41;

  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0;
  pix_t pix0 [2*P+1], pix1 [2*P+1];
  coef_t lll;
  logic  lll_valid;
  meas_t y_out [7];
  logic  y_ready [7];
  logic [$clog2(M)-1:0] y_index [7];

  cs_video_encoder dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  img_t frames [2*PAIRS];
  img_t sb [2*PAIRS][4];
  bit   phi [][];

  // expected band coefficient b (band_e) of pair f at row pair k, column j
  function automatic longint band_val(int f, int b, int k, int j);
    int s = b % 4;
    longint x0 = sb[2*f][s][k][j], x1 = sb[2*f+1][s][k][j];
    return (b < 4) ? haar_l(x0, x1) : haar_h(x0, x1);
  endfunction

  // stream position i of a band within a pair -> (k, j)
  function automatic void pos(int i, output int k, output int j);
    int st = i / N;
    k = (i % N) / 2;
    j = 2 * st + (i % 2);
  endfunction

  // expected measurement i of strip st of band b in pair f
  function automatic longint meas(int f, int b, int st, int i);
    longint acc = 0;
    for (int n = 0; n < N; n++) begin
      int k, j;
      longint x;
      pos(st * N + n, k, j);
      x = band_val(f, b, k, j);
      acc += phi[n][i] ? -x : x;
    end
    return wrap(acc, 16);
  endfunction

  // ---------------- stimulus ----------------
  longint first_in [PAIRS], last_in [PAIRS];
  int     n_strip_change = 0, n_gap = 0;

  task automatic drive_pair(int f);
    for (int st = 0; st < STRIPS; st++) begin
      if (st > 0) n_strip_change++;
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        in_valid = 1'b1;
        for (int c = 0; c < 2*P+1; c++) begin
          pix0[c] = pix_t'(frames[2*f][r][2*P*st+c]);
          pix1[c] = pix_t'(frames[2*f+1][r][2*P*st+c]);
        end
        if (st == 0 && r == 0) first_in[f] = cycle;
        last_in[f] = cycle;
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  initial begin
    frames[0] = rand_img(N, 0);
    frames[1] = rand_img(N, 0);
    frames[2] = rand_img(N, 1);
    frames[3] = rand_img(N, 2);
    for (int f = 0; f < 2*PAIRS; f++) dwt2d(frames[f], sb[f]);
    bern(N, M, SEED, phi);
    for (int c = 0; c < 2*P+1; c++) begin pix0[c] = '0; pix1[c] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    drive_pair(0);
    repeat (9) begin @(negedge clk); n_gap++; end
    drive_pair(1);
  end

  // ---------------- LLL checks ----------------
  int     lll_cnt = 0;
  longint first_lll = -1;
  always @(posedge clk) if (rst_n && lll_valid) begin
    int f, i, k, j;
    f = lll_cnt / (N*N/4);
    i = lll_cnt % (N*N/4);
    pos(i, k, j);
    if (first_lll < 0) first_lll = cycle;
    checks++;
    if (longint'(lll) != band_val(f, B_LLL, k, j)) begin
      failures++;
      if (failures < 10) $display("LLL mismatch pair %0d k %0d j %0d: got %0d exp %0d",
                                  f, k, j, lll, band_val(f, B_LLL, k, j));
    end
    lll_cnt++;
  end

  // ---------------- measurement checks ----------------
  int y_cnt [7];
  int n_vectors = 0, n_shift = 0, n_start = 0;
  initial foreach (y_cnt[b]) y_cnt[b] = 0;

  logic y_ready_q [7] = '{default: 1'b0};
  always @(posedge clk) if (rst_n) begin
    n_start += int'(dut.start_lead) * 4 + int'(dut.start_lag) * 3;
    for (int b = 0; b < 7; b++) begin
      if (y_ready[b] && !y_ready_q[b]) n_vectors++;
      y_ready_q[b] <= y_ready[b];
      if (y_ready[b]) begin
        int f, st, i;
        longint e;
        f  = y_cnt[b] / (STRIPS * M);
        st = (y_cnt[b] / M) % STRIPS;
        i  = y_cnt[b] % M;
        n_shift++;
        checks++;
        if (int'(y_index[b]) != i) failures++;
        e = meas(f, b + 1, st, i);
        if (longint'(y_out[b]) != e) begin
          failures++;
          if (failures < 10) $display("Y band %0d pair %0d strip %0d i %0d: got %0d exp %0d",
                                      b + 1, f, st, i, y_out[b], e);
        end
        y_cnt[b]++;
      end
    end
  end

  // ---------------- end ----------------
  initial begin
    wait (rst_n);
    wait (y_cnt[6] == PAIRS * STRIPS * M && y_cnt[0] == PAIRS * STRIPS * M);
    repeat (20) @(posedge clk);
    // latency: row 1 of strip 0 enters at first_in+1; 3-D output 12 clocks later
    checks++;
    if (first_lll - (first_in[0] + 1) != 12 + 1) begin
      // LLL comes from the LL stream, which trails HL/HH by one clock
      failures++;
      $display("LLL latency %0d", first_lll - (first_in[0] + 1));
    end
    checks++;
    if (last_in[0] - first_in[0] + 1 != N * N / (2*P)) failures++;
    checks++;
    if (lll_cnt != PAIRS * N * N / 4) failures++;
    foreach (y_cnt[b]) begin
      checks++;
      if (y_cnt[b] != PAIRS * STRIPS * M) failures++;
    end
    $display("mechanisms: strip_changes=%0d idle_gap_cycles=%0d cs_starts=%0d vectors=%0d shifts=%0d",
             n_strip_change, n_gap, n_start, n_vectors, n_shift);
    $display("latency: first LLL %0d clocks after row 1, pair time %0d clocks",
             first_lll - (first_in[0] + 1), last_in[0] - first_in[0] + 1);
    checks++; if (n_strip_change == 0) failures++;
    checks++; if (n_gap == 0) failures++;
    checks++; if (n_start != 7 * PAIRS) failures++;
    checks++; if (n_vectors != 7 * PAIRS * STRIPS) failures++;
    checks++; if (n_shift == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (PAIRS * N * N / 4 + 4000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
