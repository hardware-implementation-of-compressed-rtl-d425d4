// tb_bern_rom - checks every column of the Bernoulli ROM against an
// independently coded LFSR and that about half of the entries are -1.
module tb_bern_rom;
  import enc_ref_pkg::*;
  localparam int N = 256, M = 64;
  logic [$clog2(N)-1:0] addr;
  logic [M-1:0] col;
  bit phi [][];
  int checks = 0, failures = 0, ones = 0;

  bern_rom #(.N(N), .M(M)) dut (.*);

  initial begin
    bern(N, M, 32'h1D872B41, phi);
    for (int k = 0; k < N; k++) begin
      addr = k[$clog2(N)-1:0];
      #1;
      for (int i = 0; i < M; i++) begin
        checks++;
        if (col[i] != phi[k][i]) failures++;
        ones += int'(col[i]);
      end
    end
    checks++;
    if (ones < N*M*45/100 || ones > N*M*55/100) failures++;
    $display("ones: %0d of %0d", ones, N*M);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
