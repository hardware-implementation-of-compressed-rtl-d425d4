// bern_rom - the M x N Bernoulli measurement matrix (Bern_mat).
//
// Location k holds column k of Phi as M bits; bit i = 0 stands for +1 and
// bit i = 1 for -1 in row i. One ROM serves all CS modules, which run in
// step. The source architecture loads a matrix drawn with equal probability
// of 0 and 1 by an offline random generator; here the contents are produced
// at elaboration by a 32-bit Galois LFSR (polynomial x^32+x^22+x^2+x+1,
// mask 32'h80200003, seeded with SEED): entry (i, k) is the LFSR's low bit
// after step k*M + i + 1. A decoder must use the same SEED. The read is
// combinational.
module bern_rom #(
  parameter int unsigned N    = 256,
  parameter int unsigned M    = 64,
  parameter logic [31:0] SEED = 32'h1D872B41
) (
  input  logic [$clog2(N)-1:0] addr,
  output logic [M-1:0]         col
);

  typedef logic [N*M-1:0] rom_t;   // column k at bits [k*M +: M]

  function automatic rom_t gen_rom();
    rom_t        r;
    logic [31:0] s;
    s = SEED;
    for (int j = 0; j < int'(N*M); j++) begin
      s    = (s >> 1) ^ (s[0] ? 32'h80200003 : 32'h0);
      r[j] = s[0];
    end
    return r;
  endfunction

  localparam rom_t ROM = gen_rom();

  assign col = ROM[addr*M +: M];

endmodule
