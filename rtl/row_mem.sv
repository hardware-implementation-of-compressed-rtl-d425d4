// row_mem - one of the three row memories (Memory_alpha, Memory_beta,
// Memory_gama) of the row processor.
//
// N words, one per image row. The last PU of the row processor writes its
// partial result (H1, L1 or H2) for row r; the first PU reads the same row's
// word when the next strip reaches row r, N clocks later. Read and write use
// one address: the read is combinational and returns the word written by the
// previous strip (the write lands at the clock edge), so one port serves
// both. The words are not reset; the row processor ignores them while it
// processes the first strip. Depth N x 1 words follows the source
// architecture; the single-port read-before-write organisation is this
// design's choice.
module row_mem #(
  parameter int unsigned N = 256,
  parameter int unsigned W = 24
) (
  input  logic                 clk,
  input  logic                 we,
  input  logic [$clog2(N)-1:0] addr,
  input  logic [W-1:0]         wdata,
  output logic [W-1:0]         rdata
);

  logic [W-1:0] mem [N];

  assign rdata = mem[addr];

  always_ff @(posedge clk)
    if (we) mem[addr] <= wdata;

endmodule
