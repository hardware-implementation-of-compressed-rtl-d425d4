// tb_row_mem - checks the row memory: words written per row are returned
// when the same row is addressed again, and a read in the clock of a write
// returns the previous word (read before write), which is what the row
// processor relies on.
module tb_row_mem;
  localparam int N = 32, W = 24;
  logic clk = 1'b0, we = 1'b0;
  logic [$clog2(N)-1:0] addr = '0;
  logic [W-1:0] wdata = '0, rdata;
  logic [W-1:0] model [N];
  int checks = 0, failures = 0;

  row_mem #(.N(N), .W(W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    // fill every row
    for (int r = 0; r < N; r++) begin
      @(negedge clk); we = 1'b1; addr = r[$clog2(N)-1:0]; wdata = $urandom; model[r] = wdata;
    end
    // three passes like three strips: read old, write new, same address
    for (int pass = 0; pass < 3; pass++)
      for (int r = 0; r < N; r++) begin
        @(negedge clk);
        addr = r[$clog2(N)-1:0]; we = ($urandom_range(0, 3) != 0); wdata = $urandom;
        #1 checks++;
        if (rdata != model[r]) failures++;
        if (we) model[r] = wdata;
      end
    @(negedge clk); we = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
