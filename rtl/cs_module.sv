// cs_module - compressed-sensing projection y = Phi x of one sub-band.
//
// x is a vector of N coefficients (two adjacent sub-band columns of one
// strip, N/2 rows each) that arrives one coefficient per clock on data_in.
// For coefficient k the matching column of the Bernoulli matrix arrives on
// phi_col; each of the M adders adds +data_in (bit 0) or -data_in (bit 1,
// two's complement) to its measurement in Y_msr1. On the N-th coefficient
// the finished sums go to Y_msr2 and Y_msr1 starts again from zero. Y_msr2
// then shifts one 16-bit measurement per clock onto y_out, y_0 first, for M
// clocks while output_ready is high (y_index numbers them). Because M = N/4
// is less than N, shifting ends long before the next vector is complete.
//
// start (one clock, may coincide with the first coefficient) clears the
// controller and Y_msr1 at the beginning of a frame pair. col_idx is the
// index k of the coefficient expected now, to address the shared ROM.
// Measurements are 16 bits and wrap on overflow. Structure (M adders, two
// measurement registers, controller with clear/load/shift) follows the
// source architecture; start semantics, wrap and output order are this
// design's choices.
module cs_module
  import cs_enc_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned M = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic                 in_valid,
  input  coef_t                data_in,
  input  logic [M-1:0]         phi_col,
  output logic [$clog2(N)-1:0] col_idx,
  output meas_t                y_out,
  output logic                 output_ready,
  output logic [$clog2(M)-1:0] y_index
);

  localparam int unsigned KW = $clog2(N);
  localparam int unsigned IW = $clog2(M);

  meas_t         y_msr1 [M];
  meas_t         y_msr2 [M];
  meas_t         sum    [M];
  meas_t         x_pos, x_neg;
  logic [KW-1:0] cnt;
  logic          last, busy;
  logic [IW-1:0] out_idx;

  assign col_idx = start ? '0 : cnt;
  assign last    = in_valid && (col_idx == KW'(N-1));

  always_comb begin
    x_pos = meas_t'(data_in);
    x_neg = -x_pos;
    for (int i = 0; i < int'(M); i++)
      sum[i] = (start ? meas_t'(0) : y_msr1[i]) + (phi_col[i] ? x_neg : x_pos);
  end

  // Y_msr1: accumulate, clear on start or after the N-th coefficient.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      for (int i = 0; i < int'(M); i++) y_msr1[i] <= '0;
      cnt <= '0;
    end else if (in_valid) begin
      for (int i = 0; i < int'(M); i++) y_msr1[i] <= last ? meas_t'(0) : sum[i];
      cnt <= last ? '0 : col_idx + 1'b1;
    end else if (start) begin
      for (int i = 0; i < int'(M); i++) y_msr1[i] <= '0;
      cnt <= '0;
    end

  // Y_msr2: load finished measurements, then shift them out.
  always_ff @(posedge clk)
    if (last)
      for (int i = 0; i < int'(M); i++) y_msr2[i] <= sum[i];
    else if (busy)
      for (int i = 0; i < int'(M) - 1; i++) y_msr2[i] <= y_msr2[i+1];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      busy    <= 1'b0;
      out_idx <= '0;
    end else if (last) begin
      busy    <= 1'b1;
      out_idx <= '0;
    end else if (busy) begin
      busy    <= (out_idx != IW'(M-1));
      out_idx <= out_idx + 1'b1;
    end

  // A new vector may not finish while the previous one is still shifting.
  assert property (@(posedge clk) disable iff (!rst_n)
                   last |-> (!busy || out_idx == IW'(M-1)))
    else $error("cs_module: Y_msr2 overwritten while shifting");

  assign y_out        = y_msr2[0];
  assign output_ready = busy;
  assign y_index      = out_idx;

endmodule
