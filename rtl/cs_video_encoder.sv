// cs_video_encoder - low-complexity video encoder: 3-D DWT + compressed sensing.
//
// A pair of frames n, n+1 enters as strip rows of 2P+1 pixels (pix0 from
// frame n, pix1 from frame n+1, one row per clock, N/(2P) strips of N rows,
// with the symmetric-extension column supplied by the source). The 3-D DWT
// produces eight bands of (N/2)^2 coefficients each. LLL, the low-resolution
// base layer, is not sparse and leaves on lll/lll_valid for the entropy
// coder. Each of the other seven bands feeds a CS module that projects every
// strip of the band (N coefficients, two columns) onto the shared M x N
// Bernoulli matrix and shifts out M = N/4 16-bit measurements on y_out[b]
// while y_ready[b] is high; y_index[b] numbers them. y_out[] is ordered as
// band_e minus one: LLH, LHL, LHH, HLL, HLH, HHL, HHH. The entropy coder that
// follows is not part of this design.
//
// The bands that come from the spatial HL/HH streams lead those from LL/LH
// by one clock; one ROM is addressed by the sample index of the leading
// group and its column is registered once for the other group. start is
// given to every CS module with the first coefficient of a frame pair. With
// continuous input a frame pair takes N*N/(2P) clocks and the encoder
// takes eight 3-D DWT coefficients per clock. Architecture after the source;
// ROM sharing detail and start generation are this design's.
module cs_video_encoder
  import cs_enc_pkg::*;
#(
  parameter int unsigned N = 256,
  parameter int unsigned P = 2,
  parameter int unsigned M = N / 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  pix_t                 pix0 [2*P+1],
  input  pix_t                 pix1 [2*P+1],
  output coef_t                lll,
  output logic                 lll_valid,
  output meas_t                y_out   [7],
  output logic                 y_ready [7],
  output logic [$clog2(M)-1:0] y_index [7]
);

  localparam int unsigned FW = $clog2(N * N / 4);   // samples per band and frame pair

  coef_t band       [8];
  logic  band_valid [8];
  logic  band_col   [8];

  dwt3d #(.N(N), .P(P)) u_dwt (
    .clk, .rst_n, .in_valid, .pix0, .pix1, .band, .band_valid, .band_col);

  assign lll       = band[B_LLL];
  assign lll_valid = band_valid[B_LLL];

  // Bands fed by the spatial HL/HH streams arrive one clock ahead.
  function automatic logic leads(int b);
    return (b % 4) >= 2;
  endfunction

  // Frame-pair start for the leading group, delayed for the other group.
  logic [FW-1:0] lead_cnt;
  logic          start_lead, start_lag;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                   lead_cnt <= '0;
    else if (band_valid[B_LHL])   lead_cnt <= lead_cnt + 1'b1;

  assign start_lead = band_valid[B_LHL] && (lead_cnt == '0);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) start_lag <= 1'b0;
    else        start_lag <= start_lead;

  // Shared Bernoulli ROM.
  logic [$clog2(N)-1:0] rom_addr;
  logic [M-1:0]         phi_lead, phi_lag;
  logic [$clog2(N)-1:0] col_idx [8];

  bern_rom #(.N(N), .M(M)) u_rom (.addr(rom_addr), .col(phi_lead));

  assign rom_addr = col_idx[B_LHL];

  always_ff @(posedge clk) phi_lag <= phi_lead;

  assign col_idx[B_LLL] = '0;

  for (genvar b = 1; b < 8; b++) begin : g_cs
    cs_module #(.N(N), .M(M)) u_cs (
      .clk, .rst_n,
      .start       (leads(b) ? start_lead : start_lag),
      .in_valid    (band_valid[b]),
      .data_in     (band[b]),
      .phi_col     (leads(b) ? phi_lead : phi_lag),
      .col_idx     (col_idx[b]),
      .y_out       (y_out[b-1]),
      .output_ready(y_ready[b-1]),
      .y_index     (y_index[b-1])
    );
  end

endmodule
