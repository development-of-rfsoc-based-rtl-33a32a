// fft_r2sdf: streaming N-point radix-2 SDF FFT, one complex sample per valid.
//
// log2(N) fft_sdf_stage instances in a row (delays N/2, N/4, ..., 1). Input is
// in natural order in blocks of N consecutive valid samples, counted from
// reset; output is in bit-reversed order, bin_o giving the bin of each output
// sample. Latency is N-1 valid samples plus one clock per stage. With SCALE
// set the transform is divided by N (bin value = mean of x*exp(-j2pi kn/N)),
// otherwise it is the plain sum with saturation.
module fft_r2sdf
  import smurf_pkg::*;
#(
  parameter int N     = 512,
  parameter bit SCALE = 1'b1
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  valid_i,
  input  cplx_t                 d_i,
  output logic                  valid_o,
  output cplx_t                 d_o,
  output logic [clog2i(N)-1:0]  bin_o
);
  localparam int S = clog2i(N);

  initial assert ((1 << S) == N && N >= 2) else $error("fft_r2sdf: N must be a power of two");

  logic  v [S+1];
  cplx_t d [S+1];
  assign v[0] = valid_i;
  assign d[0] = d_i;

  for (genvar s = 0; s < S; s++) begin : g_stage
    fft_sdf_stage #(.D(N >> (s + 1)), .SCALE(SCALE)) u_stage (
      .clk, .rst, .valid_i(v[s]), .d_i(d[s]), .valid_o(v[s+1]), .d_o(d[s+1])
    );
  end

  logic [S-1:0] ocnt;
  always_ff @(posedge clk) begin
    if (rst) ocnt <= '0;
    else if (v[S]) ocnt <= ocnt + 1'b1;
  end

  assign valid_o = v[S];
  assign d_o     = d[S];
  always_comb
    for (int b = 0; b < S; b++) bin_o[b] = ocnt[S-1-b];
endmodule
