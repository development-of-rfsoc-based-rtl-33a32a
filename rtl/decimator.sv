// decimator: 8x decimation of the down-converted I/Q stream of one band.
//
// The R complex samples that arrive together in one clock are summed and the
// sum is divided by R (R a power of two), i.e. a one-stage CIC
// (integrate-and-dump) decimator: the frequency response is a sinc with nulls
// at multiples of the output rate, and the output rate is one complex sample
// per clock. The factor 8 follows the published design; the filter shape is
// this implementation's choice (the simplest filter that decimates), the
// published design does not describe its decimation filter. Latency: 1 clock.
module decimator
  import smurf_pkg::*;
#(
  parameter int R = 8
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   valid_i,
  input  cplx_t  iq_i [R],
  output logic   valid_o,
  output cplx_t  iq_o
);
  localparam int SH = clog2i(R);
  localparam int AW = 16 + SH;

  initial assert ((1 << SH) == R) else $error("decimator: R must be a power of two");

  logic signed [AW-1:0] sr, si;
  always_comb begin
    sr = '0;
    si = '0;
    for (int l = 0; l < R; l++) begin
      sr += AW'(iq_i[l].re);
      si += AW'(iq_i[l].im);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o <= 1'b0;
      iq_o    <= '0;
    end else begin
      valid_o <= valid_i;
      iq_o.re <= 16'((sr + AW'(R / 2)) >>> SH);
      iq_o.im <= 16'((si + AW'(R / 2)) >>> SH);
    end
  end
endmodule
