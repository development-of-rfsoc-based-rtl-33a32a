// duc_mixer: digital quadrature up-conversion of one band (transmit mixer).
//
// Each clock brings LANES consecutive complex samples at the DAC rate (from
// the 10x interpolator). A band-centre NCO gives lane l the phase
// base + l*phase_inc_i and each lane outputs the real part of iq*exp(+j*phase),
// I*cos - Q*sin, rounded and saturated to 16 bits. The accumulator advances by
// LANES*phase_inc_i per clock. The NCO frequencies (4.25 ... 5.75 GHz at
// 6.144 GS/s) follow the published design; the structure and widths are this
// implementation's choices. Latency: 3 clocks.
module duc_mixer
  import smurf_pkg::*;
#(
  parameter int LANES = 10
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [NCO_PW-1:0]   phase_inc_i,
  input  logic                valid_i,
  input  cplx_t               iq_i [LANES],
  output logic                valid_o,
  output sample_t             dac_o [LANES]
);
  logic [NCO_PW-1:0] acc;
  logic [NCO_PW-1:0] ph [LANES];
  cplx_t             z1 [LANES], z2 [LANES];
  logic signed [15:0] c [LANES], s [LANES];
  logic              v1, v2;

  always_ff @(posedge clk) begin
    if (rst) begin
      acc <= '0;
      v1  <= 1'b0;
      v2  <= 1'b0;
      valid_o <= 1'b0;
    end else begin
      v1 <= valid_i;
      v2 <= v1;
      valid_o <= v2;
      if (valid_i) acc <= acc + NCO_PW'(LANES) * phase_inc_i;
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    always_ff @(posedge clk) begin
      ph[l] <= acc + NCO_PW'(l) * phase_inc_i;
      z1[l] <= iq_i[l];
      z2[l] <= z1[l];
    end
    nco_sincos #(.PW(NCO_PW)) u_nco (.clk, .phase_i(ph[l]), .cos_o(c[l]), .sin_o(s[l]));

    logic signed [32:0] p;
    assign p = 33'(32'(z2[l].re) * 32'(c[l])) - 33'(32'(z2[l].im) * 32'(s[l])) + 33'sd16384;
    logic signed [32:0] q;
    assign q = p >>> 15;
    always_ff @(posedge clk)
      dac_o[l] <= (q > 33'sd32767) ? 16'sh7fff : (q < -33'sd32768) ? 16'sh8000 : q[15:0];
  end
endmodule
