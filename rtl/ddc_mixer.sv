// ddc_mixer: digital quadrature down-conversion of one band (receive mixer).
//
// Each clock brings LANES consecutive real ADC samples. A band-centre NCO
// (phase accumulator of NCO_PW bits, step phase_inc_i per converter sample)
// gives lane l the phase base + l*phase_inc_i, and each sample is multiplied by
// exp(-j*phase): I = x*cos, Q = -x*sin, rounded back to Q1.15. The accumulator
// advances by LANES*phase_inc_i per clock. The published design fixes the NCO
// frequencies (4.25, 4.75, 5.25, 5.75 GHz at 4.9152 GS/s) and that the ADC
// stream is mixed to I/Q; the lane-parallel structure, the sine table and the
// word widths are this implementation's choices. Latency: 3 clocks from
// adc_i to iq_o (input register, table, product register). Synchronous reset
// clears the phase.
module ddc_mixer
  import smurf_pkg::*;
#(
  parameter int LANES = 8
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [NCO_PW-1:0]   phase_inc_i,
  input  logic                valid_i,
  input  sample_t             adc_i [LANES],
  output logic                valid_o,
  output cplx_t               iq_o [LANES]
);
  logic [NCO_PW-1:0] acc;
  logic [NCO_PW-1:0] ph [LANES];
  sample_t           x1 [LANES], x2 [LANES];
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
      x1[l] <= adc_i[l];
      x2[l] <= x1[l];
    end
    nco_sincos #(.PW(NCO_PW)) u_nco (.clk, .phase_i(ph[l]), .cos_o(c[l]), .sin_o(s[l]));

    logic signed [31:0] pi_, pq_;
    assign pi_ = 32'(x2[l]) * 32'(c[l]);
    assign pq_ = -(32'(x2[l]) * 32'(s[l]));
    always_ff @(posedge clk) begin
      iq_o[l].re <= 16'((pi_ + 32'sd16384) >>> 15);
      iq_o[l].im <= 16'((pq_ + 32'sd16384) >>> 15);
    end
  end
endmodule
