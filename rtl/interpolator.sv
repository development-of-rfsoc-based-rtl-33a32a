// interpolator: 10x interpolation of the synthesised I/Q stream of one band.
//
// One complex sample per clock comes in; R samples per clock go out, on the
// straight line from the previous input sample to the current one:
// out[m] = prev + (cur - prev) * m / R, m = 0..R-1, with m/R in Q0.16. This is
// linear interpolation, equivalent to a two-stage CIC interpolator. The factor
// 10 follows the published design; the filter is this implementation's
// choice. Latency: 1 clock (out[0] of clock t equals the input of clock t-1).
module interpolator
  import smurf_pkg::*;
#(
  parameter int R = 10
) (
  input  logic   clk,
  input  logic   rst,
  input  logic   valid_i,
  input  cplx_t  iq_i,
  output logic   valid_o,
  output cplx_t  iq_o [R]
);
  cplx_t prev;

  always_ff @(posedge clk) begin
    if (rst) begin
      prev    <= '0;
      valid_o <= 1'b0;
    end else begin
      valid_o <= valid_i;
      if (valid_i) prev <= iq_i;
    end
  end

  for (genvar m = 0; m < R; m++) begin : g_phase
    localparam logic signed [17:0] K = 18'(((m << 16) + R / 2) / R);   // m/R in Q0.16
    logic signed [16:0] dr, di;
    logic signed [35:0] pr, pi;
    assign dr = 17'(iq_i.re) - 17'(prev.re);
    assign di = 17'(iq_i.im) - 17'(prev.im);
    assign pr = 36'(dr) * 36'(K) + 36'sd32768;
    assign pi = 36'(di) * 36'(K) + 36'sd32768;
    always_ff @(posedge clk) begin
      if (rst) iq_o[m] <= '0;
      else if (valid_i) begin
        iq_o[m].re <= 16'(prev.re + 16'(pr >>> 16));
        iq_o[m].im <= 16'(prev.im + 16'(pi >>> 16));
      end
    end
  end
endmodule
