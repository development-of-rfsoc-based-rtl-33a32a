// tb_ddc_mixer: checks the receive mixer against a floating-point model.
// Random real samples are driven on all lanes with the 4.25 GHz / 4.9152 GS/s
// phase step; every output lane must equal x*cos(phi) and -x*sin(phi) within
// the sine-table truncation error, exactly 3 clocks after its input.
module tb_ddc_mixer;
  import smurf_pkg::*;
  localparam int LANES = 8;
  localparam int LAT   = 3;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1, valid_i = 1'b0, valid_o;
  logic [NCO_PW-1:0] inc;
  sample_t adc [LANES];
  cplx_t   iq  [LANES];
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  ddc_mixer #(.LANES(LANES)) dut (.clk, .rst, .phase_inc_i(inc), .valid_i, .adc_i(adc), .valid_o, .iq_o(iq));

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1, first_out = -1;
  longint n = 0;

  initial begin
    inc = nco_inc(64'd4_250_000, FS_ADC_KHZ);
    for (int l = 0; l < LANES; l++) adc[l] = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int t = 0; t < 400; t++) begin
      valid_i <= 1'b1;
      for (int l = 0; l < LANES; l++) adc[l] <= sample_t'($urandom_range(40000) - 20000);
      @(posedge clk);
    end
    valid_i <= 1'b0;
    repeat (10) @(posedge clk);
    if (first_out - first_in != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", first_out - first_in, LAT);
    end
    checks++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Record inputs, check outputs LAT clocks later.
  sample_t in_q [$];
  // Monitor on the falling edge, when inputs and outputs are settled.
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (!rst && valid_i) begin
      for (int l = 0; l < LANES; l++) in_q.push_back(adc[l]);
      if (first_in < 0) first_in = cyc;
    end
    if (!rst && valid_o) begin
      sample_t v [LANES];
      if (first_out < 0) first_out = cyc;
      for (int l = 0; l < LANES; l++) v[l] = in_q.pop_front();
      for (int l = 0; l < LANES; l++) begin
        automatic longint ph = (n * longint'(inc)) & 64'hffff_ffff;
        automatic real a = 2.0 * PI * real'(ph) / 4294967296.0;
        automatic real ei = real'(v[l]) * $cos(a);
        automatic real eq = -real'(v[l]) * $sin(a);
        automatic real tol = 2.0 + fabs(real'(v[l])) * 2.0 * PI / 1024.0;
        checks++;
        if (fabs(real'(iq[l].re) - ei) > tol || fabs(real'(iq[l].im) - eq) > tol) begin
          failures++;
          if (failures < 5) $display("lane %0d n=%0d got %h (%0d,%0d) x=%0d exp (%f,%f)", l, n, iq[l], iq[l].re, iq[l].im, v[l], ei, eq);
        end
        n++;
      end
    end
  end
endmodule
