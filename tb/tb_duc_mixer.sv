// tb_duc_mixer: checks the transmit mixer against a floating-point model.
// Random I/Q samples are driven on all lanes with the 5.75 GHz / 6.144 GS/s
// phase step; every output lane must equal I*cos(phi) - Q*sin(phi) within the
// sine-table truncation error, exactly 3 clocks after its input.
module tb_duc_mixer;
  import smurf_pkg::*;
  localparam int LANES = 10;
  localparam int LAT   = 3;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1, valid_i = 1'b0, valid_o;
  logic [NCO_PW-1:0] inc;
  cplx_t   iq  [LANES];
  sample_t dac [LANES];
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  duc_mixer #(.LANES(LANES)) dut (.clk, .rst, .phase_inc_i(inc), .valid_i, .iq_i(iq), .valid_o, .dac_o(dac));

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1, first_out = -1;
  longint n = 0;
  cplx_t in_q [$];

  initial begin
    inc = nco_inc(64'd5_750_000, FS_DAC_KHZ);
    for (int l = 0; l < LANES; l++) iq[l] = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int t = 0; t < 400; t++) begin
      valid_i <= 1'b1;
      for (int l = 0; l < LANES; l++) begin
        iq[l].re <= 16'($urandom_range(30000) - 15000);
        iq[l].im <= 16'($urandom_range(30000) - 15000);
      end
      @(posedge clk);
    end
    valid_i <= 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (first_out - first_in != LAT) begin
      failures++;
      $display("latency %0d, expected %0d", first_out - first_in, LAT);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitor on the falling edge, when inputs and outputs are settled.
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (!rst && valid_i) begin
      for (int l = 0; l < LANES; l++) in_q.push_back(iq[l]);
      if (first_in < 0) first_in = cyc;
    end
    if (!rst && valid_o) begin
      cplx_t v [LANES];
      if (first_out < 0) first_out = cyc;
      for (int l = 0; l < LANES; l++) v[l] = in_q.pop_front();
      for (int l = 0; l < LANES; l++) begin
        automatic longint ph = (n * longint'(inc)) & 64'hffff_ffff;
        automatic real a = 2.0 * PI * real'(ph) / 4294967296.0;
        automatic real e = real'(v[l].re) * $cos(a) - real'(v[l].im) * $sin(a);
        automatic real tol = 2.0 + (fabs(real'(v[l].re)) + fabs(real'(v[l].im))) * 2.0 * PI / 1024.0;
        checks++;
        if (fabs(real'(dac[l]) - e) > tol) begin
          failures++;
          if (failures < 5) $display("lane %0d n=%0d got %0d exp %f", l, n, dac[l], e);
        end
        n++;
      end
    end
  end
endmodule
