// tb_readout_block: one readout block at a reduced channel count (64 per
// band). An RF tone on channel +5 of band 2 (5.25 GHz centre) is sampled at
// 4.9152 GS/s; reading the channel through the processor's error output with
// eta = 1 and eta = j must give half the RF amplitude, and band 0 must see
// nothing on that channel. A tone programmed on channel -9 of band 3 must
// appear on that band's DAC stream (lock-in at 5.75 GHz - 9 channels) and on
// no other band. Flux-ramp resets must reach all four bands.
module tb_readout_block;
  import smurf_pkg::*;
  localparam int  NBND = 4, N = 64, DEC = 8, INTERP = 10;
  localparam real PI = 3.14159265358979323846;
  localparam real FS_ADC = 4915.2e6, FS_DAC = 6144.0e6, FS_BB = 614.4e6;
  localparam real CH = FS_BB / real'(N);
  localparam int  K_R = 5, K_T = N - 9;
  localparam real A_R = 20000.0, A_T = 5000.0;
  localparam real F_R = 5250.0e6 + real'(K_R) * CH;
  localparam real F_T = 5750.0e6 - 9.0 * CH;

  logic clk = 1'b0, rst = 1'b1, adc_valid = 1'b0, fr_reset = 1'b0, ready;
  sample_t adc [NBND][DEC];
  logic    dac_valid [NBND];
  sample_t dac [NBND][INTERP];
  cfg_wr_t cfg;
  demod_t  dm [NBND][2];
  logic    fb_act [NBND], fr_app [NBND];
  int checks = 0, failures = 0;
  // Gain of the 8-sample mean (decimator) and of linear interpolation at
  // frequency offset f from the band centre.
  function automatic real dec_gain(real f);
    real x = PI * f / FS_ADC;
    return $sin(8.0 * x) / (8.0 * $sin(x));
  endfunction
  function automatic real itp_gain(real f);
    real x = PI * f / FS_BB;
    return ($sin(x) / x) * ($sin(x) / x);
  endfunction
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  readout_block #(.N_CHAN(N)) dut (
    .clk, .rst, .adc_valid_i(adc_valid), .adc_i(adc), .dac_valid_o(dac_valid), .dac_o(dac),
    .fr_reset_i(fr_reset), .cfg_i(cfg), .ready_o(ready), .demod_o(dm),
    .fb_active_o(fb_act), .fr_applied_o(fr_app)
  );

  always #1 clk = ~clk;

  initial begin
    repeat (60 * N) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint nadc = 0;
  always @(posedge clk) begin
    for (int d = 0; d < NBND; d++)
      for (int l = 0; l < DEC; l++) begin
        automatic real t = real'(nadc + longint'(l)) / FS_ADC;
        adc[d][l] <= (d == 2) ? 16'($rtoi(A_R * $cos(2.0 * PI * F_R * t))) : '0;
      end
    if (adc_valid) nadc <= nadc + DEC;
  end

  task automatic wr(int band, int chan, cfg_sel_e sel, logic [31:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, blk: 1'b0, band: 2'(band), chan: 16'(chan), sel: sel, data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  int ferr_cap [NBND][N];
  int n_fr = 0;
  bit lock_on = 1'b0;
  real li_r [NBND], li_i [NBND];
  int li_n = 0;
  longint ndac = 0;
  always @(negedge clk) begin
    for (int d = 0; d < NBND; d++) begin
      for (int c = 0; c < 2; c++)
        if (dm[d][c].valid) ferr_cap[d][int'(dm[d][c].chan) % N] = int'($signed(dm[d][c].ferr));
      if (fr_app[d]) n_fr++;
    end
    if (dac_valid[0]) begin
      if (lock_on) begin
        for (int l = 0; l < INTERP; l++) begin
          automatic real t = real'(ndac + longint'(l)) / FS_DAC;
          for (int d = 0; d < NBND; d++) begin
            li_r[d] += real'(dac[d][l]) * $cos(2.0 * PI * F_T * t);
            li_i[d] += real'(dac[d][l]) * $sin(2.0 * PI * F_T * t);
          end
        end
        li_n += INTERP;
      end
      ndac += INTERP;
    end
  end

  real re, im, other;
  initial begin
    cfg = '0;
    for (int d = 0; d < NBND; d++) begin li_r[d] = 0.0; li_i[d] = 0.0; end
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    adc_valid <= 1'b1;
    wait (ready);
    wr(3, K_T, CFG_AMP, 32'($rtoi(A_T)));
    repeat (6 * N) @(posedge clk);
    im = real'(ferr_cap[2][K_R]);
    other = fabs(real'(ferr_cap[0][K_R]));
    wr(2, K_R, CFG_ETA, 32'h0000_7fff);
    repeat (2 * N) @(posedge clk);
    re = real'(ferr_cap[2][K_R]);
    $display("band 2 chan %0d: (%f, %f) |%f|, band 0 same chan %f", K_R, re, im, $sqrt(re*re + im*im), other);
    checks++;
    if (fabs($sqrt(re*re + im*im) - dec_gain(real'(K_R) * CH) * A_R / 2.0) > 0.02 * A_R / 2.0) begin failures++; $display("channel magnitude wrong"); end
    checks++;
    if (other > 0.02 * A_R) begin failures++; $display("band 0 not quiet"); end
    lock_on = 1'b1;
    repeat (4 * N) @(posedge clk);
    lock_on = 1'b0;
    for (int d = 0; d < NBND; d++) begin
      automatic real a = 2.0 * $sqrt(li_r[d]*li_r[d] + li_i[d]*li_i[d]) / real'(li_n);
      $display("band %0d DAC lock-in amplitude %f (expected %f)", d, a, (d == 3) ? itp_gain(9.0 * CH) * A_T : 0.0);
      checks++;
      if (d == 3 ? fabs(a - itp_gain(9.0 * CH) * A_T) > 0.02 * A_T : a > 0.02 * A_T) begin failures++; $display("band %0d DAC amplitude wrong", d); end
    end
    @(posedge clk) fr_reset <= 1'b1;
    @(posedge clk) fr_reset <= 1'b0;
    repeat (2 * N) @(posedge clk);
    checks++;
    if (n_fr != NBND) begin failures++; $display("flux-ramp resets applied %0d", n_fr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
