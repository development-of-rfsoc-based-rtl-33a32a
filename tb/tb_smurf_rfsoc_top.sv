// tb_smurf_rfsoc_top: end-to-end test of the whole readout at its default
// size (two blocks, four bands each, 512 channels per band).
//
// Receive path: RF tones are sampled as the ADCs would see them (4.9152 GS/s,
// 8 samples per clock): one in block 0 band 0 (4.25 GHz centre) on channel
// +10, one in block 1 band 3 (5.75 GHz centre) on channel -40. With the
// channel's tone frequency at 0 and feedback off, the processor's frequency
// error output equals Im(eta * channel sample); reading it with eta = 1 and
// with eta = j recovers the complex channel value, whose magnitude must be
// half the RF amplitude (real-to-complex mixing), while a neighbour channel
// stays quiet.
// Transmit path: channel 20 of block 1 band 1 gets a tone of amplitude 6000;
// a lock-in on the DAC stream (6.144 GS/s, 10 samples per clock) must find
// amplitude 6000 at 4.75 GHz + 20 channel spacings and nothing five channels
// away; a band without tones must output silence.
// Mechanisms exercised and counted: channelisation on both blocks, eta
// change, tone synthesis, feedback switched on (tracking updates), flux-ramp
// resets applied in all bands, per-channel clear, and records from both
// processor cores of every band (each only for its own half of the
// channels). Each must occur.
module tb_smurf_rfsoc_top;
  import smurf_pkg::*;
  localparam int  NBLK = 2, NBND = 4, N = 512, DEC = 8, INTERP = 10;
  localparam real PI = 3.14159265358979323846;
  localparam real FS_ADC = 4915.2e6, FS_DAC = 6144.0e6, FS_BB = 614.4e6;
  localparam real CH = FS_BB / real'(N);

  logic clk = 1'b0, rst = 1'b1, adc_valid = 1'b0, fr_reset = 1'b0, ready;
  sample_t adc [NBLK][NBND][DEC];
  logic    dac_valid [NBLK][NBND];
  sample_t dac [NBLK][NBND][INTERP];
  cfg_wr_t cfg;
  demod_t  dm [NBLK][NBND][2];
  logic    fb_act [NBLK][NBND], fr_app [NBLK][NBND];
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  smurf_rfsoc_top dut (
    .clk, .rst, .adc_valid_i(adc_valid), .adc_i(adc), .dac_valid_o(dac_valid), .dac_o(dac),
    .fr_reset_i(fr_reset), .cfg_i(cfg), .ready_o(ready), .demod_o(dm),
    .fb_active_o(fb_act), .fr_applied_o(fr_app)
  );

  always #1 clk = ~clk;

  initial begin
    repeat (40 * N) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- stimulus
  localparam int  K_A = 10, K_B = N - 40, K_T = 20;
  localparam real A_A = 16000.0, A_B = 12000.0;
  localparam real F_A = 4250.0e6 + real'(K_A) * CH;
  localparam real F_B = 5750.0e6 - 40.0 * CH;
  longint nadc = 0;

  always @(posedge clk) begin
    for (int b = 0; b < NBLK; b++)
      for (int d = 0; d < NBND; d++)
        for (int l = 0; l < DEC; l++) begin
          automatic real t = real'(nadc + longint'(l)) / FS_ADC;
          automatic real v = 0.0;
          if (b == 0 && d == 0) v = A_A * $cos(2.0 * PI * F_A * t);
          if (b == 1 && d == 3) v = A_B * $cos(2.0 * PI * F_B * t + 0.3);
          adc[b][d][l] <= 16'($rtoi(v));
        end
    if (adc_valid) nadc <= nadc + DEC;
  end

  task automatic wr(int blk, int band, int chan, cfg_sel_e sel, logic [31:0] data);
    @(negedge clk);
    cfg = '{we: 1'b1, blk: 1'(blk), band: 2'(band), chan: 16'(chan), sel: sel, data: data};
    @(negedge clk);
    cfg.we = 1'b0;
  endtask

  task automatic frames(int n);
    repeat (n * N) @(posedge clk);
  endtask

  // --------------------------------------------------------------- monitors
  int ferr_cap [NBLK][NBND][N];
  int n_fb = 0, n_fr = 0, n_core_bad = 0;
  int n_core [2] = '{0, 0};
  always @(negedge clk) begin
    for (int b = 0; b < NBLK; b++)
      for (int d = 0; d < NBND; d++) begin
        for (int c = 0; c < 2; c++)
          if (dm[b][d][c].valid) begin
            ferr_cap[b][d][int'(dm[b][d][c].chan) % N] = int'($signed(dm[b][d][c].ferr));
            n_core[c]++;
            if (!rst && int'(dm[b][d][c].chan) / (N / 2) != c) n_core_bad++;
          end
        if (fb_act[b][d]) n_fb++;
        if (fr_app[b][d]) n_fr++;
      end
  end

  // DAC lock-in.
  bit  lock_on = 1'b0;
  real li_r [4], li_i [4];
  int  li_n = 0;
  longint ndac = 0;
  real silent_max = 0.0;
  real lock_f [4];
  always @(negedge clk) begin
    if (dac_valid[1][1]) begin
      if (lock_on) begin
        for (int l = 0; l < INTERP; l++) begin
          automatic real t = real'(ndac + longint'(l)) / FS_DAC;
          for (int q = 0; q < 4; q++) begin
            li_r[q] += real'(dac[1][1][l]) * $cos(2.0 * PI * lock_f[q] * t);
            li_i[q] += real'(dac[1][1][l]) * $sin(2.0 * PI * lock_f[q] * t);
          end
          if (fabs(real'(dac[0][0][l])) > silent_max) silent_max = fabs(real'(dac[0][0][l]));
        end
        li_n += INTERP;
      end
      ndac += INTERP;
    end
  end

  // --------------------------------------------------------------- sequence
  int n_clear = 0, n_eta = 0;
  real re_a, im_a, re_b, im_b, nb_a;
  initial begin
    cfg = '0;
    lock_f[0] = 4750.0e6 + real'(K_T) * CH;
    lock_f[1] = 4750.0e6 + real'(K_T + 5) * CH;
    lock_f[2] = 0.0; lock_f[3] = 0.0;
    for (int q = 0; q < 4; q++) begin li_r[q] = 0.0; li_i[q] = 0.0; end
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    adc_valid <= 1'b1;
    wait (ready);
    // Transmit tone.
    wr(1, 1, K_T, CFG_AMP, 32'd6000);
    // Receive channels: eta = 1 (reset value), read Im.
    frames(5);
    im_a = real'(ferr_cap[0][0][K_A]);
    im_b = real'(ferr_cap[1][3][K_B]);
    nb_a = fabs(real'(ferr_cap[0][0][K_A + 3]));
    // eta = j: the error output now carries Re.
    wr(0, 0, K_A, CFG_ETA, 32'h0000_7fff);
    wr(1, 3, K_B, CFG_ETA, 32'h0000_7fff);
    n_eta += 2;
    frames(2);
    re_a = real'(ferr_cap[0][0][K_A]);
    re_b = real'(ferr_cap[1][3][K_B]);
    $display("block0 band0 chan %0d: (%f, %f) |%f|", K_A, re_a, im_a, $sqrt(re_a*re_a + im_a*im_a));
    $display("block1 band3 chan %0d: (%f, %f) |%f|", K_B, re_b, im_b, $sqrt(re_b*re_b + im_b*im_b));
    checks++;
    if (fabs($sqrt(re_a*re_a + im_a*im_a) - A_A / 2.0) > 0.05 * A_A / 2.0) begin
      failures++; $display("block0 band0 channel magnitude wrong");
    end
    checks++;
    if (fabs($sqrt(re_b*re_b + im_b*im_b) - A_B / 2.0) > 0.05 * A_B / 2.0) begin
      failures++; $display("block1 band3 channel magnitude wrong");
    end
    checks++;
    if (nb_a > 0.1 * A_A / 2.0) begin
      failures++; $display("neighbour channel not quiet: %f", nb_a);
    end
    // Transmit lock-in over two frames of settled output.
    lock_on = 1'b1;
    frames(2);
    lock_on = 1'b0;
    begin
      automatic real a0 = 2.0 * $sqrt(li_r[0]*li_r[0] + li_i[0]*li_i[0]) / real'(li_n);
      automatic real a1 = 2.0 * $sqrt(li_r[1]*li_r[1] + li_i[1]*li_i[1]) / real'(li_n);
      $display("DAC lock-in: %f at tone, %f five channels away, silent band peak %f", a0, a1, silent_max);
      checks++;
      if (fabs(a0 - 6000.0) > 300.0) begin failures++; $display("DAC tone amplitude wrong"); end
      checks++;
      if (a1 > 300.0) begin failures++; $display("DAC energy off the tone"); end
      checks++;
      if (silent_max > 2.0) begin failures++; $display("unconfigured band not silent"); end
    end
    // Feedback on, flux-ramp resets, then a channel clear.
    wr(0, 0, 0, CFG_LMS_INC, 32'd2048);
    wr(0, 0, 0, CFG_FB_EN, 32'd1);
    for (int r = 0; r < 3; r++) begin
      frames(1);
      @(posedge clk) fr_reset <= 1'b1;
      @(posedge clk) fr_reset <= 1'b0;
    end
    frames(1);
    wr(0, 0, K_A, CFG_CLEAR, 32'd0);
    n_clear++;
    wr(0, 0, 0, CFG_FB_EN, 32'd0);
    frames(1);
    $display("events: eta changes %0d, feedback samples %0d, flux-ramp resets applied %0d, clears %0d",
             n_eta, n_fb, n_fr, n_clear);
    checks++;
    if (n_fb == 0) begin failures++; $display("feedback never active"); end
    checks++;
    if (n_fr != 3 * NBLK * NBND) begin failures++; $display("flux-ramp resets applied %0d, expected %0d", n_fr, 3 * NBLK * NBND); end
    checks++;
    if (n_eta == 0 || n_clear == 0) failures++;
    $display("records from core 0: %0d, core 1: %0d, wrong half: %0d", n_core[0], n_core[1], n_core_bad);
    checks++;
    if (n_core[0] == 0 || n_core[1] == 0 || n_core_bad != 0) begin failures++; $display("processor core steering wrong"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
