// tb_baseband_processor: closed-loop test of tone tracking and flux-ramp
// demodulation with a behavioural resonator model in the testbench.
//
// Every channel k carries a resonance whose frequency moves with the flux-ramp
// phase th: fres = F0[k] + DELTA*cos(th + PSI[k]). The processor's tone of one
// frame comes back in the next frame multiplied by the resonator response
// exp(-j*BETA[k]) * (1 + j*KAPPA*(fres - f)), f being the tone frequency the
// processor reported for that tone; eta is programmed to exp(+j*BETA[k]) to
// undo the rotation. The test checks:
//   - with feedback off, the tone frequency equals the programmed centre;
//   - the tone has the programmed amplitude and advances by f per frame;
//   - with feedback on, the tone follows the resonance (tracking error small);
//   - the demodulated phase equals PSI[k];
//   - every flux-ramp reset is applied; tone latency is 4 clocks.
module tb_baseband_processor;
  import smurf_pkg::*;
  localparam int  N      = 32;
  localparam int  M      = 700;          // frames
  localparam int  FB_ON  = 20;           // frame at which feedback is enabled
  localparam int  FR_P   = 32;           // frames per flux-ramp period
  localparam int  LMS_INC = 65536 / FR_P;
  localparam real DELTA  = 150000.0;     // resonance swing, DDS words
  localparam real KAPPA  = 1.0 / 60000.0;
  localparam int  AMP    = 8000;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1;
  logic valid_i = 1'b0, fr_reset = 1'b0;
  cplx_t x;
  logic [clog2i(N)-1:0] chan = '0;
  logic cfg_we = 1'b0;
  cfg_sel_e cfg_sel = CFG_CENTER;
  logic [15:0] cfg_chan = '0;
  logic [31:0] cfg_data = '0;
  logic ready, valid_o, fb_act, fr_app;
  cplx_t tone;
  logic [clog2i(N)-1:0] tchan;
  demod_t dm;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  baseband_processor #(.N(N)) dut (
    .clk, .rst, .valid_i, .ch_i(x), .chan_i(chan), .fr_reset_i(fr_reset),
    .cfg_we_i(cfg_we), .cfg_sel_i(cfg_sel), .cfg_chan_i(cfg_chan), .cfg_data_i(cfg_data),
    .ready_o(ready), .valid_o, .tone_o(tone), .tchan_o(tchan), .demod_o(dm),
    .fb_active_o(fb_act), .fr_applied_o(fr_app)
  );

  always #1 clk = ~clk;

  initial begin
    repeat (M * N + 5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Model state.
  int  F0 [N];
  real PSI [N], BETA [N];
  cplx_t tone_cap [N];
  int  f_cap [N];
  int  theta = 0;            // model of the processor's flux-ramp phase
  int  theta_in [N];         // flux-ramp phase of each channel's latest input
  logic fr_pend = 1'b0;
  int  n_resets = 0, n_applied = 0, n_fb = 0;
  real max_trk_err = 0.0;
  int  frame = 0;

  // One configuration write, driven between clock edges.
  task automatic cfg(cfg_sel_e s, int c, logic [31:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_sel = s; cfg_chan = 16'(c); cfg_data = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  function automatic cplx_t model(int k);
    real fres, d, r, tr, ti, yr, yi, c, s;
    theta_in[k] = theta;
    fres = real'(F0[k]) + DELTA * $cos(2.0 * PI * real'(theta) / 65536.0 + PSI[k]);
    d = fres - real'(f_cap[k]);
    r = KAPPA * d;
    if (r > 1.5) r = 1.5;
    if (r < -1.5) r = -1.5;
    tr = real'(tone_cap[k].re);
    ti = real'(tone_cap[k].im);
    // (tr + j ti)(1 + j r)
    yr = tr - ti * r;
    yi = ti + tr * r;
    // times exp(-j beta)
    c = $cos(BETA[k]);
    s = $sin(BETA[k]);
    return '{re: 16'($rtoi(yr * c + yi * s)), im: 16'($rtoi(yi * c - yr * s))};
  endfunction

  initial begin
    x = '0;
    for (int k = 0; k < N; k++) begin
      F0[k]   = int'($urandom_range(2000000)) - 1000000;
      PSI[k]  = 2.0 * PI * real'(k) / real'(N) - PI + 0.05;
      BETA[k] = (k % 3 == 0) ? 1.0 : 0.0;
      tone_cap[k] = '0;
      f_cap[k] = F0[k];
    end
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    wait (ready);
    @(posedge clk);
    for (int k = 0; k < N; k++) begin
      cfg(CFG_CENTER, k, 32'(F0[k]));
      cfg(CFG_AMP, k, 32'(AMP));
      cfg(CFG_ETA, k, {16'($rtoi(32767.0 * $cos(BETA[k]))), 16'($rtoi(32767.0 * $sin(BETA[k])))});
    end
    cfg(CFG_LMS_INC, 0, 32'(LMS_INC));
    cfg(CFG_LMS_GAIN, 0, 32'd2);
    cfg(CFG_REF_DLY, 0, 32'd1);
    @(posedge clk);
    for (frame = 0; frame < M; frame++) begin
      if (frame == FB_ON) begin
        valid_i <= 1'b0;
        cfg(CFG_FB_EN, 0, 32'd1);
        @(posedge clk);
      end
      for (int k = 0; k < N; k++) begin
        valid_i  <= 1'b1;
        chan     <= k[clog2i(N)-1:0];
        x        <= model(k);
        fr_reset <= (k == 5 && frame > 0 && frame % FR_P == FR_P - 1);
        if (k == 5 && frame > 0 && frame % FR_P == FR_P - 1) begin
          n_resets++;
          fr_pend = 1'b1;
        end
        @(posedge clk);
      end
      // Frame ends: mirror the processor's flux-ramp phase.
      if (fr_pend) begin theta = 0; fr_pend = 1'b0; end
      else theta = (theta + LMS_INC) % 65536;
    end
    valid_i  <= 1'b0;
    fr_reset <= 1'b0;
    repeat (40) @(posedge clk);

    checks++;
    if (n_applied != n_resets) begin
      failures++;
      $display("flux-ramp resets: %0d issued, %0d applied", n_resets, n_applied);
    end
    checks++;
    if (n_fb == 0) begin
      failures++;
      $display("feedback never active");
    end
    checks++;
    if (max_trk_err > 0.02 * DELTA) begin
      failures++;
      $display("tracking error %f too large", max_trk_err);
    end
    checks++;
    if (tone_lat != 4) begin
      failures++;
      $display("tone latency %0d, expected 4", tone_lat);
    end
    $display("max tracking error %f words (swing %f), resets %0d, feedback samples %0d",
             max_trk_err, DELTA, n_applied, n_fb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Monitors.
  int cyc = 0, first_in = -1, tone_lat = -1;
  int phs_prev [N];
  bit have_prev [N];
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (fr_app) n_applied++;
    if (fb_act) n_fb++;
    if (valid_i && first_in < 0) first_in = cyc;
    if (valid_o) begin
      automatic int k = int'(tchan);
      automatic real mag = $sqrt(real'(tone.re) * real'(tone.re) + real'(tone.im) * real'(tone.im));
      automatic real ph = $atan2(real'(tone.im), real'(tone.re));
      if (tone_lat < 0) tone_lat = cyc - first_in;
      tone_cap[k] = tone;
      checks++;
      if (fabs(mag - real'(AMP)) > 0.01 * real'(AMP)) begin
        failures++;
        if (failures < 10) $display("chan %0d tone magnitude %f", k, mag);
      end
      // Phase advance per frame equals the previous tone frequency.
      if (have_prev[k]) begin
        automatic real adv = ph - real'(phs_prev[k]) / 1.0e6;
        automatic real expv = 2.0 * PI * real'(f_cap[k]) / 16777216.0;
        automatic real dd = adv - expv;
        while (dd > PI) dd -= 2.0 * PI;
        while (dd < -PI) dd += 2.0 * PI;
        checks++;
        if (fabs(dd) > 0.02) begin
          failures++;
          if (failures < 10) $display("chan %0d frame %0d phase advance off by %f rad", k, frame, dd);
        end
      end
      phs_prev[k] = $rtoi(ph * 1.0e6);
      have_prev[k] = 1'b1;
    end
    if (dm.valid) begin
      automatic int k = int'(dm.chan);
      automatic int dfreq = int'($signed(dm.freq));
      f_cap[k] = dfreq;
      if (frame < FB_ON && frame > 0) begin
        checks++;
        if (dfreq != F0[k]) begin
          failures++;
          if (failures < 10) $display("chan %0d: freq %0d with feedback off, expected %0d (frame %0d cyc %0d tag %h)", k, dfreq, F0[k], frame, cyc, dut.tag_o);
        end
      end
      if (frame > M - 100) begin
        // A frequency formed in frame m is measured in frame m+1, so the loop
        // tracks the resonance one flux-ramp step ahead and the demodulated
        // phase leads PSI by that step.
        automatic real fres = real'(F0[k]) + DELTA * $cos(2.0 * PI * real'(theta_in[k] + LMS_INC) / 65536.0 + PSI[k]);
        automatic real e = fabs(fres - real'(dfreq));
        automatic real want = (PSI[k] * 65536.0 / (2.0 * PI)) + real'(LMS_INC);
        automatic real dp = real'($signed(dm.phase)) - want;
        while (dp > 32768.0) dp -= 65536.0;
        while (dp < -32768.0) dp += 65536.0;
        if (e > max_trk_err) max_trk_err = e;
        if (frame == M - 1) begin
          checks++;
          if (fabs(dp) > 65536.0 * 0.02) begin
            failures++;
            if (failures < 10) $display("chan %0d demod phase %0d, expected %f", k, $signed(dm.phase), want);
          end
        end
      end
    end
  end
endmodule
