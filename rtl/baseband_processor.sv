// baseband_processor: per-channel tone generation, frequency error estimation,
// tone tracking and flux-ramp demodulation for the N channels of one band,
// time-interleaved so that one pipeline serves every channel.
//
// Channel samples arrive one per clock in order 0..N-1 (a channel frame). For
// channel k the pipeline
//   1. reads the channel's configuration (centre frequency word, tone
//      amplitude, complex calibration eta) and state (DDS phase, tracking
//      coefficients b, ac, as);
//   2. forms the tracked frequency f = centre + (b + ac*cos(th) + as*sin(th))
//      when feedback is enabled, else f = centre; th is the flux-ramp phase,
//      which advances by LMS_INC each frame and restarts at a flux-ramp reset;
//      f is the entry of the frequency table that drives the tone;
//   3. emits the tone amp*exp(j*phi) for the synthesis filter bank and
//      advances the channel's DDS phase phi by f;
//   4. mixes the received channel sample down with exp(-j*(phi - REF_DLY*f)),
//      undoing the tone phase of the frame that produced it, rotates it by
//      eta and takes the imaginary part as the frequency error e (positive
//      when the resonance lies above the tone, for a correctly set eta);
//   5. updates b += e*g, ac += e*g*cos(th), as += e*g*sin(th) (LMS, gain
//      g = 2^-LMS_GAIN) so that the tone follows the resonance as the flux
//      ramp sweeps it;
//   6. reports f, e and the demodulated phase atan2(-as, ac) of the
//      flux-ramp harmonic, which is the detector signal.
// A channel is visited once per N clocks, so its state is written back long
// before it is read again (N >= 8 is required). In the readout each band uses
// two of these cores with N = 256, one per half of the 512 channels, so every
// channel is visited every 256 clocks (2.4 MHz, the oversampled channel rate).
//
// Which operations the processor performs (channelised tone generation,
// frequency error estimation, tone tracking, flux-ramp demodulation, an
// updated frequency table), the eta calibration, the reference phase delay,
// the LMS tracking at a flux-ramp harmonic and the flux-ramp reset follow the
// published design and its figures. The exact fixed-point formats, the
// register map (smurf_pkg::cfg_sel_e), the single-harmonic LMS model and the
// CORDIC phase readout are this implementation's choices.
//
// After reset the processor clears all per-channel memories, one channel per
// clock; ready_o rises when done and configuration writes are ignored before.
// Timing: tone_o follows the channel sample by 4 clocks, demod_o by 22.
module baseband_processor
  import smurf_pkg::*;
#(
  parameter int N = 512
) (
  input  logic                  clk,
  input  logic                  rst,
  // channel stream from the analysis filter bank
  input  logic                  valid_i,
  input  cplx_t                 ch_i,
  input  logic [clog2i(N)-1:0]  chan_i,
  // flux-ramp reset strobe from the timing system
  input  logic                  fr_reset_i,
  // configuration writes addressed to this band
  input  logic                  cfg_we_i,
  input  cfg_sel_e              cfg_sel_i,
  input  logic [15:0]           cfg_chan_i,
  input  logic [31:0]           cfg_data_i,
  output logic                  ready_o,
  // tone stream to the synthesis filter bank
  output logic                  valid_o,
  output cplx_t                 tone_o,
  output logic [clog2i(N)-1:0]  tchan_o,
  // per-channel results
  output demod_t                demod_o,
  // event strobes (feedback active on this sample, flux-ramp reset applied)
  output logic                  fb_active_o,
  output logic                  fr_applied_o
);
  localparam int CW   = clog2i(N);
  localparam int FRAC = 8;               // fractional bits of the tracking coefficients
  localparam int LW   = DDS_PW + FRAC;   // 32

  typedef logic signed [DDS_PW-1:0] freq_t;
  typedef logic signed [LW-1:0]     coef_t;

  initial assert (N >= 8 && (1 << CW) == N) else $error("baseband_processor: N must be a power of two >= 8");

  // ---------------------------------------------------------------- memories
  freq_t              center_m [N];
  logic signed [15:0] amp_m    [N];
  cplx_t              eta_m    [N];
  logic [DDS_PW-1:0]  phs_m    [N];
  coef_t              b_m      [N];
  coef_t              ac_m     [N];
  coef_t              as_m     [N];

  // ---------------------------------------------------------------- globals
  logic              fb_en;
  logic [FR_PW-1:0]  lms_inc;
  logic [4:0]        lms_gain;
  logic [7:0]        ref_dly;
  logic [CW-1:0]     init_cnt;
  logic              init_busy;

  assign ready_o = ~init_busy;

  logic cfg_ok;
  assign cfg_ok = cfg_we_i && !init_busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      fb_en     <= 1'b0;
      lms_inc   <= '0;
      lms_gain  <= 5'd4;
      ref_dly   <= 8'd1;
      init_cnt  <= '0;
      init_busy <= 1'b1;
    end else begin
      if (init_busy) begin
        init_cnt <= init_cnt + 1'b1;
        if (&init_cnt) init_busy <= 1'b0;
      end
      if (cfg_ok) begin
        unique case (cfg_sel_i)
          CFG_FB_EN:    fb_en    <= cfg_data_i[0];
          CFG_LMS_INC:  lms_inc  <= cfg_data_i[FR_PW-1:0];
          CFG_LMS_GAIN: lms_gain <= cfg_data_i[4:0];
          CFG_REF_DLY:  ref_dly  <= cfg_data_i[7:0];
          default: ;
        endcase
      end
    end
  end

  // Configuration memories: cleared by the sweep, written by software.
  always_ff @(posedge clk) begin
    if (init_busy) begin
      center_m[init_cnt] <= '0;
      amp_m[init_cnt]    <= '0;
      eta_m[init_cnt]    <= '{re: 16'sh7fff, im: 16'sh0000};
    end else if (cfg_ok) begin
      unique case (cfg_sel_i)
        CFG_CENTER: center_m[cfg_chan_i[CW-1:0]] <= cfg_data_i[DDS_PW-1:0];
        CFG_AMP:    amp_m[cfg_chan_i[CW-1:0]]    <= cfg_data_i[15:0];
        CFG_ETA:    eta_m[cfg_chan_i[CW-1:0]]    <= '{re: cfg_data_i[31:16], im: cfg_data_i[15:0]};
        default: ;
      endcase
    end
  end

  // ---------------------------------------------------------------- flux-ramp phase
  logic [FR_PW-1:0] theta;
  logic             fr_pend;
  logic             frame_end;
  assign frame_end = valid_i && (chan_i == CW'(N - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      theta        <= '0;
      fr_pend      <= 1'b0;
      fr_applied_o <= 1'b0;
    end else begin
      fr_applied_o <= 1'b0;
      if (fr_reset_i) fr_pend <= 1'b1;
      if (frame_end) begin
        if (fr_pend || fr_reset_i) begin
          theta        <= '0;
          fr_pend      <= 1'b0;
          fr_applied_o <= 1'b1;
        end else begin
          theta <= theta + lms_inc;
        end
      end
    end
  end

  logic signed [15:0] cth1, sth1;
  nco_sincos #(.PW(FR_PW)) u_fr_nco (.clk, .phase_i(theta), .cos_o(cth1), .sin_o(sth1));

  // ---------------------------------------------------------------- stage 1: read
  logic               v1;
  logic [CW-1:0]      k1;
  cplx_t              x1, eta1;
  freq_t              cen1;
  logic signed [15:0] amp1;
  logic [DDS_PW-1:0]  phs1;
  coef_t              b1, ac1, as1;

  always_ff @(posedge clk) begin
    if (rst) v1 <= 1'b0;
    else     v1 <= valid_i;
    k1   <= chan_i;
    x1   <= ch_i;
    cen1 <= center_m[chan_i];
    amp1 <= amp_m[chan_i];
    eta1 <= eta_m[chan_i];
    phs1 <= phs_m[chan_i];
    b1   <= b_m[chan_i];
    ac1  <= ac_m[chan_i];
    as1  <= as_m[chan_i];
  end

  // Tracked frequency (the frequency table entry).
  logic signed [LW+16:0] harm;
  coef_t                 trk;
  freq_t                 f1;
  logic [DDS_PW-1:0]     psi1;
  assign harm = ((LW+17)'(ac1) * (LW+17)'(cth1) + (LW+17)'(as1) * (LW+17)'(sth1)) >>> 15;
  assign trk  = b1 + LW'(harm);
  assign f1   = fb_en ? cen1 + freq_t'(trk >>> FRAC) : cen1;
  assign psi1 = phs1 - DDS_PW'(ref_dly) * DDS_PW'(f1);

  // ---------------------------------------------------------------- stage 2: DDS
  logic               v2;
  logic [CW-1:0]      k2;
  cplx_t              x2, eta2;
  logic signed [15:0] amp2, cth2, sth2;
  freq_t              f2;
  logic [DDS_PW-1:0]  phs2, psi2;
  coef_t              b2, ac2, as2;

  always_ff @(posedge clk) begin
    if (rst) v2 <= 1'b0;
    else     v2 <= v1;
    k2 <= k1;  x2 <= x1;  eta2 <= eta1;  amp2 <= amp1;
    cth2 <= cth1;  sth2 <= sth1;
    f2 <= f1;  phs2 <= phs1;  psi2 <= psi1;
    b2 <= b1;  ac2 <= ac1;  as2 <= as1;
  end

  logic signed [15:0] cp3, sp3, cr3, sr3;
  nco_sincos #(.PW(DDS_PW)) u_tone_nco (.clk, .phase_i(phs2), .cos_o(cp3), .sin_o(sp3));
  nco_sincos #(.PW(DDS_PW)) u_rx_nco   (.clk, .phase_i(psi2), .cos_o(cr3), .sin_o(sr3));

  // ---------------------------------------------------------------- stage 3: mix
  logic               v3;
  logic [CW-1:0]      k3;
  cplx_t              x3, eta3;
  logic signed [15:0] amp3, cth3, sth3;
  freq_t              f3;
  coef_t              b3, ac3, as3;

  always_ff @(posedge clk) begin
    if (rst) v3 <= 1'b0;
    else     v3 <= v2;
    k3 <= k2;  x3 <= x2;  eta3 <= eta2;  amp3 <= amp2;
    cth3 <= cth2;  sth3 <= sth2;  f3 <= f2;
    b3 <= b2;  ac3 <= ac2;  as3 <= as2;
  end

  function automatic logic signed [15:0] rnd15(logic signed [33:0] v);
    logic signed [33:0] r;
    r = (v + 34'sd16384) >>> 15;
    if (r > 34'sd32767)       return 16'sh7fff;
    else if (r < -34'sd32768) return 16'sh8000;
    else                      return r[15:0];
  endfunction

  // ---------------------------------------------------------------- stage 4: error
  logic               v4;
  logic [CW-1:0]      k4;
  cplx_t              y4, eta4;
  logic signed [15:0] cth4, sth4;
  freq_t              f4;
  coef_t              b4, ac4, as4;

  always_ff @(posedge clk) begin
    if (rst) begin
      v4      <= 1'b0;
      valid_o <= 1'b0;
    end else begin
      v4      <= v3;
      valid_o <= v3;
    end
    tone_o.re <= rnd15(34'(32'(amp3) * 32'(cp3)));
    tone_o.im <= rnd15(34'(32'(amp3) * 32'(sp3)));
    tchan_o   <= k3;
    y4.re <= rnd15(34'(32'(x3.re) * 32'(cr3)) + 34'(32'(x3.im) * 32'(sr3)));
    y4.im <= rnd15(34'(32'(x3.im) * 32'(cr3)) - 34'(32'(x3.re) * 32'(sr3)));
    k4 <= k3;  eta4 <= eta3;  cth4 <= cth3;  sth4 <= sth3;  f4 <= f3;
    b4 <= b3;  ac4 <= ac3;  as4 <= as3;
  end

  // ---------------------------------------------------------------- stage 5: LMS
  logic               v5;
  logic [CW-1:0]      k5;
  logic signed [15:0] e5, cth5, sth5;
  freq_t              f5;
  coef_t              b5, ac5, as5;

  always_ff @(posedge clk) begin
    if (rst) v5 <= 1'b0;
    else     v5 <= v4;
    e5 <= rnd15(34'(32'(eta4.re) * 32'(y4.im)) + 34'(32'(eta4.im) * 32'(y4.re)));
    k5 <= k4;  cth5 <= cth4;  sth5 <= sth4;  f5 <= f4;
    b5 <= b4;  ac5 <= ac4;  as5 <= as4;
  end

  coef_t db, dac, das, b6n, ac6n, as6n;
  assign db   = (coef_t'(e5) <<< FRAC) >>> lms_gain;
  assign dac  = coef_t'((32'(e5) * 32'(cth5)) >>> (15 - FRAC)) >>> lms_gain;
  assign das  = coef_t'((32'(e5) * 32'(sth5)) >>> (15 - FRAC)) >>> lms_gain;
  assign b6n  = fb_en ? b5  + db  : b5;
  assign ac6n = fb_en ? ac5 + dac : ac5;
  assign as6n = fb_en ? as5 + das : as5;
  assign fb_active_o = v5 && fb_en;

  // State memories: cleared by the sweep or by software, written back by the pipeline.
  always_ff @(posedge clk) begin
    if (init_busy) begin
      phs_m[init_cnt] <= '0;
      b_m[init_cnt]   <= '0;
      ac_m[init_cnt]  <= '0;
      as_m[init_cnt]  <= '0;
    end else begin
      if (v1) phs_m[k1] <= phs1 + DDS_PW'(f1);
      if (v5) begin
        b_m[k5]  <= b6n;
        ac_m[k5] <= ac6n;
        as_m[k5] <= as6n;
      end
      if (cfg_ok && cfg_sel_i == CFG_CLEAR) begin
        phs_m[cfg_chan_i[CW-1:0]] <= '0;
        b_m[cfg_chan_i[CW-1:0]]   <= '0;
        ac_m[cfg_chan_i[CW-1:0]]  <= '0;
        as_m[cfg_chan_i[CW-1:0]]  <= '0;
      end
    end
  end

  // ---------------------------------------------------------------- stage 6+: phase readout
  localparam int TW = 16 + 2 * DDS_PW;
  logic [TW-1:0]       tag_o;
  logic                cv;
  logic signed [FR_PW-1:0] ang;

  cordic_atan2 #(.W(LW), .AW(FR_PW), .ITER(16), .TW(TW)) u_cordic (
    .clk,
    .rst,
    .valid_i (v5),
    .tag_i   ({16'(k5), f5, DDS_PW'(e5)}),
    .x_i     (ac6n),
    .y_i     (-as6n),
    .valid_o (cv),
    .tag_o,
    .angle_o (ang)
  );

  always_ff @(posedge clk) begin
    if (rst) demod_o <= '0;
    else begin
      demod_o.valid <= cv;
      demod_o.chan  <= tag_o[TW-1 -: 16];
      demod_o.freq  <= tag_o[2*DDS_PW-1 -: DDS_PW];
      demod_o.ferr  <= tag_o[DDS_PW-1:0];
      demod_o.phase <= ang;
    end
  end

  // ---------------------------------------------------------------- checks
  logic [CW-1:0] exp_chan;
  always_ff @(posedge clk) begin
    if (rst) exp_chan <= '0;
    else if (valid_i) exp_chan <= chan_i + 1'b1;
  end
  a_chan_order: assert property (@(posedge clk) disable iff (rst) valid_i |-> chan_i == exp_chan)
    else $error("baseband_processor: channel stream out of order");
endmodule
