// readout_block: one 4-6 GHz readout instance, four 500 MHz bands.
//
// Every band is a closed chain clocked at the baseband rate:
//   ADC samples (8 per clock, 4.9152 GS/s) -> ddc_mixer (band-centre NCO)
//   -> decimator (8x) -> analysis_filter_bank (N channels, 2x oversampled)
//   -> two baseband_processor cores (tracking, demodulation, tone table)
//   -> synthesis_filter_bank -> interpolator (10x)
//   -> duc_mixer (band-centre NCO) -> DAC samples (10 per clock, 6.144 GS/s).
// The oversampled analysis bank delivers two channel samples per clock, one
// from each half of the channel range (channel index bit CW-1 = 0 or 1).
// Each half has its own processor core of N/2 channels, which thus sees its
// channels in order 0..N/2-1, each every N/2 clocks. Channel writes
// (centre, amplitude, eta, clear) go to the core owning the channel; band
// writes go to both. On the way back a toggle, flipped at every wrap of core
// 0's channel index, sends the tones to the two synthesis lanes so that each
// lane gets complete frames 0..N-1. Because the cores advance their flux-ramp
// phases at the same clock only once both analysis lanes run, their phases
// agree from the first flux-ramp reset on. demod_o[band][c] carries the
// records of core c with the full channel number; its top channel bit is
// fixed by the core that produced it, so synthesis sees that bit as constant.
// The band centres are 4.25, 4.75, 5.25 and 5.75 GHz, the same on the receive
// and transmit side. The four bands share the clock, reset, flux-ramp reset
// and configuration port; cfg_i.band selects the band a write goes to. The
// chain, the rates and the centres follow the published design's block
// diagram; the lane-parallel converter interface and the register map are
// this implementation's choices.
module readout_block
  import smurf_pkg::*;
#(
  parameter int     N_BANDS = 4,
  parameter int     N_CHAN  = 512,
  parameter int     DEC     = 8,
  parameter int     INTERP  = 10,
  parameter longint BAND_KHZ [4] = '{64'd4_250_000, 64'd4_750_000, 64'd5_250_000, 64'd5_750_000}
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     adc_valid_i,
  input  sample_t  adc_i [N_BANDS][DEC],
  output logic     dac_valid_o [N_BANDS],
  output sample_t  dac_o [N_BANDS][INTERP],
  input  logic     fr_reset_i,
  input  cfg_wr_t  cfg_i,          // cfg_i.blk is decoded by the caller
  output logic     ready_o,
  output demod_t   demod_o [N_BANDS][2],  // one record per processor core
  output logic     fb_active_o [N_BANDS],
  output logic     fr_applied_o [N_BANDS]
);
  localparam int CW = clog2i(N_CHAN);

  logic rdy [N_BANDS];

  initial assert (N_BANDS <= 4) else $error("readout_block: at most four bands per block");

  for (genvar b = 0; b < N_BANDS; b++) begin : g_band
    localparam logic [NCO_PW-1:0] INC_RX = nco_inc(BAND_KHZ[b], FS_ADC_KHZ);
    localparam logic [NCO_PW-1:0] INC_TX = nco_inc(BAND_KHZ[b], FS_DAC_KHZ);

    logic            mv, dv, sv, iv;
    cplx_t           mix [DEC];
    cplx_t           dec, syn;
    cplx_t           itp [INTERP];
    logic            av [2], sy_v [2];
    cplx_t           ach [2], sy_d [2];
    logic [CW-1:0]   achan [2];
    // Per processor core c (channels with top index bit c).
    logic            cv [2], tv [2], crdy [2], cfb [2], cfr [2];
    cplx_t           cin [2], tone [2];
    logic [CW-2:0]   cchan [2], tchan [2];
    demod_t          cdm [2];
    logic            hx;

    ddc_mixer #(.LANES(DEC)) u_ddc (
      .clk, .rst, .phase_inc_i(INC_RX), .valid_i(adc_valid_i), .adc_i(adc_i[b]),
      .valid_o(mv), .iq_o(mix)
    );
    decimator #(.R(DEC)) u_dec (
      .clk, .rst, .valid_i(mv), .iq_i(mix), .valid_o(dv), .iq_o(dec)
    );
    analysis_filter_bank #(.N(N_CHAN)) u_afb (
      .clk, .rst, .valid_i(dv), .iq_i(dec), .valid_o(av), .ch_o(ach), .chan_o(achan)
    );

    // The two analysis lanes always carry channels from opposite halves of
    // the channel range; steer each to the core that owns its half.
    for (genvar c = 0; c < 2; c++) begin : g_core
      logic take0, take1, cwe;
      assign take0 = av[0] && achan[0][CW-1] == 1'(c);
      assign take1 = av[1] && achan[1][CW-1] == 1'(c);
      assign cv[c]    = take0 || take1;
      assign cin[c]   = take0 ? ach[0] : ach[1];
      assign cchan[c] = take0 ? achan[0][CW-2:0] : achan[1][CW-2:0];
      // Channel-scope writes go to the owning core, band-scope to both.
      assign cwe = cfg_i.we && cfg_i.band == 2'(b) &&
                   (!(cfg_i.sel inside {CFG_CENTER, CFG_AMP, CFG_ETA, CFG_CLEAR}) ||
                    cfg_i.chan[CW-1] == 1'(c));

      baseband_processor #(.N(N_CHAN / 2)) u_bbp (
        .clk, .rst,
        .valid_i(cv[c]), .ch_i(cin[c]), .chan_i(cchan[c]),
        .fr_reset_i,
        .cfg_we_i(cwe), .cfg_sel_i(cfg_i.sel),
        .cfg_chan_i(cfg_i.chan), .cfg_data_i(cfg_i.data),
        .ready_o(crdy[c]),
        .valid_o(tv[c]), .tone_o(tone[c]), .tchan_o(tchan[c]),
        .demod_o(cdm[c]),
        .fb_active_o(cfb[c]), .fr_applied_o(cfr[c])
      );

      always_comb begin
        demod_o[b][c] = cdm[c];
        demod_o[b][c].chan = cdm[c].chan | 16'(c << (CW - 1));
      end
    end

    assign rdy[b]          = crdy[0] && crdy[1];
    assign fb_active_o[b]  = cfb[0] || cfb[1];
    assign fr_applied_o[b] = cfr[0] || cfr[1];

    // Tones back to the synthesis lanes: lane 0 takes core 0 for the first
    // half of its frame and core 1 for the second half, lane 1 the other.
    always_ff @(posedge clk) begin
      if (rst) hx <= 1'b0;
      else if (tv[0] && tchan[0] == '1) hx <= ~hx;
    end
    assign sy_v[0] = hx ? tv[1] : tv[0];
    assign sy_d[0] = hx ? tone[1] : tone[0];
    assign sy_v[1] = hx ? tv[0] : tv[1];
    assign sy_d[1] = hx ? tone[0] : tone[1];

    synthesis_filter_bank #(.N(N_CHAN)) u_sfb (
      .clk, .rst, .valid_i(sy_v), .ch_i(sy_d), .valid_o(sv), .iq_o(syn)
    );
    interpolator #(.R(INTERP)) u_itp (
      .clk, .rst, .valid_i(sv), .iq_i(syn), .valid_o(iv), .iq_o(itp)
    );
    duc_mixer #(.LANES(INTERP)) u_duc (
      .clk, .rst, .phase_inc_i(INC_TX), .valid_i(iv), .iq_i(itp),
      .valid_o(dac_valid_o[b]), .dac_o(dac_o[b])
    );

    // Synthesis lane 0 needs the tones in channel order 0..N-1.
    logic [CW-1:0] exp_tchan;
    always_ff @(posedge clk) begin
      if (rst) exp_tchan <= '0;
      else if (sy_v[0]) exp_tchan <= {hx, hx ? tchan[1] : tchan[0]} + 1'b1;
    end
    a_tone_order: assert property (@(posedge clk) disable iff (rst)
                                   sy_v[0] |-> {hx, hx ? tchan[1] : tchan[0]} == exp_tchan)
      else $error("readout_block: tone stream out of channel order");
  end

  always_comb begin
    ready_o = 1'b1;
    for (int b = 0; b < N_BANDS; b++) ready_o &= rdy[b];
  end
endmodule
