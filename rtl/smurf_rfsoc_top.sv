// smurf_rfsoc_top: programmable-logic top of the RFSoC microwave SQUID
// multiplexer readout.
//
// Two identical readout blocks, each covering 4-6 GHz with four 500 MHz bands,
// use all eight ADCs and eight DACs of the device. The converters themselves,
// the RF front end, clocking, the timing system and the host links are outside
// this module: ADC samples come in on adc_i (8 per clock per converter), DAC
// samples leave on dac_o (10 per clock per converter), the flux-ramp reset
// strobe comes from the external timing system, configuration writes come
// from the host (cfg_i.blk selects the readout block, cfg_i.band the band),
// and the per-channel demodulated data leave on demod_o for the data links
// (two records per band and clock, one from each processor core of a band).
// Converter index = 4*block + band.
module smurf_rfsoc_top
  import smurf_pkg::*;
#(
  parameter int N_BLOCKS = 2,
  parameter int N_BANDS  = 4,
  parameter int N_CHAN   = 512,
  parameter int DEC      = 8,
  parameter int INTERP   = 10
) (
  input  logic     clk,
  input  logic     rst,
  input  logic     adc_valid_i,
  input  sample_t  adc_i [N_BLOCKS][N_BANDS][DEC],
  output logic     dac_valid_o [N_BLOCKS][N_BANDS],
  output sample_t  dac_o [N_BLOCKS][N_BANDS][INTERP],
  input  logic     fr_reset_i,
  input  cfg_wr_t  cfg_i,
  output logic     ready_o,
  output demod_t   demod_o [N_BLOCKS][N_BANDS][2],
  output logic     fb_active_o [N_BLOCKS][N_BANDS],
  output logic     fr_applied_o [N_BLOCKS][N_BANDS]
);
  logic rdy [N_BLOCKS];

  for (genvar k = 0; k < N_BLOCKS; k++) begin : g_blk
    cfg_wr_t cfg;
    always_comb begin
      cfg    = cfg_i;
      cfg.we = cfg_i.we && (cfg_i.blk == 1'(k));
    end
    readout_block #(.N_BANDS(N_BANDS), .N_CHAN(N_CHAN), .DEC(DEC), .INTERP(INTERP)) u_blk (
      .clk, .rst, .adc_valid_i, .adc_i(adc_i[k]),
      .dac_valid_o(dac_valid_o[k]), .dac_o(dac_o[k]),
      .fr_reset_i, .cfg_i(cfg), .ready_o(rdy[k]),
      .demod_o(demod_o[k]), .fb_active_o(fb_active_o[k]), .fr_applied_o(fr_applied_o[k])
    );
  end

  always_comb begin
    ready_o = 1'b1;
    for (int k = 0; k < N_BLOCKS; k++) ready_o &= rdy[k];
  end
endmodule
