// smurf_pkg: types, constants and helper functions shared by the readout datapath.
//
// All blocks run in one clock domain, the baseband clock at which each band
// carries one complex sample per cycle (614.4 MHz in the device: 4.9152 GS/s
// divided by 8 on the receive side, 6.144 GS/s divided by 10 on the transmit
// side). Converter samples therefore travel in parallel lanes: 8 ADC samples
// and 10 DAC samples per clock per band. The sample rates, decimation and
// interpolation factors, band centres and the channel count follow the
// published design; the word widths, the configuration register map and the
// fixed-point scalings are this implementation's own choices.
package smurf_pkg;

  // Converter sample word (RFSoC converters deliver 16-bit words).
  localparam int SW = 16;
  // Phase width of the band-centre NCOs.
  localparam int NCO_PW = 32;
  // Phase width of the per-channel tone DDS and of the flux-ramp phase.
  localparam int DDS_PW = 24;
  localparam int FR_PW  = 16;

  typedef logic signed [SW-1:0] sample_t;

  typedef struct packed {
    logic signed [SW-1:0] re;
    logic signed [SW-1:0] im;
  } cplx_t;

  // Sample rates in kHz, band centres in kHz.
  localparam longint FS_ADC_KHZ = 64'd4_915_200;
  localparam longint FS_DAC_KHZ = 64'd6_144_000;

  // Configuration fields of the baseband processor.
  typedef enum logic [3:0] {
    CFG_CENTER   = 4'd0,  // per channel: tone frequency word within the channel (signed, DDS_PW bits)
    CFG_AMP      = 4'd1,  // per channel: tone amplitude, Q1.15
    CFG_ETA      = 4'd2,  // per channel: complex eta, {re[31:16], im[15:0]}, Q1.15
    CFG_CLEAR    = 4'd3,  // per channel: clear tracking state and DDS phase
    CFG_FB_EN    = 4'd4,  // global: tone tracking feedback enable (bit 0)
    CFG_LMS_INC  = 4'd5,  // global: flux-ramp phase step per channel frame (FR_PW bits)
    CFG_LMS_GAIN = 4'd6,  // global: LMS gain as a right shift (bits 4:0)
    CFG_REF_DLY  = 4'd7   // global: loop delay in channel frames used to align the down-mix phase
  } cfg_sel_e;

  typedef struct packed {
    logic        we;
    logic        blk;     // readout block (0 or 1)
    logic [1:0]  band;    // band within the block
    logic [15:0] chan;    // channel within the band
    cfg_sel_e    sel;
    logic [31:0] data;
  } cfg_wr_t;

  // Demodulated output of one channel.
  typedef struct packed {
    logic              valid;
    logic [15:0]       chan;
    logic signed [FR_PW-1:0]  phase;   // flux-ramp demodulated phase, full circle = 2^FR_PW
    logic signed [DDS_PW-1:0] freq;    // tracked tone frequency word
    logic signed [DDS_PW-1:0] ferr;    // frequency error estimate
  } demod_t;

  // Phase increment of an NCO running at f_khz when sampled at fs_khz.
  function automatic logic [NCO_PW-1:0] nco_inc(longint f_khz, longint fs_khz);
    longint q;
    q = ((f_khz << NCO_PW) + fs_khz / 2) / fs_khz;
    return q[NCO_PW-1:0];
  endfunction

  function automatic int clog2i(int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

endpackage
