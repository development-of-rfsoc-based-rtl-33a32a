// analysis_filter_bank: twice-oversampled channelizer of one 500 MHz band.
//
// The baseband I/Q stream (one sample per clock at 614.4 MS/s) is split into
// N channels spaced fs/N = 1.2 MHz apart, and every channel is sampled every
// N/2 input samples (2.4 MHz): twice its spacing. Two streaming N-point FFTs
// (divided by N, so a tone of amplitude A centred on a channel comes out with
// amplitude A) see the same input. Lane 0 transforms the blocks starting at
// samples 0, N, 2N, ...; lane 1 starts N/2 samples later and transforms the
// blocks starting at N/2, 3N/2, .... Each lane's bit-reversed output is put in
// natural channel order by its own reorder buffer. A block that starts N/2
// samples late carries an extra factor exp(-j*pi*k) = (-1)^k on channel k;
// lane 1 removes it, so a tone's samples keep a continuous phase from one
// half-block hop to the next.
//
// Output: every clock, both lanes emit one channel: lane 0 channel t mod N,
// lane 1 channel (t - N/2) mod N, which is the same index with its top bit
// flipped. So in each clock the two lanes always carry two different channels,
// one from each half of the channel range. Channel k is centred at k*fs/N;
// channels N/2..N-1 are the negative frequencies. Lane 1 starts N/2 clocks
// after lane 0.
//
// The published design gives N = 512 and the 2.4 MHz channel rate. Its
// polyphase prototype ("tone filtering") filter is not published; here each
// block has a rectangular window, the simplest choice.
// Latency: 2N valid samples plus about log2(N)+2 clocks (lane 0).
module analysis_filter_bank
  import smurf_pkg::*;
#(
  parameter int N = 512
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  valid_i,
  input  cplx_t                 iq_i,
  output logic                  valid_o [2],
  output cplx_t                 ch_o [2],
  output logic [clog2i(N)-1:0]  chan_o [2]
);
  localparam int CW = clog2i(N);

  // Lane 1 sees its first input after N/2 samples have passed.
  logic [CW-1:0] nin;
  logic          late;
  always_ff @(posedge clk) begin
    if (rst) begin
      nin  <= '0;
      late <= 1'b0;
    end else if (valid_i && !late) begin
      nin <= nin + 1'b1;
      if (nin == CW'(N / 2 - 1)) late <= 1'b1;
    end
  end

  function automatic logic signed [SW-1:0] neg_sat(logic signed [SW-1:0] v);
    return (v == {1'b1, {SW-1{1'b0}}}) ? {1'b0, {SW-1{1'b1}}} : -v;
  endfunction

  for (genvar l = 0; l < 2; l++) begin : g_lane
    logic           fv, rv, lv;
    cplx_t          fd, rd;
    logic [CW-1:0]  fbin, ridx;

    assign lv = (l == 0) ? valid_i : (valid_i && late);

    fft_r2sdf #(.N(N), .SCALE(1'b1)) u_fft (
      .clk, .rst, .valid_i(lv), .d_i(iq_i), .valid_o(fv), .d_o(fd), .bin_o(fbin)
    );

    bitrev_reorder #(.N(N)) u_reorder (
      .clk, .rst, .valid_i(fv), .d_i(fd), .valid_o(rv), .d_o(rd), .idx_o(ridx)
    );

    assign valid_o[l] = rv;
    assign chan_o[l]  = ridx;
    assign ch_o[l]    = (l == 1 && ridx[0]) ? '{re: neg_sat(rd.re), im: neg_sat(rd.im)} : rd;

    // The reorder buffer assumes the FFT emits bins in bit-reversed order
    // starting with bin 0.
    logic [CW-1:0] exp_bin_rev, exp_bin;
    always_ff @(posedge clk) begin
      if (rst) exp_bin_rev <= '0;
      else if (fv) exp_bin_rev <= exp_bin_rev + 1'b1;
    end
    always_comb
      for (int b = 0; b < CW; b++) exp_bin[b] = exp_bin_rev[CW-1-b];
    a_bin_order: assert property (@(posedge clk) disable iff (rst) fv |-> fbin == exp_bin);
  end

  // Once both lanes run, they carry the two halves of the channel range.
  a_lane_pair: assert property (@(posedge clk) disable iff (rst)
                                valid_o[0] && valid_o[1] |-> chan_o[1] == (chan_o[0] ^ CW'(N / 2)));
endmodule
