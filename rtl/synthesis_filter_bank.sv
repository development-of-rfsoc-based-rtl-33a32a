// synthesis_filter_bank: twice-oversampled tone synthesiser of one 500 MHz
// band, the counterpart of analysis_filter_bank.
//
// Two input lanes each carry complete frames of N channel values in natural
// channel order 0..N-1, one value per clock. Lane 1's frames start N/2 clocks
// after lane 0's, so every channel gets a new value every N/2 clocks (2.4 MHz).
// Each lane turns its frame into N time samples with an N-point inverse FFT,
// y[n] = sum_k X[k] exp(+j*2*pi*k*n/N), without the 1/N factor. The inverse
// transform reuses the forward FFT by swapping I and Q at its input and output
// (swap(FFT(swap(x))) = N*IFFT(x)); a reorder buffer puts the time samples in
// natural order. Lane 1's frames start half a block late, so its channel k is
// first multiplied by (-1)^k to keep the tone phase continuous. The two lanes'
// blocks overlap by half, so every output sample is covered by exactly two
// blocks. Their sum is halved: a channel value of amplitude A that stays the
// same becomes a tone of amplitude A. Sums beyond 16 bits saturate, so the
// tone amplitudes of a band must add up to below full scale.
//
// Output: one time sample per clock, 2N valid lane-0 inputs plus about
// log2(N)+3 clocks after the first. Until lane 1 delivers, lane 0 alone is
// output, halved.
//
// The published design gives the synthesis bank, N = 512 and the 2.4 MHz
// channel rate. The overlap-add with a rectangular window is this
// implementation's choice; the published prototype filter is not given.
module synthesis_filter_bank
  import smurf_pkg::*;
#(
  parameter int N = 512
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  valid_i [2],
  input  cplx_t ch_i [2],
  output logic  valid_o,
  output cplx_t iq_o
);
  localparam int CW = clog2i(N);

  function automatic logic signed [SW-1:0] neg_sat(logic signed [SW-1:0] v);
    return (v == {1'b1, {SW-1{1'b0}}}) ? {1'b0, {SW-1{1'b1}}} : -v;
  endfunction

  logic           rv [2];
  cplx_t          rd [2];
  logic [CW-1:0]  ridx [2];

  for (genvar l = 0; l < 2; l++) begin : g_lane
    logic           fv;
    cplx_t          sin_v, fin, fd;
    logic [CW-1:0]  k, fbin;

    // Channel index of the current input within its frame.
    always_ff @(posedge clk) begin
      if (rst) k <= '0;
      else if (valid_i[l]) k <= k + 1'b1;
    end

    assign sin_v = (l == 1 && k[0]) ? '{re: neg_sat(ch_i[l].re), im: neg_sat(ch_i[l].im)} : ch_i[l];
    assign fin   = '{re: sin_v.im, im: sin_v.re};

    fft_r2sdf #(.N(N), .SCALE(1'b0)) u_fft (
      .clk, .rst, .valid_i(valid_i[l]), .d_i(fin), .valid_o(fv), .d_o(fd), .bin_o(fbin)
    );

    bitrev_reorder #(.N(N)) u_reorder (
      .clk, .rst, .valid_i(fv), .d_i(fd), .valid_o(rv[l]), .d_o(rd[l]), .idx_o(ridx[l])
    );

  end

  // Once both lanes run, lane 1's time index trails lane 0's by N/2.
  a_lane_offset: assert property (@(posedge clk) disable iff (rst)
                                  rv[0] && rv[1] |-> ridx[1] == (ridx[0] ^ CW'(N / 2)));

  // Overlap-add of the two half-offset blocks (I/Q swapped back).
  logic signed [SW:0] sre, sim;
  always_comb begin
    sre = (SW+1)'(rd[0].im);
    sim = (SW+1)'(rd[0].re);
    if (rv[1]) begin
      sre = sre + (SW+1)'(rd[1].im);
      sim = sim + (SW+1)'(rd[1].re);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      valid_o <= 1'b0;
      iq_o    <= '0;
    end else begin
      valid_o <= rv[0];
      iq_o    <= '{re: sre[SW:1], im: sim[SW:1]};
    end
  end
endmodule
