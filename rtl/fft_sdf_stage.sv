// fft_sdf_stage: one radix-2 decimation-in-frequency single-path delay-feedback
// (SDF) stage of the streaming FFT used by both filter banks.
//
// The stage handles butterflies of span L = 2*D. For the first D samples of
// each L-sample block the input is stored in a D-deep delay line while the
// twiddled differences of the previous block leave the stage; for the last D
// samples the butterfly is formed: the sum leaves the stage at once and the
// difference, multiplied by exp(-j*2*pi*m/L), is stored. Everything advances
// only on valid_i, so gaps in the stream are allowed. The output is
// registered (one clock) and is valid from the first butterfly on. With SCALE
// set the stage divides by 2, so a full FFT then divides by N.
module fft_sdf_stage
  import smurf_pkg::*;
#(
  parameter int D     = 256,  // delay-line depth, half the butterfly span
  parameter bit SCALE = 1'b1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  valid_i,
  input  cplx_t d_i,
  output logic  valid_o,
  output cplx_t d_o
);
  localparam int L  = 2 * D;
  localparam int CW = (D > 1) ? clog2i(D) : 1;
  typedef logic signed [15:0] tw_t [D];

  function automatic tw_t gen_tw(bit is_sin);
    tw_t r;
    real a;
    for (int m = 0; m < D; m++) begin
      a = 2.0 * 3.14159265358979323846 * real'(m) / real'(L);
      r[m] = 16'($rtoi((is_sin ? $sin(a) : $cos(a)) * 32767.0 + (((is_sin ? $sin(a) : $cos(a)) >= 0.0) ? 0.5 : -0.5)));
    end
    return r;
  endfunction
  localparam tw_t TW_COS = gen_tw(1'b0);
  localparam tw_t TW_SIN = gen_tw(1'b1);

  cplx_t          dly [D];
  logic [CW-1:0]  ptr;     // position inside the half block
  logic           upper;   // second half of the L block
  logic           primed;

  // Butterfly, 17-bit to keep the carry.
  logic signed [16:0] sr, si, dr, di;
  cplx_t a;
  assign a  = dly[ptr];
  assign sr = 17'(a.re) + 17'(d_i.re);
  assign si = 17'(a.im) + 17'(d_i.im);
  assign dr = 17'(a.re) - 17'(d_i.re);
  assign di = 17'(a.im) - 17'(d_i.im);

  // Difference times exp(-j*theta) = (dr + j di)(c - j s).
  logic signed [33:0] pr, pi;
  logic signed [15:0] wc, ws;
  assign wc = TW_COS[ptr];
  assign ws = TW_SIN[ptr];
  assign pr = 34'(dr) * 34'(wc) + 34'(di) * 34'(ws);
  assign pi = 34'(di) * 34'(wc) - 34'(dr) * 34'(ws);

  function automatic logic signed [15:0] sat16(logic signed [33:0] v);
    if (v > 34'sd32767)       return 16'sh7fff;
    else if (v < -34'sd32768) return 16'sh8000;
    else                      return v[15:0];
  endfunction

  localparam int SH = SCALE ? 1 : 0;

  always_ff @(posedge clk) begin
    if (rst) begin
      ptr     <= '0;
      upper   <= 1'b0;
      primed  <= 1'b0;
      valid_o <= 1'b0;
      d_o     <= '0;
    end else begin
      valid_o <= 1'b0;
      if (valid_i) begin
        if (!upper) begin
          dly[ptr] <= d_i;
          d_o      <= a;                         // twiddled difference of the previous block
          valid_o  <= primed;
        end else begin
          d_o.re   <= sat16(34'(sr) >>> SH);
          d_o.im   <= sat16(34'(si) >>> SH);
          dly[ptr].re <= sat16((pr + 34'(1 <<< (14 + SH))) >>> (15 + SH));
          dly[ptr].im <= sat16((pi + 34'(1 <<< (14 + SH))) >>> (15 + SH));
          valid_o  <= 1'b1;
          primed   <= 1'b1;
        end
        if (D == 1 || ptr == CW'(D - 1)) begin
          ptr   <= '0;
          upper <= ~upper;
        end else begin
          ptr <= ptr + 1'b1;
        end
      end
    end
  end
endmodule
