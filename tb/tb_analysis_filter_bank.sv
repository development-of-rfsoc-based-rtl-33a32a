// tb_analysis_filter_bank: drives blocks of N baseband samples (random noise
// plus tones on chosen channels) through the channelizer and compares every
// channel output of both lanes, in natural order, with a floating-point DFT
// divided by N: lane 0 over the blocks starting at 0, N, 2N, ..., lane 1 over
// the blocks starting at N/2, 3N/2, ..., there multiplied by (-1)^k for
// channel k. Also checks the channel index sequence of each lane, that the
// lanes carry opposite channel halves, that lane 1 starts N/2 clocks after
// lane 0 and that lane 0's first channel block appears 2N clocks (plus
// pipeline) after the first input.
module tb_analysis_filter_bank;
  import smurf_pkg::*;
  localparam int N  = 64;
  localparam int NB = 6;          // blocks driven
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1, valid_i = 1'b0;
  logic valid_o [2];
  cplx_t x;
  cplx_t y [2];
  logic [clog2i(N)-1:0] chan [2];
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  analysis_filter_bank #(.N(N)) dut (.clk, .rst, .valid_i, .iq_i(x), .valid_o, .ch_o(y), .chan_o(chan));

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real xr [NB*N], xi [NB*N];

  initial begin
    // Block b: noise, a tone on channel 3 (amplitude 8000), a tone on
    // channel N-5 (negative frequency, amplitude 4000, phase b).
    for (int n = 0; n < NB*N; n++) begin
      automatic int b = n / N;
      automatic real a1 = 2.0 * PI * 3.0 * real'(n) / real'(N);
      automatic real a2 = 2.0 * PI * real'(N - 5) * real'(n) / real'(N) + real'(b);
      xr[n] = $floor(8000.0 * $cos(a1) + 4000.0 * $cos(a2) + real'($urandom_range(2000)) - 1000.0);
      xi[n] = $floor(8000.0 * $sin(a1) + 4000.0 * $sin(a2) + real'($urandom_range(2000)) - 1000.0);
    end
    x = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int n = 0; n < NB*N; n++) begin
      valid_i <= 1'b1;
      x <= '{re: 16'($rtoi(xr[n])), im: 16'($rtoi(xi[n]))};
      @(posedge clk);
    end
    valid_i <= 1'b0;
    repeat (20) @(posedge clk);
    // The stream only advances on valid input: of NB blocks in, at least NB-2
    // have fully left (the last one is still in the FFT and the reorder buffer).
    checks++;
    if (nout[0] < (NB - 2) * N || nout[1] < (NB - 3) * N) begin
      failures++;
      $display("got %0d/%0d outputs, expected at least %0d/%0d", nout[0], nout[1], (NB - 2) * N, (NB - 3) * N);
    end
    checks++;
    if (first_out1 - first_out != N / 2) begin
      failures++;
      $display("lane 1 starts %0d clocks after lane 0", first_out1 - first_out);
    end
    checks++;
    if (n_pair == 0 || pair_bad != 0) begin
      failures++;
      $display("lane pairing: %0d pairs, %0d wrong", n_pair, pair_bad);
    end
    checks++;
    if (first_out - first_in < 2 * N || first_out - first_in > 2 * N + clog2i(N) + 4) begin
      failures++;
      $display("latency %0d clocks", first_out - first_in);
    end
    $display("latency %0d clocks for N=%0d", first_out - first_in, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1, first_out = -1, first_out1 = -1, n_pair = 0, pair_bad = 0;
  int nout [2] = '{0, 0};
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (!rst && valid_i && first_in < 0) first_in = cyc;
    if (!rst && valid_o[0] && valid_o[1]) begin
      n_pair++;
      if ((int'(chan[0]) ^ (N / 2)) != int'(chan[1])) pair_bad++;
    end
    for (int l = 0; l < 2; l++) begin
      if (!rst && valid_o[l]) begin
        automatic int b = nout[l] / N;
        automatic int k = nout[l] % N;
        automatic int s0 = b * N + l * (N / 2);
        automatic real er = 0.0, ei = 0.0;
        if (l == 0 && first_out < 0) first_out = cyc;
        if (l == 1 && first_out1 < 0) first_out1 = cyc;
        for (int n = 0; n < N; n++) begin
          automatic real a = -2.0 * PI * real'(k) * real'(n) / real'(N);
          er += xr[s0+n] * $cos(a) - xi[s0+n] * $sin(a);
          ei += xr[s0+n] * $sin(a) + xi[s0+n] * $cos(a);
        end
        er /= real'(N);
        ei /= real'(N);
        if (l == 1 && (k % 2) == 1) begin er = -er; ei = -ei; end
        checks++;
        if (int'(chan[l]) != k || fabs(real'(y[l].re) - er) > 12.0 || fabs(real'(y[l].im) - ei) > 12.0) begin
          failures++;
          if (failures < 8) $display("lane %0d block %0d chan %0d (idx %0d): got (%0d,%0d) exp (%f,%f)",
                                     l, b, k, chan[l], $signed(y[l].re), $signed(y[l].im), er, ei);
        end
        nout[l]++;
      end
    end
  end
endmodule
