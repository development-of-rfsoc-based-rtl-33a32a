// tb_synthesis_filter_bank: drives frames of N channel values (a few tones of
// a few thousand counts plus small random values on all channels) on both
// lanes, lane 1 starting N/2 clocks after lane 0, and compares every
// time-domain output sample with a floating-point overlap-add: half the sum of
// the inverse DFT of the lane-0 frame covering the sample,
// sum_k X[k] exp(+j 2 pi k (n - s) / N) for a frame starting at s, and that of
// the lane-1 frame covering it, whose channel k is first multiplied by
// (-1)^k. Also checks the output count and the 2N-clock latency.
module tb_synthesis_filter_bank;
  import smurf_pkg::*;
  localparam int N  = 64;
  localparam int NB = 6;
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0, rst = 1'b1, valid_o;
  logic valid_i [2] = '{1'b0, 1'b0};
  cplx_t x [2];
  cplx_t y;
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  synthesis_filter_bank #(.N(N)) dut (.clk, .rst, .valid_i, .ch_i(x), .valid_o, .iq_o(y));

  always #1 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xr [2][NB*N], xi [2][NB*N];

  initial begin
    for (int l = 0; l < 2; l++)
      for (int n = 0; n < NB*N; n++) begin
        automatic int k = n % N;
        xr[l][n] = $urandom_range(40) - 20;
        xi[l][n] = $urandom_range(40) - 20;
        if (k == 1 || k == 10 || k == N - 7) begin
          xr[l][n] = $urandom_range(8000) - 4000;
          xi[l][n] = $urandom_range(8000) - 4000;
        end
      end
    x[0] = '0;
    x[1] = '0;
    repeat (4) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int t = 0; t < NB*N + N/2; t++) begin
      valid_i[0] <= (t < NB*N);
      valid_i[1] <= (t >= N/2);
      if (t < NB*N) x[0] <= '{re: 16'(xr[0][t]), im: 16'(xi[0][t])};
      if (t >= N/2) x[1] <= '{re: 16'(xr[1][t-N/2]), im: 16'(xi[1][t-N/2])};
      @(posedge clk);
    end
    valid_i[0] <= 1'b0;
    valid_i[1] <= 1'b0;
    repeat (20) @(posedge clk);
    checks++;
    if (nout < (NB - 2) * N) begin
      failures++;
      $display("got %0d outputs, expected at least %0d", nout, (NB - 2) * N);
    end
    checks++;
    if (first_out - first_in < 2 * N || first_out - first_in > 2 * N + clog2i(N) + 4) begin
      failures++;
      $display("latency %0d clocks", first_out - first_in);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cyc = 0, first_in = -1, first_out = -1, nout = 0;
  real maxerr = 0.0;
  always @(negedge clk) begin
    cyc <= cyc + 1;
    if (!rst && valid_i[0] && first_in < 0) first_in = cyc;
    if (!rst && valid_o) begin
      automatic int b = nout / N;
      automatic int t = nout % N;
      automatic real er = 0.0, ei = 0.0;
      if (first_out < 0) first_out = cyc;
      for (int k = 0; k < N; k++) begin
        automatic real a = 2.0 * PI * real'(k) * real'(t) / real'(N);
        er += real'(xr[0][b*N+k]) * $cos(a) - real'(xi[0][b*N+k]) * $sin(a);
        ei += real'(xr[0][b*N+k]) * $sin(a) + real'(xi[0][b*N+k]) * $cos(a);
      end
      if (nout >= N / 2) begin
        automatic int b1 = (nout - N / 2) / N;
        automatic int t1 = (nout - N / 2) % N;
        for (int k = 0; k < N; k++) begin
          automatic real a = 2.0 * PI * real'(k) * real'(t1) / real'(N);
          automatic real sg = (k % 2 == 1) ? -1.0 : 1.0;
          er += sg * (real'(xr[1][b1*N+k]) * $cos(a) - real'(xi[1][b1*N+k]) * $sin(a));
          ei += sg * (real'(xr[1][b1*N+k]) * $sin(a) + real'(xi[1][b1*N+k]) * $cos(a));
        end
      end
      er /= 2.0;
      ei /= 2.0;
      checks++;
      if (fabs(real'(y.re) - er) > maxerr) maxerr = fabs(real'(y.re) - er);
      if (fabs(real'(y.re) - er) > 24.0 || fabs(real'(y.im) - ei) > 24.0) begin
        failures++;
        if (failures < 8) $display("block %0d t %0d: got (%0d,%0d) exp (%f,%f)", b, t, y.re, y.im, er, ei);
      end
      nout++;
    end
  end
  final $display("max error %f", maxerr);
endmodule
