// tb_interpolator: random I/Q in, 10 samples out per clock. Output m of a
// clock must lie on the straight line from the previous input to the current
// one, at fraction m/10 (within 1 LSB), one clock after the input.
module tb_interpolator;
  import smurf_pkg::*;
  localparam int R = 10;

  logic clk = 1'b0, rst = 1'b1, valid_i = 1'b0, valid_o;
  cplx_t x;
  cplx_t y [R];
  int checks = 0, failures = 0;
  function automatic real fabs(real v); return (v < 0.0) ? -v : v; endfunction

  interpolator #(.R(R)) dut (.clk, .rst, .valid_i, .iq_i(x), .valid_o, .iq_o(y));

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int pr = 0, pi = 0, cr, ci;
    x = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int t = 0; t < 500; t++) begin
      cr = $urandom_range(40000) - 20000;
      ci = $urandom_range(40000) - 20000;
      valid_i <= 1'b1;
      x <= '{re: 16'(cr), im: 16'(ci)};
      @(posedge clk);
      #0.5;
      for (int m = 0; m < R; m++) begin
        automatic real er = real'(pr) + real'(cr - pr) * real'(m) / real'(R);
        automatic real ei = real'(pi) + real'(ci - pi) * real'(m) / real'(R);
        checks++;
        if (!valid_o || fabs(real'(y[m].re) - er) > 1.01 || fabs(real'(y[m].im) - ei) > 1.01) begin
          failures++;
          if (failures < 5) $display("t=%0d m=%0d got (%0d,%0d) exp (%f,%f)", t, m, y[m].re, y[m].im, er, ei);
        end
      end
      pr = cr; pi = ci;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
