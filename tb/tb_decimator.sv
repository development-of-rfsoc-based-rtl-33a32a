// tb_decimator: random I/Q on the 8 lanes; each output must be the rounded
// mean of the 8 lanes of the previous clock (one output per clock, latency 1).
module tb_decimator;
  import smurf_pkg::*;
  localparam int R = 8;

  logic clk = 1'b0, rst = 1'b1, valid_i = 1'b0, valid_o;
  cplx_t iq [R];
  cplx_t q;
  int checks = 0, failures = 0;

  decimator #(.R(R)) dut (.clk, .rst, .valid_i, .iq_i(iq), .valid_o, .iq_o(q));

  always #1 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sr, si, er, ei;
    for (int l = 0; l < R; l++) iq[l] = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    for (int t = 0; t < 500; t++) begin
      valid_i <= 1'b1;
      sr = 0; si = 0;
      for (int l = 0; l < R; l++) begin
        automatic int a = $urandom_range(65535) - 32768;
        automatic int b = (t < 10) ? 32767 : $urandom_range(65535) - 32768;
        iq[l].re <= 16'(a);
        iq[l].im <= 16'(b);
        sr += a; si += b;
      end
      @(posedge clk);
      #0.5;
      // Output registered on this edge.
      er = (sr + R / 2) >>> 3;
      ei = (si + R / 2) >>> 3;
      checks++;
      if (!valid_o || int'(q.re) != er || int'(q.im) != ei) begin
        failures++;
        if (failures < 5) $display("t=%0d got (%0d,%0d) exp (%0d,%0d) v=%0b", t, q.re, q.im, er, ei, valid_o);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
