// cordic_atan2: pipelined vectoring CORDIC returning the angle of (x, y).
//
// The vector is first folded into the right half plane (adding +/- pi/2),
// then ITER micro-rotations drive y to zero while the rotation angles
// accumulate. The angle is in turns: a full circle is 2^AW, so the output
// wraps naturally. One pipeline register per iteration plus one for the
// fold, so the latency is ITER+1 clocks; a new vector is accepted each clock
// and valid_i is carried alongside; only the valid bits are reset. Used by the baseband processor to turn
// the flux-ramp harmonic coefficients into a phase; the CORDIC itself is this
// implementation's choice, the published design only says the phase is
// demodulated.
module cordic_atan2 #(
  parameter int W    = 32,
  parameter int AW   = 16,
  parameter int ITER = 16,
  parameter int TW   = 16   // width of the side-band tag carried along
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 valid_i,
  input  logic [TW-1:0]        tag_i,
  input  logic signed [W-1:0]  x_i,
  input  logic signed [W-1:0]  y_i,
  output logic                 valid_o,
  output logic [TW-1:0]        tag_o,
  output logic signed [AW-1:0] angle_o
);
  typedef logic signed [AW+1:0] atab_t [ITER];

  // atan(2^-i) in units of 2^AW per turn, with 2 guard bits.
  function automatic atab_t gen_atan();
    atab_t r;
    for (int i = 0; i < ITER; i++)
      r[i] = (AW+2)'($rtoi($atan(1.0 / real'(64'd1 << i)) / (2.0 * 3.14159265358979323846)
                           * real'(64'd1 << (AW + 2)) + 0.5));
    return r;
  endfunction
  localparam atab_t ATAN = gen_atan();

  // One guard bit of headroom for the CORDIC gain (about 1.65).
  logic signed [W+1:0]  xs [ITER+1];
  logic signed [W+1:0]  ys [ITER+1];
  logic signed [AW+1:0] zs [ITER+1];
  logic                 vs [ITER+1];
  logic [TW-1:0]        ts [ITER+1];

  // Fold into the right half plane.
  always_ff @(posedge clk) begin
    if (rst) vs[0] <= 1'b0;
    else     vs[0] <= valid_i;
    ts[0] <= tag_i;
    if (x_i < 0) begin
      if (y_i >= 0) begin
        xs[0] <= (W+2)'(y_i);   ys[0] <= -(W+2)'(x_i);  zs[0] <= (AW+2)'(1) <<< AW;        // +quarter turn
      end else begin
        xs[0] <= -(W+2)'(y_i);  ys[0] <= (W+2)'(x_i);   zs[0] <= -((AW+2)'(1) <<< AW);     // -quarter turn
      end
    end else begin
      xs[0] <= (W+2)'(x_i);     ys[0] <= (W+2)'(y_i);   zs[0] <= '0;
    end
  end

  for (genvar i = 0; i < ITER; i++) begin : g_iter
    always_ff @(posedge clk) begin
      if (rst) vs[i+1] <= 1'b0;
      else     vs[i+1] <= vs[i];
      ts[i+1] <= ts[i];
      if (ys[i] >= 0) begin
        xs[i+1] <= xs[i] + (ys[i] >>> i);
        ys[i+1] <= ys[i] - (xs[i] >>> i);
        zs[i+1] <= zs[i] + ATAN[i];
      end else begin
        xs[i+1] <= xs[i] - (ys[i] >>> i);
        ys[i+1] <= ys[i] + (xs[i] >>> i);
        zs[i+1] <= zs[i] - ATAN[i];
      end
    end
  end

  assign valid_o = vs[ITER];
  assign tag_o   = ts[ITER];
  // Drop the two guard bits with rounding.
  logic signed [AW+1:0] zr;
  assign zr      = zs[ITER] + (AW+2)'(2);
  assign angle_o = zr[AW+1:2];
endmodule
