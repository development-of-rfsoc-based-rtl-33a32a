// nco_sincos: phase-to-amplitude converter shared by the band NCOs and the
// per-channel tone DDS.
//
// The top LUT_BITS of the input phase address a full-circle cosine/sine table
// of 2^LUT_BITS entries in Q1.15 (amplitude 32767); the remaining phase bits
// are truncated. The table is computed at elaboration from cos/sin, so no data
// file is needed. One clock of latency: cos_o/sin_o belong to the phase
// presented on the previous clock. Table size and truncation are this
// implementation's choice; the published design only names the NCOs.
module nco_sincos #(
  parameter int PW       = 32,
  parameter int LUT_BITS = 10
) (
  input  logic                 clk,
  input  logic [PW-1:0]        phase_i,
  output logic signed [15:0]   cos_o,
  output logic signed [15:0]   sin_o
);
  localparam int DEPTH = 1 << LUT_BITS;
  typedef logic signed [15:0] tab_t [DEPTH];

  function automatic tab_t gen_tab(bit is_sin);
    tab_t r;
    real a;
    for (int i = 0; i < DEPTH; i++) begin
      a = 2.0 * 3.14159265358979323846 * real'(i) / real'(DEPTH);
      r[i] = 16'($rtoi((is_sin ? $sin(a) : $cos(a)) * 32767.0 + (((is_sin ? $sin(a) : $cos(a)) >= 0.0) ? 0.5 : -0.5)));
    end
    return r;
  endfunction

  localparam tab_t COS_TAB = gen_tab(1'b0);
  localparam tab_t SIN_TAB = gen_tab(1'b1);

  logic [LUT_BITS-1:0] addr;
  assign addr = phase_i[PW-1 -: LUT_BITS];

  always_ff @(posedge clk) begin
    cos_o <= COS_TAB[addr];
    sin_o <= SIN_TAB[addr];
  end
endmodule
