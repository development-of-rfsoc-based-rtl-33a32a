// bitrev_reorder: ping-pong buffer that turns bit-reversed blocks of N samples
// into natural order.
//
// Each incoming valid sample is written to the filling bank at the bit-reversed
// address of its position in the block; at the same time the other bank, which
// holds the previous block, is read in natural order. Output therefore starts
// after the first full block and lags the input by exactly N valid samples
// (plus one clock of read register); idx_o is the natural index of the output
// sample. Memory: 2*N words.
module bitrev_reorder
  import smurf_pkg::*;
#(
  parameter int N = 512
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  valid_i,
  input  cplx_t                 d_i,
  output logic                  valid_o,
  output cplx_t                 d_o,
  output logic [clog2i(N)-1:0]  idx_o
);
  localparam int S = clog2i(N);

  cplx_t        mem [2*N];
  logic [S-1:0] cnt, rcnt;
  logic         bank, have_block;

  always_comb
    for (int b = 0; b < S; b++) rcnt[b] = cnt[S-1-b];

  always_ff @(posedge clk) begin
    if (valid_i) mem[{bank, rcnt}] <= d_i;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt        <= '0;
      bank       <= 1'b0;
      have_block <= 1'b0;
      valid_o    <= 1'b0;
      idx_o      <= '0;
      d_o        <= '0;
    end else begin
      valid_o <= valid_i && have_block;
      if (valid_i) begin
        d_o   <= mem[{~bank, cnt}];
        idx_o <= cnt;
        cnt   <= cnt + 1'b1;
        if (&cnt) begin
          bank       <= ~bank;
          have_block <= 1'b1;
        end
      end
    end
  end
endmodule
