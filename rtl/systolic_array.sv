// systolic_array -- one N x N weight-stationary systolic array of MAC processing elements.
//
// Computes y = W * x for an N x N weight tile W and an N-element input vector x, all in
// Q16.16. The tile is written whole in one cycle (w_load) and stays in the PEs until the
// next load. Input vectors may be issued every cycle (in_valid). Element x[i] enters PE row i
// i cycles late (input skew), moves one PE to the right per cycle, and PE (i,j) adds
// W[j][i]*x[i] to the partial sum arriving from PE (i-1,j) above it. Column j's sum leaves
// the bottom row N+1+j cycles after issue and is delayed N-1-j more cycles (output de-skew),
// so the whole vector y appears LAT = 2N cycles after in_valid, with out_valid.
// Each PE rounds its own product (fx_mul) before adding.
// The 8 x 8 MAC size is the design's; the weight-stationary dataflow, the one-cycle tile
// load and the rounding are this implementation's choices.
module systolic_array
  import hihgnn_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_load,
  input  word_t w_tile [N][N],   // w_tile[j][i]: output j, input i
  input  logic  in_valid,
  input  word_t x [N],
  output logic  out_valid,
  output word_t y [N]
);
  localparam int unsigned LAT = 2 * N;

  word_t w_r   [N][N];
  word_t xsk   [N][N];   // input skew chains, row i uses xsk[i][0..i]
  word_t a_r   [N][N];   // horizontally moving operands
  word_t ps_r  [N][N];   // vertically moving partial sums
  word_t dsk   [N][N];   // output de-skew chains
  logic [LAT-1:0] vpipe;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < N; j++)
        for (int i = 0; i < N; i++) w_r[j][i] <= '0;
    end else if (w_load) begin
      w_r <= w_tile;
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      xsk[i][0] <= x[i];
      for (int k = 1; k < N; k++) xsk[i][k] <= xsk[i][k-1];
    end
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        word_t ain, pin;
        ain = (j == 0) ? xsk[i][i] : a_r[i][j-1];
        pin = (i == 0) ? word_t'(0) : ps_r[i-1][j];
        a_r[i][j]  <= ain;
        ps_r[i][j] <= pin + fx_mul(w_r[j][i], ain);
      end
    end
    for (int j = 0; j < N; j++) begin
      dsk[j][0] <= ps_r[N-1][j];
      for (int k = 1; k < N; k++) dsk[j][k] <= dsk[j][k-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], in_valid};
  end

  assign out_valid = vpipe[LAT-1];
  // column j left the bottom row at N+j; it needs LAT-(N+j) = N-1-j more registers
  always_comb begin
    for (int j = 0; j < N; j++)
      y[j] = (j == N - 1) ? ps_r[N-1][j] : dsk[j][N-2-j];
  end

endmodule
