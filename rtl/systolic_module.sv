// systolic_module -- the Systolic Module: ARRAYS systolic arrays of N x N MACs for all
// matrix-vector multiplications (feature projection, attention coefficients, semantic
// attention).
//
// Two execution modes, selected per operation with `coop`:
//  * fine-grained (coop = 0): every array works alone; array a takes in_vec[a*N +: N] and
//    returns its product in out_vec[a*N +: N].
//  * large matrix (coop = 1): the arrays form one (OUT_BLKS*N) x (GROUPS*N) matrix.
//    Array a = g*OUT_BLKS + b holds tile (row block b, column block g). All arrays of
//    column block g see input chunk in_vec[g*N +: N]; the partial products of the GROUPS
//    arrays of each row block are summed, giving out_vec[b*N +: N]. Longer inputs are
//    handled by the caller, which streams them in slices of GROUPS*N and accumulates.
// Tiles are written one per cycle (w_load, w_idx). Outputs appear 2N+1 cycles after
// in_valid in both modes (array latency plus one register for the sum / output).
// The 96 arrays of 8 x 8 MACs and the two modes are the design's; the mapping of arrays to
// tiles and the tile-at-a-time load port are this implementation's choices.
module systolic_module
  import hihgnn_pkg::*;
#(
  parameter int unsigned N        = 8,
  parameter int unsigned ARRAYS   = 96,
  parameter int unsigned OUT_BLKS = 8,              // row blocks in large-matrix mode
  parameter int unsigned AIDX_W   = $clog2(ARRAYS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              coop,
  input  logic              w_load,
  input  logic [AIDX_W-1:0] w_idx,
  input  word_t             w_tile [N][N],
  input  logic              in_valid,
  input  word_t             in_vec [ARRAYS*N],
  output logic              out_valid,
  output word_t             out_vec [ARRAYS*N]
);
  localparam int unsigned GROUPS = ARRAYS / OUT_BLKS;
  localparam int unsigned LAT    = 2 * N;

  word_t  ax [ARRAYS][N];
  word_t  ay [ARRAYS][N];
  logic   av [ARRAYS];
  logic   coop_d [LAT];

  for (genvar a = 0; a < ARRAYS; a++) begin : g_arr
    always_comb begin
      for (int i = 0; i < N; i++)
        ax[a][i] = coop ? in_vec[(a / OUT_BLKS) * N + i] : in_vec[a * N + i];
    end
    systolic_array #(.N(N)) u_arr (
      .clk, .rst_n,
      .w_load   (w_load && (w_idx == AIDX_W'(a))),
      .w_tile,
      .in_valid,
      .x        (ax[a]),
      .out_valid(av[a]),
      .y        (ay[a])
    );
  end

  // mode travels with the data
  always_ff @(posedge clk) begin
    coop_d[0] <= coop;
    for (int k = 1; k < LAT; k++) coop_d[k] <= coop_d[k-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= av[0];
  end

  always_ff @(posedge clk) begin
    if (coop_d[LAT-1]) begin
      for (int k = 0; k < ARRAYS * N; k++) out_vec[k] <= '0;
      for (int b = 0; b < OUT_BLKS; b++) begin
        for (int i = 0; i < N; i++) begin
          word_t s;
          s = '0;
          for (int g = 0; g < GROUPS; g++) s = s + ay[g * OUT_BLKS + b][i];
          out_vec[b * N + i] <= s;
        end
      end
    end else begin
      for (int a = 0; a < ARRAYS; a++)
        for (int i = 0; i < N; i++) out_vec[a * N + i] <= ay[a][i];
    end
  end

endmodule
