// hihgnn_top -- the four-lane HiHGNN accelerator for heterogeneous graph neural networks.
//
// One global scheduler (with RAB, FP-Buf, Att-Buf, Systolic Module and the LSF datapath)
// feeds LANES lanes (SIMD Module + NA-Buf each) through a local scheduler and a crossbar
// switch; a GSF unit (the outside SIMD Module with the SF-Buf) fuses the semantic graphs and
// produces the final embeddings; a memory access controller shares the HBM port between the
// global scheduler (requester 0) and the GSF unit's result writes (requester 1).
// Interface: start/done, run configuration (semantic graph table, per-type feature and
// weight bases, see global_scheduler), the lane threshold, out_base (final embedding of
// target v goes to line out_base + v), an HBM line port (128 x 32-bit words per request,
// responses in order) and event counters that show which mechanisms were exercised.
// The block structure follows the design's multi-lane figure; the parameter defaults are
// the design's numbers where it gives them (4 lanes, 96 arrays of 8x8, 64 hidden units,
// buffer capacities) and this implementation's choices otherwise.
module hihgnn_top
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID      = 64,
  parameter int unsigned ARRAYS   = 96,
  parameter int unsigned LANES    = 4,
  parameter int unsigned MAXG     = 16,
  parameter int unsigned QDEPTH   = 8,
  parameter int unsigned FP_LINES = 9994,
  parameter int unsigned NA_LINES = 14868,
  parameter int unsigned SF_LINES = 491,
  parameter int unsigned LINE     = 128,
  parameter int unsigned AW       = 32,
  parameter int unsigned GW       = $clog2(MAXG + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  input  logic [GW-1:0]     n_graphs,
  input  logic [AW-1:0]     g_edge_base [MAXG],
  input  logic [31:0]       g_n_edges   [MAXG],
  input  logic [VIDX_W:0]   g_n_tgt     [MAXG],
  input  logic [AW-1:0]     g_att_base  [MAXG],
  input  logic [AW-1:0]     g_lsf_base  [MAXG],
  input  logic [AW-1:0]     t_raw_base  [4],
  input  logic [7:0]        t_raw_lines [4],
  input  logic [AW-1:0]     t_w_base    [4],
  input  logic [AW-1:0]     t_proj_base [4],
  input  logic [VIDX_W:0]   n_idx,
  input  logic [VIDX_W:0]   n_out,
  input  logic [AW-1:0]     out_base,
  input  logic [7:0]        threshold,
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output logic              hbm_req_we,
  output logic [AW-1:0]     hbm_req_addr,
  output word_t             hbm_req_wdata [LINE],
  input  logic              hbm_resp_valid,
  input  word_t             hbm_resp_data [LINE],
  output logic [31:0]       n_proj,
  output logic [31:0]       n_fp_hit,
  output logic [31:0]       n_fp_refetch,
  output logic [31:0]       n_theta,
  output logic [31:0]       n_theta_reuse,
  output logic [31:0]       n_wload_skip,
  output logic [31:0]       n_vertices,
  output logic [31:0]       n_drains,
  output logic [31:0]       n_stall,
  output logic [31:0]       n_overflow,
  output logic [31:0]       lane_edges  [LANES],
  output logic [31:0]       lane_merges [LANES]
);
  localparam int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1;
  localparam int unsigned MSG_W = 1 + VIDX_W + 2 * DATA_W + HID * DATA_W;

  // ---------------- memory access controller ----------------
  logic          mr_valid [2], mr_ready [2], mr_we [2], mresp_valid [2];
  logic [AW-1:0] mr_addr [2];
  word_t         mr_wdata [2][LINE];
  word_t         mresp_data [LINE];

  mem_access_ctrl #(.NREQ(2), .LINE(LINE), .AW(AW)) u_mac (
    .clk, .rst_n,
    .req_valid(mr_valid), .req_ready(mr_ready), .req_we(mr_we), .req_addr(mr_addr),
    .req_wdata(mr_wdata), .resp_valid(mresp_valid), .resp_data(mresp_data),
    .hbm_req_valid, .hbm_req_ready, .hbm_req_we, .hbm_req_addr, .hbm_req_wdata,
    .hbm_resp_valid, .hbm_resp_data
  );

  // ---------------- crossbar: inputs 0..LANES-1 = lanes, LANES = dispatch ----------------
  logic             xi_valid [LANES+1], xi_ready [LANES+1];
  logic [LW-1:0]    xi_dest  [LANES+1];
  logic [MSG_W-1:0] xi_data  [LANES+1];
  logic             xo_valid [LANES], xo_ready [LANES];
  logic [MSG_W-1:0] xo_data  [LANES];

  crossbar_switch #(.NI(LANES + 1), .NO(LANES), .W(MSG_W)) u_xbar (
    .clk, .rst_n,
    .in_valid(xi_valid), .in_dest(xi_dest), .in_data(xi_data), .in_ready(xi_ready),
    .out_valid(xo_valid), .out_data(xo_data), .out_ready(xo_ready)
  );

  // ---------------- local scheduler ----------------
  logic             task_valid, task_lane_ok, task_is_ow, vertex_done;
  logic [LW-1:0]    task_home, task_lane;
  logic             all_idle;
  logic [LANES-1:0] agg_mask;

  local_scheduler #(.LANES(LANES), .CW(8)) u_lsched (
    .clk, .rst_n, .threshold, .all_idle,
    .task_valid, .task_home, .task_lane_ok, .task_lane, .task_is_ow,
    .task_fire(xi_valid[LANES] && xi_ready[LANES]),
    .vertex_done, .agg_mask, .n_overflow
  );

  // ---------------- lanes ----------------
  logic              lane_cmd_valid [LANES], lane_cmd_ready [LANES];
  logic [1:0]        lane_cmd_op;
  logic [VIDX_W-1:0] lane_cmd_idx;
  logic [LW-1:0]     lane_cmd_dest;
  logic              lane_res_valid [LANES], lane_idle [LANES];
  word_t             lane_res_vec [LANES][HID];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    hihgnn_lane #(.HID(HID), .NA_LINES(NA_LINES), .QDEPTH(QDEPTH), .LANES(LANES)) u_lane (
      .clk, .rst_n,
      .in_valid(xo_valid[l]), .in_data(xo_data[l]), .in_ready(xo_ready[l]), .occ(),
      .xo_valid(xi_valid[l]), .xo_dest(xi_dest[l]), .xo_data(xi_data[l]), .xo_ready(xi_ready[l]),
      .cmd_valid(lane_cmd_valid[l]), .cmd_op(lane_cmd_op), .cmd_idx(lane_cmd_idx),
      .cmd_dest(lane_cmd_dest), .cmd_ready(lane_cmd_ready[l]),
      .res_valid(lane_res_valid[l]), .res_vec(lane_res_vec[l]), .idle(lane_idle[l]),
      .n_edges(lane_edges[l]), .n_merges(lane_merges[l])
    );
  end

  always_comb begin
    all_idle = 1'b1;
    for (int l = 0; l < LANES; l++) all_idle &= lane_idle[l];
  end

  // ---------------- GSF unit ----------------
  logic              gsf_cmd_valid, gsf_cmd_ready, gsf_busy, fin_valid;
  logic [1:0]        gsf_cmd_op;
  logic [VIDX_W-1:0] gsf_cmd_idx, fin_idx;
  word_t             gsf_cmd_vec [HID], fin_vec [HID];
  word_t             gsf_cmd_wsum;
  logic [VIDX_W:0]   gsf_cmd_nvert;

  gsf_unit #(.HID(HID), .SF_LINES(SF_LINES)) u_gsf (
    .clk, .rst_n,
    .cmd_valid(gsf_cmd_valid), .cmd_op(gsf_cmd_op), .cmd_idx(gsf_cmd_idx), .cmd_vec(gsf_cmd_vec),
    .cmd_wsum(gsf_cmd_wsum), .cmd_nvert(gsf_cmd_nvert), .cmd_ready(gsf_cmd_ready),
    .fin_valid, .fin_idx, .fin_vec, .fin_ready(mr_ready[1]),
    .beta(), .e_p()
  );
  assign gsf_busy = fin_valid || !gsf_cmd_ready;

  assign mr_valid[1] = fin_valid;
  assign mr_we[1]    = 1'b1;
  assign mr_addr[1]  = out_base + AW'(fin_idx);
  always_comb for (int k = 0; k < LINE; k++) mr_wdata[1][k] = (k < HID) ? fin_vec[k % HID] : word_t'(0);

  // ---------------- global scheduler ----------------
  global_scheduler #(
    .HID(HID), .ARRAYS(ARRAYS), .LINE(LINE), .LANES(LANES), .MAXG(MAXG),
    .FP_LINES(FP_LINES), .AW(AW)
  ) u_gsched (
    .clk, .rst_n, .start, .done,
    .n_graphs, .g_edge_base, .g_n_edges, .g_n_tgt, .g_att_base, .g_lsf_base,
    .t_raw_base, .t_raw_lines, .t_w_base, .t_proj_base, .n_idx, .n_out,
    .mreq_valid(mr_valid[0]), .mreq_ready(mr_ready[0]), .mreq_we(mr_we[0]),
    .mreq_addr(mr_addr[0]), .mreq_wdata(mr_wdata[0]),
    .mresp_valid(mresp_valid[0]), .mresp_data(mresp_data),
    .task_valid, .task_home, .task_lane_ok, .task_lane, .agg_mask, .vertex_done,
    .xi_valid(xi_valid[LANES]), .xi_dest(xi_dest[LANES]), .xi_data(xi_data[LANES]),
    .xi_ready(xi_ready[LANES]),
    .lane_cmd_valid, .lane_cmd_op, .lane_cmd_idx, .lane_cmd_dest, .lane_cmd_ready,
    .lane_res_valid, .lane_res_vec, .lane_idle,
    .gsf_cmd_valid, .gsf_cmd_op, .gsf_cmd_idx, .gsf_cmd_vec, .gsf_cmd_wsum, .gsf_cmd_nvert,
    .gsf_cmd_ready, .gsf_busy,
    .n_proj, .n_fp_hit, .n_fp_refetch, .n_theta, .n_theta_reuse, .n_wload_skip,
    .n_vertices, .n_drains, .n_stall
  );
endmodule
