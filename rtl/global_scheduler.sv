// global_scheduler -- Global Scheduler with the front-end datapath it drives: runs the
// stage-fusion programming model of one HGNN layer (HAN-style attention) over all semantic
// graphs.
//
// Contents: the RAB, the FP-Buf, the Att-Buf, the Systolic Module, an Activation Module and a
// SIMD Module for the local semantic fusion (LSF). Lanes, crossbar, local scheduler, GSF unit
// and memory controller sit beside it in hihgnn_top.
//
// For each semantic graph P (in the order the host put them, normally the similarity-aware
// order) the scheduler walks P's edge list, which is sorted by target vertex (CSC order):
//  1. FP, fused with NA: for edge (u, v) it checks the RAB of v and u. A vertex whose
//     coefficient bit is clear needs its projected feature h': from the FP-Buf (hit), from
//     HBM (projected before, evicted since), or by projection h' = W^{type} x on the Systolic
//     Module in large-matrix mode, streaming the raw feature in slices of 96 words. New h' go
//     to the FP-Buf and to HBM and set the RAB's projected bit. The coefficients
//     theta(u,*) = a_P1 . h'_u and theta(*,v) = a_P2 . h'_v are computed on the Systolic
//     Module right away, kept in the Att-Buf, and their RAB bits set, so each is computed
//     once per semantic graph however many edges use it.
//  2. The edge task (v, theta_u, theta_v, h'_u) is handed to the local scheduler, which picks
//     a lane (home lane = P mod LANES, or an under-threshold lane as overflow), and crosses
//     the crossbar. Lanes aggregate with the decomposed Softmax.
//  3. When the target changes, vertex v has all neighbors: once the lanes are idle, every lane
//     holding a partial of v sends it to the home lane (DRAIN/MERGE), the home lane
//     normalises z_v^P = ELU(z/den) (FINISH), and LSF computes
//     w_v = q . tanh(W^P z_v^P + b) (Systolic + Activation + SIMD), accumulated into w_P.
//  4. After the last edge, GSF: the GSF unit turns w_P into e_P = exp(w_P / |V^P|), and every
//     target's z_v^P is read from the home lane and added, times e_P, into the SF-Buf.
// After all graphs the final stage divides every target's sum by beta_G (GSF unit) and the
// results are written to HBM.
//
// Memory layout (line = 128 words; all bases are inputs): edge list of graph P: one 32-bit
// word per edge {src vid, dst vid}, 128 per line. Raw feature of (t, i): t_raw_lines[t]
// lines of 96 words from t_raw_base[t] + i*t_raw_lines[t]. Projection weights of type t:
// one 8x8 tile per line (word j*8+i = W[j][i]), tile a of slice s at t_w_base[t] + s*96 + a,
// array a = g*8 + b holding rows 8b..8b+7 and columns 96s+8g.. of W. Attention vectors of
// P: HID/8 tiles at g_att_base[P] + k (row 0 = a_P1, row 1 = a_P2 for elements 8k..8k+7).
// LSF of P: W^P tiles (64 lines, array a from line a) at g_lsf_base[P], then b, then q.
// Projected features: t_proj_base[t] + i.
//
// Ordering, fusion, reuse rules, Softmax decomposition and stage split are the design's.
// Processing one edge at a time in the front end, the barrier before each vertex
// completion, reloading systolic weights when the operation changes (skipped when the same
// tiles are already loaded), the memory layout and all encodings are this implementation's
// choices.
module global_scheduler
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID      = 64,
  parameter int unsigned N        = 8,
  parameter int unsigned ARRAYS   = 96,
  parameter int unsigned LINE     = 128,
  parameter int unsigned LANES    = 4,
  parameter int unsigned MAXG     = 16,
  parameter int unsigned FP_LINES = 9994,
  parameter int unsigned AW       = 32,
  parameter int unsigned LW       = (LANES > 1) ? $clog2(LANES) : 1,
  parameter int unsigned GW       = $clog2(MAXG + 1),
  parameter int unsigned MSG_W    = 1 + VIDX_W + 2 * DATA_W + HID * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  output logic              done,
  // configuration, stable while running
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
  input  logic [VIDX_W:0]   n_idx,       // vertex indices in use (0..n_idx-1 of every type)
  input  logic [VIDX_W:0]   n_out,       // target vertices of the final stage
  // memory requester
  output logic              mreq_valid,
  input  logic              mreq_ready,
  output logic              mreq_we,
  output logic [AW-1:0]     mreq_addr,
  output word_t             mreq_wdata [LINE],
  input  logic              mresp_valid,
  input  word_t             mresp_data [LINE],
  // local scheduler / crossbar dispatch port
  output logic              task_valid,
  output logic [LW-1:0]     task_home,
  input  logic              task_lane_ok,
  input  logic [LW-1:0]     task_lane,
  input  logic [LANES-1:0]  agg_mask,
  output logic              vertex_done,
  output logic              xi_valid,
  output logic [LW-1:0]     xi_dest,
  output logic [MSG_W-1:0]  xi_data,
  input  logic              xi_ready,
  // lane commands
  output logic              lane_cmd_valid [LANES],
  output logic [1:0]        lane_cmd_op,
  output logic [VIDX_W-1:0] lane_cmd_idx,
  output logic [LW-1:0]     lane_cmd_dest,
  input  logic              lane_cmd_ready [LANES],
  input  logic              lane_res_valid [LANES],
  input  word_t             lane_res_vec   [LANES][HID],
  input  logic              lane_idle      [LANES],
  // GSF unit commands
  output logic              gsf_cmd_valid,
  output logic [1:0]        gsf_cmd_op,
  output logic [VIDX_W-1:0] gsf_cmd_idx,
  output word_t             gsf_cmd_vec [HID],
  output word_t             gsf_cmd_wsum,
  output logic [VIDX_W:0]   gsf_cmd_nvert,
  input  logic              gsf_cmd_ready,
  input  logic              gsf_busy,
  // event counters
  output logic [31:0]       n_proj,        // raw features projected
  output logic [31:0]       n_fp_hit,      // h' found in the FP-Buf
  output logic [31:0]       n_fp_refetch,  // h' re-read from HBM (projected, evicted)
  output logic [31:0]       n_theta,       // coefficients computed
  output logic [31:0]       n_theta_reuse, // coefficient found already computed in the RAB
  output logic [31:0]       n_wload_skip,  // systolic weight reload skipped (tiles resident)
  output logic [31:0]       n_vertices,    // target vertices completed (LSF done)
  output logic [31:0]       n_drains,      // partial results moved between lanes
  output logic [31:0]       n_stall        // cycles an edge waited for a lane
);
  localparam int unsigned OUT_BLKS = HID / N;
  localparam int unsigned SLICE    = (ARRAYS / OUT_BLKS) * N;
  localparam int unsigned VW       = ARRAYS * N;
  localparam int unsigned AIW      = $clog2(ARRAYS);

  typedef struct packed {
    logic              kind;
    logic [VIDX_W-1:0] idx;
    word_t             th_u;
    word_t             th_v;
    word_t [HID-1:0]   vec;
  } msg_t;

  typedef enum logic [5:0] {
    S_IDLE, S_INIT, S_INIT_W, S_G_START, S_G_CLR, S_G_BQ, S_G_BQ2,
    S_E_LINE, S_E_DEC, S_RAB_RD, S_RAB_CHK, S_FEAT, S_FEAT_CHK, S_PROJ_START, S_PW_CHK,
    S_WLOAD, S_PX_FEED, S_PX_WAIT, S_PROJ_WB, S_AFTER_FEAT, S_TH, S_TH_FEED, S_TH_WAIT,
    S_TH_STORE,
    S_DISP_PREP, S_DISP_RD, S_DISP,
    S_VD_WAIT, S_VD_DRAIN, S_VD_WAIT2, S_VD_FIN, S_VD_RES, S_LSF_W, S_LSF_FEED, S_LSF_WAIT,
    S_LSF_TANH, S_LSF_MUL, S_LSF_SUM, S_LSF_DONE,
    S_G_END, S_G_RD, S_G_RES, S_G_ACC, S_FIN, S_FIN_W, S_DONE,
    S_MRD, S_MRD_W
  } state_t;

  localparam logic [1:0] K_FP = 2'd1, K_ATT = 2'd2, K_LSF = 2'd3;

  state_t st, ret_st, after_w;
  logic [GW-1:0]     g;
  logic [31:0]       e;
  logic              have_dst;
  vid_t              cur_dst, eu, w;
  logic              role_src;          // 1: preparing u (source), 0: preparing v (target)
  logic [2:0]        bits_r;
  word_t             feat [HID];
  word_t             acc  [HID];
  word_t             eline [LINE];
  word_t             mline [LINE];
  word_t             zvp  [HID];
  word_t             bvec [HID];
  word_t             qvec [HID];
  word_t             wsum;
  logic [7:0]        slice;
  logic [17:0]       wtag;
  logic              wtag_v;
  logic [AW-1:0]     ld_base, rd_addr;
  logic [7:0]        ld_total, ld_iss, ld_rcv, ld_stride;
  logic [17:0]       ld_tag;
  logic [LW-1:0]     lane_i, home;
  logic [LANES-1:0]  mask_r;
  logic [VIDX_W:0]   vi;
  logic              wb_pending;
  logic              fresh;         // tiles loaded, not yet used

  assign home = LW'(32'(g) % LANES);

  // ---------------- RAB ----------------
  logic        rab_rd, rab_wr, rab_clr, rab_clr_proj, rab_busy;
  vid_t        rab_vid;
  logic [2:0]  rab_rbits, rab_wbits;
  rab u_rab (
    .clk, .rst_n,
    .rd_en(rab_rd), .rd_vid(rab_vid), .rd_bits(rab_rbits),
    .wr_en(rab_wr), .wr_vid(w), .wr_bits(rab_wbits),
    .clr_start(rab_clr), .clr_proj(rab_clr_proj), .clr_count(n_idx), .busy(rab_busy)
  );

  // ---------------- FP-Buf ----------------
  logic  fp_inval, fp_rd, fp_wr, fp_hit;
  word_t fp_rdata [HID];
  word_t fp_wdata [HID];
  fp_buf #(.HID(HID), .LINES(FP_LINES)) u_fpbuf (
    .clk, .rst_n, .inval(fp_inval),
    .rd_en(fp_rd), .rd_vid(w), .rd_hit(fp_hit), .rd_data(fp_rdata),
    .wr_en(fp_wr), .wr_vid(w), .wr_data(fp_wdata)
  );

  // ---------------- Att-Buf ----------------
  logic  att_wr, att_rd;
  word_t th_src_r, th_dst_r;
  word_t att_rs, att_rdv;
  att_buf u_attbuf (
    .clk,
    .wr_en(att_wr), .wr_sel(role_src ? 2'b10 : 2'b01), .wr_idx(w.idx),
    .wr_src(th_src_r), .wr_dst(th_dst_r),
    .rs_en(att_rd), .rs_idx(eu.idx), .rs_theta(att_rs),
    .rd_en(att_rd), .rd_idx(cur_dst.idx), .rd_theta(att_rdv)
  );

  // ---------------- Systolic Module ----------------
  logic            sy_wload, sy_in_v, sy_out_v;
  logic [AIW-1:0]  sy_widx;
  word_t           sy_tile [N][N];
  word_t           sy_in  [VW];
  word_t           sy_out [VW];
  systolic_module #(.N(N), .ARRAYS(ARRAYS), .OUT_BLKS(OUT_BLKS)) u_syst (
    .clk, .rst_n, .coop(1'b1),
    .w_load(sy_wload), .w_idx(sy_widx), .w_tile(sy_tile),
    .in_valid(sy_in_v), .in_vec(sy_in), .out_valid(sy_out_v), .out_vec(sy_out)
  );

  always_comb
    for (int j = 0; j < N; j++)
      for (int i = 0; i < N; i++) sy_tile[j][i] = mresp_data[j * N + i];
  assign sy_wload = (st == S_WLOAD) && mresp_valid;
  assign sy_widx  = AIW'(32'(ld_rcv) * 32'(ld_stride));

  // ---------------- LSF activation + SIMD ----------------
  localparam int unsigned CORES = (HID + 7) / 8;
  localparam int unsigned SW    = CORES * 8;
  logic     ls_in_v, ls_out_v, ls_sum_v;
  simd_op_t ls_op;
  word_t    ls_a [SW], ls_b [SW], ls_c [SW], ls_out [SW];
  word_t    ls_sum;
  simd_module #(.WAYS(8), .CORES(CORES)) u_lsf_simd (
    .clk, .rst_n, .in_valid(ls_in_v), .op(ls_op), .a(ls_a), .b(ls_b), .c(ls_c),
    .out_valid(ls_out_v), .out(ls_out), .sum_valid(ls_sum_v), .out_sum(ls_sum)
  );
  logic    ac_in_v, ac_out_v;
  word_t   ac_x [HID], ac_y [HID];
  activation_module #(.WIDTH(HID)) u_act (
    .clk, .rst_n, .in_valid(ac_in_v), .op(ACT_TANH), .x(ac_x), .out_valid(ac_out_v), .y(ac_y)
  );

  // ---------------- combinational controls ----------------
  always_comb begin
    msg_t m;
    rab_rd = 1'b0; rab_wr = 1'b0; rab_clr = 1'b0; rab_clr_proj = 1'b0;
    rab_vid = w; rab_wbits = bits_r;
    fp_inval = 1'b0; fp_rd = 1'b0; fp_wr = 1'b0;
    for (int k = 0; k < HID; k++) fp_wdata[k] = feat[k];
    att_wr = 1'b0; att_rd = 1'b0;
    sy_in_v = 1'b0;
    for (int k = 0; k < VW; k++) sy_in[k] = '0;
    mreq_valid = 1'b0; mreq_we = 1'b0; mreq_addr = rd_addr;
    for (int k = 0; k < LINE; k++) mreq_wdata[k] = (k < HID) ? feat[k % HID] : word_t'(0);
    task_valid = 1'b0; task_home = home; vertex_done = 1'b0;
    xi_valid = 1'b0; xi_dest = task_lane;
    m.kind = 1'b0; m.idx = cur_dst.idx; m.th_u = att_rs; m.th_v = att_rdv;
    for (int k = 0; k < HID; k++) m.vec[k] = feat[k];
    xi_data = m;
    for (int l = 0; l < LANES; l++) lane_cmd_valid[l] = 1'b0;
    lane_cmd_op = 2'd0; lane_cmd_idx = cur_dst.idx; lane_cmd_dest = home;
    gsf_cmd_valid = 1'b0; gsf_cmd_op = 2'd0; gsf_cmd_idx = vi[VIDX_W-1:0];
    gsf_cmd_wsum = wsum; gsf_cmd_nvert = g_n_tgt[g];
    for (int k = 0; k < HID; k++) gsf_cmd_vec[k] = lane_res_vec[home][k];
    ls_in_v = 1'b0; ls_op = SIMD_PASS;
    for (int k = 0; k < SW; k++) begin ls_a[k] = '0; ls_b[k] = '0; ls_c[k] = '0; end
    ac_in_v = 1'b0;
    for (int k = 0; k < HID; k++) ac_x[k] = ls_out[k];

    unique case (st)
      S_INIT: begin
        rab_clr = 1'b1; rab_clr_proj = 1'b1; fp_inval = 1'b1;
        gsf_cmd_valid = 1'b1; gsf_cmd_op = 2'd0;
      end
      S_G_START: if (32'(g) < 32'(n_graphs)) begin
        rab_clr = 1'b1;
        for (int l = 0; l < LANES; l++) lane_cmd_valid[l] = 1'b1;
        lane_cmd_op = 2'd3;
      end
      S_MRD:   mreq_valid = 1'b1;
      S_RAB_RD: rab_rd = 1'b1;
      S_FEAT:   fp_rd = 1'b1;
      S_WLOAD: begin
        mreq_valid = (ld_iss < ld_total);
        mreq_addr  = ld_base + AW'(ld_iss);
      end
      S_PX_FEED: begin
        sy_in_v = 1'b1;
        for (int k = 0; k < SLICE; k++) sy_in[k] = mline[k];
      end
      S_PROJ_WB: begin
        mreq_valid = wb_pending; mreq_we = 1'b1;
        mreq_addr  = t_proj_base[w.vtype] + AW'(w.idx);
      end
      S_TH_FEED: begin
        sy_in_v = 1'b1;
        for (int k = 0; k < HID; k++) sy_in[k] = feat[k];
      end
      S_DISP_PREP: att_rd = 1'b1;
      S_DISP: begin
        task_valid = 1'b1;
        xi_valid   = task_lane_ok;
      end
      S_VD_DRAIN: begin
        if (mask_r[lane_i] && lane_i != home) begin
          lane_cmd_valid[lane_i] = 1'b1; lane_cmd_op = 2'd0;
        end
      end
      S_VD_FIN: begin lane_cmd_valid[home] = 1'b1; lane_cmd_op = 2'd1; end
      S_LSF_FEED: begin
        sy_in_v = 1'b1;
        for (int k = 0; k < HID; k++) sy_in[k] = zvp[k];
      end
      S_LSF_WAIT: begin
        ls_in_v = sy_out_v; ls_op = SIMD_ADD;
        for (int k = 0; k < HID; k++) begin ls_a[k] = sy_out[k]; ls_b[k] = bvec[k]; end
      end
      S_LSF_TANH: ac_in_v = ls_out_v;
      S_LSF_MUL: begin
        ls_in_v = ac_out_v; ls_op = SIMD_MUL;
        for (int k = 0; k < HID; k++) begin ls_a[k] = ac_y[k]; ls_b[k] = qvec[k]; end
      end
      S_LSF_DONE: vertex_done = 1'b1;
      S_G_END: begin gsf_cmd_valid = 1'b1; gsf_cmd_op = 2'd1; end
      S_G_RD: if (vi < g_n_tgt[g]) begin
        lane_cmd_valid[home] = 1'b1; lane_cmd_op = 2'd2; lane_cmd_idx = vi[VIDX_W-1:0];
      end
      S_G_ACC: begin gsf_cmd_valid = 1'b1; gsf_cmd_op = 2'd2; end
      S_FIN: if (vi < n_out) begin gsf_cmd_valid = 1'b1; gsf_cmd_op = 2'd3; end
      default: ;
    endcase
    // FP-Buf fill and RAB update happen in the cycle a feature or coefficient becomes known
    if (st == S_PROJ_WB && !wb_pending) begin fp_wr = 1'b1; rab_wr = 1'b1; end
    if (st == S_MRD_W && mresp_valid && ret_st == S_AFTER_FEAT) begin
      fp_wr = 1'b1;
      for (int k = 0; k < HID; k++) fp_wdata[k] = mresp_data[k];
    end
    if (st == S_TH_STORE) begin att_wr = 1'b1; rab_wr = 1'b1; end
  end

  // ---------------- sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ret_st <= S_IDLE; after_w <= S_IDLE; done <= 1'b0;
      g <= '0; e <= '0; have_dst <= 1'b0; role_src <= 1'b0; bits_r <= '0;
      wtag <= '0; wtag_v <= 1'b0; wsum <= '0; slice <= '0;
      ld_total <= '0; ld_iss <= '0; ld_rcv <= '0; ld_stride <= '0; ld_base <= '0; ld_tag <= '0;
      lane_i <= '0; mask_r <= '0; vi <= '0; rd_addr <= '0; wb_pending <= 1'b0; fresh <= 1'b0;
      cur_dst <= '0; eu <= '0; w <= '0;
      n_proj <= '0; n_fp_hit <= '0; n_fp_refetch <= '0; n_theta <= '0; n_theta_reuse <= '0;
      n_wload_skip <= '0; n_vertices <= '0; n_drains <= '0; n_stall <= '0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin done <= 1'b0; st <= S_INIT; end
        S_INIT: if (gsf_cmd_ready) st <= S_INIT_W;
        S_INIT_W: if (!rab_busy) begin g <= '0; wtag_v <= 1'b0; st <= S_G_START; end

        // ---- per semantic graph ----
        S_G_START: begin
          if (32'(g) >= 32'(n_graphs)) begin
            vi <= '0; st <= S_FIN;
          end else begin
            e <= '0; have_dst <= 1'b0; wsum <= '0;
            st <= S_G_CLR;
          end
        end
        S_G_CLR: if (!rab_busy) begin         // fetch b and q of this graph
          rd_addr <= g_lsf_base[g] + AW'(OUT_BLKS * OUT_BLKS);
          ret_st  <= S_G_BQ; st <= S_MRD;
        end
        S_G_BQ: begin
          for (int k = 0; k < HID; k++) bvec[k] <= mline[k];
          rd_addr <= g_lsf_base[g] + AW'(OUT_BLKS * OUT_BLKS + 1);
          ret_st  <= S_G_BQ2; st <= S_MRD;
        end
        S_G_BQ2: begin
          for (int k = 0; k < HID; k++) qvec[k] <= mline[k];
          st <= S_E_LINE;
        end

        // ---- edge walk ----
        S_E_LINE: begin
          if (e == g_n_edges[g]) begin
            if (have_dst) begin ret_st <= S_G_END; st <= S_VD_WAIT; end
            else begin vi <= '0; st <= S_G_END; end
          end else if (e[6:0] == 7'd0) begin
            rd_addr <= g_edge_base[g] + AW'(e >> 7);
            ret_st  <= S_E_DEC; st <= S_MRD;
          end else st <= S_E_DEC;
        end
        S_E_DEC: begin
          vid_t su, sv;
          if (e[6:0] == 7'd0) eline <= mline;
          su = (e[6:0] == 7'd0) ? vid_t'(mline[0][31:16]) : vid_t'(eline[e[6:0]][31:16]);
          sv = (e[6:0] == 7'd0) ? vid_t'(mline[0][15:0])  : vid_t'(eline[e[6:0]][15:0]);
          if (have_dst && sv != cur_dst) begin
            ret_st <= S_E_LINE; st <= S_VD_WAIT;      // previous target is complete
          end else begin
            have_dst <= 1'b1; cur_dst <= sv; eu <= su;
            w <= sv; role_src <= 1'b0; st <= S_RAB_RD;
          end
        end

        // ---- prepare vertex w (target role, then source role) ----
        S_RAB_RD: st <= S_RAB_CHK;
        S_RAB_CHK: begin
          bits_r <= rab_rbits;
          if (!role_src && rab_rbits[0]) begin
            n_theta_reuse <= n_theta_reuse + 1;
            w <= eu; role_src <= 1'b1; st <= S_RAB_RD;
          end else st <= S_FEAT;
        end
        S_FEAT: st <= S_FEAT_CHK;
        S_FEAT_CHK: begin
          if (fp_hit) begin
            for (int k = 0; k < HID; k++) feat[k] <= fp_rdata[k];
            n_fp_hit <= n_fp_hit + 1;
            st <= S_AFTER_FEAT;
          end else if (bits_r[2]) begin
            n_fp_refetch <= n_fp_refetch + 1;
            rd_addr <= t_proj_base[w.vtype] + AW'(w.idx);
            ret_st  <= S_AFTER_FEAT; st <= S_MRD;
          end else st <= S_PROJ_START;
        end
        S_PROJ_START: begin
          slice <= '0;
          for (int k = 0; k < HID; k++) acc[k] <= '0;
          st <= S_PW_CHK;
        end
        S_PW_CHK: begin
          logic [17:0] t;
          t = {K_FP, 6'd0, w.vtype, slice};
          if (wtag_v && wtag == t) begin
            if (!fresh) n_wload_skip <= n_wload_skip + 1;
            fresh <= 1'b0;
            rd_addr <= t_raw_base[w.vtype] + AW'(32'(w.idx) * 32'(t_raw_lines[w.vtype]))
                       + AW'(slice);
            ret_st <= S_PX_FEED; st <= S_MRD;
          end else begin
            ld_base  <= t_w_base[w.vtype] + AW'(32'(slice) * ARRAYS);
            ld_total <= 8'(ARRAYS); ld_stride <= 8'd1; ld_tag <= t;
            ld_iss <= '0; ld_rcv <= '0; wtag_v <= 1'b0;
            after_w <= S_PW_CHK; st <= S_WLOAD;
          end
        end
        S_WLOAD: begin
          if (mreq_valid && mreq_ready) ld_iss <= ld_iss + 1'b1;
          if (mresp_valid) begin
            ld_rcv <= ld_rcv + 1'b1;
            if (ld_rcv + 1'b1 == ld_total) begin
              wtag <= ld_tag; wtag_v <= 1'b1; fresh <= 1'b1; st <= after_w;
            end
          end
        end
        S_PX_FEED: st <= S_PX_WAIT;
        S_PX_WAIT: if (sy_out_v) begin
          for (int k = 0; k < HID; k++) acc[k] <= acc[k] + sy_out[k];
          if (slice + 1'b1 == t_raw_lines[w.vtype]) begin
            for (int k = 0; k < HID; k++) feat[k] <= acc[k] + sy_out[k];
            bits_r <= {1'b1, bits_r[1:0]};
            wb_pending <= 1'b1;
            n_proj <= n_proj + 1;
            st <= S_PROJ_WB;
          end else begin
            slice <= slice + 1'b1; st <= S_PW_CHK;
          end
        end
        S_PROJ_WB: begin
          if (!wb_pending) st <= S_AFTER_FEAT;      // FP-Buf and RAB written this cycle
          else if (mreq_ready) wb_pending <= 1'b0;
        end
        S_AFTER_FEAT: begin
          if (!role_src || !bits_r[1]) st <= S_TH;
          else begin n_theta_reuse <= n_theta_reuse + 1; st <= S_DISP_PREP; end
        end
        S_TH: begin
          logic [17:0] t;
          t = {K_ATT, 11'd0, 5'(g)};
          if (wtag_v && wtag == t) begin
            if (!fresh) n_wload_skip <= n_wload_skip + 1;
            fresh <= 1'b0; st <= S_TH_FEED;
          end else begin
            ld_base <= g_att_base[g]; ld_total <= 8'(OUT_BLKS); ld_stride <= 8'(OUT_BLKS);
            ld_tag <= t; ld_iss <= '0; ld_rcv <= '0; wtag_v <= 1'b0;
            after_w <= S_TH; st <= S_WLOAD;
          end
        end
        S_TH_FEED: st <= S_TH_WAIT;
        S_TH_WAIT: if (sy_out_v) begin
          th_src_r <= sy_out[0];
          th_dst_r <= sy_out[1];
          n_theta  <= n_theta + 1;
          bits_r   <= role_src ? {bits_r[2], 1'b1, bits_r[0]} : {bits_r[2], bits_r[1], 1'b1};
          st <= S_TH_STORE;
        end
        S_TH_STORE: begin
          if (!role_src) begin w <= eu; role_src <= 1'b1; st <= S_RAB_RD; end
          else st <= S_DISP_PREP;
        end
        S_DISP_PREP: st <= S_DISP_RD;
        S_DISP_RD: st <= S_DISP;                 // Att-Buf data valid, h'_u is in feat
        S_DISP: begin
          if (!task_lane_ok) n_stall <= n_stall + 1;
          if (xi_valid && xi_ready) begin e <= e + 1; st <= S_E_LINE; end
        end

        // ---- vertex completion: merge partials, normalise, LSF ----
        S_VD_WAIT: begin
          logic all_idle;
          all_idle = 1'b1;
          for (int l = 0; l < LANES; l++) all_idle &= lane_idle[l];
          if (all_idle) begin mask_r <= agg_mask; lane_i <= '0; st <= S_VD_DRAIN; end
        end
        S_VD_DRAIN: begin
          if (!(mask_r[lane_i] && lane_i != home) || lane_cmd_ready[lane_i]) begin
            if (mask_r[lane_i] && lane_i != home) n_drains <= n_drains + 1;
            if (32'(lane_i) == LANES - 1) st <= S_VD_WAIT2;
            else lane_i <= lane_i + 1'b1;
          end
        end
        S_VD_WAIT2: begin
          logic all_idle;
          all_idle = 1'b1;
          for (int l = 0; l < LANES; l++) all_idle &= lane_idle[l];
          if (all_idle) st <= S_VD_FIN;
        end
        S_VD_FIN: if (lane_cmd_ready[home]) st <= S_VD_RES;
        S_VD_RES: if (lane_res_valid[home]) begin
          for (int k = 0; k < HID; k++) zvp[k] <= lane_res_vec[home][k];
          st <= S_LSF_W;
        end
        S_LSF_W: begin
          logic [17:0] t;
          t = {K_LSF, 11'd0, 5'(g)};
          if (wtag_v && wtag == t) begin
            if (!fresh) n_wload_skip <= n_wload_skip + 1;
            fresh <= 1'b0; st <= S_LSF_FEED;
          end else begin
            ld_base <= g_lsf_base[g]; ld_total <= 8'(OUT_BLKS * OUT_BLKS); ld_stride <= 8'd1;
            ld_tag <= t; ld_iss <= '0; ld_rcv <= '0; wtag_v <= 1'b0;
            after_w <= S_LSF_W; st <= S_WLOAD;
          end
        end
        S_LSF_FEED: st <= S_LSF_WAIT;
        S_LSF_WAIT: if (sy_out_v) st <= S_LSF_TANH;   // add issued in this cycle
        S_LSF_TANH: st <= S_LSF_MUL;
        S_LSF_MUL: st <= S_LSF_SUM;
        S_LSF_SUM: if (ls_sum_v) begin
          wsum <= wsum + ls_sum;
          n_vertices <= n_vertices + 1;
          st <= S_LSF_DONE;
        end
        S_LSF_DONE: begin have_dst <= 1'b0; st <= ret_st; if (ret_st == S_G_END) vi <= '0; end

        // ---- GSF of graph g ----
        S_G_END: if (gsf_cmd_ready) begin vi <= '0; st <= S_G_RD; end
        S_G_RD: begin
          if (vi >= g_n_tgt[g]) begin g <= g + 1'b1; st <= S_G_START; end
          else if (lane_cmd_ready[home]) st <= S_G_RES;
        end
        S_G_RES: if (lane_res_valid[home]) st <= S_G_ACC;
        S_G_ACC: if (gsf_cmd_ready) begin vi <= vi + 1'b1; st <= S_G_RD; end

        // ---- final stage ----
        S_FIN: begin
          if (vi >= n_out) st <= S_FIN_W;
          else if (gsf_cmd_ready) vi <= vi + 1'b1;
        end
        S_FIN_W: if (!gsf_busy && gsf_cmd_ready) begin done <= 1'b1; st <= S_DONE; end
        S_DONE: if (start) begin done <= 1'b0; st <= S_INIT; end

        // ---- single-line memory read ----
        S_MRD: if (mreq_ready) st <= S_MRD_W;
        S_MRD_W: if (mresp_valid) begin
          mline <= mresp_data;
          if (ret_st == S_AFTER_FEAT)
            for (int k = 0; k < HID; k++) feat[k] <= mresp_data[k];
          st <= ret_st;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
