// tb_hihgnn_top -- end-to-end test of the HiHGNN top on a small heterogeneous graph.
//
// Two vertex types (A: 6 targets, P: 5), three semantic graphs (A->A, P->A, A->A), random
// Q16.16 raw features and weights placed in an HBM model. The expected final embeddings are
// computed here with real arithmetic straight from the HAN equations (projection, per-edge
// attention Softmax, ELU, semantic attention q . tanh(W z + b) averaged over targets,
// Softmax over semantic graphs) and compared with what the accelerator writes back, within
// a fixed-point tolerance. It also checks that each mechanism happened at least once:
// projection, FP-Buf hit, FP-Buf eviction and re-fetch, coefficient reuse, systolic weight
// reuse, overflow to a non-home lane, merging of partial results, waiting for a lane, and
// the end-of-run result writes. The small FP-Buf forces evictions; threshold 2 forces
// overflow for high-degree vertices.
// Stimulus, reference model and tolerances are this testbench's own; the behaviour it expects
// is the one described in the header of the RTL it tests.
module tb_hihgnn_top;
  import hihgnn_pkg::*;

  localparam int unsigned HID      = 8;
  localparam int unsigned ARRAYS   = 2;
  localparam int unsigned LANES    = 4;
  localparam int unsigned MAXG     = 16;
  localparam int unsigned LINE     = 128;
  localparam int unsigned OUT_BLKS = HID / 8;
  localparam int unsigned SLICE    = (ARRAYS / OUT_BLKS) * 8;
  localparam int unsigned NG       = 3;
  localparam int unsigned NA       = 6;
  localparam int unsigned NP       = 5;
  localparam int unsigned DEPTH    = 4096;
  localparam int unsigned MAXE     = 64;
  localparam int          RL [2]   = '{2, 1};
  localparam int unsigned WATCHDOG = 400000;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0, done;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic [4:0]        n_graphs;
  logic [31:0]       g_edge_base [MAXG], g_n_edges [MAXG], g_att_base [MAXG], g_lsf_base [MAXG];
  logic [VIDX_W:0]   g_n_tgt [MAXG];
  logic [31:0]       t_raw_base [4], t_w_base [4], t_proj_base [4];
  logic [7:0]        t_raw_lines [4];
  logic [VIDX_W:0]   n_idx, n_out;
  logic [31:0]       out_base;
  logic [7:0]        threshold;
  logic              hreq_valid, hreq_ready, hreq_we, hresp_valid;
  logic [31:0]       hreq_addr;
  word_t             hreq_wdata [LINE], hresp_data [LINE];
  logic [31:0]       n_proj, n_fp_hit, n_fp_refetch, n_theta, n_theta_reuse, n_wload_skip;
  logic [31:0]       n_vertices, n_drains, n_stall, n_overflow;
  logic [31:0]       lane_edges [LANES], lane_merges [LANES];
  int                n_out_writes = 0;

  hihgnn_top #(
    .HID(HID), .ARRAYS(ARRAYS), .LANES(LANES), .MAXG(MAXG), .QDEPTH(4),
    .FP_LINES(4), .NA_LINES(16), .SF_LINES(16)
  ) dut (
    .clk, .rst_n, .start, .done,
    .n_graphs, .g_edge_base, .g_n_edges, .g_n_tgt, .g_att_base, .g_lsf_base,
    .t_raw_base, .t_raw_lines, .t_w_base, .t_proj_base, .n_idx, .n_out, .out_base, .threshold,
    .hbm_req_valid(hreq_valid), .hbm_req_ready(hreq_ready), .hbm_req_we(hreq_we),
    .hbm_req_addr(hreq_addr), .hbm_req_wdata(hreq_wdata),
    .hbm_resp_valid(hresp_valid), .hbm_resp_data(hresp_data),
    .n_proj, .n_fp_hit, .n_fp_refetch, .n_theta, .n_theta_reuse, .n_wload_skip,
    .n_vertices, .n_drains, .n_stall, .n_overflow, .lane_edges, .lane_merges
  );

  hbm_model #(.LINE(LINE), .DEPTH(DEPTH), .LAT(6)) u_hbm (
    .clk, .req_valid(hreq_valid), .req_ready(hreq_ready), .req_we(hreq_we),
    .req_addr(hreq_addr), .req_wdata(hreq_wdata),
    .resp_valid(hresp_valid), .resp_data(hresp_data)
  );

  always @(posedge clk) if (hreq_valid && hreq_we && hreq_addr >= out_base) n_out_writes++;

  // ---------------- model data (real values of the Q16.16 words placed in memory) -------------
  real x     [2][8][2*SLICE];     // raw features
  real wt    [2][HID][2*SLICE];   // projection weights per type
  real a1    [NG][HID], a2 [NG][HID];
  real wl    [NG][HID][HID], bl [NG][HID], ql [NG][HID];
  int  esrc  [NG][MAXE], edst [NG][MAXE], ne [NG];
  int  stype [NG];
  real hp    [2][8][HID];
  real href  [NA][HID];

  function automatic word_t q16(real r);
    return word_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real r16(word_t w);
    return real'(w) / 65536.0;
  endfunction
  function automatic real rnd(real lim);
    return (real'($urandom_range(0, 2000)) / 1000.0 - 1.0) * lim;
  endfunction

  task automatic put(int addr, int k, real r);
    u_hbm.mem[addr][k] = q16(r);
    // keep the model value identical to what the hardware sees
  endtask

  task automatic build();
    int p;
    p = 0;
    for (int a = 0; a < DEPTH; a++) for (int k = 0; k < LINE; k++) u_hbm.mem[a][k] = '0;
    // types: 0 = A (targets), 1 = P
    for (int t = 0; t < 2; t++) begin
      int nv, dim;
      nv  = (t == 0) ? NA : NP;
      dim = RL[t] * SLICE - 3;          // a raw dimension that does not fill the last slice
      t_raw_lines[t] = 8'(RL[t]);
      t_raw_base[t]  = p;
      for (int i = 0; i < nv; i++)
        for (int s = 0; s < RL[t]; s++)
          for (int k = 0; k < SLICE; k++) begin
            int d;
            d = s * SLICE + k;
            x[t][i][d] = (d < dim) ? r16(q16(rnd(1.0))) : 0.0;
            u_hbm.mem[p + i * RL[t] + s][k] = q16(x[t][i][d]);
          end
      p += nv * RL[t];
      t_w_base[t] = p;
      for (int j = 0; j < HID; j++)
        for (int d = 0; d < RL[t] * SLICE; d++) wt[t][j][d] = r16(q16(rnd(0.25)));
      for (int s = 0; s < RL[t]; s++)
        for (int a = 0; a < ARRAYS; a++) begin
          int gi, b;
          gi = a / OUT_BLKS; b = a % OUT_BLKS;
          for (int j = 0; j < 8; j++)
            for (int i = 0; i < 8; i++)
              u_hbm.mem[p + s * ARRAYS + a][j * 8 + i] = q16(wt[t][b * 8 + j][s * SLICE + gi * 8 + i]);
        end
      p += RL[t] * ARRAYS;
      t_proj_base[t] = p;
      p += 16;
    end
    t_raw_lines[2] = 8'd1; t_raw_lines[3] = 8'd1;
    t_raw_base[2] = 0; t_raw_base[3] = 0; t_w_base[2] = 0; t_w_base[3] = 0;
    t_proj_base[2] = 0; t_proj_base[3] = 0;
    // semantic graphs
    stype[0] = 0; stype[1] = 1; stype[2] = 0;
    for (int g = 0; g < MAXG; g++) begin
      g_edge_base[g] = 0; g_n_edges[g] = 0; g_n_tgt[g] = 0; g_att_base[g] = 0; g_lsf_base[g] = 0;
    end
    for (int g = 0; g < NG; g++) begin
      int nsrc;
      nsrc = (stype[g] == 0) ? NA : NP;
      ne[g] = 0;
      for (int v = 0; v < NA; v++) begin
        int deg;
        deg = (v == 1) ? 10 : (v == 4 && g == 1) ? 7 : 1 + int'($urandom_range(0, 2));
        for (int k = 0; k < deg; k++) begin
          esrc[g][ne[g]] = int'($urandom_range(0, nsrc - 1));
          edst[g][ne[g]] = v;
          ne[g]++;
        end
      end
      g_edge_base[g] = p; g_n_edges[g] = ne[g]; g_n_tgt[g] = NA;
      for (int k = 0; k < ne[g]; k++)
        u_hbm.mem[p + k / 128][k % 128] = word_t'({2'(stype[g]), 14'(esrc[g][k]), 2'd0, 14'(edst[g][k])});
      p += (ne[g] + 127) / 128;
      g_att_base[g] = p;
      for (int j = 0; j < HID; j++) begin a1[g][j] = r16(q16(rnd(0.5))); a2[g][j] = r16(q16(rnd(0.5))); end
      for (int kk = 0; kk < HID / 8; kk++)
        for (int i = 0; i < 8; i++) begin
          u_hbm.mem[p + kk][i]     = q16(a1[g][kk * 8 + i]);
          u_hbm.mem[p + kk][8 + i] = q16(a2[g][kk * 8 + i]);
        end
      p += HID / 8;
      g_lsf_base[g] = p;
      for (int j = 0; j < HID; j++) begin
        bl[g][j] = r16(q16(rnd(0.2))); ql[g][j] = r16(q16(rnd(0.5)));
        for (int i = 0; i < HID; i++) wl[g][j][i] = r16(q16(rnd(0.3)));
      end
      for (int a = 0; a < OUT_BLKS * OUT_BLKS; a++) begin
        int gi, b;
        gi = a / OUT_BLKS; b = a % OUT_BLKS;
        for (int j = 0; j < 8; j++)
          for (int i = 0; i < 8; i++) u_hbm.mem[p + a][j * 8 + i] = q16(wl[g][b * 8 + j][gi * 8 + i]);
      end
      for (int j = 0; j < HID; j++) begin
        u_hbm.mem[p + OUT_BLKS * OUT_BLKS][j]     = q16(bl[g][j]);
        u_hbm.mem[p + OUT_BLKS * OUT_BLKS + 1][j] = q16(ql[g][j]);
      end
      p += OUT_BLKS * OUT_BLKS + 2;
    end
    out_base = p;
    n_graphs = 5'(NG); n_idx = 15'(8); n_out = 15'(NA); threshold = 8'd2;
    if (p + NA >= DEPTH) $fatal(1, "memory image too large");
  endtask

  // HAN reference with real arithmetic
  task automatic reference();
    real sf [NA][HID];
    real beta;
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < ((t == 0) ? NA : NP); i++)
        for (int j = 0; j < HID; j++) begin
          hp[t][i][j] = 0.0;
          for (int d = 0; d < RL[t] * SLICE; d++) hp[t][i][j] += wt[t][j][d] * x[t][i][d];
        end
    beta = 0.0;
    for (int v = 0; v < NA; v++) for (int j = 0; j < HID; j++) sf[v][j] = 0.0;
    for (int g = 0; g < NG; g++) begin
      real zp [NA][HID];
      real wsum, ep;
      wsum = 0.0;
      for (int v = 0; v < NA; v++) begin
        real den, thv, tt, wv;
        real z [HID];
        den = 0.0;
        thv = 0.0;
        for (int j = 0; j < HID; j++) begin z[j] = 0.0; thv += a2[g][j] * hp[0][v][j]; end
        for (int k = 0; k < ne[g]; k++) if (edst[g][k] == v) begin
          real thu, s, e;
          thu = 0.0;
          for (int j = 0; j < HID; j++) thu += a1[g][j] * hp[stype[g]][esrc[g][k]][j];
          s = thu + thv;
          s = (s < 0.0) ? 0.2 * s : s;
          e = $exp(s);
          den += e;
          for (int j = 0; j < HID; j++) z[j] += e * hp[stype[g]][esrc[g][k]][j];
        end
        for (int j = 0; j < HID; j++) begin
          zp[v][j] = z[j] / den;
          if (zp[v][j] < 0.0) zp[v][j] = $exp(zp[v][j]) - 1.0;
        end
        wv = 0.0;
        for (int j = 0; j < HID; j++) begin
          tt = bl[g][j];
          for (int i = 0; i < HID; i++) tt += wl[g][j][i] * zp[v][i];
          wv += ql[g][j] * $tanh(tt);
        end
        wsum += wv;
      end
      ep = $exp(wsum / NA);
      beta += ep;
      for (int v = 0; v < NA; v++) for (int j = 0; j < HID; j++) sf[v][j] += ep * zp[v][j];
    end
    for (int v = 0; v < NA; v++) for (int j = 0; j < HID; j++) href[v][j] = sf[v][j] / beta;
  endtask

  task automatic check_event(string name, logic [31:0] n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL: mechanism '%s' never happened", name); end
    else $display("  %-22s %0d", name, n);
  endtask

  int cycles = 0;
  always @(posedge clk) cycles++;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0, maxerr_i;
    real maxerr;
    build();
    reference();
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);
    start = 1'b1;
    @(posedge clk);
    start = 1'b0;
    t0 = cycles;
    wait (done);
    repeat (20) @(posedge clk);
    $display("run took %0d cycles", cycles - t0);
    maxerr = 0.0;
    for (int v = 0; v < NA; v++)
      for (int j = 0; j < HID; j++) begin
        real got, err;
        got = r16(u_hbm.mem[out_base + v][j]);
        err = (got > href[v][j]) ? got - href[v][j] : href[v][j] - got;
        checks++;
        if (err > 0.02 + 0.02 * ((href[v][j] < 0) ? -href[v][j] : href[v][j])) begin
          failures++;
          if (failures < 10) $display("FAIL h[%0d][%0d] = %f, expected %f", v, j, got, href[v][j]);
        end
        if (err > maxerr) maxerr = err;
      end
    $display("largest deviation from the real-valued reference: %f", maxerr);
    // every edge was aggregated exactly once, every target completed in every graph
    checks++;
    begin
      int s;
      s = 0;
      for (int l = 0; l < LANES; l++) s += int'(lane_edges[l]);
      if (s != ne[0] + ne[1] + ne[2]) begin
        failures++; $display("FAIL: lanes aggregated %0d edges, expected %0d", s, ne[0] + ne[1] + ne[2]);
      end
    end
    checks++;
    if (n_vertices != NG * NA) begin failures++; $display("FAIL: %0d vertices completed", n_vertices); end
    checks++;
    if (n_proj != NA + NP) begin failures++; $display("FAIL: %0d projections, expected %0d (each vertex once)", n_proj, NA + NP); end
    $display("mechanisms:");
    check_event("projection", n_proj);
    check_event("fp_buf_hit", n_fp_hit);
    check_event("fp_buf_refetch", n_fp_refetch);
    check_event("theta_computed", n_theta);
    check_event("theta_reused", n_theta_reuse);
    check_event("weight_reload_skipped", n_wload_skip);
    check_event("overflow_edge", n_overflow);
    check_event("partial_merge", n_drains);
    check_event("lane_wait", n_stall);
    check_event("result_write", n_out_writes);
    for (int l = 0; l < LANES; l++) check_event($sformatf("lane%0d_edges", l), lane_edges[l]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
