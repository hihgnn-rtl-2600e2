// hihgnn_lane -- one lane: a SIMD Module and an NA-Buf doing neighbor aggregation (NA).
//
// Messages arrive from the crossbar into a task queue of QDEPTH entries (occ = fill level,
// used by the local scheduler against its threshold). Two kinds:
//  * EDGE (u -> v): carries v's index, theta_u = a_P1 . h'_u, theta_v = a_P2 . h'_v and h'_u.
//    The lane computes the Softmax numerator e = exp(LeakyReLU(theta_u + theta_v)) and
//    updates NA-Buf[v]: z += e * h'_u, den += e. This is the decomposed Softmax: the
//    numerator is used at once and the denominator is only accumulated, so nothing waits
//    for the sum over all neighbors. 5 cycles per edge.
//  * MERGE: a partial (z, den) of vertex v from another lane; added into NA-Buf[v].
// Commands from the global scheduler (cmd_valid/cmd_ready; accepted only when the queue is
// empty and the lane idle):
//  * DRAIN v -> lane d: read NA-Buf[v], send it as a MERGE message to lane d through the
//    crossbar (xo_*), and zero the entry.
//  * FINISH v: z_v^P = ELU(z / den), written back into NA-Buf[v] (den := 1) and returned on
//    res_valid/res_vec.
//  * READ v: return NA-Buf[v].z on res_valid/res_vec (used by the semantic fusion stage).
//  * CLEAR: empty the NA-Buf for a new semantic graph.
// The per-edge arithmetic, the Softmax decomposition and the lane's contents (SIMD Module,
// NA-Buf) are the design's. The lane's SIMD Module is HID/8 cores wide here (one edge per
// operation) where the design lists 128 cores per lane; the message formats, the commands
// and the private activation unit are this implementation's choices.
module hihgnn_lane
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID      = 64,
  parameter int unsigned NA_LINES = 14868,
  parameter int unsigned QDEPTH   = 8,
  parameter int unsigned LANES    = 4,
  parameter int unsigned LW       = (LANES > 1) ? $clog2(LANES) : 1,
  parameter int unsigned CW       = $clog2(QDEPTH + 1),
  parameter int unsigned MSG_W    = 1 + VIDX_W + 2 * DATA_W + HID * DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // from the crossbar
  input  logic              in_valid,
  input  logic [MSG_W-1:0]  in_data,
  output logic              in_ready,
  output logic [CW-1:0]     occ,
  // to the crossbar (merge traffic)
  output logic              xo_valid,
  output logic [LW-1:0]     xo_dest,
  output logic [MSG_W-1:0]  xo_data,
  input  logic              xo_ready,
  // commands
  input  logic              cmd_valid,
  input  logic [1:0]        cmd_op,      // 0 DRAIN, 1 FINISH, 2 READ, 3 CLEAR
  input  logic [VIDX_W-1:0] cmd_idx,
  input  logic [LW-1:0]     cmd_dest,
  output logic              cmd_ready,
  output logic              res_valid,
  output word_t             res_vec [HID],
  output logic              idle,
  output logic [31:0]       n_edges,
  output logic [31:0]       n_merges
);
  typedef struct packed {
    logic              kind;     // 0 EDGE, 1 MERGE
    logic [VIDX_W-1:0] idx;
    word_t             th_u;     // MERGE: den
    word_t             th_v;
    word_t [HID-1:0]   vec;
  } msg_t;

  localparam int unsigned CORES = (HID + 7) / 8;
  localparam int unsigned SW    = CORES * 8;
  localparam int unsigned NAW   = $clog2(NA_LINES);

  typedef enum logic [3:0] {
    L_IDLE, L_E_ACT, L_E_EXP, L_E_MAC, L_E_WR, L_M_ADD, L_M_WR,
    L_D_SEND, L_F_DIV, L_F_ELU, L_F_WR, L_R_OUT
  } lstate_t;

  lstate_t st;
  msg_t    q_head, cur;
  logic    q_empty, q_full, q_pop;
  logic [LW-1:0]     c_dest;
  word_t   e_r;

  // task queue
  sync_fifo #(.W(MSG_W), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .push (in_valid), .wdata(in_data),
    .pop  (q_pop),    .rdata(q_head),
    .full (q_full),   .empty(q_empty), .count(occ)
  );
  assign in_ready = !q_full;

  // NA-Buf
  logic              nb_clr, nb_rd, nb_wr;
  logic [NAW-1:0]    nb_ridx, nb_widx;
  word_t             nb_rz [HID];
  word_t             nb_rden, nb_wden;
  word_t             nb_wz [HID];

  na_buf #(.HID(HID), .LINES(NA_LINES)) u_nabuf (
    .clk, .rst_n, .clr(nb_clr),
    .rd_en(nb_rd), .rd_idx(nb_ridx), .rd_z(nb_rz), .rd_den(nb_rden),
    .wr_en(nb_wr), .wr_idx(nb_widx), .wr_z(nb_wz), .wr_den(nb_wden)
  );

  // SIMD Module
  logic     s_in_v, s_out_v;
  simd_op_t s_op;
  word_t    s_a [SW], s_b [SW], s_c [SW], s_out [SW];

  simd_module #(.WAYS(8), .CORES(CORES)) u_simd (
    .clk, .rst_n, .in_valid(s_in_v), .op(s_op),
    .a(s_a), .b(s_b), .c(s_c),
    .out_valid(s_out_v), .out(s_out), .sum_valid(), .out_sum()
  );

  // activation unit (element 0 carries the scalar path of an edge)
  logic    a_in_v, a_out_v;
  act_op_t a_op;
  word_t   a_x [HID], a_y [HID];

  activation_module #(.WIDTH(HID)) u_act (
    .clk, .rst_n, .in_valid(a_in_v), .op(a_op), .x(a_x), .out_valid(a_out_v), .y(a_y)
  );

  assign cmd_ready = (st == L_IDLE) && q_empty;
  assign idle      = (st == L_IDLE) && q_empty;
  assign q_pop     = (st == L_IDLE) && !q_empty;
  assign nb_ridx   = NAW'((st == L_IDLE && !q_empty) ? q_head.idx : cmd_idx);
  assign nb_widx   = NAW'(cur.idx);

  // datapath inputs per state
  always_comb begin
    msg_t m;
    m = '0;
    nb_clr = 1'b0; nb_rd = 1'b0; nb_wr = 1'b0; nb_wden = '0;
    s_in_v = 1'b0; s_op = SIMD_PASS;
    a_in_v = 1'b0; a_op = ACT_PASS;
    for (int k = 0; k < HID; k++) begin a_x[k] = '0; nb_wz[k] = '0; end
    for (int k = 0; k < SW; k++) begin s_a[k] = '0; s_b[k] = '0; s_c[k] = '0; end
    xo_valid = 1'b0;
    xo_dest  = c_dest;
    xo_data  = '0;
    unique case (st)
      L_IDLE: begin
        if (!q_empty) begin
          nb_rd = 1'b1;
          if (!q_head.kind) begin          // theta_u + theta_v, then LeakyReLU
            a_in_v = 1'b1; a_op = ACT_LRELU; a_x[0] = q_head.th_u + q_head.th_v;
          end
        end else if (cmd_valid) begin
          if (cmd_op == 2'd3) nb_clr = 1'b1;
          else                nb_rd  = 1'b1;
        end
      end
      L_E_ACT: begin a_in_v = 1'b1; a_op = ACT_EXP; a_x[0] = a_y[0]; end
      L_E_EXP: ;
      L_E_MAC: begin
        s_in_v = 1'b1; s_op = SIMD_MAC;
        for (int k = 0; k < HID; k++) begin
          s_a[k] = cur.vec[k]; s_b[k] = e_r; s_c[k] = nb_rz[k];
        end
      end
      L_E_WR: begin
        nb_wr = 1'b1; nb_wden = nb_rden + e_r;
        for (int k = 0; k < HID; k++) nb_wz[k] = s_out[k];
      end
      L_M_ADD: begin
        s_in_v = 1'b1; s_op = SIMD_ADD;
        for (int k = 0; k < HID; k++) begin s_a[k] = cur.vec[k]; s_b[k] = nb_rz[k]; end
      end
      L_M_WR: begin
        nb_wr = 1'b1; nb_wden = nb_rden + cur.th_u;
        for (int k = 0; k < HID; k++) nb_wz[k] = s_out[k];
      end
      L_D_SEND: begin
        m.kind = 1'b1; m.idx = cur.idx; m.th_u = nb_rden; m.th_v = '0;
        for (int k = 0; k < HID; k++) m.vec[k] = nb_rz[k];
        xo_valid = 1'b1; xo_data = m;
        nb_wr = xo_ready;                  // zero the entry once sent
      end
      L_F_DIV: begin
        s_in_v = 1'b1; s_op = SIMD_DIV;
        for (int k = 0; k < HID; k++) begin s_a[k] = nb_rz[k]; s_b[k] = nb_rden; end
      end
      L_F_ELU: begin
        a_in_v = s_out_v; a_op = ACT_ELU;
        for (int k = 0; k < HID; k++) a_x[k] = s_out[k];
      end
      L_F_WR: begin
        nb_wr = a_out_v; nb_wden = FX_ONE;
        for (int k = 0; k < HID; k++) nb_wz[k] = a_y[k];
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; res_valid <= 1'b0; n_edges <= '0; n_merges <= '0;
      c_dest <= '0;
    end else begin
      res_valid <= 1'b0;
      unique case (st)
        L_IDLE: begin
          if (!q_empty) begin
            st <= q_head.kind ? L_M_ADD : L_E_ACT;
          end else if (cmd_valid) begin
            c_dest <= cmd_dest;
            unique case (cmd_op)
              2'd0:    st <= L_D_SEND;
              2'd1:    st <= L_F_DIV;
              2'd2:    st <= L_R_OUT;
              default: st <= L_IDLE;
            endcase
          end
        end
        L_E_ACT: st <= L_E_EXP;
        L_E_EXP: st <= L_E_MAC;
        L_E_MAC: st <= L_E_WR;
        L_E_WR:  begin st <= L_IDLE; n_edges <= n_edges + 1; end
        L_M_ADD: st <= L_M_WR;
        L_M_WR:  begin st <= L_IDLE; n_merges <= n_merges + 1; end
        L_D_SEND: if (xo_ready) st <= L_IDLE;
        L_F_DIV: st <= L_F_ELU;
        L_F_ELU: st <= L_F_WR;
        L_F_WR: begin
          st <= L_IDLE; res_valid <= 1'b1;
          for (int k = 0; k < HID; k++) res_vec[k] <= a_y[k];
        end
        L_R_OUT: begin
          st <= L_IDLE; res_valid <= 1'b1;
          for (int k = 0; k < HID; k++) res_vec[k] <= nb_rz[k];
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  // operand registers: current message and exp result (the NA-Buf read data stays on
  // nb_rz/nb_rden until the next read, which only happens in L_IDLE)
  always_ff @(posedge clk) begin
    if (st == L_IDLE) begin
      if (!q_empty) cur <= q_head;
      else begin
        cur.idx <= cmd_idx;
        cur.kind <= 1'b1;
      end
    end
    if (st == L_E_EXP) e_r <= a_y[0];
  end

endmodule
