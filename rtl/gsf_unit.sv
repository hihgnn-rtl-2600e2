// gsf_unit -- the SIMD Module outside the lanes with the SF-Buf: global semantic fusion (GSF)
// and the final stage.
//
// Commands (cmd_valid/cmd_ready, one at a time):
//  * RESET: beta_G := 0 and the SF-Buf emptied (start of a run).
//  * GRAPH (wsum, nvert): semantic importance of a finished semantic graph,
//    w_P = wsum / |V^P|, then e_P = exp(w_P) (the graph's Softmax numerator), and
//    beta_G += e_P (the Softmax denominator over semantic graphs). 4 cycles.
//  * ACC (idx, vec = z_v^P): SF-Buf[v] += e_P * z_v^P. 2 cycles.
//  * FINAL (idx): h_v = SF-Buf[v] / beta_G, offered on fin_valid/fin_idx/fin_vec until fin_ready.
// Splitting the semantic-level Softmax into numerators used at once and a denominator applied
// in one final division (EW-DIV) is the design's. The command set, the use of an exp unit
// here (the design shows only SIMD units in GSF) and the latencies are this
// implementation's choices.
module gsf_unit
  import hihgnn_pkg::*;
#(
  parameter int unsigned HID      = 64,
  parameter int unsigned SF_LINES = 491,
  parameter int unsigned SAW      = $clog2(SF_LINES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  input  logic [1:0]        cmd_op,    // 0 RESET, 1 GRAPH, 2 ACC, 3 FINAL
  input  logic [VIDX_W-1:0] cmd_idx,
  input  word_t             cmd_vec [HID],
  input  word_t             cmd_wsum,
  input  logic [VIDX_W:0]   cmd_nvert,
  output logic              cmd_ready,
  output logic              fin_valid,
  output logic [VIDX_W-1:0] fin_idx,
  output word_t             fin_vec [HID],
  input  logic              fin_ready,
  output word_t             beta,
  output word_t             e_p
);
  localparam int unsigned CORES = (HID + 7) / 8;
  localparam int unsigned SW    = CORES * 8;

  typedef enum logic [2:0] { G_IDLE, G_WDIV, G_EXP, G_BETA, G_ACC, G_FRD, G_FDIV, G_FOUT } gstate_t;
  gstate_t st;
  logic [VIDX_W-1:0] idx_r;

  logic     s_in_v, s_out_v;
  simd_op_t s_op;
  word_t    s_a [SW], s_b [SW], s_c [SW], s_out [SW];
  simd_module #(.WAYS(8), .CORES(CORES)) u_simd (
    .clk, .rst_n, .in_valid(s_in_v), .op(s_op), .a(s_a), .b(s_b), .c(s_c),
    .out_valid(s_out_v), .out(s_out), .sum_valid(), .out_sum()
  );

  logic    a_in_v, a_out_v;
  word_t   a_x [1], a_y [1];
  activation_module #(.WIDTH(1)) u_exp (
    .clk, .rst_n, .in_valid(a_in_v), .op(ACT_EXP), .x(a_x), .out_valid(a_out_v), .y(a_y)
  );

  logic           sf_clr, sf_acc, sf_rd;
  logic [SAW-1:0] sf_idx;
  word_t          sf_vec [HID], sf_rdata [HID];
  sf_buf #(.HID(HID), .LINES(SF_LINES)) u_sfbuf (
    .clk, .rst_n, .clr(sf_clr),
    .acc_en(sf_acc), .acc_idx(sf_idx), .acc_vec(sf_vec),
    .rd_en(sf_rd), .rd_idx(sf_idx), .rd_data(sf_rdata)
  );

  assign cmd_ready = (st == G_IDLE);
  assign sf_idx    = SAW'((st == G_IDLE) ? cmd_idx : idx_r);

  always_comb begin
    s_in_v = 1'b0; s_op = SIMD_PASS;
    for (int k = 0; k < SW; k++) begin s_a[k] = '0; s_b[k] = '0; s_c[k] = '0; end
    a_in_v = 1'b0; a_x[0] = s_out[0];
    sf_clr = 1'b0; sf_acc = 1'b0; sf_rd = 1'b0;
    for (int k = 0; k < HID; k++) sf_vec[k] = s_out[k];
    unique case (st)
      G_IDLE: if (cmd_valid) begin
        unique case (cmd_op)
          2'd0: sf_clr = 1'b1;
          2'd1: begin
            s_in_v = 1'b1; s_op = SIMD_DIV;
            s_a[0] = cmd_wsum; s_b[0] = word_t'({cmd_nvert, 16'd0});
          end
          2'd2: begin
            s_in_v = 1'b1; s_op = SIMD_MUL;
            for (int k = 0; k < HID; k++) begin s_a[k] = cmd_vec[k]; s_b[k] = e_p; end
          end
          default: sf_rd = 1'b1;
        endcase
      end
      G_WDIV: a_in_v = 1'b1;
      G_ACC:  sf_acc = 1'b1;
      G_FDIV: begin
        s_in_v = 1'b1; s_op = SIMD_DIV;
        for (int k = 0; k < HID; k++) begin s_a[k] = sf_rdata[k]; s_b[k] = beta; end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; beta <= '0; e_p <= '0; fin_valid <= 1'b0; idx_r <= '0;
    end else begin
      unique case (st)
        G_IDLE: if (cmd_valid) begin
          idx_r <= cmd_idx;
          unique case (cmd_op)
            2'd0:    beta <= '0;
            2'd1:    st <= G_WDIV;
            2'd2:    st <= G_ACC;
            default: st <= G_FRD;
          endcase
        end
        G_WDIV: st <= G_EXP;            // w_P on s_out[0], exp issued
        G_EXP:  begin e_p <= a_y[0]; st <= G_BETA; end
        G_BETA: begin beta <= beta + e_p; st <= G_IDLE; end
        G_ACC:  st <= G_IDLE;
        G_FRD:  st <= G_FDIV;           // SF-Buf data valid
        G_FDIV: st <= G_FOUT;
        G_FOUT: begin
          if (!fin_valid) begin
            fin_valid <= 1'b1; fin_idx <= idx_r;
            for (int k = 0; k < HID; k++) fin_vec[k] <= s_out[k];
          end else if (fin_ready) begin
            fin_valid <= 1'b0; st <= G_IDLE;
          end
        end
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
