// mem_access_ctrl -- Memory Access Controller: shares the HBM port among NREQ requesters.
//
// Each requester offers one line request (read or write, line address, LINE words of data)
// with req_valid and holds it until req_ready. A round-robin arbiter forwards one request per
// cycle to the HBM port. HBM returns read data in request order; the controller remembers the
// requester of every outstanding read in a queue (up to OUTST reads) and routes each
// returning line to that requester's resp_valid/resp_data. Writes get no response.
// The block's role is the design's; arbitration, in-order responses and the queue depth are
// this implementation's choices. One 128-word (512-byte) line per cycle at 1 GHz matches the
// 512 GB/s HBM bandwidth the design assumes.
module mem_access_ctrl
  import hihgnn_pkg::*;
#(
  parameter int unsigned NREQ  = 2,
  parameter int unsigned LINE  = 128,
  parameter int unsigned AW    = 32,
  parameter int unsigned OUTST = 16,
  parameter int unsigned RW    = (NREQ > 1) ? $clog2(NREQ) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid [NREQ],
  output logic          req_ready [NREQ],
  input  logic          req_we    [NREQ],
  input  logic [AW-1:0] req_addr  [NREQ],
  input  word_t         req_wdata [NREQ][LINE],
  output logic          resp_valid [NREQ],
  output word_t         resp_data  [LINE],
  output logic          hbm_req_valid,
  input  logic          hbm_req_ready,
  output logic          hbm_req_we,
  output logic [AW-1:0] hbm_req_addr,
  output word_t         hbm_req_wdata [LINE],
  input  logic          hbm_resp_valid,
  input  word_t         hbm_resp_data [LINE]
);
  logic [RW-1:0] ptr, win;
  logic          found;
  logic          q_full, q_empty;
  logic [RW-1:0] q_head;
  logic          fire, fire_rd;

  always_comb begin
    found = 1'b0;
    win   = '0;
    for (int k = 0; k < NREQ; k++) begin
      int i;
      i = (int'(ptr) + k) % NREQ;
      // a read may only go out while its requester can be remembered
      if (!found && req_valid[i] && (req_we[i] || !q_full)) begin
        found = 1'b1;
        win   = RW'(i);
      end
    end
  end

  assign hbm_req_valid = found;
  assign hbm_req_we    = req_we[win];
  assign hbm_req_addr  = req_addr[win];
  assign hbm_req_wdata = req_wdata[win];
  assign fire          = found && hbm_req_ready;
  assign fire_rd       = fire && !req_we[win];

  always_comb
    for (int i = 0; i < NREQ; i++) req_ready[i] = fire && (win == RW'(i));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    ptr <= '0;
    else if (fire) ptr <= (int'(win) == NREQ - 1) ? '0 : win + 1'b1;
  end

  sync_fifo #(.W(RW), .DEPTH(OUTST)) u_tagq (
    .clk, .rst_n,
    .push (fire_rd), .wdata(win),
    .pop  (hbm_resp_valid), .rdata(q_head),
    .full (q_full), .empty(q_empty), .count()
  );

  always_comb
    for (int i = 0; i < NREQ; i++) resp_valid[i] = hbm_resp_valid && !q_empty && (q_head == RW'(i));
  assign resp_data = hbm_resp_data;

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n) hbm_resp_valid |-> !q_empty);
endmodule
