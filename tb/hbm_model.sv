// hbm_model -- behavioural model of the HBM stack seen through a line port (testbench only).
//
// DEPTH lines of LINE 32-bit words. Accepts one request per cycle (req_ready is always 1).
// Writes take effect at once; a read returns its line LAT cycles later on resp_valid/resp_data,
// in request order. Contents are set and inspected directly through `mem` by the testbench.
// Not a model of HBM timing beyond a fixed latency.
// The line width follows the accelerator (512 B per access); the fixed latency is an own choice.
module hbm_model
  import hihgnn_pkg::*;
#(
  parameter int unsigned LINE  = 128,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LAT   = 6
) (
  input  logic        clk,
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_we,
  input  logic [31:0] req_addr,
  input  word_t       req_wdata [LINE],
  output logic        resp_valid,
  output word_t       resp_data [LINE]
);
  word_t mem [DEPTH][LINE];
  logic  vpipe [LAT];
  word_t dpipe [LAT][LINE];

  assign req_ready = 1'b1;

  initial for (int k = 0; k < LAT; k++) vpipe[k] = 1'b0;

  always_ff @(posedge clk) begin
    if (req_valid && req_we) mem[req_addr % DEPTH] <= req_wdata;
    vpipe[0] <= req_valid && !req_we;
    dpipe[0] <= mem[req_addr % DEPTH];
    for (int k = 1; k < LAT; k++) begin
      vpipe[k] <= vpipe[k-1];
      dpipe[k] <= dpipe[k-1];
    end
  end
  assign resp_valid = vpipe[LAT-1];
  assign resp_data  = dpipe[LAT-1];
endmodule
