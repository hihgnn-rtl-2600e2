// local_scheduler -- workload-aware scheduling of edge tasks over the lanes.
//
// Work is handed out in periods. In one period a lane may be given at most `threshold` edges
// (the allocation threshold: the number of edges a lane can process at once). Every edge
// belongs to the workload of its home lane (a semantic graph's workload is assigned to one
// lane). While the home lane is below the threshold the edge goes there. Edges beyond the
// threshold form the overflow workload (OW) and go to the lane with the fewest edges among
// those still below the threshold. When every lane has reached the threshold the task waits
// (task_lane_ok low) until all lanes are idle, which starts a new period; a finished vertex
// (vertex_done) also starts one. No lane is ever given more than it can hold.
// The scheduler also records the aggregation status of the vertex being aggregated:
// agg_mask has bit L set once lane L has received an edge of it, so that when the vertex
// finishes its neighbor aggregation the partial results of every such lane can be sent to
// the home lane. vertex_done clears the mask. n_overflow counts edges sent as overflow.
// Threshold, OW and the status record follow the design; sending OW edges straight to the
// least-loaded lane (instead of first parking them in a separate list) and the period
// boundaries are this implementation's choices.
module local_scheduler #(
  parameter int unsigned LANES = 4,
  parameter int unsigned CW    = 8,
  parameter int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [CW-1:0] threshold,
  input  logic          all_idle,
  input  logic          task_valid,
  input  logic [LW-1:0] task_home,
  output logic          task_lane_ok,
  output logic [LW-1:0] task_lane,
  output logic          task_is_ow,
  input  logic          task_fire,
  input  logic          vertex_done,
  output logic [LANES-1:0] agg_mask,
  output logic [31:0]   n_overflow
);
  logic [CW-1:0] cnt [LANES];   // edges given to each lane in this period

  always_comb begin
    logic [CW-1:0] best;
    task_lane_ok = 1'b0;
    task_lane    = task_home;
    task_is_ow   = 1'b0;
    best         = '1;
    if (task_valid) begin
      if (cnt[task_home] < threshold) begin
        task_lane_ok = 1'b1;
      end else begin
        for (int l = 0; l < LANES; l++) begin
          if (cnt[l] < threshold && (!task_lane_ok || cnt[l] < best)) begin
            task_lane_ok = 1'b1;
            task_lane    = LW'(l);
            best         = cnt[l];
          end
        end
        task_is_ow = task_lane_ok;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      agg_mask   <= '0;
      n_overflow <= '0;
      for (int l = 0; l < LANES; l++) cnt[l] <= '0;
    end else begin
      if (vertex_done)    agg_mask <= '0;
      else if (task_fire) agg_mask[task_lane] <= 1'b1;
      if (vertex_done || (all_idle && task_valid && !task_lane_ok)) begin
        for (int l = 0; l < LANES; l++) cnt[l] <= '0;
      end else if (task_fire) begin
        cnt[task_lane] <= cnt[task_lane] + 1'b1;
      end
      if (task_fire && task_is_ow) n_overflow <= n_overflow + 1;
    end
  end
endmodule
