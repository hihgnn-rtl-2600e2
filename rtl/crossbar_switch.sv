// crossbar_switch -- NI-input, NO-output crossbar with one round-robin arbiter per output.
//
// Input i offers in_data[i] to output in_dest[i] with in_valid[i]; it is accepted in the
// cycle in which in_ready[i] is high (granted by that output's arbiter and out_ready high).
// Each output grants, among the inputs addressing it, the first one at or after its
// round-robin pointer, and moves the pointer past the winner after a transfer. The path is
// combinational: a message crosses in the cycle it is accepted. Different outputs transfer
// in parallel.
// In the accelerator the inputs are the lanes plus the local scheduler's dispatch port and
// the outputs are the lanes: edge tasks (including the overflow workload) go out to the
// lanes and partial aggregation results move from lane to lane. The crossbar itself is the
// design's; round-robin arbitration is this implementation's choice.
module crossbar_switch #(
  parameter int unsigned NI = 5,
  parameter int unsigned NO = 4,
  parameter int unsigned W  = 64,
  parameter int unsigned DW = (NO > 1) ? $clog2(NO) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid [NI],
  input  logic [DW-1:0] in_dest  [NI],
  input  logic [W-1:0]  in_data  [NI],
  output logic          in_ready [NI],
  output logic          out_valid [NO],
  output logic [W-1:0]  out_data  [NO],
  input  logic          out_ready [NO]
);
  localparam int unsigned IW = (NI > 1) ? $clog2(NI) : 1;

  logic [IW-1:0] ptr   [NO];
  logic [IW-1:0] win   [NO];
  logic          found [NO];

  always_comb begin
    for (int o = 0; o < NO; o++) begin
      found[o] = 1'b0;
      win[o]   = '0;
      for (int k = 0; k < NI; k++) begin
        int i;
        i = (int'(ptr[o]) + k) % NI;
        if (!found[o] && in_valid[i] && in_dest[i] == DW'(o)) begin
          found[o] = 1'b1;
          win[o]   = IW'(i);
        end
      end
      out_valid[o] = found[o];
      out_data[o]  = in_data[win[o]];
    end
    for (int i = 0; i < NI; i++) begin
      in_ready[i] = 1'b0;
      for (int o = 0; o < NO; o++)
        if (found[o] && win[o] == IW'(i) && out_ready[o]) in_ready[i] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NO; o++) ptr[o] <= '0;
    end else begin
      for (int o = 0; o < NO; o++)
        if (found[o] && out_ready[o])
          ptr[o] <= (int'(win[o]) == NI - 1) ? '0 : win[o] + 1'b1;
    end
  end
endmodule
