// round_sync -- round control and synchronisation of one processing node.
//
// Round execution (the paper's Algorithm 3) ends every round with a synchronisation:
// each node broadcasts an end signal when its own work of the round is complete, and
// the round is over when the end signals of all nodes are collected. Here every node
// drives one end-signal wire to all nodes (end_o) and sees all of them (all_end_i).
// When all are set, every node leaves the round in the same cycle: round_o advances,
// go_o pulses to start the next round (initialisation step), and the end signal is
// withdrawn. After n_rounds_i rounds finished_o is set. start_i starts round 0.
// Dedicated end-signal wires instead of network packets are this design's choice (the
// paper allows "other synchronization mechanisms").
module round_sync #(
  parameter int unsigned NODES = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start_i,
  input  logic [15:0]      n_rounds_i,
  input  logic             local_done_i,   // this node's work of the round is complete
  output logic             end_o,          // end signal to all nodes
  input  logic [NODES-1:0] all_end_i,      // end signals of all nodes
  output logic             go_o,           // a round starts
  output logic [15:0]      round_o,
  output logic             active_o,
  output logic             finished_o
);
  logic active;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; end_o <= 1'b0; go_o <= 1'b0; round_o <= '0; finished_o <= 1'b0;
    end else begin
      go_o <= 1'b0;
      if (start_i && !active && !finished_o) begin
        active <= 1'b1; go_o <= 1'b1; round_o <= '0;
      end else if (active) begin
        if (local_done_i && !go_o) end_o <= 1'b1;
        if (&all_end_i) begin
          end_o <= 1'b0;
          if (round_o + 1'b1 == n_rounds_i) begin
            active <= 1'b0; finished_o <= 1'b1;
          end else begin
            round_o <= round_o + 1'b1;
            go_o    <= 1'b1;
          end
        end
      end
    end
  end
  assign active_o = active;
endmodule
