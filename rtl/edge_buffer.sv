// edge_buffer -- the edge buffer of a processing node (128 KB in the paper).
//
// Each entry holds the address of a received (or local) feature-vector replica in the
// aggregation buffer and the list of local vertices it has to be aggregated into
// (edge_ent_t). The receive unit writes entries, the scheduler consumes them in order.
// Entries are 64 bytes, so the default 2048 entries are the paper's 128 KB. First-in
// first-out order and the entry layout are this design's choices.
// Interface: push (valid/full), pop (valid/ready style with empty), occupancy.
module edge_buffer
  import multigcn_pkg::*;
#(
  parameter int unsigned DEPTH = 2048
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       push_i,
  input  edge_ent_t  ent_i,
  output logic       full_o,
  input  logic       pop_i,
  output edge_ent_t  ent_o,
  output logic       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  sync_fifo #(.T(edge_ent_t), .DEPTH(DEPTH)) u_q (
    .clk(clk), .rst_n(rst_n), .push_i(push_i), .data_i(ent_i), .pop_i(pop_i),
    .data_o(ent_o), .empty_o(empty_o), .full_o(full_o), .count_o(count_o)
  );

  // an entry always names at least one neighbour and at most MAX_NBR
  property p_valid_entry;
    @(posedge clk) disable iff (!rst_n) push_i |-> (ent_i.nbr_cnt != '0 && ent_i.nbr_cnt <= OFF_W'(MAX_NBR));
  endproperty
  a_valid_entry: assert property (p_valid_entry);
endmodule
