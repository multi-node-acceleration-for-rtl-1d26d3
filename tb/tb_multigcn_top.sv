// tb_multigcn_top -- end-to-end test of the accelerator: a 4 x 4 torus of nodes running
// one GCN layer (aggregation with ADD, then combination) over a random graph in two
// rounds, checked against a reference model (see top_bench). To make congestion happen
// within a short run the buffers are shrunk (aggregation buffer 16 rows of which 4 hold
// replicas, 4-entry edge buffer, 64-flit router buffers) and two systolic arrays are
// used per node; the torus size, the array width (128) and the data formats are the
// paper's. Every mechanism must occur at least once.
module tb_multigcn_top;
  import multigcn_pkg::*;
  localparam int unsigned MX = 4, MY = 4, NODES = MX * MY;

  logic clk, rst_n, start;
  cfg_t cfg;
  logic               dram_req    [NODES];
  logic [DADDR_W-1:0] dram_addr   [NODES];
  logic               dram_gnt    [NODES];
  logic               dram_rvalid [NODES];
  logic [FLIT_W-1:0]  dram_rdata  [NODES];
  logic               dram_wvalid [NODES];
  logic [DADDR_W-1:0] dram_waddr  [NODES];
  logic [FLIT_W-1:0]  dram_wdata  [NODES];
  logic               dram_wready [NODES];
  logic [NODES-1:0]   finished;
  logic [15:0]        round [NODES];
  logic [NODES-1:0]   e_split, e_adapt, e_nst, e_rst, e_haz, e_agg, e_comb, e_mix;

  multigcn_top #(
    .MESH_X(MX), .MESH_Y(MY), .NSA(2), .AGG_ROWS(16), .WROWS(160), .CB_DEPTH(4),
    .EB_DEPTH(4), .RT_DEPTH(64), .SU_DEPTH(32), .LD_DEPTH(64)
  ) dut (
    .clk(clk), .rst_n(rst_n), .cfg_i(cfg), .start_i(start),
    .dram_req_o(dram_req), .dram_addr_o(dram_addr), .dram_gnt_i(dram_gnt),
    .dram_rvalid_i(dram_rvalid), .dram_rdata_i(dram_rdata),
    .dram_wvalid_o(dram_wvalid), .dram_waddr_o(dram_waddr), .dram_wdata_o(dram_wdata),
    .dram_wready_i(dram_wready),
    .finished_o(finished), .round_o(round),
    .ev_split_o(e_split), .ev_adaptive_o(e_adapt), .ev_net_stall_o(e_nst),
    .ev_rx_stall_o(e_rst), .ev_hazard_o(e_haz), .ev_agg_op_o(e_agg), .ev_comb_o(e_comb),
    .ev_mixed_o(e_mix)
  );

  top_bench #(.MESH_X(MX), .MESH_Y(MY), .F_IN(160), .X_BITS(1), .N_ROUNDS(2),
              .REQUIRE_ALL(1'b1), .MAX_CYCLES(400000)) bench (
    .clk(clk), .rst_n(rst_n), .cfg_o(cfg), .start_o(start),
    .dram_req_i(dram_req), .dram_addr_i(dram_addr), .dram_gnt_o(dram_gnt),
    .dram_rvalid_o(dram_rvalid), .dram_rdata_o(dram_rdata),
    .dram_wvalid_i(dram_wvalid), .dram_waddr_i(dram_waddr), .dram_wdata_i(dram_wdata),
    .dram_wready_o(dram_wready),
    .finished_i(finished), .round_i(round),
    .ev_split_i(e_split), .ev_adaptive_i(e_adapt), .ev_net_stall_i(e_nst),
    .ev_rx_stall_i(e_rst), .ev_hazard_i(e_haz), .ev_agg_op_i(e_agg), .ev_comb_i(e_comb),
    .ev_mixed_i(e_mix)
  );
endmodule
