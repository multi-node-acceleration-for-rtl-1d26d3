// tb_multigcn_top_full -- the end-to-end test of tb_multigcn_top on the accelerator at
// its full size: 16 nodes, 8 systolic arrays of 128 PEs each, and all buffers at the
// paper's sizes (no parameter overridden). A random graph over 64 vertices, 128 input
// features, two rounds; every result is checked against the reference model. Mechanism
// counts are reported; congestion is not forced at this size, so they are not required.
module tb_multigcn_top_full;
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

  multigcn_top dut (
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

  top_bench #(.MESH_X(MX), .MESH_Y(MY), .F_IN(128), .X_BITS(1), .N_ROUNDS(2),
              .REQUIRE_ALL(1'b0), .MAX_CYCLES(400000)) bench (
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
