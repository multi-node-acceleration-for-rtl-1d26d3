// tb_processing_node -- one processing node on its own (a 1 x 1 torus: every packet is
// split at the node and delivered to itself, the network ports stay idle), running a
// whole layer over a random 8-vertex graph in two rounds with small buffers. Results
// are checked against the reference model of top_bench; mechanism counts are reported
// but not required (network stalls cannot happen without neighbours).
module tb_processing_node;
  import multigcn_pkg::*;
  logic clk, rst_n, start;
  cfg_t cfg;
  logic               dram_req    [1];
  logic [DADDR_W-1:0] dram_addr   [1];
  logic               dram_gnt    [1];
  logic               dram_rvalid [1];
  logic [FLIT_W-1:0]  dram_rdata  [1];
  logic               dram_wvalid [1];
  logic [DADDR_W-1:0] dram_waddr  [1];
  logic [FLIT_W-1:0]  dram_wdata  [1];
  logic               dram_wready [1];
  logic [15:0]        round [1];
  logic fin, e_split, e_adapt, e_nst, e_rst, e_haz, e_agg, e_comb, e_mix, endo;
  logic  nov [4];
  flit_t nof [4];
  logic  nir [4];
  logic  zv  [4];
  flit_t zf  [4];
  logic  one [4];
  logic [7:0] zs [4];
  logic [7:0] st;
  always_comb for (int d = 0; d < 4; d++) begin
    zv[d] = 1'b0; zf[d] = '0; one[d] = 1'b1; zs[d] = '0;
  end

  processing_node #(.MESH_X(1), .MESH_Y(1), .NSA(2), .AGG_ROWS(16), .WROWS(128),
    .CB_DEPTH(4), .EB_DEPTH(4), .RT_DEPTH(32), .SU_DEPTH(32), .LD_DEPTH(32)) dut (
    .clk(clk), .rst_n(rst_n), .cur_x_i(2'd0), .cur_y_i(2'd0), .cfg_i(cfg), .start_i(start),
    .net_out_valid_o(nov), .net_out_flit_o(nof), .net_out_ready_i(one),
    .net_in_valid_i(zv), .net_in_flit_i(zf), .net_in_ready_o(nir),
    .stress_o(st), .nb_stress_i(zs), .end_o(endo), .all_end_i(endo),
    .dram_req_o(dram_req[0]), .dram_addr_o(dram_addr[0]), .dram_gnt_i(dram_gnt[0]),
    .dram_rvalid_i(dram_rvalid[0]), .dram_rdata_i(dram_rdata[0]),
    .dram_wvalid_o(dram_wvalid[0]), .dram_waddr_o(dram_waddr[0]),
    .dram_wdata_o(dram_wdata[0]), .dram_wready_i(dram_wready[0]),
    .finished_o(fin), .round_o(round[0]),
    .ev_split_o(e_split), .ev_adaptive_o(e_adapt), .ev_net_stall_o(e_nst),
    .ev_rx_stall_o(e_rst), .ev_hazard_o(e_haz), .ev_agg_op_o(e_agg), .ev_comb_o(e_comb),
    .ev_mixed_o(e_mix));

  top_bench #(.MESH_X(1), .MESH_Y(1), .F_IN(128), .X_BITS(2), .N_ROUNDS(2),
              .MAX_OUTDEG(3), .REQUIRE_ALL(1'b0), .MAX_CYCLES(200000)) bench (
    .clk(clk), .rst_n(rst_n), .cfg_o(cfg), .start_o(start),
    .dram_req_i(dram_req), .dram_addr_i(dram_addr), .dram_gnt_o(dram_gnt),
    .dram_rvalid_o(dram_rvalid), .dram_rdata_o(dram_rdata),
    .dram_wvalid_i(dram_wvalid), .dram_waddr_i(dram_waddr), .dram_wdata_i(dram_wdata),
    .dram_wready_o(dram_wready),
    .finished_i(fin), .round_i(round),
    .ev_split_i(e_split), .ev_adaptive_i(e_adapt), .ev_net_stall_i(e_nst),
    .ev_rx_stall_i(e_rst), .ev_hazard_i(e_haz), .ev_agg_op_i(e_agg), .ev_comb_i(e_comb),
    .ev_mixed_i(e_mix));
endmodule
