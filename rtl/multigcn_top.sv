// multigcn_top -- the multi-node GCN accelerator: MESH_X x MESH_Y processing nodes
// (4 x 4 = 16 in the paper) connected as a bidirectional 2D torus.
//
// Node k sits at fixed position (x, y) = (k mod MESH_X, k div MESH_X). Its east port
// connects to the west port of node ((x+1) mod MESH_X, y), its south port to the north
// port of node (x, (y+1) mod MESH_Y), with one flit channel (valid/ready) each way and
// the routers' stress values wired alongside. Every node's end-of-round signal goes to
// all nodes. The inter-node links stand in for the NVLink links of the paper, which are
// outside this RTL; each node's HBM is outside as well, reached through the per-node
// DRAM ports (read channel with in-order responses, write channel).
// All nodes share one configuration (cfg_i); start_i begins the layer. finished_o is set
// per node when all rounds are done. The ev_* outputs are per-node event pulses.
module multigcn_top
  import multigcn_pkg::*;
#(
  parameter int unsigned MESH_X   = 4,
  parameter int unsigned MESH_Y   = 4,
  parameter int unsigned NSA      = NUM_SA,
  parameter int unsigned N        = LANES,
  parameter int unsigned AGG_ROWS = 2048,
  parameter int unsigned WROWS    = 4096,
  parameter int unsigned CB_DEPTH = 512,
  parameter int unsigned EB_DEPTH = 2048,
  parameter int unsigned RT_DEPTH = 4915,
  parameter int unsigned SU_DEPTH = 8192,
  parameter int unsigned LD_DEPTH = 14336,
  parameter int unsigned NODES    = MESH_X * MESH_Y
) (
  input  logic               clk,
  input  logic               rst_n,
  input  cfg_t               cfg_i,
  input  logic               start_i,
  // per-node DRAM
  output logic               dram_req_o    [NODES],
  output logic [DADDR_W-1:0] dram_addr_o   [NODES],
  input  logic               dram_gnt_i    [NODES],
  input  logic               dram_rvalid_i [NODES],
  input  logic [FLIT_W-1:0]  dram_rdata_i  [NODES],
  output logic               dram_wvalid_o [NODES],
  output logic [DADDR_W-1:0] dram_waddr_o  [NODES],
  output logic [FLIT_W-1:0]  dram_wdata_o  [NODES],
  input  logic               dram_wready_i [NODES],
  // status
  output logic [NODES-1:0]   finished_o,
  output logic [15:0]        round_o       [NODES],
  output logic [NODES-1:0]   ev_split_o,
  output logic [NODES-1:0]   ev_adaptive_o,
  output logic [NODES-1:0]   ev_net_stall_o,
  output logic [NODES-1:0]   ev_rx_stall_o,
  output logic [NODES-1:0]   ev_hazard_o,
  output logic [NODES-1:0]   ev_agg_op_o,
  output logic [NODES-1:0]   ev_comb_o,
  output logic [NODES-1:0]   ev_mixed_o
);
  // link d of node k: 0 east, 1 west, 2 north, 3 south
  logic  o_valid [NODES][4];
  flit_t o_flit  [NODES][4];
  logic  o_ready [NODES][4];
  logic  i_valid [NODES][4];
  flit_t i_flit  [NODES][4];
  logic  i_ready [NODES][4];
  logic [7:0] stress [NODES];
  logic [7:0] nb_stress [NODES][4];
  logic [NODES-1:0] ends;

  function automatic int nb(int k, int d);
    int x, y;
    x = k % int'(MESH_X);
    y = k / int'(MESH_X);
    case (d)
      0: x = (x + 1) % int'(MESH_X);
      1: x = (x + int'(MESH_X) - 1) % int'(MESH_X);
      2: y = (y + int'(MESH_Y) - 1) % int'(MESH_Y);
      default: y = (y + 1) % int'(MESH_Y);
    endcase
    return y * int'(MESH_X) + x;
  endfunction

  // the opposite port of d: east<->west, north<->south
  function automatic int opp(int d);
    return d ^ 1;
  endfunction

  for (genvar k = 0; k < NODES; k++) begin : g_node
    for (genvar d = 0; d < 4; d++) begin : g_link
      assign i_valid[k][d]   = o_valid[nb(k, d)][opp(d)];
      assign i_flit[k][d]    = o_flit[nb(k, d)][opp(d)];
      assign o_ready[k][d]   = i_ready[nb(k, d)][opp(d)];
      assign nb_stress[k][d] = stress[nb(k, d)];
    end

    processing_node #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y), .NSA(NSA), .N(N), .AGG_ROWS(AGG_ROWS),
      .WROWS(WROWS), .CB_DEPTH(CB_DEPTH), .EB_DEPTH(EB_DEPTH), .RT_DEPTH(RT_DEPTH),
      .SU_DEPTH(SU_DEPTH), .LD_DEPTH(LD_DEPTH)
    ) u_node (
      .clk(clk), .rst_n(rst_n),
      .cur_x_i(COORD_W'(k % MESH_X)), .cur_y_i(COORD_W'(k / MESH_X)),
      .cfg_i(cfg_i), .start_i(start_i),
      .net_out_valid_o(o_valid[k]), .net_out_flit_o(o_flit[k]), .net_out_ready_i(o_ready[k]),
      .net_in_valid_i(i_valid[k]), .net_in_flit_i(i_flit[k]), .net_in_ready_o(i_ready[k]),
      .stress_o(stress[k]), .nb_stress_i(nb_stress[k]),
      .end_o(ends[k]), .all_end_i(ends),
      .dram_req_o(dram_req_o[k]), .dram_addr_o(dram_addr_o[k]), .dram_gnt_i(dram_gnt_i[k]),
      .dram_rvalid_i(dram_rvalid_i[k]), .dram_rdata_i(dram_rdata_i[k]),
      .dram_wvalid_o(dram_wvalid_o[k]), .dram_waddr_o(dram_waddr_o[k]),
      .dram_wdata_o(dram_wdata_o[k]), .dram_wready_i(dram_wready_i[k]),
      .finished_o(finished_o[k]), .round_o(round_o[k]),
      .ev_split_o(ev_split_o[k]), .ev_adaptive_o(ev_adaptive_o[k]),
      .ev_net_stall_o(ev_net_stall_o[k]), .ev_rx_stall_o(ev_rx_stall_o[k]),
      .ev_hazard_o(ev_hazard_o[k]), .ev_agg_op_o(ev_agg_op_o[k]), .ev_comb_o(ev_comb_o[k]),
      .ev_mixed_o(ev_mixed_o[k])
    );
  end
endmodule
