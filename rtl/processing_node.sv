// processing_node -- one processing node of the multi-node GCN accelerator.
//
// Blocks and data flow (the paper's Fig. 4b):
//   loader  -> send unit -> router (local input)     : scatter local vertices
//   router (local output) -> receive unit -> aggregation buffer + edge buffer
//   edge buffer -> scheduler -> compute unit (aggregation) -> aggregation buffer
//   scheduler -> compute unit (combination, weights from the weight buffer)
//            -> combination buffer -> DRAM
//   round_sync: end-of-round signal to and from all other nodes.
// Rounds (Algorithm 3): on go the loader reads the round descriptor, sets up the
// progress records of the round's vertices, then streams the vertices to scatter.
// Loading/sending, receiving and computing run concurrently (intra-round overlap).
// The node reports the end of its round when everything it had to send has left the
// send unit and all of its own vertices of the round have been combined and written.
// The network ports carry flits with valid/ready; index 0..3 = east, west, north,
// south. DRAM is outside: a read channel with in-order responses and a write channel.
// Parameters default to the paper's buffer sizes; the torus size is set by the top.
module processing_node
  import multigcn_pkg::*;
#(
  parameter int unsigned MESH_X     = 4,
  parameter int unsigned MESH_Y     = 4,
  parameter int unsigned NSA        = NUM_SA,
  parameter int unsigned N          = LANES,
  parameter int unsigned AGG_ROWS   = 2048,    // 1 MB
  parameter int unsigned WROWS      = 4096,    // 2 MB
  parameter int unsigned CB_DEPTH   = 512,     // 256 KB
  parameter int unsigned EB_DEPTH   = 2048,    // 128 KB
  parameter int unsigned RT_DEPTH   = 4915,    // 1.5 MB over 5 input ports
  parameter int unsigned SU_DEPTH   = 8192,    // 512 KB
  parameter int unsigned LD_DEPTH   = 14336    // 896 KB
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_x_i,
  input  logic [COORD_W-1:0] cur_y_i,
  input  cfg_t               cfg_i,
  input  logic               start_i,
  // torus links: 0 east, 1 west, 2 north, 3 south
  output logic               net_out_valid_o [4],
  output flit_t              net_out_flit_o  [4],
  input  logic               net_out_ready_i [4],
  input  logic               net_in_valid_i  [4],
  input  flit_t              net_in_flit_i   [4],
  output logic               net_in_ready_o  [4],
  output logic [7:0]         stress_o,
  input  logic [7:0]         nb_stress_i     [4],
  // round synchronisation
  output logic               end_o,
  input  logic [MESH_X*MESH_Y-1:0] all_end_i,
  // DRAM
  output logic               dram_req_o,
  output logic [DADDR_W-1:0] dram_addr_o,
  input  logic               dram_gnt_i,
  input  logic               dram_rvalid_i,
  input  logic [FLIT_W-1:0]  dram_rdata_i,
  output logic               dram_wvalid_o,
  output logic [DADDR_W-1:0] dram_waddr_o,
  output logic [FLIT_W-1:0]  dram_wdata_o,
  input  logic               dram_wready_i,
  // status and event pulses
  output logic               finished_o,
  output logic [15:0]        round_o,
  output logic               ev_split_o,
  output logic               ev_adaptive_o,
  output logic               ev_net_stall_o,
  output logic               ev_rx_stall_o,
  output logic               ev_hazard_o,
  output logic               ev_agg_op_o,
  output logic               ev_comb_o,
  output logic               ev_mixed_o       // aggregation and combination in the same cycle
);
  localparam int unsigned AW    = $clog2(AGG_ROWS);
  localparam int unsigned TAG_W = 2*AW + 1;

  // ---------------- router ----------------
  logic  r_in_valid [NPORTS];
  flit_t r_in_flit  [NPORTS];
  logic  r_in_ready [NPORTS];
  logic  r_out_valid [NPORTS];
  flit_t r_out_flit  [NPORTS];
  logic  r_out_ready [NPORTS];
  logic [7:0] r_nb_stress [NPORTS];

  logic  su_valid, rx_ready;
  flit_t su_flit;

  always_comb begin
    r_in_valid[0] = su_valid;
    r_in_flit[0]  = su_flit;
    r_out_ready[0] = rx_ready;
    r_nb_stress[0] = '0;
    for (int d = 0; d < 4; d++) begin
      r_in_valid[d+1]    = net_in_valid_i[d];
      r_in_flit[d+1]     = net_in_flit_i[d];
      net_in_ready_o[d]  = r_in_ready[d+1];
      net_out_valid_o[d] = r_out_valid[d+1];
      net_out_flit_o[d]  = r_out_flit[d+1];
      r_out_ready[d+1]   = net_out_ready_i[d];
      r_nb_stress[d+1]   = nb_stress_i[d];
    end
  end

  router #(.MESH_X(MESH_X), .MESH_Y(MESH_Y), .IN_DEPTH(RT_DEPTH)) u_router (
    .clk(clk), .rst_n(rst_n), .cur_x_i(cur_x_i), .cur_y_i(cur_y_i),
    .in_valid_i(r_in_valid), .in_flit_i(r_in_flit), .in_ready_o(r_in_ready),
    .out_valid_o(r_out_valid), .out_flit_o(r_out_flit), .out_ready_i(r_out_ready),
    .stress_o(stress_o), .nb_stress_i(r_nb_stress),
    .ev_split_o(ev_split_o), .ev_adaptive_o(ev_adaptive_o), .ev_stall_o(ev_net_stall_o)
  );

  // ---------------- round control ----------------
  logic go, w_loaded, agg_ready, round_loaded, local_done, su_empty, cb_empty;
  logic [15:0] round, n_agg, comb_cnt;
  logic comb_done;

  round_sync #(.NODES(MESH_X*MESH_Y)) u_sync (
    .clk(clk), .rst_n(rst_n), .start_i(w_loaded), .n_rounds_i(cfg_i.n_rounds),
    .local_done_i(local_done), .end_o(end_o), .all_end_i(all_end_i), .go_o(go),
    .round_o(round), .active_o(), .finished_o(finished_o)
  );
  assign round_o = round;

  // ---------------- loader / send unit ----------------
  logic ld_valid, ld_is_rec, ld_ready;
  logic [FLIT_W-1:0] ld_data;
  logic w_we;
  logic [$clog2(WROWS)-1:0] w_row;
  logic [$clog2(FLITS_PER_ROW)-1:0] w_fi;
  logic [FLIT_W-1:0] w_data;
  logic rec_init;
  logic [AW-1:0] rec_init_slot;
  agg_rec_t rec_init_data;

  loader #(.DEPTH(LD_DEPTH), .AW(AW), .WROWS(WROWS)) u_loader (
    .clk(clk), .rst_n(rst_n), .start_i(start_i), .w_base_i(cfg_i.w_base),
    .desc_base_i(cfg_i.desc_base), .f_in_i(cfg_i.f_in), .n_bits_i(cfg_i.n_bits),
    .x_bits_i(cfg_i.x_bits), .go_i(go), .round_i(round), .w_loaded_o(w_loaded),
    .agg_ready_o(agg_ready), .round_loaded_o(round_loaded), .n_agg_o(n_agg),
    .dram_req_o(dram_req_o), .dram_addr_o(dram_addr_o), .dram_gnt_i(dram_gnt_i),
    .dram_rvalid_i(dram_rvalid_i), .dram_rdata_i(dram_rdata_i),
    .w_we_o(w_we), .w_row_o(w_row), .w_fi_o(w_fi), .w_data_o(w_data),
    .rec_init_o(rec_init), .rec_slot_o(rec_init_slot), .rec_o(rec_init_data),
    .ld_valid_o(ld_valid), .ld_is_rec_o(ld_is_rec), .ld_data_o(ld_data), .ld_ready_i(ld_ready)
  );

  send_unit #(.DEPTH(SU_DEPTH)) u_send (
    .clk(clk), .rst_n(rst_n), .cur_x_i(cur_x_i), .cur_y_i(cur_y_i),
    .ld_valid_i(ld_valid), .ld_is_rec_i(ld_is_rec), .ld_data_i(ld_data), .ld_ready_o(ld_ready),
    .out_valid_o(su_valid), .out_flit_o(su_flit), .out_ready_i(r_in_ready[0]),
    .empty_o(su_empty)
  );

  // ---------------- receive unit / buffers ----------------
  logic ab_wr_en;
  logic [AW-1:0] ab_wr_row;
  logic [$clog2(FLITS_PER_ROW)-1:0] ab_wr_fi;
  logic [FLIT_W-1:0] ab_wr_data;
  logic eb_push, eb_full, eb_pop, eb_empty;
  edge_ent_t eb_in, eb_head;
  logic free;
  logic [3:0] free_rows;

  receive_unit #(.ROWS(AGG_ROWS)) u_rx (
    .clk(clk), .rst_n(rst_n), .nrows_i(cfg_i.nrows),
    .in_valid_i(r_out_valid[0]), .in_flit_i(r_out_flit[0]), .in_ready_o(rx_ready),
    .wr_en_o(ab_wr_en), .wr_row_o(ab_wr_row), .wr_fi_o(ab_wr_fi), .wr_data_o(ab_wr_data),
    .eb_push_o(eb_push), .eb_ent_o(eb_in), .eb_full_i(eb_full),
    .free_i(free), .free_rows_i(free_rows), .stall_o(ev_rx_stall_o)
  );

  edge_buffer #(.DEPTH(EB_DEPTH)) u_eb (
    .clk(clk), .rst_n(rst_n), .push_i(eb_push), .ent_i(eb_in), .full_o(eb_full),
    .pop_i(eb_pop), .ent_o(eb_head), .empty_o(eb_empty), .count_o()
  );

  logic [AW-1:0] rd_a_row, rd_b_row, rec_slot;
  logic [ROW_W-1:0] rd_a, rd_b;
  logic res_valid;
  logic [TAG_W-1:0] res_tag;
  logic [N-1:0][DW-1:0] res_row;
  logic [AW-1:0] cb_row [NSA];
  logic [ROW_W-1:0] cb_data [NSA];
  logic rec_inc;
  logic [15:0] rec_cnt, rec_exp;
  logic [VID_W-1:0] rec_vid;

  aggregation_buffer #(.ROWS(AGG_ROWS), .NRD(NSA)) u_ab (
    .clk(clk), .rst_n(rst_n),
    .wr_en_i(ab_wr_en), .wr_row_i(ab_wr_row), .wr_fi_i(ab_wr_fi), .wr_data_i(ab_wr_data),
    .rd_a_row_i(rd_a_row), .rd_a_o(rd_a), .rd_b_row_i(rd_b_row), .rd_b_o(rd_b),
    .res_we_i(res_valid), .res_row_i(res_tag[AW-1:0]), .res_i(res_row),
    .cb_row_i(cb_row), .cb_o(cb_data),
    .rec_init_i(rec_init), .rec_init_slot_i(rec_init_slot), .rec_init_i_data(rec_init_data),
    .rec_inc_i(rec_inc), .rec_slot_i(rec_slot), .rec_cnt_o(rec_cnt), .rec_exp_o(rec_exp),
    .rec_vid_o(rec_vid)
  );

  logic [15:0] w_t [NSA];
  logic [N-1:0][DW-1:0] w_rd [NSA];
  weight_buffer #(.WROWS(WROWS), .NRD(NSA), .N(N)) u_wb (
    .clk(clk), .we_i(w_we), .wrow_i(w_row), .wfi_i(w_fi), .wdata_i(w_data),
    .f_in_i(cfg_i.f_in), .t_i(w_t), .w_o(w_rd)
  );

  // ---------------- scheduler / compute ----------------
  logic agg_valid, agg_ready_cu, first;
  logic [TAG_W-1:0] tag;
  logic comb_valid, comb_ready;
  logic [AW-1:0] comb_slot;
  logic [VID_W-1:0] comb_vid;

  scheduler #(.ROWS(AGG_ROWS)) u_sched (
    .clk(clk), .rst_n(rst_n), .en_i(agg_ready), .nrows_i(cfg_i.nrows),
    .n_bits_i(cfg_i.n_bits), .x_bits_i(cfg_i.x_bits),
    .eb_empty_i(eb_empty), .eb_ent_i(eb_head), .eb_pop_o(eb_pop),
    .rec_slot_o(rec_slot), .rec_cnt_i(rec_cnt), .rec_exp_i(rec_exp), .rec_vid_i(rec_vid),
    .rec_inc_o(rec_inc), .rd_a_row_o(rd_a_row), .rd_b_row_o(rd_b_row),
    .agg_valid_o(agg_valid), .agg_ready_i(agg_ready_cu), .first_o(first), .tag_o(tag),
    .comb_valid_o(comb_valid), .comb_ready_i(comb_ready), .comb_slot_o(comb_slot),
    .comb_vid_o(comb_vid), .free_o(free), .free_rows_o(free_rows), .stall_o(ev_hazard_o)
  );

  logic out_push, cb_full;
  logic [DADDR_W-1:0] out_addr;
  logic [ROW_W-1:0] out_row;
  logic [NSA-1:0] comb_busy;

  compute_unit #(.N(N), .NSA(NSA), .AW(AW), .TAG_W(TAG_W)) u_cu (
    .clk(clk), .rst_n(rst_n), .op_i(cfg_i.op), .f_in_i(cfg_i.f_in), .nrows_i(cfg_i.nrows),
    .n_bits_i(cfg_i.n_bits), .out_base_i(cfg_i.out_base),
    .agg_valid_i(agg_valid), .agg_ready_o(agg_ready_cu), .first_i(first), .tag_i(tag),
    .op_a_i(rd_a), .op_b_i(rd_b), .res_valid_o(res_valid), .res_tag_o(res_tag), .res_o(res_row),
    .comb_valid_i(comb_valid), .comb_ready_o(comb_ready), .comb_slot_i(comb_slot),
    .comb_vid_i(comb_vid), .cb_row_o(cb_row), .cb_i(cb_data), .w_t_o(w_t), .w_i(w_rd),
    .out_push_o(out_push), .out_addr_o(out_addr), .out_row_o(out_row), .out_full_i(cb_full),
    .comb_done_o(comb_done), .comb_busy_o(comb_busy)
  );

  combination_buffer #(.DEPTH(CB_DEPTH)) u_cb (
    .clk(clk), .rst_n(rst_n), .push_i(out_push), .addr_i(out_addr), .row_i(out_row),
    .full_o(cb_full), .empty_o(cb_empty),
    .dram_wvalid_o(dram_wvalid_o), .dram_waddr_o(dram_waddr_o), .dram_wdata_o(dram_wdata_o),
    .dram_wready_i(dram_wready_i)
  );

  // ---------------- end of round ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) comb_cnt <= '0;
    else if (go) comb_cnt <= '0;
    else if (comb_done) comb_cnt <= comb_cnt + 1'b1;
  end
  assign local_done = round_loaded && !ld_valid && su_empty && agg_ready &&
                      (comb_cnt == n_agg) && cb_empty && !out_push;

  assign ev_agg_op_o = agg_valid && agg_ready_cu;
  assign ev_comb_o   = comb_done;
  assign ev_mixed_o  = ev_agg_op_o && (comb_busy != '0);
endmodule
