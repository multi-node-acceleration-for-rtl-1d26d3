// compute_unit -- eight reusable 1 x 128 systolic arrays with real-time scheduling
// between aggregation and combination work.
//
// Every array is in one of three states: AGG (free; takes aggregate operations), COMB
// (computing one vertex's combination) or DONE (holding a finished combination result
// until the combination buffer accepts it).
//  * Aggregation: one operation per cycle (two rows and a tag) goes to the lowest
//    numbered array in state AGG. With first_i set the second operand is replaced by
//    the identity of the reduction (the slot had no partial result yet). The result
//    row and tag come out AGG_LAT = 3 cycles later on res_*.
//  * Combination: a request (slot, vertex ID) takes the highest numbered array in state
//    AGG with no aggregate operation in flight. The array clears its accumulators,
//    then for t = 0 .. f_in+LANES-2 receives a_v[t] (read from the aggregation buffer,
//    row slot*nrows + t/LANES) and the skewed weights of step t. The result
//    h_v = a_v x W is ready f_in + LANES + 2 cycles after the start and is pushed to the
//    combination buffer with DRAM address out_base + (vid >> n) * FLITS_PER_ROW.
// The number of arrays, their size and the dynamic sharing follow the paper; the
// assignment rule (aggregation low, combination high numbers) is this design's choice.
module compute_unit
  import multigcn_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned NSA   = NUM_SA,
  parameter int unsigned AW    = 11,
  parameter int unsigned TAG_W = 2*AW + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  agg_op_e               op_i,
  input  logic [15:0]           f_in_i,
  input  logic [3:0]            nrows_i,
  input  logic [4:0]            n_bits_i,
  input  logic [DADDR_W-1:0]    out_base_i,
  // aggregate operations
  input  logic                  agg_valid_i,
  output logic                  agg_ready_o,
  input  logic                  first_i,
  input  logic [TAG_W-1:0]      tag_i,
  input  logic [N-1:0][DW-1:0]  op_a_i,
  input  logic [N-1:0][DW-1:0]  op_b_i,
  output logic                  res_valid_o,
  output logic [TAG_W-1:0]      res_tag_o,
  output logic [N-1:0][DW-1:0]  res_o,
  // combination requests
  input  logic                  comb_valid_i,
  output logic                  comb_ready_o,
  input  logic [AW-1:0]         comb_slot_i,
  input  logic [VID_W-1:0]      comb_vid_i,
  // aggregation-buffer reads for combination input
  output logic [AW-1:0]         cb_row_o [NSA],
  input  logic [N*DW-1:0]       cb_i     [NSA],
  // weight-buffer reads
  output logic [15:0]           w_t_o    [NSA],
  input  logic [N-1:0][DW-1:0]  w_i      [NSA],
  // to the combination buffer
  output logic                  out_push_o,
  output logic [DADDR_W-1:0]    out_addr_o,
  output logic [N*DW-1:0]       out_row_o,
  input  logic                  out_full_i,
  // statistics
  output logic                  comb_done_o,
  output logic [NSA-1:0]        comb_busy_o
);

  typedef enum logic [1:0] { A_AGG, A_COMB, A_DONE } ast_e;
  ast_e                 st    [NSA];
  logic [15:0]          t     [NSA];
  logic                 clr   [NSA];
  logic [AW-1:0]        slot  [NSA];
  logic [VID_W-1:0]     vid   [NSA];
  logic [2:0]           infl  [NSA];     // aggregate ops in flight

  // choice of arrays
  int agg_sel, comb_sel, out_sel;
  always_comb begin
    agg_sel = -1; comb_sel = -1; out_sel = -1;
    for (int k = NSA-1; k >= 0; k--) if (st[k] == A_AGG) agg_sel = k;
    for (int k = 0; k < NSA; k++)
      if (st[k] == A_AGG && infl[k] == '0 && k != agg_sel) comb_sel = k;
    // the last free array may combine only when no aggregate op is waiting
    if (comb_sel < 0 && !agg_valid_i)
      for (int k = 0; k < NSA; k++) if (st[k] == A_AGG && infl[k] == '0) comb_sel = k;
    for (int k = NSA-1; k >= 0; k--) if (st[k] == A_DONE) out_sel = k;
  end
  assign agg_ready_o  = (agg_sel >= 0);
  assign comb_ready_o = (comb_sel >= 0) && !(comb_sel == agg_sel && agg_valid_i);

  logic [N-1:0][DW-1:0] ident_row;
  always_comb for (int j = 0; j < N; j++) ident_row[j] = agg_identity(op_i);

  logic [NSA-1:0]             rv;
  logic [TAG_W-1:0]           rt  [NSA];
  logic [N-1:0][DW-1:0]       rr  [NSA];
  logic [N-1:0][DW-1:0]       acc [NSA];

  for (genvar k = 0; k < NSA; k++) begin : g_sa
    logic            cm;
    logic [DW-1:0]   x;
    logic [15:0]     ti;
    logic [N-1:0][DW-1:0] wsel;
    assign cm = (st[k] != A_AGG);
    assign ti = t[k];
    always_comb begin
      int unsigned ri;
      ri = int'(ti) / N;
      cb_row_o[k] = AW'(int'(slot[k]) * int'(nrows_i) + int'(ri));
      x = (st[k] == A_COMB && !clr[k] && ti < f_in_i) ? cb_i[k][(int'(ti) % N)*DW +: DW] : '0;
      wsel = (st[k] == A_COMB && !clr[k]) ? w_i[k] : '0;
    end
    assign w_t_o[k] = ti;
    systolic_array #(.N(N), .TAG_W(TAG_W)) u_sa (
      .clk(clk), .rst_n(rst_n), .comb_mode_i(cm), .op_i(op_i),
      .agg_valid_i(agg_valid_i && agg_sel == k), .agg_tag_i(tag_i),
      .op_a_i(op_a_i), .op_b_i(first_i ? ident_row : op_b_i),
      .res_valid_o(rv[k]), .res_tag_o(rt[k]), .res_o(rr[k]),
      .clr_i(clr[k]), .x_i(x), .w_i(wsel), .acc_o(acc[k])
    );
  end

  always_comb begin
    res_valid_o = 1'b0; res_tag_o = '0; res_o = '0;
    for (int k = 0; k < NSA; k++)
      if (rv[k]) begin res_valid_o = 1'b1; res_tag_o = rt[k]; res_o = rr[k]; end
  end

  assign out_push_o = (out_sel >= 0) && !out_full_i;
  always_comb begin
    out_addr_o = '0; out_row_o = '0;
    for (int k = 0; k < NSA; k++)
      if (k == out_sel) begin
        out_addr_o = out_base_i + ((vid[k] >> n_bits_i) * DADDR_W'(FLITS_PER_ROW));
        out_row_o  = acc[k];
      end
  end
  assign comb_done_o = out_push_o;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < NSA; k++) begin
        st[k] <= A_AGG; t[k] <= '0; clr[k] <= 1'b0; slot[k] <= '0; vid[k] <= '0; infl[k] <= '0;
      end
    end else begin
      for (int k = 0; k < NSA; k++) begin
        infl[k] <= infl[k] + 3'(agg_valid_i && agg_sel == k) - 3'(rv[k]);
        case (st[k])
          A_AGG: if (comb_valid_i && comb_ready_o && comb_sel == k) begin
            st[k] <= A_COMB; t[k] <= '0; clr[k] <= 1'b1;
            slot[k] <= comb_slot_i; vid[k] <= comb_vid_i;
          end
          A_COMB: begin
            if (clr[k]) clr[k] <= 1'b0;
            else if (t[k] == f_in_i + 16'(N) + 16'd2) st[k] <= A_DONE;
            else t[k] <= t[k] + 1'b1;
          end
          A_DONE: if (out_push_o && out_sel == k) st[k] <= A_AGG;
          default: st[k] <= A_AGG;
        endcase
      end
    end
  end

  always_comb for (int k = 0; k < NSA; k++) comb_busy_o[k] = (st[k] != A_AGG);

  a_one_result: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(rv));
endmodule
