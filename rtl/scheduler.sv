// scheduler -- turns edge-buffer entries into aggregate operations and starts the
// combination of vertices whose aggregation is complete.
//
// For the entry at the head of the edge buffer (a replica and its list of local
// neighbours u), and for every row r of the feature vector, the scheduler issues one
// aggregate operation: operand A is replica row r, operand B is row r of u's
// intermediate result (slot s = vID bits [n, n+x), the round-partition mapping of the
// paper's Fig. 7a), and the result goes back to the same row. If u's progress record
// shows no earlier contribution, B is replaced by the identity (first_o).
// After the last row of a neighbour its record count is incremented; when the count
// reaches the expected number the last operation is tagged, and AGG_LAT+2 cycles after
// it was issued (when its result is in the buffer) the slot is queued for combination.
// When all neighbours of an entry are issued, the entry is popped and its replica rows
// are freed (free_o). An operation is held back while its B row is still in the
// aggregation pipeline (read-after-write hazard), counted by stall_o.
// Aggregation starts only after the loader has set up the round's records (en_i).
// One operation per cycle. Following the paper: aggregation driven by edge-buffer
// entries and combination when aggregation is complete; the rest is this design's.
module scheduler
  import multigcn_pkg::*;
#(
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned RES_ROWS = (ROWS * 3) / 4,
  parameter int unsigned AW       = $clog2(ROWS),
  parameter int unsigned TAG_W    = 2*AW + 1,
  parameter int unsigned CQ_DEPTH = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en_i,
  input  logic [3:0]         nrows_i,
  input  logic [4:0]         n_bits_i,
  input  logic [4:0]         x_bits_i,
  // edge buffer
  input  logic               eb_empty_i,
  input  edge_ent_t          eb_ent_i,
  output logic               eb_pop_o,
  // progress record
  output logic [AW-1:0]      rec_slot_o,
  input  logic [15:0]        rec_cnt_i,
  input  logic [15:0]        rec_exp_i,
  input  logic [VID_W-1:0]   rec_vid_i,
  output logic               rec_inc_o,
  // aggregation-buffer operand rows
  output logic [AW-1:0]      rd_a_row_o,
  output logic [AW-1:0]      rd_b_row_o,
  // to the compute unit
  output logic               agg_valid_o,
  input  logic               agg_ready_i,
  output logic               first_o,
  output logic [TAG_W-1:0]   tag_o,
  // combination requests
  output logic               comb_valid_o,
  input  logic               comb_ready_i,
  output logic [AW-1:0]      comb_slot_o,
  output logic [VID_W-1:0]   comb_vid_o,
  // replica rows freed
  output logic               free_o,
  output logic [3:0]         free_rows_o,
  output logic               stall_o
);

  localparam int unsigned REP_ROWS = ROWS - RES_ROWS;

  logic [OFF_W-1:0] k;     // neighbour index within the entry
  logic [3:0]       r;     // row index

  logic [VID_W-1:0] u;
  logic [AW-1:0]    s;
  assign u = eb_ent_i.nbr[k[$clog2(MAX_NBR)-1:0]];
  always_comb begin
    logic [VID_W-1:0] sh;
    sh = (u >> n_bits_i) & ((VID_W'(1) << x_bits_i) - 1'b1);
    s  = sh[AW-1:0];
  end
  assign rec_slot_o = s;

  logic [AW-1:0] b_row, a_row;
  always_comb begin
    b_row = AW'(int'(s) * int'(nrows_i) + int'(r));
    a_row = AW'(RES_ROWS + ((int'(eb_ent_i.rep_row) + int'(r)) % REP_ROWS));
  end
  assign rd_a_row_o = a_row;
  assign rd_b_row_o = b_row;

  // rows still in the aggregation pipeline
  localparam int unsigned HZ = 4;
  logic [HZ-1:0]   hz_v;
  logic [AW-1:0]   hz_row [HZ];
  logic hazard;
  always_comb begin
    hazard = 1'b0;
    for (int i = 0; i < HZ; i++) if (hz_v[i] && hz_row[i] == b_row) hazard = 1'b1;
  end

  logic last_row, last_nbr, is_last;
  assign last_row = (r == nrows_i - 1'b1);
  assign last_nbr = (k == eb_ent_i.nbr_cnt - 1'b1);
  assign is_last  = last_row && (rec_cnt_i + 1'b1 == rec_exp_i);

  assign agg_valid_o = en_i && !eb_empty_i && !hazard;
  assign first_o     = (rec_cnt_i == '0);
  assign tag_o       = {is_last, s, b_row};
  logic issue;
  assign issue     = agg_valid_o && agg_ready_i;
  assign rec_inc_o = issue && last_row;
  assign eb_pop_o  = issue && last_row && last_nbr;
  assign free_o    = eb_pop_o;
  assign free_rows_o = nrows_i;
  assign stall_o   = en_i && !eb_empty_i && hazard;

  // combination queue, entered when the last result of a slot is written
  typedef struct packed { logic [AW-1:0] slot; logic [VID_W-1:0] vid; } cq_t;
  localparam int unsigned DLY = 6;
  logic [DLY-1:0] dv;
  cq_t            dq [DLY];
  cq_t            cq_head;
  logic           cq_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; r <= '0; hz_v <= '0; dv <= '0;
      for (int i = 0; i < HZ; i++) hz_row[i] <= '0;
      for (int i = 0; i < DLY; i++) dq[i] <= '0;
    end else begin
      hz_v      <= {hz_v[HZ-2:0], issue};
      hz_row[0] <= b_row;
      for (int i = 1; i < HZ; i++) hz_row[i] <= hz_row[i-1];
      dv    <= {dv[DLY-2:0], issue && is_last};
      dq[0] <= '{slot: s, vid: rec_vid_i};
      for (int i = 1; i < DLY; i++) dq[i] <= dq[i-1];
      if (issue) begin
        if (!last_row) r <= r + 1'b1;
        else begin
          r <= '0;
          k <= last_nbr ? '0 : k + 1'b1;
        end
      end
    end
  end

  sync_fifo #(.T(cq_t), .DEPTH(CQ_DEPTH)) u_cq (
    .clk(clk), .rst_n(rst_n), .push_i(dv[DLY-1]), .data_i(dq[DLY-1]),
    .pop_i(comb_valid_o && comb_ready_i), .data_o(cq_head), .empty_o(cq_empty),
    .full_o(), .count_o()
  );
  assign comb_valid_o = !cq_empty;
  assign comb_slot_o  = cq_head.slot;
  assign comb_vid_o   = cq_head.vid;
endmodule
