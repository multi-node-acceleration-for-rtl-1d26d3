// aggregation_buffer -- aggregation buffer of a processing node (1 MB in the paper).
//
// Rows of LANES 32-bit words (512 B), ROWS = 2048 rows = 1 MB. The lower RES_ROWS rows
// (alpha = 0.75 of the capacity, the paper's setting) hold the intermediate aggregation
// results of the vertices of the current round; slot s occupies rows
// s*nrows .. s*nrows+nrows-1. The upper rows are a circular region for received
// feature-vector replicas, managed by the receive unit and the scheduler.
// Beside the results the buffer keeps each slot's progress record: the vertex ID, the
// number of replicas it waits for and the number already aggregated (the paper records
// "the aggregation process aside the intermediate result").
// Ports (all reads asynchronous, writes on the clock edge):
//   * flit write (receive unit): 16 words into row wr_row_i, flit position wr_fi_i;
//   * two row reads A/B and one row write (aggregation operands and result);
//   * NUM_SA row reads, one per systolic array, for combination input;
//   * record initialisation (loader) and increment (scheduler), record read.
// The split into result and replica regions by alpha follows the paper; the port set
// is this design's choice (a real macro would bank these ports).
module aggregation_buffer
  import multigcn_pkg::*;
#(
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned RES_ROWS = (ROWS * 3) / 4,
  parameter int unsigned NRD      = NUM_SA,
  parameter int unsigned AW       = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // flit write
  input  logic                      wr_en_i,
  input  logic [AW-1:0]             wr_row_i,
  input  logic [$clog2(FLITS_PER_ROW)-1:0] wr_fi_i,
  input  logic [FLIT_W-1:0]         wr_data_i,
  // aggregation operands / result
  input  logic [AW-1:0]             rd_a_row_i,
  output logic [ROW_W-1:0]          rd_a_o,
  input  logic [AW-1:0]             rd_b_row_i,
  output logic [ROW_W-1:0]          rd_b_o,
  input  logic                      res_we_i,
  input  logic [AW-1:0]             res_row_i,
  input  logic [ROW_W-1:0]          res_i,
  // combination reads
  input  logic [AW-1:0]             cb_row_i [NRD],
  output logic [ROW_W-1:0]          cb_o     [NRD],
  // progress records
  input  logic                      rec_init_i,
  input  logic [AW-1:0]             rec_init_slot_i,
  input  agg_rec_t                  rec_init_i_data,
  input  logic                      rec_inc_i,
  input  logic [AW-1:0]             rec_slot_i,
  output logic [15:0]               rec_cnt_o,
  output logic [15:0]               rec_exp_o,
  output logic [VID_W-1:0]          rec_vid_o
);

  logic [ROW_W-1:0] mem [ROWS];
  logic [15:0]      rec_cnt [RES_ROWS];
  agg_rec_t         rec     [RES_ROWS];

  always_ff @(posedge clk) begin
    if (wr_en_i) mem[wr_row_i][int'(wr_fi_i)*FLIT_W +: FLIT_W] <= wr_data_i;
    if (res_we_i) mem[res_row_i] <= res_i;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < RES_ROWS; s++) begin
        rec_cnt[s] <= '0;
        rec[s]     <= '0;
      end
    end else begin
      if (rec_init_i) begin
        rec[rec_init_slot_i]     <= rec_init_i_data;
        rec_cnt[rec_init_slot_i] <= '0;
      end else if (rec_inc_i) begin
        rec_cnt[rec_slot_i] <= rec_cnt[rec_slot_i] + 1'b1;
      end
    end
  end

  assign rd_a_o = mem[rd_a_row_i];
  assign rd_b_o = mem[rd_b_row_i];
  for (genvar i = 0; i < NRD; i++) begin : g_cb
    assign cb_o[i] = mem[cb_row_i[i]];
  end
  assign rec_cnt_o = rec_cnt[rec_slot_i];
  assign rec_exp_o = rec[rec_slot_i].expected;
  assign rec_vid_o = rec[rec_slot_i].vid;

  a_res_in_region: assert property (@(posedge clk) disable iff (!rst_n)
    res_we_i |-> (res_row_i < AW'(RES_ROWS)));
  a_rep_in_region: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en_i |-> (wr_row_i >= AW'(RES_ROWS)));
endmodule
