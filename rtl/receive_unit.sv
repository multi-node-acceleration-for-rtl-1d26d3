// receive_unit -- takes the packets the router delivers to this node (part P0 of a
// multicast) and stores them for aggregation.
//
// On a header flit it reads the neighbour list that belongs to this node (entries
// offset[0] .. offset[1]-1, this node being the only nID left in a P0 header) and
// allocates nrows rows in the replica region of the aggregation buffer (circular,
// REP_ROWS rows above the result region). The following data flits are written into
// those rows, FLITS_PER_ROW flits per row. After the tail flit an edge-buffer entry
// {replica row, nrows, neighbour list} is pushed. A header is accepted only when the
// replica region has nrows free rows and the edge buffer has room; otherwise the
// router is held (stall_o). The scheduler returns rows with free_i.
// This follows step 3 of the paper's round execution ("save a replica in aggregation
// buffer; save {buffer address, v's neighbours} to edge buffer"); the allocation scheme
// is this design's choice.
module receive_unit
  import multigcn_pkg::*;
#(
  parameter int unsigned ROWS     = 2048,
  parameter int unsigned RES_ROWS = (ROWS * 3) / 4,
  parameter int unsigned AW       = $clog2(ROWS)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [3:0]                        nrows_i,
  // from the router's local output port
  input  logic                              in_valid_i,
  input  flit_t                             in_flit_i,
  output logic                              in_ready_o,
  // aggregation buffer flit writes
  output logic                              wr_en_o,
  output logic [AW-1:0]                     wr_row_o,
  output logic [$clog2(FLITS_PER_ROW)-1:0]  wr_fi_o,
  output logic [FLIT_W-1:0]                 wr_data_o,
  // edge buffer
  output logic                              eb_push_o,
  output edge_ent_t                         eb_ent_o,
  input  logic                              eb_full_i,
  // replica rows returned by the scheduler
  input  logic                              free_i,
  input  logic [3:0]                        free_rows_i,
  output logic                              stall_o
);
  localparam int unsigned REP_ROWS = ROWS - RES_ROWS;
  localparam int unsigned RW = $clog2(REP_ROWS + 1);

  logic            in_pkt;      // between header and tail
  edge_ent_t       ent;
  logic [RW-1:0]   used;        // replica rows in use
  logic [RW-1:0]   alloc;       // next free replica row (offset in the region)
  logic [FLEN_W-1:0] fcnt;      // data flits received

  hdr_t h;
  assign h = in_flit_i.pay[HDR_W-1:0];

  logic room;
  assign room = (int'(used) + int'(nrows_i) <= int'(REP_ROWS)) && !eb_full_i;
  assign in_ready_o = in_pkt ? 1'b1 : room;
  assign stall_o    = in_valid_i && !in_ready_o;

  logic take;
  assign take = in_valid_i && in_ready_o;

  always_comb begin
    int unsigned fr;
    fr       = int'(fcnt) / FLITS_PER_ROW;
    wr_en_o  = take && in_pkt && !in_flit_i.head;
    wr_row_o = AW'(RES_ROWS + ((int'(ent.rep_row) + fr) % REP_ROWS));
    wr_fi_o  = ($clog2(FLITS_PER_ROW))'(int'(fcnt) % FLITS_PER_ROW);
    wr_data_o = in_flit_i.pay[FLIT_W-1:0];
  end

  // the entry is pushed with the tail flit (or with a header without data)
  edge_ent_t new_ent;
  always_comb begin
    new_ent = '0;
    new_ent.rep_row = 16'(alloc);
    new_ent.nrows   = nrows_i;
    new_ent.nbr_cnt = h.offset[1] - h.offset[0];
    for (int j = 0; j < MAX_NBR; j++)
      if (j >= int'(h.offset[0]) && j < int'(h.offset[1]))
        new_ent.nbr[j - int'(h.offset[0])] = h.nbr[j];
  end
  assign eb_push_o = take && in_flit_i.tail;
  assign eb_ent_o  = in_flit_i.head ? new_ent : ent;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_pkt <= 1'b0; ent <= '0; used <= '0; alloc <= '0; fcnt <= '0;
    end else begin
      used <= used + ((take && in_flit_i.head) ? RW'(nrows_i) : '0)
                   - (free_i ? RW'(free_rows_i) : '0);
      if (take) begin
        if (in_flit_i.head) begin
          ent    <= new_ent;
          in_pkt <= !in_flit_i.tail;
          fcnt   <= '0;
          alloc  <= RW'((int'(alloc) + int'(nrows_i)) % REP_ROWS);
        end else begin
          fcnt <= fcnt + 1'b1;
          if (in_flit_i.tail) in_pkt <= 1'b0;
        end
      end
    end
  end

  a_head_first: assert property (@(posedge clk) disable iff (!rst_n)
    (take && !in_pkt) |-> in_flit_i.head);
  a_p0_only: assert property (@(posedge clk) disable iff (!rst_n)
    (take && in_flit_i.head) |-> (h.nid_cnt == 1));
endmodule
