// send_unit -- builds multicast packets from what the loader reads and injects them
// into the router's local input port.
//
// The loader delivers DRAM lines: a send record (send_rec_t: the packet header with
// nID list, offset list and neighbour lists, prepared by the round partition) followed
// by the vertex's feature vector in hdr.nflits lines. The send unit turns the record
// into a header flit whose next destination is this node itself, so the router splits
// it right away (the paper's multicast starts with a split at the origin node), and
// every feature line into a data flit; the last flit is marked tail. Flits wait in the
// send buffer (DEPTH flits of 64 B: 8192 = the paper's 512 KB) until the router takes
// them. Valid/ready on both sides.
module send_unit
  import multigcn_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_x_i,
  input  logic [COORD_W-1:0] cur_y_i,
  // from the loader
  input  logic               ld_valid_i,
  input  logic               ld_is_rec_i,
  input  logic [FLIT_W-1:0]  ld_data_i,
  output logic               ld_ready_o,
  // to the router
  output logic               out_valid_o,
  output flit_t              out_flit_o,
  input  logic               out_ready_i,
  output logic               empty_o
);
  logic [FLEN_W-1:0] left;   // data flits still to come in the current packet
  flit_t f;
  send_rec_t rec;
  logic full, empty;

  assign rec = ld_data_i[$bits(send_rec_t)-1:0];

  always_comb begin
    hdr_t h;
    f = '0;
    h = rec.hdr;
    h.dst_x = cur_x_i;
    h.dst_y = cur_y_i;
    if (ld_is_rec_i) begin
      f.head = 1'b1;
      f.tail = (h.nflits == '0);
      f.pay[HDR_W-1:0] = h;
    end else begin
      f.tail = (left == 1);
      f.pay[FLIT_W-1:0] = ld_data_i;
    end
  end

  assign ld_ready_o = !full;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) left <= '0;
    else if (ld_valid_i && ld_ready_o) begin
      if (ld_is_rec_i) left <= rec.hdr.nflits;
      else             left <= left - 1'b1;
    end
  end

  sync_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_buf (
    .clk(clk), .rst_n(rst_n), .push_i(ld_valid_i && ld_ready_o), .data_i(f),
    .pop_i(out_valid_o && out_ready_i), .data_o(out_flit_o), .empty_o(empty),
    .full_o(full), .count_o()
  );
  assign out_valid_o = !empty;
  assign empty_o     = empty;

  a_data_expected: assert property (@(posedge clk) disable iff (!rst_n)
    (ld_valid_i && !ld_is_rec_i) |-> (left != '0));
endmodule
