// combination_buffer -- combination buffer of a processing node (256 KB in the paper).
//
// Collects finished combination results (one LANES-word row per vertex, with the DRAM
// line address it belongs to) and writes them to off-chip memory. DEPTH rows of 512 B
// (512 x 512 B = 256 KB). A row leaves as FLITS_PER_ROW consecutive 512-bit DRAM line
// writes at addresses addr, addr+1, ... with a valid/ready handshake.
// Using this buffer as the staging queue towards DRAM is this design's reading of the
// paper's block diagram (combination buffer connected to DRAM).
module combination_buffer
  import multigcn_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 push_i,
  input  logic [DADDR_W-1:0]   addr_i,
  input  logic [ROW_W-1:0]     row_i,
  output logic                 full_o,
  output logic                 empty_o,
  // DRAM write channel
  output logic                 dram_wvalid_o,
  output logic [DADDR_W-1:0]   dram_waddr_o,
  output logic [FLIT_W-1:0]    dram_wdata_o,
  input  logic                 dram_wready_i
);
  typedef struct packed {
    logic [DADDR_W-1:0] addr;
    logic [ROW_W-1:0]   row;
  } ent_t;

  ent_t head;
  logic empty;
  logic [$clog2(FLITS_PER_ROW)-1:0] fi;
  logic last;

  assign last = (fi == ($clog2(FLITS_PER_ROW))'(FLITS_PER_ROW-1));

  sync_fifo #(.T(ent_t), .DEPTH(DEPTH)) u_q (
    .clk(clk), .rst_n(rst_n), .push_i(push_i), .data_i('{addr: addr_i, row: row_i}),
    .pop_i(dram_wvalid_o && dram_wready_i && last), .data_o(head), .empty_o(empty),
    .full_o(full_o), .count_o()
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) fi <= '0;
    else if (dram_wvalid_o && dram_wready_i) fi <= last ? '0 : fi + 1'b1;
  end

  assign empty_o       = empty;
  assign dram_wvalid_o = !empty;
  assign dram_waddr_o  = head.addr + DADDR_W'(fi);
  assign dram_wdata_o  = head.row[int'(fi)*FLIT_W +: FLIT_W];
endmodule
