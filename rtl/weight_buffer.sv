// weight_buffer -- weight buffer of a processing node (2 MB in the paper).
//
// Holds the weight matrix W (input features x LANES output features) of the layer, as
// LANES column banks of WROWS 32-bit words (128 x 4096 x 4 B = 2 MB). Banking by
// column lets every systolic array read the skewed diagonal its combination dataflow
// needs: read port p at step t_i returns, for lane j, W[t-j][j] when 0 <= t-j < f_in_i
// and zero otherwise. There is one read port per systolic array.
// The write port takes one 16-word flit of a row: lanes 16*fi .. 16*fi+15 of row.
// The banked organisation is this design's choice; the paper gives the capacity only.
module weight_buffer
  import multigcn_pkg::*;
#(
  parameter int unsigned WROWS = 4096,
  parameter int unsigned NRD   = NUM_SA,
  parameter int unsigned N     = LANES
) (
  input  logic                        clk,
  input  logic                        we_i,
  input  logic [$clog2(WROWS)-1:0]    wrow_i,
  input  logic [$clog2(N/FLIT_ELEMS)-1:0] wfi_i,
  input  logic [FLIT_W-1:0]           wdata_i,
  input  logic [15:0]                 f_in_i,
  input  logic [15:0]                 t_i   [NRD],
  output logic [N-1:0][DW-1:0]        w_o   [NRD]
);

  logic [DW-1:0] bank [N][WROWS];

  always_ff @(posedge clk) begin
    if (we_i)
      for (int e = 0; e < FLIT_ELEMS; e++)
        bank[int'(wfi_i)*FLIT_ELEMS + e][wrow_i] <= wdata_i[e*DW +: DW];
  end

  always_comb begin
    for (int p = 0; p < NRD; p++)
      for (int j = 0; j < N; j++) begin
        int r;
        r = int'(t_i[p]) - j;
        w_o[p][j] = (r >= 0 && r < int'(f_in_i) && r < int'(WROWS)) ?
                    bank[j][r[$clog2(WROWS)-1:0]] : '0;
      end
  end
endmodule
