// systolic_array -- one reusable 1 x LANES systolic array (LANES = 128 in the paper).
//
// Aggregation mode (comb_mode_i = 0): every PE handles one element of a 128-element
// slice of a feature vector. An operation presents two rows (op_a_i, op_b_i) and a tag;
// the reduced row and the same tag come out AGG_LAT = 3 cycles later with res_valid_o.
// One operation can enter every cycle.
// Combination mode (comb_mode_i = 1): output-stationary vector-matrix product. The
// element x[t] of the input vector enters PE 0 at cycle t and moves one PE to the right
// per cycle, so PE j sees x[t-j] at cycle t and must be given weight W[t-j][j] on w_i[j]
// (the weight buffer supplies this skewed read). After the last input, and one further
// cycle, PE j's accumulator holds sum_i x[i]*W[i][j]; acc_o shows all accumulators.
// Structure and modes follow the paper; the dataflow in combination mode is this
// design's choice.
module systolic_array
  import multigcn_pkg::*;
#(
  parameter int unsigned N     = LANES,
  parameter int unsigned TAG_W = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  comb_mode_i,
  input  agg_op_e               op_i,
  // aggregation
  input  logic                  agg_valid_i,
  input  logic [TAG_W-1:0]      agg_tag_i,
  input  logic [N-1:0][DW-1:0]  op_a_i,
  input  logic [N-1:0][DW-1:0]  op_b_i,
  output logic                  res_valid_o,
  output logic [TAG_W-1:0]      res_tag_o,
  output logic [N-1:0][DW-1:0]  res_o,
  // combination
  input  logic                  clr_i,
  input  logic [DW-1:0]         x_i,
  input  logic [N-1:0][DW-1:0]  w_i,
  output logic [N-1:0][DW-1:0]  acc_o
);

  localparam int unsigned AGG_LAT = 3;

  logic [N-1:0][DW-1:0] a_in, a_fwd, pe_out;
  logic [N-1:0][DW-1:0] b_in;

  for (genvar j = 0; j < N; j++) begin : g_pe
    if (j == 0) begin : g_first
      assign a_in[j] = comb_mode_i ? x_i : op_a_i[j];
    end else begin : g_rest
      assign a_in[j] = comb_mode_i ? a_fwd[j-1] : op_a_i[j];
    end
    assign b_in[j] = comb_mode_i ? w_i[j] : op_b_i[j];
    pe u_pe (
      .clk(clk), .rst_n(rst_n), .comb_mode_i(comb_mode_i), .op_i(op_i), .clr_i(clr_i),
      .a_i(a_in[j]), .b_i(b_in[j]), .a_o(a_fwd[j]), .out_o(pe_out[j])
    );
  end

  // valid/tag pipeline alongside the three PE stages
  logic [AGG_LAT-1:0]    vpipe;
  logic [TAG_W-1:0]      tpipe [AGG_LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vpipe <= '0;
      for (int i = 0; i < AGG_LAT; i++) tpipe[i] <= '0;
    end else begin
      vpipe <= {vpipe[AGG_LAT-2:0], agg_valid_i && !comb_mode_i};
      tpipe[0] <= agg_tag_i;
      for (int i = 1; i < AGG_LAT; i++) tpipe[i] <= tpipe[i-1];
    end
  end

  assign res_valid_o = vpipe[AGG_LAT-1];
  assign res_tag_o   = tpipe[AGG_LAT-1];
  assign res_o       = pe_out;
  assign acc_o       = pe_out;

endmodule
