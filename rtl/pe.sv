// pe -- processing element of a reusable systolic array.
//
// Four registers: two input registers (in_a, in_b), one output register (out) and one
// internal register (internal), plus an ALU that can multiply (Q16.16 fixed point) and
// reduce (ADD, MIN, MAX).
//  * Aggregation mode: a three-stage pipeline. Stage 1 loads the two operands into the
//    input registers, stage 2 reduces them into the internal register, stage 3 writes
//    the output register. A result appears on out_o three cycles after its operands.
//  * Combination mode: a multiply-accumulate cell of an output-stationary systolic
//    array. in_a takes the activation from the left neighbour (and passes it on through
//    a_o), in_b takes the weight, internal accumulates in_a*in_b. clr_i empties the
//    accumulator while loading new inputs. out_o shows the accumulator one cycle later.
// The register set and the three-stage aggregation pipeline follow the paper; the
// fixed-point format and the combination dataflow are this design's choices.
module pe
  import multigcn_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          comb_mode_i,   // 1: combination, 0: aggregation
  input  agg_op_e       op_i,          // reduction used in aggregation mode
  input  logic          clr_i,         // combination: clear the accumulator
  input  logic [DW-1:0] a_i,
  input  logic [DW-1:0] b_i,
  output logic [DW-1:0] a_o,           // in_a, to the right neighbour
  output logic [DW-1:0] out_o
);

  logic [DW-1:0] in_a, in_b, internal, out_q;
  agg_op_e       op_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_a <= '0; in_b <= '0; internal <= '0; out_q <= '0; op_q <= AGG_ADD;
    end else begin
      in_a <= a_i;
      in_b <= b_i;
      op_q <= op_i;
      if (comb_mode_i) begin
        internal <= clr_i ? '0 : internal + fx_mul(in_a, in_b);
      end else begin
        internal <= agg_reduce(op_q, in_a, in_b);
      end
      out_q <= internal;
    end
  end

  assign a_o   = in_a;
  assign out_o = out_q;

endmodule
