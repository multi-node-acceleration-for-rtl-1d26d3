// sync_fifo -- single-clock first-in first-out queue of DEPTH entries of type T.
// push_i is taken when full_o is low; pop_i removes the head shown on data_o when
// empty_o is low. count_o gives the fill level. Written as an array with a read
// pointer so it maps onto a two-port SRAM; the head is read asynchronously.
module sync_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_i,
  input  T                           data_i,
  input  logic                       pop_i,
  output T                           data_o,
  output logic                       empty_o,
  output logic                       full_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T              mem [DEPTH];
  logic [PW-1:0] wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;
  logic do_push, do_pop;

  assign do_push = push_i && (cnt != ($clog2(DEPTH+1))'(DEPTH));
  assign do_pop  = pop_i && (cnt != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (do_push) begin
        mem[wp] <= data_i;
        wp <= (wp == PW'(DEPTH-1)) ? '0 : wp + 1'b1;
      end
      if (do_pop) rp <= (rp == PW'(DEPTH-1)) ? '0 : rp + 1'b1;
      cnt <= cnt + ($clog2(DEPTH+1))'(do_push) - ($clog2(DEPTH+1))'(do_pop);
    end
  end

  assign data_o  = mem[rp];
  assign empty_o = (cnt == '0);
  assign full_o  = (cnt == ($clog2(DEPTH+1))'(DEPTH));
  assign count_o = cnt;
endmodule
