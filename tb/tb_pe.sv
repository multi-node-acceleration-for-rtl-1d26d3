// tb_pe -- checks one processing element. Aggregation mode: random operand pairs every
// cycle for ADD, MIN and MAX; each result must appear on out_o exactly three cycles
// later (the three-stage pipeline). Combination mode: a clear, then a stream of
// activation/weight pairs; the accumulator (out_o, two cycles behind the inputs) must
// equal the running sum of Q16.16 products, and a_o must forward the activation.
// Inputs are driven on the falling edge.
module tb_pe;
  import multigcn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cm = 0, clr = 0;
  agg_op_e op = AGG_ADD;
  logic [DW-1:0] a = 0, b = 0, ao, out;
  pe dut (.clk(clk), .rst_n(rst_n), .comb_mode_i(cm), .op_i(op), .clr_i(clr), .a_i(a),
          .b_i(b), .a_o(ao), .out_o(out));
  always #5 clk = ~clk;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [DW-1:0] exp_q [$];
    logic [DW-1:0] acc;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < 3; o++) begin
      op = agg_op_e'(o);
      exp_q = {};
      for (int i = 0; i < 200; i++) begin
        @(negedge clk);
        if (i >= 3) begin
          logic [DW-1:0] e;
          e = exp_q.pop_front();
          chk(out == e, $sformatf("agg op %0d got %h want %h", o, out, e));
        end
        a = $urandom; b = $urandom;
        exp_q.push_back(agg_reduce(op, a, b));
      end
    end
    // combination
    @(negedge clk); cm = 1; clr = 1; a = 0; b = 0;
    @(negedge clk); clr = 0;
    acc = 0;
    exp_q = {};
    for (int i = 0; i < 100; i++) begin
      a = DW'($urandom_range(0, 1 << 20)) - DW'(1 << 19);
      b = DW'($urandom_range(0, 1 << 18)) - DW'(1 << 17);
      acc = acc + fx_mul(a, b);
      exp_q.push_back(acc);
      @(negedge clk);
      chk(ao == a, "a forwarded");
      if (i >= 2) chk(out == exp_q[i-2], $sformatf("mac step %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
