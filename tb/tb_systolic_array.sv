// tb_systolic_array -- checks one 1 x 128 systolic array in both modes.
// Aggregation: random row pairs with tags, one per cycle with random gaps, for ADD, MIN
// and MAX; every result row and its tag must come out AGG_LAT = 3 cycles later.
// Combination: a clear cycle, then steps t = 0 .. F+N+2 with x = a[t] (0 for t >= F)
// and PE j's weight W[t-j][j]; afterwards acc_o must equal a x W (Q16.16).
module tb_systolic_array;
  import multigcn_pkg::*;
  localparam int unsigned N = LANES, F = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, cm = 0, av = 0, clr = 0;
  agg_op_e op = AGG_ADD;
  logic [15:0] tag = 0, rtag;
  logic [N-1:0][DW-1:0] a, b, res, w, acc;
  logic [DW-1:0] x = 0;
  logic rv;
  systolic_array #(.N(N), .TAG_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .comb_mode_i(cm), .op_i(op), .agg_valid_i(av),
    .agg_tag_i(tag), .op_a_i(a), .op_b_i(b), .res_valid_o(rv), .res_tag_o(rtag),
    .res_o(res), .clr_i(clr), .x_i(x), .w_i(w), .acc_o(acc));
  always #5 clk = ~clk;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    #10000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  typedef struct { logic [15:0] tag; logic [N-1:0][DW-1:0] r; int due; } ex_t;
  ex_t q [$];
  int cyc = 0;
  always @(negedge clk) cyc++;

  initial begin
    logic [DW-1:0] av_ [F];
    logic [DW-1:0] wm [F][N];
    a = '0; b = '0; w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int o = 0; o < 3; o++) begin
      op = agg_op_e'(o);
      for (int i = 0; i < 150; i++) begin
        @(negedge clk);
        if (q.size() != 0 && q[0].due == cyc) begin
          ex_t e;
          e = q.pop_front();
          chk(rv && rtag == e.tag && res == e.r, $sformatf("agg result op %0d tag %0d", o, e.tag));
        end else chk(!rv, "no spurious result");
        av = (i < 140) && ($urandom_range(0, 3) != 0);
        tag = 16'($urandom);
        for (int j = 0; j < N; j++) begin a[j] = $urandom; b[j] = $urandom; end
        if (av) begin
          ex_t e;
          e.tag = tag; e.due = cyc + 3;
          for (int j = 0; j < N; j++) e.r[j] = agg_reduce(op, a[j], b[j]);
          q.push_back(e);
        end
      end
    end
    av = 0;
    // combination
    for (int i = 0; i < F; i++) begin
      av_[i] = DW'($urandom_range(0, 1 << 20)) - DW'(1 << 19);
      for (int j = 0; j < N; j++) wm[i][j] = DW'($urandom_range(0, 1 << 18)) - DW'(1 << 17);
    end
    @(negedge clk); cm = 1; clr = 1; x = 0; w = '0;
    for (int t = 0; t <= F + N + 2; t++) begin
      @(negedge clk); clr = 0;
      x = (t < F) ? av_[t] : '0;
      for (int j = 0; j < N; j++) w[j] = (t - j >= 0 && t - j < F) ? wm[t-j][j] : '0;
    end
    @(negedge clk);
    for (int j = 0; j < N; j++) begin
      logic [DW-1:0] s;
      s = 0;
      for (int i = 0; i < F; i++) s = s + fx_mul(av_[i], wm[i][j]);
      chk(acc[j] == s, $sformatf("comb column %0d got %h want %h", j, acc[j], s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
