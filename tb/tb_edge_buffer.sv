// tb_edge_buffer -- checks the edge buffer as a FIFO of edge entries (DEPTH 16 here):
// random pushes and pops, entries leave in order with all fields intact, full_o, empty_o
// and count_o track a reference queue. Inputs driven on the falling edge.
module tb_edge_buffer;
  import multigcn_pkg::*;
  localparam int unsigned D = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, full, empty;
  edge_ent_t ein, eout;
  logic [$clog2(D+1)-1:0] cnt;
  edge_buffer #(.DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .push_i(push), .ent_i(ein),
    .full_o(full), .pop_i(pop), .ent_o(eout), .empty_o(empty), .count_o(cnt));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    edge_ent_t q [$];
    ein = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      chk(int'(cnt) == q.size() && empty == (q.size() == 0) && full == (q.size() == D), "flags");
      if (q.size() != 0) chk(eout == q[0], "head entry");
      push = ($urandom_range(0, 99) < (i < 1000 ? 70 : 30)) && q.size() < D;
      pop  = ($urandom_range(0, 99) < 50) && q.size() != 0;
      ein.rep_row = 16'($urandom); ein.nrows = 4'($urandom_range(1, 8));
      ein.nbr_cnt = OFF_W'($urandom_range(1, MAX_NBR));
      for (int k = 0; k < MAX_NBR; k++) ein.nbr[k] = $urandom;
      @(posedge clk); #1;
      if (pop) void'(q.pop_front());
      if (push) q.push_back(ein);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
