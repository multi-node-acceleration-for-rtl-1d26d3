// tb_round_sync -- checks the round synchronisation of one node among 4: start gives the
// first go pulse (round 0); end_o rises after local_done; the next go pulse and round
// number come only when every node's end signal is set (the others finish at random
// times); after n_rounds rounds finished_o is set and no more go pulses appear.
module tb_round_sync;
  localparam int unsigned NODES = 4, R = 5;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, ldone = 0, endo, go, active, fin;
  logic [NODES-1:0] all_end;
  logic [15:0] round;
  logic [NODES-1:1] others = '0;
  assign all_end = {others, endo};
  round_sync #(.NODES(NODES)) dut (.clk(clk), .rst_n(rst_n), .start_i(start),
    .n_rounds_i(16'(R)), .local_done_i(ldone), .end_o(endo), .all_end_i(all_end),
    .go_o(go), .round_o(round), .active_o(active), .finished_o(fin));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  int gos = 0;
  always @(posedge clk) begin #1; if (rst_n && go) gos++; end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); chk(!go && !active && !fin, "idle after reset");
    start = 1; @(negedge clk); start = 0;
    for (int r = 0; r < R; r++) begin
      int d;
      chk(gos == r + 1 && int'(round) == r && active, $sformatf("round %0d started", r));
      d = $urandom_range(1, 20);
      repeat (d) @(negedge clk);
      chk(!endo, "no end before local done");
      ldone = 1;
      @(negedge clk); @(negedge clk);
      chk(endo, "end after local done");
      repeat ($urandom_range(1, 10)) begin
        @(negedge clk);
        chk(gos == r + 1, "no go before all ends");
        others[1] = 1'b1;   // node 2 and 3 still busy
      end
      others = '1;
      @(negedge clk); others = '0; ldone = 0;
      @(negedge clk);
    end
    repeat (20) @(negedge clk);
    chk(fin && !active && gos == R, "finished after all rounds");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
