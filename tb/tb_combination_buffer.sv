// tb_combination_buffer -- checks the combination buffer (DEPTH 4 here): random result
// rows with DRAM addresses are pushed while full_o allows, the DRAM side accepts at
// random; every row must leave as 8 line writes at addr .. addr+7 with the row's words
// in order, rows in push order, and empty_o must be set at the end.
module tb_combination_buffer;
  import multigcn_pkg::*;
  localparam int unsigned D = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, push = 0, full, empty, wv, wr = 0;
  logic [DADDR_W-1:0] addr = 0, waddr;
  logic [ROW_W-1:0] row = 0;
  logic [FLIT_W-1:0] wdata;
  combination_buffer #(.DEPTH(D)) dut (.clk(clk), .rst_n(rst_n), .push_i(push),
    .addr_i(addr), .row_i(row), .full_o(full), .empty_o(empty), .dram_wvalid_o(wv),
    .dram_waddr_o(waddr), .dram_wdata_o(wdata), .dram_wready_i(wr));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #2000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  typedef struct { logic [DADDR_W-1:0] a; logic [FLIT_W-1:0] d; } ln_t;
  ln_t exp_q [$];
  int pushed = 0;
  always @(posedge clk) if (rst_n && wv && wr) begin
    ln_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: unexpected write"); end
    else begin
      e = exp_q.pop_front();
      if (waddr != e.a || wdata != e.d) begin
        failures++; if (failures < 10) $display("FAIL: write %h want %h", waddr, e.a);
      end
    end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    while (pushed < 40) begin
      @(negedge clk);
      wr = ($urandom_range(0, 99) < 40);
      push = !full && ($urandom_range(0, 99) < 50);
      addr = $urandom;
      for (int i = 0; i < ROW_W / 32; i++) row[i*32 +: 32] = $urandom;
      if (push) begin
        pushed++;
        for (int f = 0; f < FLITS_PER_ROW; f++) begin
          ln_t e;
          e.a = addr + DADDR_W'(f); e.d = row[f*FLIT_W +: FLIT_W];
          exp_q.push_back(e);
        end
      end
    end
    @(negedge clk); push = 0;
    repeat (1000) begin @(negedge clk); wr = ($urandom_range(0, 99) < 40); end
    checks++;
    if (exp_q.size() != 0 || !empty) begin failures++; $display("FAIL: not drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
