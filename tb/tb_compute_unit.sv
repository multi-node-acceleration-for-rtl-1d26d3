// tb_compute_unit -- checks the compute unit with two arrays of 128 PEs, models of the
// aggregation-buffer and weight-buffer read ports, and a combination buffer that is full
// at random. A stream of random aggregate operations (ADD, with random first flags)
// runs while combination requests for 6 vertices arrive: every aggregation result and
// tag must come out 3 cycles after issue, each combination must produce a_v x W
// (f_in = 40, Q16.16) at DRAM address out_base + (vid >> n) * 8, and aggregation must
// keep going while an array combines.
module tb_compute_unit;
  import multigcn_pkg::*;
  localparam int unsigned N = LANES, NSA = 2, AW = 6, TW = 13, F = 40;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, av = 0, ardy, first = 0, rv, cv = 0, crdy, push, full = 0, done;
  logic [TW-1:0] tag = 0, rtag;
  logic [N-1:0][DW-1:0] a = '0, b = '0, res;
  logic [AW-1:0] cslot = 0;
  logic [VID_W-1:0] cvid = 0;
  logic [AW-1:0] cbr [NSA];
  logic [N*DW-1:0] cbi [NSA];
  logic [15:0] wt [NSA];
  logic [N-1:0][DW-1:0] wi [NSA];
  logic [DADDR_W-1:0] oaddr;
  logic [N*DW-1:0] orow;
  logic [NSA-1:0] busy;
  compute_unit #(.N(N), .NSA(NSA), .AW(AW)) dut (.clk(clk), .rst_n(rst_n), .op_i(AGG_ADD),
    .f_in_i(16'(F)), .nrows_i(4'd1), .n_bits_i(5'd4), .out_base_i(32'h1000),
    .agg_valid_i(av), .agg_ready_o(ardy), .first_i(first), .tag_i(tag), .op_a_i(a),
    .op_b_i(b), .res_valid_o(rv), .res_tag_o(rtag), .res_o(res), .comb_valid_i(cv),
    .comb_ready_o(crdy), .comb_slot_i(cslot), .comb_vid_i(cvid), .cb_row_o(cbr),
    .cb_i(cbi), .w_t_o(wt), .w_i(wi), .out_push_o(push), .out_addr_o(oaddr),
    .out_row_o(orow), .out_full_i(full), .comb_done_o(done), .comb_busy_o(busy));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #10000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [DW-1:0] arow [8][N];
  logic [DW-1:0] wm [F][N];
  always_comb for (int p = 0; p < NSA; p++) begin
    for (int j = 0; j < N; j++) begin
      int r; r = int'(wt[p]) - j;
      wi[p][j] = (r >= 0 && r < F) ? wm[r][j] : '0;
      cbi[p][j*DW +: DW] = arow[cbr[p] % 8][j];
    end
  end
  typedef struct { logic [TW-1:0] t; logic [N-1:0][DW-1:0] r; int due; } ex_t;
  ex_t q [$];
  int cyc = 0, ncomb = 0, nmixed = 0;
  int pend_vid [$];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (q.size() != 0 && q[0].due == cyc) begin
      ex_t e; e = q.pop_front();
      chk(rv && rtag == e.t && res == e.r, "aggregation result");
    end else chk(!rv, "no spurious result");
    if (av && ardy) begin
      ex_t e; e.t = tag; e.due = cyc + 3;
      for (int j = 0; j < N; j++) e.r[j] = a[j] + (first ? '0 : b[j]);
      q.push_back(e);
      if (busy != '0) nmixed++;
    end
    if (push) begin
      int v, s; logic ok;
      v = pend_vid.pop_front(); s = (v >> 4) & 7;
      ok = (oaddr == 32'h1000 + 32'((v >> 4) * 8));
      for (int j = 0; j < N; j++) begin
        logic [DW-1:0] acc; acc = 0;
        for (int i = 0; i < F; i++) acc = acc + fx_mul(arow[s][i], wm[i][j]);
        if (orow[j*DW +: DW] != acc) ok = 0;
      end
      chk(ok, $sformatf("combination of vertex %0d", v));
      ncomb++;
    end
  end
  initial begin
    for (int s = 0; s < 8; s++) for (int j = 0; j < N; j++) arow[s][j] = DW'($urandom_range(0, 1 << 20)) - DW'(1 << 19);
    for (int i = 0; i < F; i++) for (int j = 0; j < N; j++) wm[i][j] = DW'($urandom_range(0, 1 << 18)) - DW'(1 << 17);
    repeat (2) @(negedge clk); rst_n = 1;
    fork
      for (int i = 0; i < 3000; i++) begin
        @(negedge clk);
        full = ($urandom_range(0, 3) == 0);
        av = ($urandom_range(0, 99) < 60); first = $urandom_range(0, 1); tag = TW'($urandom);
        for (int j = 0; j < N; j++) begin a[j] = $urandom; b[j] = $urandom; end
      end
      for (int c = 0; c < 6; c++) begin
        int v;
        repeat ($urandom_range(0, 200)) @(negedge clk);
        v = ($urandom_range(0, 255) << 7) | ((c % 8) << 4) | 3;
        cv = 1; cslot = AW'(c % 8); cvid = 32'(v);
        @(posedge clk); while (!crdy) @(posedge clk);
        pend_vid.push_back(v);
        @(negedge clk); cv = 0;
      end
    join
    @(negedge clk); av = 0; full = 0;
    repeat (400) @(negedge clk);
    chk(ncomb == 6, "all combinations done");
    chk(nmixed > 0, "aggregation during combination");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
