// tb_scheduler -- checks the scheduler with models of the edge buffer, the progress
// records and the compute unit (accepting at random). Random edge entries (1..8 local
// neighbours among 4 slots, nrows = 2) are queued; for every operation issued the test
// checks the operand rows (replica row RES + (rep + r) mod 16, result row slot*2 + r),
// the first flag (no earlier contribution), that the result row is not one of the last
// three issued (hazard), the order (rows of a neighbour, then the next neighbour) and
// the entry pop/free. Every slot must be queued for combination exactly when its
// contribution count reaches the expected number, with its vertex ID. No operation
// may issue before en_i.
module tb_scheduler;
  import multigcn_pkg::*;
  localparam int unsigned ROWS = 64, RES = 48, REP = 16, AW = 6, TW = 13;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, en = 0, ebe, pop, rinc, av, ardy = 0, first, cv, crdy = 0, fr, st;
  edge_ent_t ent;
  logic [AW-1:0] rslot, ra, rb, cslot;
  logic [15:0] rcnt, rexp;
  logic [VID_W-1:0] rvid, cvid;
  logic [TW-1:0] tag;
  logic [3:0] frows;
  scheduler #(.ROWS(ROWS)) dut (.clk(clk), .rst_n(rst_n), .en_i(en), .nrows_i(4'd2),
    .n_bits_i(5'd2), .x_bits_i(5'd2), .eb_empty_i(ebe), .eb_ent_i(ent), .eb_pop_o(pop),
    .rec_slot_o(rslot), .rec_cnt_i(rcnt), .rec_exp_i(rexp), .rec_vid_i(rvid),
    .rec_inc_o(rinc), .rd_a_row_o(ra), .rd_b_row_o(rb), .agg_valid_o(av),
    .agg_ready_i(ardy), .first_o(first), .tag_o(tag), .comb_valid_o(cv),
    .comb_ready_i(crdy), .comb_slot_o(cslot), .comb_vid_o(cvid), .free_o(fr),
    .free_rows_o(frows), .stall_o(st));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #5000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  edge_ent_t eq [$];
  int cnt [4], expd [4], vid [4], ncomb [4];
  int k = 0, r = 0, stalls = 0;
  int last_b [3] = '{-1, -1, -1};
  assign ebe = (eq.size() == 0);
  assign ent = ebe ? '0 : eq[0];
  assign rcnt = 16'(cnt[rslot]); assign rexp = 16'(expd[rslot]); assign rvid = 32'(vid[rslot]);
  always @(posedge clk) if (rst_n) begin
    int b;
    if (st) stalls++;
    b = -1;
    if (av && ardy) begin
      int u, s;
      chk(en, "no op before en");
      u = int'(eq[0].nbr[k]); s = (u >> 2) & 3;
      b = s * 2 + r;
      chk(int'(ra) == RES + (int'(eq[0].rep_row) + r) % REP, "A row");
      chk(int'(rb) == b, "B row");
      chk(first == (cnt[s] == 0), "first flag");
      chk(b != last_b[0] && b != last_b[1] && b != last_b[2], "hazard respected");
      chk(tag[TW-2:0] == {AW'(s), AW'(b)}, "tag");
      chk(tag[TW-1] == (r == 1 && cnt[s] + 1 == expd[s]), "last tag");
      chk(rinc == (r == 1), "rec_inc on last row");
      chk(pop == (r == 1 && k == int'(eq[0].nbr_cnt) - 1) && fr == pop, "pop/free");
      if (r == 1) begin
        cnt[s]++;
        r = 0;
        if (k == int'(eq[0].nbr_cnt) - 1) begin k = 0; void'(eq.pop_front()); end else k++;
      end else r = 1;
    end else chk(!pop && !rinc, "no pop without op");
    last_b[2] = last_b[1]; last_b[1] = last_b[0]; last_b[0] = b;
    if (cv && crdy) begin
      int s; s = int'(cslot);
      chk(cnt[s] == expd[s] && int'(cvid) == vid[s], "combination when complete");
      ncomb[s]++;
    end
  end
  always @(negedge clk) begin ardy = ($urandom_range(0, 99) < 70); crdy = ($urandom_range(0, 99) < 50); end
  initial begin
    int tot [4];
    for (int s = 0; s < 4; s++) begin cnt[s] = 0; tot[s] = 0; ncomb[s] = 0; vid[s] = (s << 2) | 1 | ($urandom_range(0, 15) << 4); end
    for (int e = 0; e < 40; e++) begin
      edge_ent_t x; int n;
      n = $urandom_range(1, MAX_NBR);
      x = '0; x.rep_row = 16'($urandom_range(0, REP - 1)); x.nrows = 2; x.nbr_cnt = OFF_W'(n);
      for (int j = 0; j < n; j++) begin
        int s; s = $urandom_range(0, 3);
        x.nbr[j] = 32'(($urandom_range(0, 15) << 4) | (s << 2) | 1);
        tot[s]++;
      end
      eq.push_back(x);
    end
    for (int s = 0; s < 4; s++) expd[s] = tot[s];
    repeat (2) @(negedge clk); rst_n = 1;
    repeat (20) @(negedge clk);
    en = 1;
    repeat (3000) @(negedge clk);
    chk(eq.size() == 0, "all entries processed");
    for (int s = 0; s < 4; s++) chk(ncomb[s] == (tot[s] > 0 ? 1 : 0), $sformatf("slot %0d combined once", s));
    chk(stalls > 0, "hazard stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
