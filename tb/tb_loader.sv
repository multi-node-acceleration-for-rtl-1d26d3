// tb_loader -- checks the loader against a DRAM model with random grant and latency:
// the weight matrix (6 rows = 48 lines) must reach the weight buffer in order with the
// right row/part numbers, then w_loaded_o; in each of 3 rounds (started by go pulses)
// the round's aggregation-slot records must be written to their slots (vID bits
// [n, n+x) with n = 4, x = 2) before agg_ready_o, and the send records with their feature
// lines must come out of the loader buffer in order, flagged as record or data, before
// round_loaded_o. The send-unit side accepts at random.
module tb_loader;
  import multigcn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, start = 0, go = 0;
  logic [15:0] round = 0, nagg;
  logic wl, ar, rl, req, gnt = 0, rv = 0, we, rinit, lv, lrec, lrdy = 0;
  logic [DADDR_W-1:0] addr;
  logic [FLIT_W-1:0] rdata = 0, wdata, ldata;
  logic [11:0] wrow; logic [2:0] wfi;
  logic [10:0] rslot;
  agg_rec_t rrec;
  loader #(.DEPTH(16), .MAX_OUT(4)) dut (.clk(clk), .rst_n(rst_n), .start_i(start),
    .w_base_i(32'd100), .desc_base_i(32'd1000), .f_in_i(16'd6), .n_bits_i(5'd4),
    .x_bits_i(5'd2), .go_i(go), .round_i(round), .w_loaded_o(wl), .agg_ready_o(ar),
    .round_loaded_o(rl), .n_agg_o(nagg), .dram_req_o(req), .dram_addr_o(addr),
    .dram_gnt_i(gnt), .dram_rvalid_i(rv), .dram_rdata_i(rdata), .w_we_o(we),
    .w_row_o(wrow), .w_fi_o(wfi), .w_data_o(wdata), .rec_init_o(rinit),
    .rec_slot_o(rslot), .rec_o(rrec), .ld_valid_o(lv), .ld_is_rec_o(lrec),
    .ld_data_o(ldata), .ld_ready_i(lrdy));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #5000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [FLIT_W-1:0] mem [int];
  function automatic logic [FLIT_W-1:0] rd(int a);
    return mem.exists(a) ? mem[a] : {16{32'(a)}};
  endfunction
  // DRAM model
  typedef struct { int a; int due; } q_t;
  q_t q [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (req && gnt) begin q_t e; e.a = int'(addr); e.due = cyc + $urandom_range(1, 8); q.push_back(e); end
    gnt <= ($urandom_range(0, 99) < 60);
    if (q.size() != 0 && q[0].due <= cyc) begin q_t e; e = q.pop_front(); rv <= 1; rdata <= rd(e.a); end
    else rv <= 0;
    lrdy <= ($urandom_range(0, 99) < 50);
  end
  // expected streams
  int wexp = 0;
  agg_rec_t aexp [$];
  logic [FLIT_W:0] lexp [$];
  always @(posedge clk) if (rst_n) begin
    if (we) begin
      chk(int'(wrow) == wexp / 8 && int'(wfi) == wexp % 8 && wdata == rd(100 + wexp), "weight line");
      wexp++;
    end
    if (rinit) begin
      agg_rec_t e;
      e = aexp.pop_front();
      chk(rrec == e && int'(rslot) == int'((e.vid >> 4) & 3), "aggregation record");
    end
    if (lv && lrdy) begin
      logic [FLIT_W:0] e;
      e = lexp.pop_front();
      chk({lrec, ldata} == e, "loader buffer line");
    end
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      round_desc_t d; logic [FLIT_W-1:0] l;
      d.agg_base = 32'(2000 + 100*r); d.n_agg = 16'(r + 1);
      d.send_base = 32'(3000 + 100*r); d.n_send = 16'(r == 1 ? 0 : 3);
      l = '0; l[$bits(round_desc_t)-1:0] = d; mem[1000 + r] = l;
      for (int i = 0; i < r + 1; i++) begin
        agg_rec_t a;
        a.vid = $urandom; a.expected = 16'($urandom);
        l = '0; l[$bits(agg_rec_t)-1:0] = a; mem[2000 + 100*r + i] = l;
        aexp.push_back(a);
      end
      for (int i = 0; i < int'(d.n_send); i++) begin
        send_rec_t s; int nf;
        nf = (i == 1) ? 0 : $urandom_range(1, 5);
        s = '0; s.feat_addr = 32'(5000 + 100*r + 10*i); s.hdr.nflits = FLEN_W'(nf);
        s.hdr.src_vid = $urandom;
        l = '0; l[$bits(send_rec_t)-1:0] = s; mem[3000 + 100*r + i] = l;
        lexp.push_back({1'b1, l});
        for (int f = 0; f < nf; f++) lexp.push_back({1'b0, rd(int'(s.feat_addr) + f)});
      end
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (wl); @(negedge clk);
    chk(wexp == 48, "all weight lines");
    for (int r = 0; r < 3; r++) begin
      round = 16'(r); go = 1; @(negedge clk); go = 0;
      wait (ar); @(negedge clk);
      chk(int'(nagg) == r + 1, "n_agg");
      wait (rl); @(negedge clk);
      repeat (60) @(negedge clk);
    end
    chk(aexp.size() == 0 && lexp.size() == 0, "all records and lines delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
