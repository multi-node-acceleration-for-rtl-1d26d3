// tb_send_unit -- checks packet building: random send records, each followed by its
// nflits feature lines, go in with random valid; the router side takes flits at random.
// Every packet must come out as a header flit (dst = this node, rest of the header as
// recorded) followed by the feature lines as data flits, tail on the last one, in order.
module tb_send_unit;
  import multigcn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, lv = 0, lrec = 0, lrdy, ov, ordy = 0, empty;
  logic [FLIT_W-1:0] ld = 0;
  flit_t of;
  send_unit #(.DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .cur_x_i(2'd2), .cur_y_i(2'd1),
    .ld_valid_i(lv), .ld_is_rec_i(lrec), .ld_data_i(ld), .ld_ready_o(lrdy),
    .out_valid_o(ov), .out_flit_o(of), .out_ready_i(ordy), .empty_o(empty));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #2000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  flit_t exp_q [$];
  always @(posedge clk) if (rst_n && ov && ordy) begin
    flit_t e;
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("FAIL: extra flit"); end
    else begin
      e = exp_q.pop_front();
      if (of != e) begin failures++; if (failures < 10) $display("FAIL: flit mismatch h=%b t=%b", of.head, of.tail); end
    end
  end
  always @(negedge clk) ordy = ($urandom_range(0, 99) < 60);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      send_rec_t r;
      flit_t e;
      int nf;
      nf = $urandom_range(0, 5);
      r = '0;
      r.feat_addr = $urandom;
      r.hdr.src_vid = $urandom; r.hdr.nflits = FLEN_W'(nf); r.hdr.nid_cnt = 1;
      r.hdr.nid[0] = 4'($urandom); r.hdr.nbr[0] = $urandom; r.hdr.offset[1] = 1;
      e = '0; e.head = 1; e.tail = (nf == 0);
      r.hdr.dst_x = 2; r.hdr.dst_y = 1;
      e.pay[HDR_W-1:0] = r.hdr;
      r.hdr.dst_x = 0; r.hdr.dst_y = 3;   // ignored by the send unit
      exp_q.push_back(e);
      for (int i = 0; i <= nf; i++) begin
        @(negedge clk);
        while ($urandom_range(0, 3) == 0) begin lv = 0; @(negedge clk); end
        lv = 1; lrec = (i == 0);
        if (i == 0) begin ld = '0; ld[$bits(send_rec_t)-1:0] = r; end
        else begin
          ld = {16{$urandom}};
          e = '0; e.tail = (i == nf); e.pay[FLIT_W-1:0] = ld;
          exp_q.push_back(e);
        end
        @(posedge clk);
        while (!lrdy) @(posedge clk);
      end
      @(negedge clk); lv = 0;
    end
    repeat (300) @(negedge clk);
    chk(exp_q.size() == 0 && empty, "all flits out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
