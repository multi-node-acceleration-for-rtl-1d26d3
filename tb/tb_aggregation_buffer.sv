// tb_aggregation_buffer -- checks the aggregation buffer (64 rows here: 48 result rows,
// 16 replica rows) against a model: flit writes into the replica region land in the
// right 16-word part of the row, full-row result writes into the result region, the A,
// B and combination read ports return the current rows, and the progress records count
// from 0 after init and increment on rec_inc. Random mix of operations, one per cycle.
module tb_aggregation_buffer;
  import multigcn_pkg::*;
  localparam int unsigned ROWS = 64, RES = 48, NRD = 2, AW = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic wr_en = 0, res_we = 0, rec_init = 0, rec_inc = 0;
  logic [AW-1:0] wr_row = 0, ra = 0, rb = 0, res_row = 0, init_slot = 0, rslot = 0;
  logic [2:0] wr_fi = 0;
  logic [FLIT_W-1:0] wr_data = 0;
  logic [ROW_W-1:0] rda, rdb, res = 0;
  logic [AW-1:0] cbr [NRD];
  logic [ROW_W-1:0] cbo [NRD];
  agg_rec_t init_d = '0;
  logic [15:0] rcnt, rexp;
  logic [VID_W-1:0] rvid;
  aggregation_buffer #(.ROWS(ROWS), .NRD(NRD)) dut (.clk(clk), .rst_n(rst_n),
    .wr_en_i(wr_en), .wr_row_i(wr_row), .wr_fi_i(wr_fi), .wr_data_i(wr_data),
    .rd_a_row_i(ra), .rd_a_o(rda), .rd_b_row_i(rb), .rd_b_o(rdb),
    .res_we_i(res_we), .res_row_i(res_row), .res_i(res), .cb_row_i(cbr), .cb_o(cbo),
    .rec_init_i(rec_init), .rec_init_slot_i(init_slot), .rec_init_i_data(init_d),
    .rec_inc_i(rec_inc), .rec_slot_i(rslot), .rec_cnt_o(rcnt), .rec_exp_o(rexp),
    .rec_vid_o(rvid));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  logic [ROW_W-1:0] m [ROWS];
  logic [15:0] mc [RES];
  agg_rec_t mr [RES];
  initial begin
    cbr[0] = 0; cbr[1] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    // initialise every row and record
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      if (r < RES) begin
        res_we = 1; res_row = AW'(r);
        for (int i = 0; i < ROW_W / 32; i++) res[i*32 +: 32] = $urandom;
        m[r] = res;
        rec_init = 1; init_slot = AW'(r); init_d.vid = $urandom; init_d.expected = 16'($urandom);
        mr[r] = init_d; mc[r] = 0;
      end else begin
        res_we = 0; rec_init = 0; wr_en = 0;
        m[r] = '0;
      end
    end
    @(negedge clk); res_we = 0; rec_init = 0;
    for (int r = RES; r < ROWS; r++)
      for (int f = 0; f < 8; f++) begin
        wr_en = 1; wr_row = AW'(r); wr_fi = 3'(f); wr_data = {16{$urandom}};
        m[r][f*FLIT_W +: FLIT_W] = wr_data;
        @(negedge clk);
      end
    wr_en = 0;
    for (int it = 0; it < 3000; it++) begin
      ra = AW'($urandom_range(0, ROWS - 1)); rb = AW'($urandom_range(0, ROWS - 1));
      cbr[0] = AW'($urandom_range(0, RES - 1)); cbr[1] = AW'($urandom_range(0, RES - 1));
      rslot = AW'($urandom_range(0, RES - 1));
      #1;
      chk(rda == m[ra] && rdb == m[rb], "A/B rows");
      chk(cbo[0] == m[cbr[0]] && cbo[1] == m[cbr[1]], "combination rows");
      chk(rcnt == mc[rslot] && rexp == mr[rslot].expected && rvid == mr[rslot].vid, "record");
      wr_en = $urandom_range(0, 1); wr_row = AW'($urandom_range(RES, ROWS - 1));
      wr_fi = 3'($urandom); wr_data = {16{$urandom}};
      res_we = $urandom_range(0, 1); res_row = AW'($urandom_range(0, RES - 1));
      for (int i = 0; i < ROW_W / 32; i++) res[i*32 +: 32] = $urandom;
      rec_init = ($urandom_range(0, 9) == 0); init_slot = AW'($urandom_range(0, RES - 1));
      init_d.vid = $urandom; init_d.expected = 16'($urandom);
      rec_inc = $urandom_range(0, 1);
      @(posedge clk); #1;
      if (wr_en) m[wr_row][int'(wr_fi)*FLIT_W +: FLIT_W] = wr_data;
      if (res_we) m[res_row] = res;
      if (rec_init) begin mr[init_slot] = init_d; mc[init_slot] = 0; end
      else if (rec_inc) mc[rslot]++;
      wr_en = 0; res_we = 0; rec_init = 0; rec_inc = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
