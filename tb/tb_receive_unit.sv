// tb_receive_unit -- checks the receive side (64-row aggregation buffer: 16 replica
// rows; nrows = 2, so 8 replicas fit). Random P0 packets (one nID, 1..8 neighbours,
// up to 16 data flits) arrive with random gaps; the edge buffer is full at random and
// rows are freed at random. Every data flit must be written to replica row
// RES + (rep + i/8) mod 16 at part i mod 8; one edge entry per packet with the
// neighbour list and its first replica row; new packets must wait (stall) while fewer
// than nrows replica rows are free.
module tb_receive_unit;
  import multigcn_pkg::*;
  localparam int unsigned ROWS = 64, RES = 48, REP = 16, AW = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, iv = 0, ir, we, ebp, ebf = 0, fr = 0, st;
  flit_t fl;
  logic [AW-1:0] wrow;
  logic [2:0] wfi;
  logic [FLIT_W-1:0] wd;
  edge_ent_t ent;
  receive_unit #(.ROWS(ROWS)) dut (.clk(clk), .rst_n(rst_n), .nrows_i(4'd2),
    .in_valid_i(iv), .in_flit_i(fl), .in_ready_o(ir), .wr_en_o(we), .wr_row_o(wrow),
    .wr_fi_o(wfi), .wr_data_o(wd), .eb_push_o(ebp), .eb_ent_o(ent), .eb_full_i(ebf),
    .free_i(fr), .free_rows_i(4'd2), .stall_o(st));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #5000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  typedef struct { logic [AW-1:0] row; logic [2:0] fi; logic [FLIT_W-1:0] d; } w_t;
  w_t wq [$];
  edge_ent_t eq [$];
  int held = 0;     // replicas not yet freed
  int stalls = 0, rep = 0;
  always @(posedge clk) if (rst_n) begin
    if (we) begin
      w_t e;
      checks++;
      e = wq.pop_front();
      if (wrow != e.row || wfi != e.fi || wd != e.d) begin
        failures++; if (failures < 10) $display("FAIL: write row %0d fi %0d want %0d %0d", wrow, wfi, e.row, e.fi);
      end
    end
    if (ebp) begin
      edge_ent_t e;
      checks++;
      e = eq.pop_front();
      if (ent != e) begin failures++; if (failures < 10) $display("FAIL: edge entry"); end
      held++;
    end
    if (st) stalls++;
    if (fr) held--;
    if (held * 2 > int'(REP)) begin failures++; $display("FAIL: more replicas than rows"); end
  end
  always @(negedge clk) begin
    ebf = ($urandom_range(0, 9) == 0);
    fr = (held > 0) && ($urandom_range(0, 99) < 4);
  end
  initial begin
    fl = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int p = 0; p < 80; p++) begin
      hdr_t h;
      edge_ent_t e;
      int nf, nb;
      nf = $urandom_range(1, 16); nb = $urandom_range(1, MAX_NBR);
      h = '0; h.nid_cnt = 1; h.nid[0] = 4'($urandom); h.nflits = FLEN_W'(nf);
      h.offset[0] = 0; h.offset[1] = OFF_W'(nb);
      e = '0; e.rep_row = 16'(rep); e.nrows = 2; e.nbr_cnt = OFF_W'(nb);
      for (int k = 0; k < nb; k++) begin h.nbr[k] = $urandom; e.nbr[k] = h.nbr[k]; end
      eq.push_back(e);
      for (int i = 0; i <= nf; i++) begin
        @(negedge clk);
        iv = 1;
        fl = '0; fl.head = (i == 0); fl.tail = (i == nf);
        if (i == 0) fl.pay[HDR_W-1:0] = h;
        else begin
          w_t w;
          fl.pay[FLIT_W-1:0] = {16{$urandom}};
          w.row = AW'(RES + (rep + (i-1)/8) % REP); w.fi = 3'((i-1) % 8); w.d = fl.pay[FLIT_W-1:0];
          wq.push_back(w);
        end
        @(posedge clk);
        while (!ir) @(posedge clk);
      end
      @(negedge clk); iv = 0;
      rep = (rep + 2) % REP;
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (50) @(negedge clk);
    chk(wq.size() == 0 && eq.size() == 0, "all writes and entries seen");
    chk(stalls > 0, "back-pressure happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
