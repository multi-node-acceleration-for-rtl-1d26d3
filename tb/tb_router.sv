// tb_router -- checks one router at (1,1) of a 4 x 4 torus. Random multicast packets
// (random nID lists, 0..6 data flits) enter the local port with header dst = this node,
// as the send unit makes them; random forward-only packets (dst elsewhere) enter the
// west and north ports. Output ports accept at random. Checked: every output packet is
// a header plus the packet's exact data flits with tail on the last; for a split packet
// the nID lists of all parts together are the input list, each nID once, P0 (this node)
// leaves on the local port and other parts on a port that brings them closer to their
// next destination; a forwarded packet leaves unchanged on the DyXY port. Split,
// adaptive and stall events must all occur.
module tb_router;
  import multigcn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic  iv [NPORTS]; flit_t ifl [NPORTS]; logic ir [NPORTS];
  logic  ov [NPORTS]; flit_t ofl [NPORTS]; logic ordy [NPORTS];
  logic [7:0] sto; logic [7:0] nbs [NPORTS];
  logic es, ea, est;
  router #(.IN_DEPTH(64)) dut (.clk(clk), .rst_n(rst_n), .cur_x_i(2'd1), .cur_y_i(2'd1),
    .in_valid_i(iv), .in_flit_i(ifl), .in_ready_o(ir), .out_valid_o(ov), .out_flit_o(ofl),
    .out_ready_i(ordy), .stress_o(sto), .nb_stress_i(nbs), .ev_split_o(es),
    .ev_adaptive_o(ea), .ev_stall_o(est));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #5000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  localparam int unsigned SELF = 5;
  // per source vid: data flits and the nID set still expected
  logic [FLIT_W-1:0] pdata [int][$];
  logic [15:0] pend [int];
  bit          fwd  [int];
  int nsplit = 0, nadapt = 0, nstall = 0, outstanding = 0;
  // output reassembly
  hdr_t  oh [NPORTS];
  int    oi [NPORTS];
  function automatic int tdist(int a, int b);
    int d; d = (a - b + 4) % 4; return d > 2 ? 4 - d : d;
  endfunction
  always @(posedge clk) if (rst_n) begin
    if (es) nsplit++; if (ea) nadapt++; if (est) nstall++;
    for (int p = 0; p < NPORTS; p++) if (ov[p] && ordy[p]) begin
      if (ofl[p].head) begin
        hdr_t h; int v;
        h = ofl[p].pay[HDR_W-1:0]; oh[p] = h; oi[p] = 0; v = int'(h.src_vid);
        checks++;
        if (!pend.exists(v)) begin failures++; $display("FAIL: unknown packet"); end
        else begin
          for (int k = 0; k < int'(h.nid_cnt); k++) begin
            int id; id = int'(h.nid[k]);
            if (!pend[v][id]) begin failures++; $display("FAIL: nID %0d twice/unexpected", id); end
            pend[v][id] = 1'b0;
            if (id == SELF && !fwd[v]) chk(p == P_LOCAL && h.nid_cnt == 1, "P0 to local port");
          end
          if (p != P_LOCAL) begin
            int nx, ny, tx, ty;
            tx = int'(h.dst_x); ty = int'(h.dst_y);
            nx = 1; ny = 1;
            case (p) 1: nx = 2; 2: nx = 0; 3: ny = 0; default: ny = 2; endcase
            chk(tdist(nx, tx) + tdist(ny, ty) < tdist(1, tx) + tdist(1, ty), "port is productive");
          end
          chk((ofl[p].tail) == (h.nflits == 0), "header tail flag");
        end
      end else begin
        int v; v = int'(oh[p].src_vid);
        chk(ofl[p].pay[FLIT_W-1:0] == pdata[v][oi[p]], "data flit");
        oi[p]++;
        chk(ofl[p].tail == (oi[p] == int'(oh[p].nflits)), "tail flag");
      end
    end
  end
  always @(negedge clk) begin
    for (int p = 0; p < NPORTS; p++) ordy[p] = ($urandom_range(0, 99) < 60);
    for (int p = 1; p < NPORTS; p++) nbs[p] = 8'($urandom);
  end
  task automatic inject(int port, int v);
    hdr_t h; int nf;
    logic [15:0] used;
    nf = $urandom_range(0, 6);
    h = '0; h.src_vid = 32'(v); h.nflits = FLEN_W'(nf);
    used = '0;
    if (port == P_LOCAL) begin
      int n;
      h.dst_x = 1; h.dst_y = 1;
      n = $urandom_range(1, 6);
      for (int k = 0; k < n; k++) begin
        int id;
        do id = $urandom_range(0, 15); while (used[id]);
        used[id] = 1; h.nid[k] = 4'(id); h.offset[k] = OFF_W'(k); h.nbr[k] = 32'(id);
      end
      h.offset[n] = OFF_W'(n); h.nid_cnt = 5'(n);
      fwd[v] = 0;
    end else begin
      int id;
      do id = $urandom_range(0, 15); while (id == SELF);
      h.dst_x = 2'(id % 4); h.dst_y = 2'(id / 4);
      h.nid[0] = 4'(id); h.nid_cnt = 1; h.offset[1] = 1; used[id] = 1;
      fwd[v] = 1;
    end
    pend[v] = used;
    pdata[v] = {};
    for (int i = 0; i <= nf; i++) begin
      @(negedge clk);
      iv[port] = 1;
      ifl[port] = '0; ifl[port].head = (i == 0); ifl[port].tail = (i == nf);
      if (i == 0) ifl[port].pay[HDR_W-1:0] = h;
      else begin
        ifl[port].pay[FLIT_W-1:0] = {16{$urandom}};
        pdata[v].push_back(ifl[port].pay[FLIT_W-1:0]);
      end
      @(posedge clk);
      while (!ir[port]) @(posedge clk);
    end
    @(negedge clk); iv[port] = 0;
  endtask
  initial begin
    for (int p = 0; p < NPORTS; p++) begin iv[p] = 0; ifl[p] = '0; ordy[p] = 0; nbs[p] = 0; oh[p] = '0; oi[p] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;
    fork
      for (int i = 0; i < 150; i++) inject(P_LOCAL, i);
      for (int i = 0; i < 60; i++) inject(P_WEST, 1000 + i);
      for (int i = 0; i < 60; i++) inject(P_NORTH, 2000 + i);
    join
    repeat (500) @(negedge clk);
    foreach (pend[v]) chk(pend[v] == '0, $sformatf("packet %0d fully delivered", v));
    chk(nsplit > 0, "split happened"); chk(nadapt > 0, "adaptive happened");
    chk(nstall > 0, "stall happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
