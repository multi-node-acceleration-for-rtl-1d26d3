// top_bench -- stimulus, memory model and checker for the whole accelerator.
//
// Builds a random graph over NODES * 2^X_BITS * N_ROUNDS vertices (vID = {round, slot,
// node}), random Q16.16 features and a random weight matrix, and lays them out in every
// node's DRAM the way the loader expects them:
//   w_base    = 0      weight matrix, F_IN rows of 8 lines (16 words per line)
//   desc_base = 4096   one round descriptor per round
//   agg_base  = 8192 + 64*r   the round's aggregation-slot records {vid, in-degree + 1}
//   send_base = 16384 + 256*r the round's send records {feature address, header}
//   features  = 32768 + 16*local index
//   out_base  = 65536  results, 8 lines per local vertex
// Every source vertex u sends, in the round of each of its destinations, one multicast
// packet whose header lists the destination nodes and, per node, the destination
// vertices there (u itself included when u belongs to that round: the self loop).
// The DRAM model of each node grants requests at random, answers in order after a
// random latency and accepts writes at random; node 0 is made very slow (400-500
// cycles of latency) so that packets pile
// up at it (receive and network back-pressure).
// At the end every result line is compared with a reference computed here:
// h_v = (x_v + sum of x_u over in-neighbours u) x W, in the same fixed-point arithmetic.
// Mechanism counters (packet split, adaptive routing, network and receive stalls,
// read-after-write hazard, aggregation beside combination, round changes, DRAM
// back-pressure) are reported; with REQUIRE_ALL each must have happened at least once.
module top_bench
  import multigcn_pkg::*;
#(
  parameter int unsigned MESH_X      = 4,
  parameter int unsigned MESH_Y      = 4,
  parameter int unsigned F_IN        = 160,
  parameter int unsigned X_BITS      = 1,
  parameter int unsigned N_ROUNDS    = 2,
  parameter int unsigned MAX_OUTDEG  = 4,
  parameter bit          REQUIRE_ALL = 1'b1,
  parameter int unsigned MAX_CYCLES  = 400000
) (
  output logic               clk,
  output logic               rst_n,
  output cfg_t               cfg_o,
  output logic               start_o,
  input  logic               dram_req_i    [MESH_X*MESH_Y],
  input  logic [DADDR_W-1:0] dram_addr_i   [MESH_X*MESH_Y],
  output logic               dram_gnt_o    [MESH_X*MESH_Y],
  output logic               dram_rvalid_o [MESH_X*MESH_Y],
  output logic [FLIT_W-1:0]  dram_rdata_o  [MESH_X*MESH_Y],
  input  logic               dram_wvalid_i [MESH_X*MESH_Y],
  input  logic [DADDR_W-1:0] dram_waddr_i  [MESH_X*MESH_Y],
  input  logic [FLIT_W-1:0]  dram_wdata_i  [MESH_X*MESH_Y],
  output logic               dram_wready_o [MESH_X*MESH_Y],
  input  logic [MESH_X*MESH_Y-1:0] finished_i,
  input  logic [15:0]        round_i       [MESH_X*MESH_Y],
  input  logic [MESH_X*MESH_Y-1:0] ev_split_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_adaptive_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_net_stall_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_rx_stall_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_hazard_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_agg_op_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_comb_i,
  input  logic [MESH_X*MESH_Y-1:0] ev_mixed_i
);
  localparam int unsigned NODES  = MESH_X * MESH_Y;
  localparam int unsigned N_BITS = $clog2(NODES);
  localparam int unsigned SLOTS  = 1 << X_BITS;
  localparam int unsigned NV     = NODES * SLOTS * N_ROUNDS;
  localparam int unsigned NLOC   = SLOTS * N_ROUNDS;           // vertices per node
  localparam int unsigned NFL    = (F_IN + FLIT_ELEMS - 1) / FLIT_ELEMS;
  localparam int unsigned NROWS  = (F_IN + LANES - 1) / LANES;
  localparam int unsigned W_BASE = 0, DESC_BASE = 4096, AGG_BASE = 8192,
                          SEND_BASE = 16384, FEAT_BASE = 32768, OUT_BASE = 65536;

  int checks = 0, failures = 0;

  initial clk = 1'b0;
  always #5 clk = ~clk;

  // ---------------- data ----------------
  logic [DW-1:0] x [NV][F_IN];
  logic [DW-1:0] w [F_IN][LANES];
  logic [DW-1:0] ref_h [NV][LANES];
  bit            adj [NV][NV];        // adj[u][v]: edge u -> v
  int            indeg [NV];
  logic [FLIT_W-1:0] mem [NODES][int];
  logic [FLIT_W-1:0] outmem [NODES][int];

  function automatic int node_of(int v);  return v % NODES;                 endfunction
  function automatic int slot_of(int v);  return (v / NODES) % SLOTS;       endfunction
  function automatic int round_of(int v); return v / (NODES * SLOTS);      endfunction
  function automatic int loc_of(int v);   return v / NODES;                 endfunction

  function automatic logic [DW-1:0] rnd_fx(int unsigned range_bits);
    logic [DW-1:0] r;
    r = DW'($urandom_range(0, (1 << range_bits) - 1)) - DW'(1 << (range_bits - 1));
    return r;
  endfunction

  function automatic logic [DW-1:0] mul(logic [DW-1:0] a, logic [DW-1:0] b);
    logic signed [2*DW-1:0] p;
    p = $signed(a) * $signed(b);
    return p[FRAC +: DW];
  endfunction

  task automatic build();
    int n_send [NODES][N_ROUNDS];
    int n_agg  [NODES][N_ROUNDS];
    for (int v = 0; v < NV; v++) begin
      indeg[v] = 0;
      for (int u = 0; u < NV; u++) adj[v][u] = 1'b0;
      for (int i = 0; i < F_IN; i++) x[v][i] = rnd_fx(19);
    end
    for (int i = 0; i < F_IN; i++)
      for (int j = 0; j < LANES; j++) w[i][j] = rnd_fx(17);
    for (int u = 0; u < NV; u++) begin
      int d;
      d = $urandom_range(0, MAX_OUTDEG);
      for (int e = 0; e < d; e++) begin
        int v;
        v = $urandom_range(0, NV - 1);
        if (v != u && !adj[u][v]) begin adj[u][v] = 1'b1; indeg[v]++; end
      end
    end
    // reference
    for (int v = 0; v < NV; v++) begin
      logic [DW-1:0] a [F_IN];
      for (int i = 0; i < F_IN; i++) a[i] = x[v][i];
      for (int u = 0; u < NV; u++)
        if (adj[u][v]) for (int i = 0; i < F_IN; i++) a[i] = a[i] + x[u][i];
      for (int j = 0; j < LANES; j++) begin
        logic [DW-1:0] s;
        s = '0;
        for (int i = 0; i < F_IN; i++) s = s + mul(a[i], w[i][j]);
        ref_h[v][j] = s;
      end
    end
    // DRAM images
    for (int k = 0; k < NODES; k++) begin
      for (int i = 0; i < F_IN; i++)
        for (int f = 0; f < LANES / FLIT_ELEMS; f++) begin
          logic [FLIT_W-1:0] l;
          for (int e = 0; e < FLIT_ELEMS; e++) l[e*DW +: DW] = w[i][f*FLIT_ELEMS + e];
          mem[k][W_BASE + i*(LANES/FLIT_ELEMS) + f] = l;
        end
      for (int r = 0; r < N_ROUNDS; r++) begin n_send[k][r] = 0; n_agg[k][r] = 0; end
    end
    for (int v = 0; v < NV; v++) begin
      agg_rec_t ar;
      int k, r;
      logic [FLIT_W-1:0] l;
      k = node_of(v); r = round_of(v);
      ar = '0; ar.vid = VID_W'(v); ar.expected = 16'(indeg[v] + 1);
      l = '0; l[$bits(agg_rec_t)-1:0] = ar;
      mem[k][AGG_BASE + 64*r + n_agg[k][r]] = l;
      n_agg[k][r]++;
      for (int f = 0; f < NFL; f++) begin
        logic [FLIT_W-1:0] fl;
        fl = '0;
        for (int e = 0; e < FLIT_ELEMS; e++)
          if (f*FLIT_ELEMS + e < F_IN) fl[e*DW +: DW] = x[v][f*FLIT_ELEMS + e];
        mem[k][FEAT_BASE + 16*loc_of(v) + f] = fl;
      end
    end
    for (int u = 0; u < NV; u++)
      for (int r = 0; r < N_ROUNDS; r++) begin
        send_rec_t sr;
        int nn, nb;
        logic [FLIT_W-1:0] l;
        sr = '0;
        sr.feat_addr = DADDR_W'(FEAT_BASE + 16*loc_of(u));
        sr.hdr.src_vid = VID_W'(u);
        sr.hdr.nflits = FLEN_W'(NFL);
        nn = 0; nb = 0;
        for (int m = 0; m < NODES; m++) begin
          int first;
          first = nb;
          for (int v = m; v < NV; v += NODES)
            if (round_of(v) == r && (adj[u][v] || v == u)) begin
              sr.hdr.nbr[nb] = VID_W'(v);
              nb++;
            end
          if (nb != first) begin
            sr.hdr.nid[nn] = NID_W'(m);
            sr.hdr.offset[nn] = OFF_W'(first);
            nn++;
          end
        end
        sr.hdr.offset[nn] = OFF_W'(nb);
        sr.hdr.nid_cnt = ($clog2(MAX_NODES+1))'(nn);
        if (nb > int'(MAX_NBR)) $fatal(1, "neighbour list too long");
        if (nn != 0) begin
          int k;
          k = node_of(u);
          l = '0; l[$bits(send_rec_t)-1:0] = sr;
          mem[k][SEND_BASE + 256*r + n_send[k][r]] = l;
          n_send[k][r]++;
        end
      end
    for (int k = 0; k < NODES; k++)
      for (int r = 0; r < N_ROUNDS; r++) begin
        round_desc_t d;
        logic [FLIT_W-1:0] l;
        d.send_base = DADDR_W'(SEND_BASE + 256*r); d.n_send = 16'(n_send[k][r]);
        d.agg_base  = DADDR_W'(AGG_BASE + 64*r);   d.n_agg  = 16'(n_agg[k][r]);
        l = '0; l[$bits(round_desc_t)-1:0] = d;
        mem[k][DESC_BASE + r] = l;
      end
  endtask

  // ---------------- DRAM model ----------------
  typedef struct { int unsigned addr; longint due; } rq_t;
  rq_t     rq [NODES][$];
  longint  cyc = 0;
  int      gnt_pct [NODES];
  int      lat_min [NODES];
  int      lat_max [NODES];
  int      ev_rd_bp = 0, ev_wr_bp = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    for (int k = 0; k < NODES; k++) begin
      if (!rst_n) begin
        dram_gnt_o[k] <= 1'b0; dram_rvalid_o[k] <= 1'b0; dram_rdata_o[k] <= '0;
        dram_wready_o[k] <= 1'b0;
      end else begin
        rq_t q;
        if (dram_req_i[k] && dram_gnt_o[k]) begin
          q.addr = dram_addr_i[k];
          q.due  = cyc + longint'($urandom_range(lat_min[k], lat_max[k]));
          rq[k].push_back(q);
        end
        if (dram_req_i[k] && !dram_gnt_o[k]) ev_rd_bp++;
        dram_gnt_o[k] <= ($urandom_range(0, 99) < gnt_pct[k]);
        if (rq[k].size() != 0 && rq[k][0].due <= cyc) begin
          q = rq[k].pop_front();
          dram_rvalid_o[k] <= 1'b1;
          dram_rdata_o[k]  <= mem[k].exists(q.addr) ? mem[k][q.addr] : '0;
        end else begin
          dram_rvalid_o[k] <= 1'b0;
        end
        if (dram_wvalid_i[k] && dram_wready_o[k]) outmem[k][dram_waddr_i[k]] = dram_wdata_i[k];
        if (dram_wvalid_i[k] && !dram_wready_o[k]) ev_wr_bp++;
        dram_wready_o[k] <= ($urandom_range(0, 99) < 70);
      end
    end
  end

  // ---------------- mechanism counters ----------------
  int ev_split = 0, ev_adapt = 0, ev_nstall = 0, ev_rstall = 0, ev_haz = 0, ev_agg = 0,
      ev_comb = 0, ev_mixed = 0, ev_round = 0;
  logic [15:0] round_q;
  always @(posedge clk) if (rst_n) begin
    ev_split  += $countones(ev_split_i);
    ev_adapt  += $countones(ev_adaptive_i);
    ev_nstall += $countones(ev_net_stall_i);
    ev_rstall += $countones(ev_rx_stall_i);
    ev_haz    += $countones(ev_hazard_i);
    ev_agg    += $countones(ev_agg_op_i);
    ev_comb   += $countones(ev_comb_i);
    ev_mixed  += $countones(ev_mixed_i);
    if (round_i[0] != round_q) ev_round++;
    round_q <= round_i[0];
  end

  task automatic need(string name, int cnt);
    checks++;
    $display("  mechanism %-28s %0d", name, cnt);
    if (REQUIRE_ALL && cnt == 0) begin
      failures++;
      $display("FAIL: mechanism %s never happened", name);
    end
  endtask

  // watchdog
  initial begin
    repeat (MAX_CYCLES) @(posedge clk);
    $display("FAIL: watchdog, finished=%b", finished_i);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 1'b0; start_o = 1'b0; cfg_o = '0; round_q = '0;
    for (int k = 0; k < NODES; k++) begin
      gnt_pct[k] = (k == 0) ? 15 : 80;
      lat_min[k] = (k == 0) ? 400 : 2;
      lat_max[k] = (k == 0) ? 500 : 12;
    end
    build();
    cfg_o.op = AGG_ADD;
    cfg_o.f_in = 16'(F_IN);
    cfg_o.nrows = 4'(NROWS);
    cfg_o.n_bits = 5'(N_BITS);
    cfg_o.x_bits = 5'(X_BITS);
    cfg_o.n_rounds = 16'(N_ROUNDS);
    cfg_o.w_base = DADDR_W'(W_BASE);
    cfg_o.desc_base = DADDR_W'(DESC_BASE);
    cfg_o.out_base = DADDR_W'(OUT_BASE);
    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    repeat (3) @(posedge clk);
    start_o <= 1'b1;
    @(posedge clk);
    start_o <= 1'b0;
    wait (&finished_i);
    repeat (200) @(posedge clk);   // let the last writes drain
    $display("finished after %0d cycles", cyc);
    // results
    for (int v = 0; v < NV; v++) begin
      int k;
      int bad;
      k = node_of(v);
      bad = 0;
      for (int f = 0; f < LANES / FLIT_ELEMS; f++) begin
        int unsigned a;
        a = OUT_BASE + loc_of(v) * (LANES / FLIT_ELEMS) + f;
        checks++;
        if (!outmem[k].exists(a)) begin
          failures++; bad++;
          if (failures < 10) $display("FAIL: vertex %0d line %0d never written", v, f);
        end else
          for (int e = 0; e < FLIT_ELEMS; e++)
            if (outmem[k][a][e*DW +: DW] !== ref_h[v][f*FLIT_ELEMS + e]) begin
              if (bad == 0) begin
                failures++;
                if (failures < 10)
                  $display("FAIL: vertex %0d out %0d got %h want %h", v, f*FLIT_ELEMS + e,
                           outmem[k][a][e*DW +: DW], ref_h[v][f*FLIT_ELEMS + e]);
              end
              bad++;
            end
      end
    end
    checks++;
    if (round_i[0] != 16'(N_ROUNDS - 1)) begin
      failures++; $display("FAIL: last round %0d", round_i[0]);
    end
    need("packet split", ev_split);
    need("adaptive route (DyXY step 3)", ev_adapt);
    need("network stall", ev_nstall);
    need("receive stall", ev_rstall);
    need("RAW hazard stall", ev_haz);
    need("aggregate ops", ev_agg);
    need("combinations", ev_comb);
    need("aggregation beside comb.", ev_mixed);
    need("round change", ev_round);
    need("DRAM read back-pressure", ev_rd_bp);
    need("DRAM write back-pressure", ev_wr_bp);
    checks++;
    if (ev_comb != int'(NV)) begin
      failures++; $display("FAIL: %0d combinations, want %0d", ev_comb, NV);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
