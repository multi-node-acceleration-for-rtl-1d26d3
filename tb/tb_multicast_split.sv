// tb_multicast_split -- checks the packet split of Algorithm 2 on a 4 x 4 torus.
// Directed case: the paper's Fig. 5(d) example (origin N1, destinations N3, N7, N6:
// P2 = {N3, N7} goes to N3, P3 = {N6} goes to N6). Random cases: from random nodes with
// random nID lists (with neighbour lists), every destination lands in exactly one part,
// P0 holds exactly the current node, neighbour lists travel with their nID, and each
// part's next destination lies on a shortest path from the current node to every node
// of the part (|d(cur,dst)| + |d(dst,n)| = |d(cur,n)| per axis). Combinational; inputs
// change every 1 ns.
module tb_multicast_split;
  import multigcn_pkg::*;
  int checks = 0, failures = 0;
  hdr_t h;
  logic [COORD_W-1:0] cx, cy;
  logic [8:0] pv;
  hdr_t [8:0] ph;
  multicast_split dut (.hdr_i(h), .cur_x_i(cx), .cur_y_i(cy), .part_valid_o(pv), .part_hdr_o(ph));

  function automatic int iabs(int a); return a < 0 ? -a : a; endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask

  initial begin
    #100000;
    $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Fig. 5(d)
    h = '0; cx = 1; cy = 0;
    h.nid_cnt = 3; h.nid[0] = 3; h.nid[1] = 7; h.nid[2] = 6;
    h.offset[0] = 0; h.offset[1] = 1; h.offset[2] = 2; h.offset[3] = 3;
    h.nbr[0] = 32'h103; h.nbr[1] = 32'h107; h.nbr[2] = 32'h106;
    #1;
    chk(pv == 9'b000001100, "Fig5d part set");
    chk(ph[2].nid_cnt == 2 && ph[2].nid[0] == 3 && ph[2].nid[1] == 7, "Fig5d P2 list");
    chk(ph[2].dst_x == 3 && ph[2].dst_y == 0, "Fig5d P2 goes to N3");
    chk(ph[3].nid_cnt == 1 && ph[3].nid[0] == 6 && ph[3].nbr[0] == 32'h106, "Fig5d P3 list");
    chk(ph[3].dst_x == 2 && ph[3].dst_y == 1, "Fig5d P3 goes to N6");
    chk(ph[2].nbr[1] == 32'h107 && ph[2].offset[2] == 2, "Fig5d P2 neighbours");
    // random
    for (int it = 0; it < 3000; it++) begin
      int n, nb, seen [16];
      logic [15:0] used;
      h = '0; used = '0;
      cx = COORD_W'($urandom_range(0, 3)); cy = COORD_W'($urandom_range(0, 3));
      n = $urandom_range(1, 8); nb = 0;
      for (int k = 0; k < n; k++) begin
        int id;
        do id = $urandom_range(0, 15); while (used[id]);
        used[id] = 1'b1;
        h.nid[k] = NID_W'(id);
        h.offset[k] = OFF_W'(nb);
        if (nb < 8) begin h.nbr[nb] = 32'(1000 + id); nb++; end
      end
      h.offset[n] = OFF_W'(nb);
      h.nid_cnt = 5'(n);
      #1;
      for (int i = 0; i < 16; i++) seen[i] = 0;
      for (int p = 0; p < 9; p++) if (pv[p]) begin
        chk(ph[p].nid_cnt != 0, "valid part not empty");
        for (int k = 0; k < int'(ph[p].nid_cnt); k++) begin
          int id, nx, ny, dx1, dy1, dx2, dy2, dx3, dy3;
          id = int'(ph[p].nid[k]);
          seen[id]++;
          if (p == 0) chk(id == int'(cy) * 4 + int'(cx), "P0 is the current node");
          else chk(id != int'(cy) * 4 + int'(cx), "current node only in P0");
          if (int'(ph[p].offset[k+1]) > int'(ph[p].offset[k]))
            chk(ph[p].nbr[ph[p].offset[k]] == 32'(1000 + id), "neighbour list follows nID");
          nx = id % 4; ny = id / 4;
          dx1 = torus_rel(ph[p].dst_x, cx, 4); dy1 = torus_rel(ph[p].dst_y, cy, 4);
          dx2 = torus_rel(nx, ph[p].dst_x, 4); dy2 = torus_rel(ny, ph[p].dst_y, 4);
          dx3 = torus_rel(nx, cx, 4);          dy3 = torus_rel(ny, cy, 4);
          chk(iabs(dx1) + iabs(dx2) == iabs(dx3) && iabs(dy1) + iabs(dy2) == iabs(dy3),
              $sformatf("part %0d dst on shortest path to %0d from (%0d,%0d)", p, id, cx, cy));
        end
      end
      for (int i = 0; i < 16; i++) chk(seen[i] == (used[i] ? 1 : 0), "each nID in one part");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
