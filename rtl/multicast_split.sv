// multicast_split -- packet split of the topology-aware multicast (Algorithm 2).
//
// When a multicast packet has reached its current destination node (Tx,Ty), every nID in
// its nID list is turned into a coordinate [x,y] relative to that node (x grows with the
// fixed x coordinate, y grows towards smaller fixed y, both wrapped onto the torus into
// the range [-(side/2-1), side/2], as in the paper's Fig. 5(c)). Each destination then
// falls into one of nine parts P0..P8 by the inequalities of Algorithm 2. P0 is the node
// itself. Pairs of neighbouring parts (P1/P2, P3/P4, P5/P6, P7/P8) are merged when both
// are non-empty and sent to a point on an axis; otherwise each is sent to the corner
// point given by the MIN/MAX rules of Algorithm 2. Every part gets its own header:
// the selected part of the nID list, its neighbour lists and a rebuilt offset list,
// with dst_x/dst_y set to the fixed coordinates of the part's next destination.
//
// Purely combinational. Output index k holds part Pk; when Pk and Pk+1 merge, the
// union is reported on the odd index and the even index is empty.
// The partition and destinations follow the paper; the torus wrap range for even side
// lengths (a distance of side/2 counts as positive) is this design's choice.
module multicast_split
  import multigcn_pkg::*;
#(
  parameter int unsigned MESH_X = 4,
  parameter int unsigned MESH_Y = 4
) (
  input  hdr_t                       hdr_i,
  input  logic [COORD_W-1:0]         cur_x_i,
  input  logic [COORD_W-1:0]         cur_y_i,
  output logic [8:0]                 part_valid_o,
  output hdr_t [8:0]                 part_hdr_o
);

  always_comb begin
    logic [8:0][MAX_NODES-1:0] mask;
    int mnx [9];
    int mxx [9];
    int mny [9];
    int mxy [9];
    int tx, ty, px, py;
    logic [8:0][MAX_NODES-1:0] send_mask;
    int dstx [9];
    int dsty [9];

    mask = '0;
    for (int p = 0; p < 9; p++) begin
      mnx[p] = 99; mxx[p] = -99; mny[p] = 99; mxy[p] = -99;
      dstx[p] = 0; dsty[p] = 0;
    end
    for (int k = 0; k < MAX_NODES; k++) begin
      int unsigned fx, fy;
      int x, y, p;
      fx = int'(hdr_i.nid[k]) % MESH_X;
      fy = int'(hdr_i.nid[k]) / MESH_X;
      x  = torus_rel(fx, int'(cur_x_i), MESH_X);
      y  = -torus_rel(fy, int'(cur_y_i), MESH_Y);
      if      (x == 0 && y == 0)  p = 0;
      else if (y >  0 && y <= x)  p = 1;
      else if (y <= 0 && y > -x)  p = 2;
      else if (x >  0 && y <= -x) p = 3;
      else if (x <= 0 && y <  x)  p = 4;
      else if (y <  0 && y >= x)  p = 5;
      else if (y >= 0 && y < -x)  p = 6;
      else if (y >= -x && x < 0)  p = 7;
      else                        p = 8;
      if (k < int'(hdr_i.nid_cnt)) begin
        mask[p][k] = 1'b1;
        if (x < mnx[p]) mnx[p] = x;
        if (x > mxx[p]) mxx[p] = x;
        if (y < mny[p]) mny[p] = y;
        if (y > mxy[p]) mxy[p] = y;
      end
    end

    send_mask = mask;
    // P1/P2
    if (mask[1] != '0 && mask[2] != '0) begin
      send_mask[1] = mask[1] | mask[2]; send_mask[2] = '0;
      dstx[1] = (mnx[1] < mnx[2]) ? mnx[1] : mnx[2]; dsty[1] = 0;
    end else begin
      dstx[1] = mnx[1]; dsty[1] = mny[1];
      dstx[2] = mnx[2]; dsty[2] = mxy[2];
    end
    // P3/P4
    if (mask[3] != '0 && mask[4] != '0) begin
      send_mask[3] = mask[3] | mask[4]; send_mask[4] = '0;
      dstx[3] = 0; dsty[3] = (mxy[3] > mxy[4]) ? mxy[3] : mxy[4];
    end else begin
      dstx[3] = mnx[3]; dsty[3] = mxy[3];
      dstx[4] = mxx[4]; dsty[4] = mxy[4];
    end
    // P5/P6
    if (mask[5] != '0 && mask[6] != '0) begin
      send_mask[5] = mask[5] | mask[6]; send_mask[6] = '0;
      dstx[5] = (mxx[5] > mxx[6]) ? mxx[5] : mxx[6]; dsty[5] = 0;
    end else begin
      dstx[5] = mxx[5]; dsty[5] = mxy[5];
      dstx[6] = mxx[6]; dsty[6] = mny[6];
    end
    // P7/P8
    if (mask[7] != '0 && mask[8] != '0) begin
      send_mask[7] = mask[7] | mask[8]; send_mask[8] = '0;
      dstx[7] = 0; dsty[7] = (mny[7] < mny[8]) ? mny[7] : mny[8];
    end else begin
      dstx[7] = mxx[7]; dsty[7] = mny[7];
      dstx[8] = mnx[8]; dsty[8] = mny[8];
    end

    tx = int'(cur_x_i);
    ty = int'(cur_y_i);
    for (int p = 0; p < 9; p++) begin
      part_valid_o[p] = (send_mask[p] != '0);
      part_hdr_o[p]   = hdr_select(hdr_i, send_mask[p]);
      px = (tx + dstx[p] + 4 * int'(MESH_X)) % int'(MESH_X);
      py = (ty - dsty[p] + 4 * int'(MESH_Y)) % int'(MESH_Y);
      part_hdr_o[p].dst_x = px[COORD_W-1:0];
      part_hdr_o[p].dst_y = py[COORD_W-1:0];
    end
  end

endmodule
