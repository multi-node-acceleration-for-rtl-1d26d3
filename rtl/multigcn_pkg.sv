// multigcn_pkg -- types and constants shared by the multi-node GCN accelerator.
//
// The system is a 2D torus of processing nodes (4x4 = 16 by default). Vertices are
// scattered to remote nodes in multicast packets. A packet is a header flit followed by
// the feature vector of the vertex in data flits. The header carries the next
// destination (x,y), the list of destination node IDs (nID list), an offset list and
// the neighbour lists in compressed sparse row form (neighbours of nid[k] are
// nbr[offset[k] .. offset[k+1]-1]), as in the paper's packet format.
// Flit size, list capacities and the 32-bit Q16.16 fixed-point format of the data are
// this design's choices; the paper only states "32-bit fixed point".
package multigcn_pkg;

  // ---------------- network ----------------
  parameter int unsigned MAX_NODES   = 16;            // nID list capacity = largest torus
  parameter int unsigned NID_W       = 4;             // log2(MAX_NODES)
  parameter int unsigned COORD_W     = 2;             // torus side up to 4
  parameter int unsigned MAX_NBR     = 8;             // neighbours carried by one packet
  parameter int unsigned OFF_W       = 4;             // holds 0..MAX_NBR
  parameter int unsigned VID_W       = 32;            // vertex ID width (Fig. 7a)
  parameter int unsigned DW          = 32;            // data word, Q16.16 fixed point
  parameter int unsigned FRAC        = 16;            // fractional bits of a word
  parameter int unsigned FLIT_ELEMS  = 16;            // words per data flit
  parameter int unsigned FLIT_W      = FLIT_ELEMS*DW; // 512-bit flit payload / DRAM line
  parameter int unsigned FLEN_W      = 10;            // data flits per packet

  // router ports
  typedef enum logic [2:0] {
    P_LOCAL = 3'd0, P_EAST = 3'd1, P_WEST = 3'd2, P_NORTH = 3'd3, P_SOUTH = 3'd4
  } port_e;
  parameter int unsigned NPORTS = 5;

  typedef struct packed {
    logic [COORD_W-1:0]                  dst_x;     // next destination (fixed coordinates)
    logic [COORD_W-1:0]                  dst_y;
    logic [VID_W-1:0]                    src_vid;   // vertex whose replica is carried
    logic [FLEN_W-1:0]                   nflits;    // data flits that follow
    logic [$clog2(MAX_NODES+1)-1:0]      nid_cnt;   // entries used in nid[]
    logic [MAX_NODES-1:0][NID_W-1:0]     nid;       // destination node IDs
    logic [MAX_NODES:0][OFF_W-1:0]       offset;    // offset list, nid_cnt+1 entries
    logic [MAX_NBR-1:0][VID_W-1:0]       nbr;       // neighbour lists (CSR)
  } hdr_t;

  parameter int unsigned HDR_W  = $bits(hdr_t);
  parameter int unsigned FPAY_W = (HDR_W > FLIT_W) ? HDR_W : FLIT_W;

  typedef struct packed {
    logic              head;   // header flit
    logic              tail;   // last flit of the packet
    logic [FPAY_W-1:0] pay;    // hdr_t or FLIT_ELEMS data words
  } flit_t;

  // ---------------- compute ----------------
  typedef enum logic [1:0] { AGG_ADD = 2'd0, AGG_MIN = 2'd1, AGG_MAX = 2'd2 } agg_op_e;

  function automatic logic [DW-1:0] agg_identity(agg_op_e op);
    case (op)
      AGG_MIN: return {1'b0, {(DW-1){1'b1}}};   // most positive
      AGG_MAX: return {1'b1, {(DW-1){1'b0}}};   // most negative
      default: return '0;
    endcase
  endfunction

  function automatic logic [DW-1:0] agg_reduce(agg_op_e op, logic [DW-1:0] a, logic [DW-1:0] b);
    case (op)
      AGG_MIN: return ($signed(a) < $signed(b)) ? a : b;
      AGG_MAX: return ($signed(a) > $signed(b)) ? a : b;
      default: return a + b;
    endcase
  endfunction

  function automatic logic [DW-1:0] fx_mul(logic [DW-1:0] a, logic [DW-1:0] b);
    logic signed [2*DW-1:0] p;
    p = $signed(a) * $signed(b);
    return p[FRAC +: DW];
  endfunction

  // ---------------- header helpers ----------------
  // Keep the nID entries selected by mask (in order) with their neighbour lists and
  // rebuild the offset list: one "part" of Algorithm 2.
  function automatic hdr_t hdr_select(hdr_t h, logic [MAX_NODES-1:0] mask);
    hdr_t o;
    int unsigned n, off;
    o = h;
    o.nid    = '0;
    o.offset = '0;
    o.nbr    = '0;
    n   = 0;
    off = 0;
    for (int k = 0; k < MAX_NODES; k++) begin
      if (mask[k] && (k < int'(h.nid_cnt))) begin
        o.nid[n[NID_W-1:0]]    = h.nid[k];
        o.offset[n[NID_W:0]]   = off[OFF_W-1:0];
        for (int j = 0; j < MAX_NBR; j++) begin
          if ((j >= int'(h.offset[k])) && (j < int'(h.offset[k+1]))) begin
            o.nbr[off[$clog2(MAX_NBR)-1:0]] = h.nbr[j];
            off++;
          end
        end
        n++;
      end
    end
    o.offset[n[NID_W:0]] = off[OFF_W-1:0];
    o.nid_cnt            = n[$clog2(MAX_NODES+1)-1:0];
    return o;
  endfunction

  // Signed relative coordinate on a torus ring of size side, range [-(side/2-1), side/2].
  function automatic int torus_rel(int unsigned to, int unsigned from, int unsigned side);
    int d;
    d = (int'(to) - int'(from) + int'(side)) % int'(side);
    if (d > int'(side) / 2) d = d - int'(side);
    return d;
  endfunction

  // ---------------- node memories ----------------
  parameter int unsigned LANES     = 128;   // PEs per systolic array (Table 2)
  parameter int unsigned NUM_SA    = 8;     // systolic arrays per node (Table 2)
  parameter int unsigned ROW_W     = LANES*DW;   // one buffer row = 128 words
  parameter int unsigned FLITS_PER_ROW = LANES/FLIT_ELEMS;

  // DRAM line address width (per node)
  parameter int unsigned DADDR_W = 32;

  // Round descriptor, one DRAM line per round (layout chosen by this design).
  typedef struct packed {
    logic [DADDR_W-1:0] send_base;  // first vertex send record
    logic [15:0]        n_send;     // vertices this node scatters in the round
    logic [DADDR_W-1:0] agg_base;   // first aggregation-slot record
    logic [15:0]        n_agg;      // local vertices aggregated in the round
  } round_desc_t;

  // Per-vertex send record, one DRAM line: header (dst fields ignored) + feature address.
  typedef struct packed {
    logic [DADDR_W-1:0] feat_addr;  // first line of the feature vector
    hdr_t               hdr;
  } send_rec_t;

  // Aggregation slot record, one DRAM line: the vertex and how many replicas it waits for.
  typedef struct packed {
    logic [VID_W-1:0] vid;
    logic [15:0]      expected;     // in-degree + 1 (the vertex itself is in its own list)
  } agg_rec_t;

  // Run-time configuration of a node (written by the host before start).
  typedef struct packed {
    agg_op_e            op;         // aggregate function: ADD, MIN or MAX
    logic [15:0]        f_in;       // feature-vector length |h^0| in words
    logic [3:0]         nrows;      // ceil(f_in / LANES) aggregation-buffer rows per vector
    logic [4:0]         n_bits;     // n: vID bits naming the node
    logic [4:0]         x_bits;     // x: vID bits naming the slot within a round
    logic [15:0]        n_rounds;
    logic [DADDR_W-1:0] w_base;     // weight matrix in DRAM
    logic [DADDR_W-1:0] desc_base;  // round descriptors in DRAM
    logic [DADDR_W-1:0] out_base;   // combination results in DRAM
  } cfg_t;

  // Edge-buffer entry: where the replica sits in the aggregation buffer and which local
  // vertices it must be aggregated into.
  typedef struct packed {
    logic [15:0]                   rep_row;   // first row of the replica
    logic [3:0]                    nrows;     // rows per feature vector
    logic [OFF_W-1:0]              nbr_cnt;
    logic [MAX_NBR-1:0][VID_W-1:0] nbr;
  } edge_ent_t;

endpackage
