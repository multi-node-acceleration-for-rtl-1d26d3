// loader -- reads everything a processing node needs from its DRAM.
//
// Once, after start_i: the weight matrix (f_in_i rows of LANES words, FLITS_PER_ROW
// lines per row, from w_base_i) into the weight buffer.
// Every round, on go_i (the paper's step 1, initialisation, then step 2, load):
//   1. the round descriptor (round_desc_t) at desc_base_i + round;
//   2. n_agg aggregation-slot records (agg_rec_t), written into the progress records
//      of the aggregation buffer (slot = vID bits [n, n+x)); then agg_ready_o is set
//      so the scheduler may aggregate;
//   3. for each of n_send vertices: its send record (send_rec_t) and then hdr.nflits
//      feature lines from rec.feat_addr. Both go through the loader buffer (a FIFO of
//      DEPTH 64-byte lines: 14336 = the paper's 896 KB) to the send unit.
// round_loaded_o is set when all lines of the round are in the loader buffer.
// DRAM reads: request valid/ready with a line address; responses come back in order
// (rvalid, rdata), at most MAX_OUT outstanding. Responses are routed by a queue of
// request kinds. The data layout in DRAM is this design's choice (the paper names the
// data loaded: round info, IDs and degrees, feature vectors, edge lists).
module loader
  import multigcn_pkg::*;
#(
  parameter int unsigned DEPTH   = 14336,
  parameter int unsigned MAX_OUT = 32,
  parameter int unsigned AW      = 11,
  parameter int unsigned WROWS   = 4096
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // configuration
  input  logic                  start_i,
  input  logic [DADDR_W-1:0]    w_base_i,
  input  logic [DADDR_W-1:0]    desc_base_i,
  input  logic [15:0]           f_in_i,
  input  logic [4:0]            n_bits_i,
  input  logic [4:0]            x_bits_i,
  // round control
  input  logic                  go_i,
  input  logic [15:0]           round_i,
  output logic                  w_loaded_o,
  output logic                  agg_ready_o,
  output logic                  round_loaded_o,
  output logic [15:0]           n_agg_o,
  // DRAM read channel
  output logic                  dram_req_o,
  output logic [DADDR_W-1:0]    dram_addr_o,
  input  logic                  dram_gnt_i,
  input  logic                  dram_rvalid_i,
  input  logic [FLIT_W-1:0]     dram_rdata_i,
  // weight buffer
  output logic                  w_we_o,
  output logic [$clog2(WROWS)-1:0] w_row_o,
  output logic [$clog2(FLITS_PER_ROW)-1:0] w_fi_o,
  output logic [FLIT_W-1:0]     w_data_o,
  // progress records
  output logic                  rec_init_o,
  output logic [AW-1:0]         rec_slot_o,
  output agg_rec_t              rec_o,
  // to the send unit
  output logic                  ld_valid_o,
  output logic                  ld_is_rec_o,
  output logic [FLIT_W-1:0]     ld_data_o,
  input  logic                  ld_ready_i
);

  typedef enum logic [2:0] { K_W, K_DESC, K_AGG, K_REC, K_FEAT } kind_e;
  typedef enum logic [3:0] {
    L_IDLE, L_W, L_WWAIT, L_WAIT_GO, L_DESC, L_DESC_WAIT, L_AGG, L_REC, L_REC_WAIT,
    L_FEAT, L_DRAIN
  } lst_e;

  lst_e               st;
  logic [DADDR_W-1:0] cnt;        // requests issued in the current phase
  logic [DADDR_W-1:0] wcnt;       // weight lines received
  round_desc_t        desc;
  send_rec_t          rec_q;
  logic [15:0]        vcnt;       // records issued in the round
  logic [$clog2(MAX_OUT+1)-1:0] outst;
  logic               got;        // response for DESC/REC arrived

  // kind queue
  kind_e kq_head;
  logic  kq_empty;
  logic  issue;
  kind_e issue_kind;

  // loader buffer: {is_rec, line}
  typedef struct packed { logic is_rec; logic [FLIT_W-1:0] line; } lb_t;
  lb_t   lb_head;
  logic  lb_empty;
  logic [$clog2(DEPTH+1)-1:0] lb_count;
  logic  lb_push;
  lb_t   lb_in;

  logic space;
  assign space = (int'(lb_count) + int'(outst) + 1) < int'(DEPTH);

  always_comb begin
    dram_req_o  = 1'b0;
    dram_addr_o = '0;
    issue_kind  = K_W;
    case (st)
      L_W:    begin dram_req_o = (outst < MAX_OUT); dram_addr_o = w_base_i + cnt; issue_kind = K_W; end
      L_DESC: begin dram_req_o = (outst < MAX_OUT); dram_addr_o = desc_base_i + DADDR_W'(round_i); issue_kind = K_DESC; end
      L_AGG:  begin dram_req_o = (outst < MAX_OUT) && (cnt < DADDR_W'(desc.n_agg));
                    dram_addr_o = desc.agg_base + cnt; issue_kind = K_AGG; end
      L_REC:  begin dram_req_o = (outst < MAX_OUT) && space;
                    dram_addr_o = desc.send_base + DADDR_W'(vcnt); issue_kind = K_REC; end
      L_FEAT: begin dram_req_o = (outst < MAX_OUT) && space;
                    dram_addr_o = rec_q.feat_addr + cnt; issue_kind = K_FEAT; end
      default: ;
    endcase
  end
  assign issue = dram_req_o && dram_gnt_i;

  sync_fifo #(.T(kind_e), .DEPTH(MAX_OUT)) u_kq (
    .clk(clk), .rst_n(rst_n), .push_i(issue), .data_i(issue_kind),
    .pop_i(dram_rvalid_i), .data_o(kq_head), .empty_o(kq_empty), .full_o(), .count_o()
  );

  // response routing
  round_desc_t rdesc;
  send_rec_t   rrec;
  agg_rec_t    ragg;
  assign rdesc = dram_rdata_i[$bits(round_desc_t)-1:0];
  assign rrec  = dram_rdata_i[$bits(send_rec_t)-1:0];
  assign ragg  = dram_rdata_i[$bits(agg_rec_t)-1:0];

  assign w_we_o   = dram_rvalid_i && kq_head == K_W;
  assign w_row_o  = ($clog2(WROWS))'(wcnt / FLITS_PER_ROW);
  assign w_fi_o   = ($clog2(FLITS_PER_ROW))'(wcnt % FLITS_PER_ROW);
  assign w_data_o = dram_rdata_i;

  assign rec_init_o = dram_rvalid_i && kq_head == K_AGG;
  always_comb begin
    logic [VID_W-1:0] sh;
    sh = (ragg.vid >> n_bits_i) & ((VID_W'(1) << x_bits_i) - 1'b1);
    rec_slot_o = sh[AW-1:0];
  end
  assign rec_o = ragg;

  assign lb_push = dram_rvalid_i && (kq_head == K_REC || kq_head == K_FEAT);
  assign lb_in   = '{is_rec: (kq_head == K_REC), line: dram_rdata_i};

  sync_fifo #(.T(lb_t), .DEPTH(DEPTH)) u_lb (
    .clk(clk), .rst_n(rst_n), .push_i(lb_push), .data_i(lb_in),
    .pop_i(ld_valid_o && ld_ready_i), .data_o(lb_head), .empty_o(lb_empty), .full_o(),
    .count_o(lb_count)
  );
  assign ld_valid_o  = !lb_empty;
  assign ld_is_rec_o = lb_head.is_rec;
  assign ld_data_o   = lb_head.line;

  logic [DADDR_W-1:0] w_lines;
  assign w_lines = DADDR_W'(f_in_i) * DADDR_W'(FLITS_PER_ROW);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; cnt <= '0; wcnt <= '0; desc <= '0; rec_q <= '0; vcnt <= '0;
      outst <= '0; got <= 1'b0; w_loaded_o <= 1'b0; agg_ready_o <= 1'b0;
      round_loaded_o <= 1'b0;
    end else begin
      outst <= outst + ($clog2(MAX_OUT+1))'(issue) - ($clog2(MAX_OUT+1))'(dram_rvalid_i);
      if (w_we_o) wcnt <= wcnt + 1'b1;
      if (dram_rvalid_i && kq_head == K_DESC) begin desc <= rdesc; got <= 1'b1; end
      if (dram_rvalid_i && kq_head == K_REC)  begin rec_q <= rrec; got <= 1'b1; end
      if (go_i) begin agg_ready_o <= 1'b0; round_loaded_o <= 1'b0; end
      case (st)
        L_IDLE: if (start_i) begin
          cnt <= '0; wcnt <= '0;
          st  <= (w_lines == '0) ? L_WWAIT : L_W;
        end
        L_W: if (issue) begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == w_lines) st <= L_WWAIT;
        end
        L_WWAIT: if (wcnt == w_lines) begin
          w_loaded_o <= 1'b1;
          st <= L_WAIT_GO;
        end
        L_WAIT_GO: if (go_i) begin st <= L_DESC; got <= 1'b0; end
        L_DESC: if (issue) st <= L_DESC_WAIT;
        L_DESC_WAIT: if (got) begin
          got <= 1'b0; cnt <= '0; vcnt <= '0; st <= L_AGG;
        end
        L_AGG: begin
          if (issue) cnt <= cnt + 1'b1;
          if ((cnt == DADDR_W'(desc.n_agg)) && (outst == '0)) begin
            agg_ready_o <= 1'b1;
            st <= (desc.n_send == '0) ? L_DRAIN : L_REC;
          end
        end
        L_REC: if (issue) st <= L_REC_WAIT;
        L_REC_WAIT: if (got) begin
          got <= 1'b0; cnt <= '0; vcnt <= vcnt + 1'b1;
          if (rec_q.hdr.nflits != '0) st <= L_FEAT;
          else st <= (vcnt + 1'b1 == desc.n_send) ? L_DRAIN : L_REC;
        end
        L_FEAT: if (issue) begin
          cnt <= cnt + 1'b1;
          if (cnt + 1'b1 == DADDR_W'(rec_q.hdr.nflits))
            st <= (vcnt == desc.n_send) ? L_DRAIN : L_REC;
        end
        L_DRAIN: if (outst == '0) begin
          round_loaded_o <= 1'b1;
          st <= L_WAIT_GO;
        end
        default: st <= L_IDLE;
      endcase
    end
  end
  assign n_agg_o = desc.n_agg;
endmodule
