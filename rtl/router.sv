// router -- router of one processing node: routing buffer, DyXY routing with stress
// values, and the packet split of the topology-aware multicast.
//
// Five ports (local, east, west, north, south). Every input port owns a part of the
// routing buffer (IN_DEPTH flits; 5 x 4915 x 64 B is the paper's 1.5 MB). Flits enter
// with a valid/ready handshake; ready is "input buffer not full".
// The router serves one packet at a time, chosen round-robin among the input ports
// whose buffer holds a header. If the packet's next destination is this node the
// header goes through multicast_split: P0 is delivered to the local port (the
// receive unit) and every other non-empty part is sent, with its own header, towards
// its own next destination. Otherwise the unchanged packet is forwarded. Each part
// leaves through the port chosen by dyxy_route, header first and then all data flits;
// the parts of one packet leave one after the other, re-reading the data flits from
// the buffer, and the packet is dropped from the buffer after its last part.
// The stress value of this router is its buffer occupancy scaled to 0..255; the values
// of the four neighbours are sampled every STRESS_PERIOD cycles.
// What follows the paper: buffer size, stress as occupancy ratio sampled periodically,
// Algorithms 1 and 2. This design's choices: store-and-forward of one packet at a time
// (one output flit per cycle), round-robin input choice, the sampling period, and no
// virtual channels (deadlock freedom is not provided beyond the paper's shortest-path
// restriction; buffers are assumed large enough).
// Timing: a packet's header leaves two cycles after it is at the head of a buffer.
module router
  import multigcn_pkg::*;
#(
  parameter int unsigned MESH_X        = 4,
  parameter int unsigned MESH_Y        = 4,
  parameter int unsigned IN_DEPTH      = 4915,
  parameter int unsigned STRESS_PERIOD = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [COORD_W-1:0] cur_x_i,
  input  logic [COORD_W-1:0] cur_y_i,
  // inputs, indexed by port_e
  input  logic               in_valid_i [NPORTS],
  input  flit_t              in_flit_i  [NPORTS],
  output logic               in_ready_o [NPORTS],
  // outputs, indexed by port_e
  output logic               out_valid_o [NPORTS],
  output flit_t              out_flit_o  [NPORTS],
  input  logic               out_ready_i [NPORTS],
  // stress values
  output logic [7:0]         stress_o,
  input  logic [7:0]         nb_stress_i [NPORTS],
  // event pulses (for statistics)
  output logic               ev_split_o,     // a packet was split into several parts
  output logic               ev_adaptive_o,  // a part took DyXY step 3
  output logic               ev_stall_o      // an output flit waited for ready
);

  localparam int unsigned PW = $clog2(IN_DEPTH);
  localparam int unsigned CW = $clog2(IN_DEPTH + 1);

  flit_t           mem [NPORTS][IN_DEPTH];
  logic [PW-1:0]   wr_ptr [NPORTS];
  logic [PW-1:0]   rd_ptr [NPORTS];
  logic [CW-1:0]   count  [NPORTS];

  typedef enum logic [1:0] { S_IDLE, S_SPLIT, S_HEAD, S_DATA } state_e;
  state_e          state;
  logic [2:0]      sel;        // input port being served
  logic [2:0]      rr;         // round-robin pointer
  hdr_t            hdr_q;
  logic [8:0]      pv_q;       // parts still to send
  hdr_t [8:0]      ph_q;
  logic [3:0]      slot;       // part being sent
  logic [FLEN_W-1:0] idx;      // data flit being sent (1-based)
  port_e           oport;      // port of the part being sent (registered)
  port_e           cur_port;
  logic [7:0]      nb_stress_q [NPORTS];

  logic [8:0]      split_valid;
  hdr_t [8:0]      split_hdr;

  multicast_split #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_split (
    .hdr_i(hdr_q), .cur_x_i(cur_x_i), .cur_y_i(cur_y_i),
    .part_valid_o(split_valid), .part_hdr_o(split_hdr)
  );

  // next part to send and its port
  logic [3:0] next_slot;
  port_e      route_port;
  logic       route_adaptive;
  always_comb begin
    next_slot = 4'd0;
    for (int s = 8; s >= 0; s--) if (pv_q[s]) next_slot = 4'(s);
  end

  dyxy_route #(.MESH_X(MESH_X), .MESH_Y(MESH_Y)) u_route (
    .dst_x_i(ph_q[next_slot].dst_x), .dst_y_i(ph_q[next_slot].dst_y),
    .cur_x_i(cur_x_i), .cur_y_i(cur_y_i), .stress_i(nb_stress_q),
    .port_o(route_port), .adaptive_o(route_adaptive)
  );

  // read address of the flit being sent
  logic [PW-1:0] rd_addr;
  always_comb begin
    logic [PW:0] a;
    a = {1'b0, rd_ptr[sel]} + (PW+1)'(idx);
    if (a >= (PW+1)'(IN_DEPTH)) a = a - (PW+1)'(IN_DEPTH);
    rd_addr = a[PW-1:0];
  end
  flit_t rd_flit;
  assign rd_flit = mem[sel][rd_addr];

  // output drive
  logic    send_now;
  flit_t   send_flit;
  always_comb begin
    send_now  = 1'b0;
    send_flit = rd_flit;
    if (state == S_HEAD) begin
      send_now      = 1'b1;
      send_flit.head = 1'b1;
      send_flit.tail = (ph_q[next_slot].nflits == '0);
      send_flit.pay  = '0;
      send_flit.pay[HDR_W-1:0] = ph_q[next_slot];
    end else if (state == S_DATA) begin
      send_now = (count[sel] > CW'(idx));
    end
    cur_port = (state == S_HEAD) ? ((next_slot == 4'd0) ? P_LOCAL : route_port) : oport;
    for (int p = 0; p < NPORTS; p++) begin
      out_valid_o[p] = send_now && (cur_port == port_e'(p));
      out_flit_o[p]  = send_flit;
    end
  end
  logic fire;
  assign fire = send_now && out_ready_i[cur_port];

  // packet length of the packet being served
  logic last_part;
  assign last_part = ((pv_q & ~(9'd1 << slot)) == '0);
  logic pop;
  assign pop = (state == S_DATA) && fire && (idx == hdr_q.nflits) && last_part;
  logic pop_hd;   // zero-length packet popped in S_HEAD
  assign pop_hd = (state == S_HEAD) && fire && (ph_q[next_slot].nflits == '0) &&
                  ((pv_q & ~(9'd1 << next_slot)) == '0);

  always_comb begin
    for (int p = 0; p < NPORTS; p++) in_ready_o[p] = (count[p] < CW'(IN_DEPTH));
  end

  // buffers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        wr_ptr[p] <= '0; rd_ptr[p] <= '0; count[p] <= '0;
      end
    end else begin
      for (int p = 0; p < NPORTS; p++) begin
        logic push, popp;
        logic [PW:0] nr;
        push = in_valid_i[p] && in_ready_o[p];
        popp = (pop || pop_hd) && (sel == 3'(p));
        if (push) begin
          mem[p][wr_ptr[p]] <= in_flit_i[p];
          wr_ptr[p] <= (wr_ptr[p] == PW'(IN_DEPTH-1)) ? '0 : wr_ptr[p] + 1'b1;
        end
        if (popp) begin
          nr = {1'b0, rd_ptr[p]} + (PW+1)'(hdr_q.nflits) + 1'b1;
          if (nr >= (PW+1)'(IN_DEPTH)) nr = nr - (PW+1)'(IN_DEPTH);
          rd_ptr[p] <= nr[PW-1:0];
        end
        count[p] <= count[p] + CW'(push) - (popp ? CW'(hdr_q.nflits) + 1'b1 : '0);
      end
    end
  end

  // packet FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; sel <= '0; rr <= '0; hdr_q <= '0; pv_q <= '0; ph_q <= '0;
      slot <= '0; idx <= '0; oport <= P_LOCAL;
    end else begin
      case (state)
        S_IDLE: begin
          for (int k = NPORTS-1; k >= 0; k--) begin
            int p;
            p = (int'(rr) + k) % NPORTS;
            if (count[p] != '0) begin
              sel <= 3'(p);
              hdr_q <= mem[p][rd_ptr[p]].pay[HDR_W-1:0];
            end
          end
          for (int p = 0; p < NPORTS; p++)
            if (count[p] != '0) state <= S_SPLIT;
        end
        S_SPLIT: begin
          rr <= (sel == 3'(NPORTS-1)) ? '0 : sel + 1'b1;
          if (hdr_q.dst_x == cur_x_i && hdr_q.dst_y == cur_y_i) begin
            pv_q <= split_valid;
            ph_q <= split_hdr;
          end else begin
            pv_q <= 9'b0_0000_0010;
            ph_q <= '0;
            ph_q[1] <= hdr_q;
          end
          state <= S_HEAD;
        end
        S_HEAD: begin
          if (pv_q == '0) begin
            state <= S_IDLE;            // empty nID list: drop the header
          end else begin
            slot  <= next_slot;
            oport <= cur_port;
            if (fire) begin
              if (ph_q[next_slot].nflits == '0) begin
                pv_q[next_slot] <= 1'b0;
                if (pop_hd) state <= S_IDLE;
              end else begin
                idx   <= 1;
                state <= S_DATA;
              end
            end
          end
        end
        S_DATA: begin
          if (fire) begin
            if (idx == hdr_q.nflits) begin
              pv_q[slot] <= 1'b0;
              idx   <= '0;
              state <= last_part ? S_IDLE : S_HEAD;
            end else begin
              idx <= idx + 1'b1;
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // stress values
  logic [$clog2(STRESS_PERIOD)-1:0] st_cnt;
  always_comb begin
    int unsigned tot;
    tot = 0;
    for (int p = 0; p < NPORTS; p++) tot += int'(count[p]);
    stress_o = 8'((tot * 255) / (NPORTS * IN_DEPTH));
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_cnt <= '0;
      for (int p = 0; p < NPORTS; p++) nb_stress_q[p] <= '0;
    end else begin
      st_cnt <= st_cnt + 1'b1;
      if (st_cnt == '0)
        for (int p = 0; p < NPORTS; p++) nb_stress_q[p] <= nb_stress_i[p];
    end
  end

  assign ev_split_o    = (state == S_SPLIT) && (hdr_q.dst_x == cur_x_i) &&
                         (hdr_q.dst_y == cur_y_i) && ((split_valid & (split_valid - 9'd1)) != '0);
  assign ev_adaptive_o = (state == S_HEAD) && fire && (next_slot != 4'd0) && route_adaptive;
  assign ev_stall_o    = send_now && !out_ready_i[cur_port];

endmodule
