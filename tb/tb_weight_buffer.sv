// tb_weight_buffer -- checks the column-banked weight buffer: a random F x 128 weight
// matrix is written line by line (16 words per line, 8 lines per row), then every read
// port p at step t must return W[t-j][j] for column j when 0 <= t-j < f_in, else 0
// (the skewed weights of the systolic combination). Reads are combinational.
module tb_weight_buffer;
  import multigcn_pkg::*;
  localparam int unsigned WR = 64, F = 50, N = LANES, NRD = 2;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0;
  logic [$clog2(WR)-1:0] wrow = 0;
  logic [$clog2(N/FLIT_ELEMS)-1:0] wfi = 0;
  logic [FLIT_W-1:0] wdata = 0;
  logic [15:0] fin = 16'(F);
  logic [15:0] t [NRD];
  logic [N-1:0][DW-1:0] wo [NRD];
  logic [DW-1:0] wm [F][N];
  weight_buffer #(.WROWS(WR), .NRD(NRD), .N(N)) dut (.clk(clk), .we_i(we), .wrow_i(wrow),
    .wfi_i(wfi), .wdata_i(wdata), .f_in_i(fin), .t_i(t), .w_o(wo));
  always #5 clk = ~clk;
  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; if (failures < 10) $display("FAIL: %s", m); end
  endtask
  initial begin
    #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    t[0] = 0; t[1] = 0;
    for (int i = 0; i < F; i++) for (int j = 0; j < N; j++) wm[i][j] = $urandom;
    for (int i = 0; i < F; i++)
      for (int f = 0; f < N / FLIT_ELEMS; f++) begin
        @(negedge clk);
        we = 1; wrow = 6'(i); wfi = 3'(f);
        for (int e = 0; e < FLIT_ELEMS; e++) wdata[e*DW +: DW] = wm[i][f*FLIT_ELEMS + e];
      end
    @(negedge clk); we = 0;
    for (int it = 0; it < 300; it++) begin
      t[0] = 16'($urandom_range(0, F + N + 4)); t[1] = 16'($urandom_range(0, F + N + 4));
      #1;
      for (int p = 0; p < NRD; p++)
        for (int j = 0; j < N; j++) begin
          int r;
          logic [DW-1:0] e;
          r = int'(t[p]) - j;
          e = (r >= 0 && r < F) ? wm[r][j] : '0;
          chk(wo[p][j] == e, $sformatf("port %0d t %0d col %0d", p, t[p], j));
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
