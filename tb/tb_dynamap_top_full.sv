// tb_dynamap_top_full: the overlay at its default size (92 x 66 array, all
// buffer sizes at their defaults) taken through one complete operation:
// a GEMM with a = 100 pixels, b = 100, c = 70 (two pixel tiles, two reduction
// tiles, two channel tiles) in NS, the same GEMM in WS (ping-pong weight
// switching and partial-sum accumulation over two passes), and a DLT store
// of the first result rows to the external-memory port. Every result word
// is compared with integer products computed here; the stored INT8 words
// are compared with the requantised results.
module tb_dynamap_top_full;
  import dynamap_pkg::*;

  localparam int P1 = 92, P2 = 66;
  localparam int A = 100, B = 100, C = 70;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        ld_valid, ld_ready;
  ld_kind_e    ld_kind;
  logic [15:0] ld_tile, ld_stride, ld_i, ld_j;
  data_t       ld_data;
  data_t       ld_blk [4][4];
  logic        cmd_valid, cmd_ready, cmd_done;
  cmd_t        cmd;
  logic        ddr_wr_valid, ddr_wr_ready, ddr_wr_last;
  logic [31:0] ddr_wr_addr;
  data_t       ddr_wr_data [P2];
  logic        congest;
  stats_t      stats;

  dynamap_top dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int X [A][B];
  int W [B][C];
  int ddr [int];
  always @(posedge clk) if (rst_n && ddr_wr_valid && ddr_wr_ready)
    for (int l = 0; l < P2; l++) ddr[int'(ddr_wr_addr) * P2 + l] = int'(ddr_wr_data[l]);
  assign ddr_wr_ready = 1'b1;

  task automatic ld_word(ld_kind_e k, int tile, int i, int j, int d);
    ld_valid = 1'b1; ld_kind = k; ld_tile = 16'(tile); ld_i = 16'(i); ld_j = 16'(j);
    ld_data = data_t'(d);
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  task automatic run(cmd_t cm);
    while (!cmd_ready) @(negedge clk);
    cmd = cm; cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!cmd_done) @(negedge clk);
  endtask

  task automatic check(string nm, int base);
    for (int p = 0; p < A; p++) for (int n = 0; n < C; n++) begin
      automatic int r = 0;
      automatic int got = int'(dut.u_ob.mem[0][n % P2][base + (n / P2) * A + p]);
      for (int k = 0; k < B; k++) r += X[p][k] * W[k][n];
      checks++;
      if (got != r) begin
        failures++;
        if (failures < 10) $display("%s: Z[%0d][%0d] = %0d, expected %0d", nm, p, n, got, r);
      end
    end
  endtask

  initial begin
    automatic cmd_t cm;
    automatic int kt = (B + P1 - 1) / P1, ct = (C + P2 - 1) / P2;
    ld_valid = 0; ld_kind = LD_X; ld_tile = 0; ld_stride = 0; ld_i = 0; ld_j = 0; ld_data = 0;
    for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++) ld_blk[r][q] = '0;
    cmd_valid = 0; cmd = '0;
    for (int p = 0; p < A; p++) for (int k = 0; k < B; k++) X[p][k] = $urandom_range(0, 254) - 127;
    for (int k = 0; k < B; k++) for (int n = 0; n < C; n++) W[k][n] = $urandom_range(0, 254) - 127;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int p = 0; p < A; p++) for (int k = 0; k < B; k++)
      ld_word(LD_X, (p / P1) * kt + k / P1, p % P1, k % P1, X[p][k]);
    for (int k = 0; k < B; k++) for (int n = 0; n < C; n++)
      ld_word(LD_W, (k / P1) * ct + n / P2, k % P1, n % P2, W[k][n]);

    cm = '0; cm.op = OP_GEMM;
    cm.gemm = '{df: DF_NS, a: 16'(A), b: 16'(B), c: 16'(C), x_base: 16'd0, w_base: 16'd0};
    cm.dst_base = 16'd0;
    run(cm);
    check("NS", 0);
    cm.gemm.df = DF_WS; cm.dst_base = 16'd1000;
    run(cm);
    check("WS", 1000);

    // store pixels 0..19 of the first channel tile, one address per pixel
    cm = '0; cm.op = OP_STORE; cm.src_grp = 1'b0; cm.shift = 5'd8;
    cm.ltu.b_start = 0; cm.ltu.d_start = 64; cm.ltu.n_outer = 1;
    cm.ltu.n_row = 20; cm.ltu.inc_b2 = 1; cm.ltu.inc_d2 = 1; cm.ltu.n_rows = 1;
    cm.ltu.inc_b3 = 1; cm.ltu.inc_d3 = 1;
    run(cm);
    for (int p = 0; p < 20; p++) for (int n = 0; n < P2; n++) begin
      automatic int v = int'(dut.u_ob.mem[0][n][p]) >>> 8;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      checks++;
      if (!ddr.exists((64 + p) * P2 + n) || ddr[(64 + p) * P2 + n] != v) begin
        failures++;
        if (failures < 10) $display("store pixel %0d lane %0d wrong", p, n);
      end
    end
    checks += 2;
    if (stats.ws_latches != 32'(kt * ct)) begin failures++; $display("WS latches %0d", stats.ws_latches); end
    if (stats.congest != 0) begin failures++; $display("congestion"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
