// tb_dynamap_top: end-to-end test of the overlay at a 4 x 3 array.
//
// The program below runs one small layer of each kind the overlay supports
// and checks every result word against a model computed here with integers:
//   1. im2col-style GEMM in NS (a=6, b=5, c=5: two channel tiles, two pixel
//      tiles, two reduction tiles per pass), then an NS GEMM with b < P_SA1
//      (padded pass period);
//   2. WS GEMM (a=6, b=9, c=4: three partial-sum passes per round, ping-pong
//      weight switching, accumulator in use) - a dataflow switch; then an IS
//      GEMM (a=7, b=6, c=5), whose results come out transposed;
//   3. kn2row 3x3 convolution ("same" padding) of a 3x4 map, 3 -> 2
//      channels: nine 1x1 GEMMs into Pad-and-Accumulate, centre patch first,
//      then a drain into the output buffer;
//   4. Winograd F(2x2,3x3): two 4x4 input tiles and the kernels go through
//      the load-side transforms, sixteen GEMMs (one per transform component),
//      then the output transform; checked against direct convolution;
//   5. 2x2 max pooling (stride 1) of the kn2row result;
//   6. DLT store of the pooled map to external memory through a short LTU
//      job, with random back-pressure on the write port; bursts of BL = 4.
// Output-buffer contents are read hierarchically for checking. Each
// mechanism (NS passes issued back to back, WS ping-pong switches, partial-sum
// rounds, dataflow switches, P&A border drops, transform writes, Winograd
// tiles, bursts, write back-pressure) is counted; one that never happens
// counts as a failure, and so does any congestion of the NS result chain.
module tb_dynamap_top;
  import dynamap_pkg::*;

  localparam int P1 = 4, P2 = 3;
  localparam int OBD = 256;

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

  dynamap_top #(.P_SA1(P1), .P_SA2(P2), .XTILES(64), .WTILES(64), .OB_DEPTH(OBD),
                .PA_DEPTH(64), .ACC_DEPTH(64), .BL(4), .POOL_K(3), .POOL_W(16)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- port helpers ----------------
  task automatic ld_word(ld_kind_e k, int tile, int i, int j, int d);
    while (!ld_ready) @(negedge clk);
    ld_valid = 1'b1; ld_kind = k; ld_tile = 16'(tile); ld_i = 16'(i); ld_j = 16'(j);
    ld_data = data_t'(d);
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  task automatic ld_block(ld_kind_e k, int tile, int stride, int i, int j, int blk [4][4]);
    while (!ld_ready) @(negedge clk);
    ld_valid = 1'b1; ld_kind = k; ld_tile = 16'(tile); ld_stride = 16'(stride);
    ld_i = 16'(i); ld_j = 16'(j);
    for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++) ld_blk[r][q] = data_t'(blk[r][q]);
    @(negedge clk);
    ld_valid = 1'b0;
    while (!ld_ready) @(negedge clk);
  endtask

  task automatic run(cmd_t cm);
    while (!cmd_ready) @(negedge clk);
    cmd = cm; cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0;
    while (!cmd_done) @(negedge clk);
  endtask

  function automatic int cdiv(int x, int d); return (x + d - 1) / d; endfunction

  // store X (a x b) at x_base and W (b x c) at w_base in the buffers' tiling
  int X [64][64];
  int W [64][64];
  task automatic load_gemm(int a, int b, int c, int xb, int wb);
    int kt = cdiv(b, P1), ct = cdiv(c, P2);
    for (int p = 0; p < a; p++) for (int k = 0; k < b; k++)
      ld_word(LD_X, xb + (p / P1) * kt + k / P1, p % P1, k % P1, X[p][k]);
    for (int k = 0; k < b; k++) for (int n = 0; n < c; n++)
      ld_word(LD_W, wb + (k / P1) * ct + n / P2, k % P1, n % P2, W[k][n]);
  endtask

  function automatic cmd_t gemm_cmd(dataflow_e df, int a, int b, int c, int xb, int wb,
                                    int grp, int base);
    cmd_t cm = '0;
    cm.op = OP_GEMM;
    cm.gemm = '{df: df, a: 16'(a), b: 16'(b), c: 16'(c), x_base: 16'(xb), w_base: 16'(wb)};
    cm.dst_grp = grp[0]; cm.dst_base = 16'(base);
    return cm;
  endfunction

  function automatic int ob(int grp, int addr, int lane);
    return int'(dut.u_ob.mem[grp][lane][addr]);
  endfunction

  task automatic check_gemm(string nm, int a, int b, int c, int grp, int base);
    for (int p = 0; p < a; p++) for (int n = 0; n < c; n++) begin
      automatic int r = 0;
      for (int k = 0; k < b; k++) r += X[p][k] * W[k][n];
      checks++;
      if (ob(grp, base + (n / P2) * a + p, n % P2) != r) begin
        failures++;
        $display("%s: Z[%0d][%0d] = %0d, expected %0d", nm, p, n,
                 ob(grp, base + (n / P2) * a + p, n % P2), r);
      end
    end
  endtask

  function automatic void rnd_xw(int a, int b, int c, int lim);
    for (int p = 0; p < a; p++) for (int k = 0; k < b; k++) X[p][k] = $urandom_range(0, 2*lim) - lim;
    for (int k = 0; k < b; k++) for (int n = 0; n < c; n++) W[k][n] = $urandom_range(0, 2*lim) - lim;
  endfunction

  // ---------------- DDR model / mechanism monitors ----------------
  int ddr [int];
  int ddr_stall = 0, ns_gapless = 0, ns_prev_last = -10, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(negedge clk) ddr_wr_ready <= (cyc % 3 != 0) && ($urandom_range(0, 7) != 0);
  always @(posedge clk) if (rst_n) begin
    if (ddr_wr_valid && ddr_wr_ready)
      for (int l = 0; l < P2; l++) ddr[int'(ddr_wr_addr) * P2 + l] = int'(ddr_wr_data[l]);
    if (ddr_wr_valid && !ddr_wr_ready) ddr_stall++;
    // NS pass starting in the cycle right after the previous pass ended
    if (dut.tag.valid && dut.mode == PE_MOVE && dut.tag.first && ns_prev_last == cyc - 1) ns_gapless++;
    if (dut.tag.valid && dut.mode == PE_MOVE && dut.tag.last) ns_prev_last = cyc;
  end

  // ---------------- kn2row / Winograd / pool data ----------------
  localparam int H = 3, WD = 4, CI = 3, CO = 2;
  int fm [H][WD][CI];
  int kk [3][3][CI][CO];
  int conv [H][WD][CO];
  int wt [2][4][4][2];     // Winograd input tiles: [tile][r][c][cin]
  int wg [3][3][2][2];     // Winograd kernels: [r][c][cin][cout]

  initial begin
    automatic cmd_t cm;
    automatic int pix, tmp;
    ld_valid = 0; ld_kind = LD_X; ld_tile = 0; ld_stride = 0; ld_i = 0; ld_j = 0; ld_data = 0;
    for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++) ld_blk[r][q] = '0;
    cmd_valid = 0; cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ===== 1. NS GEMMs =====
    rnd_xw(6, 5, 5, 100);
    load_gemm(6, 5, 5, 0, 0);
    run(gemm_cmd(DF_NS, 6, 5, 5, 0, 0, 0, 0));
    check_gemm("NS", 6, 5, 5, 0, 0);
    rnd_xw(5, 3, 3, 100);
    load_gemm(5, 3, 3, 8, 8);
    run(gemm_cmd(DF_NS, 5, 3, 3, 8, 8, 0, 20));
    check_gemm("NS short", 5, 3, 3, 0, 20);

    // ===== 2. WS GEMM =====
    rnd_xw(6, 9, 4, 100);
    load_gemm(6, 9, 4, 16, 16);
    run(gemm_cmd(DF_WS, 6, 9, 4, 16, 16, 0, 40));
    check_gemm("WS", 6, 9, 4, 0, 40);

    // ===== 2b. IS GEMM (transposed result layout) =====
    rnd_xw(7, 6, 5, 100);
    load_gemm(7, 6, 5, 48, 48);
    run(gemm_cmd(DF_IS, 7, 6, 5, 48, 48, 1, 120));
    for (int p = 0; p < 7; p++) for (int n = 0; n < 5; n++) begin
      automatic int r = 0;
      for (int k = 0; k < 6; k++) r += X[p][k] * W[k][n];
      checks++;
      if (ob(1, 120 + (p / P2) * 5 + n, p % P2) != r) begin
        failures++;
        $display("IS: Z[%0d][%0d] = %0d, expected %0d", p, n, ob(1, 120 + (p / P2) * 5 + n, p % P2), r);
      end
    end

    // ===== 3. kn2row 3x3 conv through Pad-and-Accumulate =====
    for (int y = 0; y < H; y++) for (int x = 0; x < WD; x++) for (int ci = 0; ci < CI; ci++)
      fm[y][x][ci] = $urandom_range(0, 40) - 20;
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int ci = 0; ci < CI; ci++)
      for (int co = 0; co < CO; co++) kk[a][b][ci][co] = $urandom_range(0, 40) - 20;
    for (int y = 0; y < H; y++) for (int x = 0; x < WD; x++) for (int co = 0; co < CO; co++) begin
      conv[y][x][co] = 0;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        automatic int yy = y + a - 1, xx = x + b - 1;
        if (yy >= 0 && yy < H && xx >= 0 && xx < WD)
          for (int ci = 0; ci < CI; ci++) conv[y][x][co] += fm[yy][xx][ci] * kk[a][b][ci][co];
      end
    end
    // the map is X (12 pixels x 3 channels); kernel patch (k1,k2) is W_k (3 x 2)
    for (int y = 0; y < H; y++) for (int x = 0; x < WD; x++) for (int ci = 0; ci < CI; ci++)
      X[y*WD + x][ci] = fm[y][x][ci];
    for (int p = 0; p < H*WD; p++) for (int ci = 0; ci < CI; ci++)
      ld_word(LD_X, 24 + p / P1, p % P1, ci, X[p][ci]);
    for (int q = 0; q < 9; q++) begin
      automatic int pk = (q + 4) % 9;               // centre patch (1,1) first
      automatic int k1 = pk / 3, k2 = pk % 3;
      for (int ci = 0; ci < CI; ci++) for (int co = 0; co < CO; co++)
        ld_word(LD_W, 24 + pk, ci, co, kk[k1][k2][ci][co]);
    end
    for (int q = 0; q < 9; q++) begin
      automatic int pk = (q + 4) % 9;
      cm = gemm_cmd((q % 2) ? DF_WS : DF_NS, H*WD, CI, CO, 24, 24 + pk, 0, 0);
      cm.to_pa = 1'b1; cm.pa_h = 16'(H); cm.pa_w = 16'(WD);
      cm.pa_k1n = 8'd3; cm.pa_k2n = 8'd3; cm.pa_k1 = 8'(pk / 3); cm.pa_k2 = 8'(pk % 3);
      cm.pa_init = (q == 0);
      run(cm);
    end
    cm = '0; cm.op = OP_PA_DRAIN; cm.n = 16'(H*WD); cm.dst_grp = 1'b1; cm.dst_base = 16'd0;
    run(cm);
    for (int p = 0; p < H*WD; p++) for (int co = 0; co < CO; co++) begin
      checks++;
      if (ob(1, p, co) != conv[p / WD][p % WD][co]) begin
        failures++;
        $display("kn2row: out[%0d][%0d] = %0d, expected %0d", p, co, ob(1, p, co), conv[p / WD][p % WD][co]);
      end
    end

    // ===== 4. Winograd F(2x2,3x3) =====
    for (int t = 0; t < 2; t++) for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++)
      for (int ci = 0; ci < 2; ci++) wt[t][r][q][ci] = $urandom_range(0, 14) - 7;
    for (int r = 0; r < 3; r++) for (int q = 0; q < 3; q++) for (int ci = 0; ci < 2; ci++)
      for (int co = 0; co < 2; co++) wg[r][q][ci][co] = $urandom_range(0, 14) - 7;
    // transformed tile (t, ci) -> component e in X tile 32 + e, row t, column ci
    for (int t = 0; t < 2; t++) for (int ci = 0; ci < 2; ci++) begin
      automatic int blk [4][4];
      for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++) blk[r][q] = wt[t][r][q][ci];
      ld_block(LD_WINX, 32, 1, t, ci, blk);
    end
    // transformed kernel (ci, co) -> component e in W tile 40 + e, row ci, column co
    for (int ci = 0; ci < 2; ci++) for (int co = 0; co < 2; co++) begin
      automatic int blk [4][4];
      for (int r = 0; r < 4; r++) for (int q = 0; q < 4; q++)
        blk[r][q] = (r < 3 && q < 3) ? wg[r][q][ci][co] : 0;
      ld_block(LD_WINW, 40, 1, ci, co, blk);
    end
    for (int e = 0; e < 16; e++)
      run(gemm_cmd((e % 3 == 0) ? DF_WS : DF_NS, 2, 2, 2, 32 + e, 40 + e, 0, 100 + 2*e));
    cm = '0; cm.op = OP_WINO_OUT; cm.n = 16'd2; cm.src_grp = 1'b0; cm.src_base = 16'd100;
    cm.stride = 16'd2; cm.dst_grp = 1'b1; cm.dst_base = 16'd64;
    run(cm);
    for (int t = 0; t < 2; t++) for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++)
      for (int co = 0; co < 2; co++) begin
        automatic int r = 0;
        for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) for (int ci = 0; ci < 2; ci++)
          r += wt[t][y+a][x+b][ci] * wg[a][b][ci][co];
        checks++;
        if (ob(1, 64 + 4*t + 2*y + x, co) != r) begin
          failures++;
          $display("Winograd: tile %0d y%0d x%0d co%0d = %0d, expected %0d", t, y, x, co,
                   ob(1, 64 + 4*t + 2*y + x, co), r);
        end
      end

    // ===== 5. 2x2 / stride-1 max pooling of the kn2row map =====
    cm = '0; cm.op = OP_POOL; cm.src_grp = 1'b1; cm.src_base = 16'd0; cm.n = 16'(H*WD);
    cm.pool_k = 8'd2; cm.pool_s = 8'd1; cm.pool_w = 16'(WD); cm.dst_grp = 1'b0; cm.dst_base = 16'd200;
    run(cm);
    for (int y = 0; y < H-1; y++) for (int x = 0; x < WD-1; x++) for (int co = 0; co < CO; co++) begin
      automatic int m = conv[y][x][co];
      if (conv[y][x+1][co] > m) m = conv[y][x+1][co];
      if (conv[y+1][x][co] > m) m = conv[y+1][x][co];
      if (conv[y+1][x+1][co] > m) m = conv[y+1][x+1][co];
      checks++;
      if (ob(0, 200 + y*(WD-1) + x, co) != m) begin
        failures++;
        $display("pool: (%0d,%0d) co%0d = %0d, expected %0d", y, x, co, ob(0, 200 + y*(WD-1) + x, co), m);
      end
    end

    // ===== 6. DLT store of the pooled 2x3 map, transposed (column-major) =====
    cm = '0; cm.op = OP_STORE; cm.src_grp = 1'b0; cm.shift = 5'd4;
    cm.ltu = '0;
    cm.ltu.b_start = 200; cm.ltu.d_start = 500; cm.ltu.n_outer = 1;
    cm.ltu.n_row = 2; cm.ltu.inc_b2 = WD-1; cm.ltu.inc_d2 = 1;   // down a column
    cm.ltu.n_rows = 3; cm.ltu.inc_b3 = -(WD-1) + 1; cm.ltu.inc_d3 = 1;
    run(cm);
    for (int x = 0; x < WD-1; x++) for (int y = 0; y < H-1; y++) for (int co = 0; co < CO; co++) begin
      automatic int v = ob(0, 200 + y*(WD-1) + x, co) >>> 4;
      automatic int a = 500 + x*2 + y;
      if (v > 127) v = 127;
      if (v < -128) v = -128;
      checks++;
      if (!ddr.exists(a*P2 + co) || ddr[a*P2 + co] != v) begin
        failures++;
        $display("store: ddr[%0d] lane %0d = %0d, expected %0d", a, co,
                 ddr.exists(a*P2 + co) ? ddr[a*P2 + co] : -9999, v);
      end
    end

    // ===== mechanisms =====
    $display("NS passes %0d (gapless %0d), WS switches %0d, df switches %0d, acc rounds %0d",
             stats.ns_passes, ns_gapless, stats.ws_latches, stats.df_switches, stats.acc_rounds);
    $display("P&A drops %0d, LT writes %0d, Winograd tiles %0d, bursts %0d, DDR stalls %0d, congest %0d",
             stats.pa_dropped, stats.lt_writes, stats.wino_tiles, stats.bursts, ddr_stall, stats.congest);
    checks += 11;
    if (stats.ns_passes == 0)  begin failures++; $display("no NS pass"); end
    if (ns_gapless == 0)       begin failures++; $display("no back-to-back NS passes"); end
    if (stats.ws_latches == 0) begin failures++; $display("no WS ping-pong switch"); end
    if (stats.df_switches == 0) begin failures++; $display("no dataflow switch"); end
    if (stats.acc_rounds == 0) begin failures++; $display("no partial-sum accumulation"); end
    if (stats.pa_dropped == 0) begin failures++; $display("no P&A border drop"); end
    if (stats.lt_writes != 32'(16 * 8)) begin failures++; $display("LT writes %0d", stats.lt_writes); end
    if (stats.wino_tiles != 2) begin failures++; $display("Winograd tiles %0d", stats.wino_tiles); end
    if (stats.bursts != 2)     begin failures++; $display("bursts %0d", stats.bursts); end
    if (ddr_stall == 0)        begin failures++; $display("no write back-pressure"); end
    if (stats.congest != 0)    begin failures++; $display("NS result chain congested"); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
