// tb_systolic_array: self-checking test of the Computing Unit at 5 x 4.
//
// 1. NS: two back-to-back passes (no idle cycle between them) of a GEMM with
//    reduction length B, fed with random INT8 data; every result is compared
//    with a dot product computed here, and the output order (row order per
//    pass) is checked. The array must not report congestion.
// 2. WS: a weight block is preloaded into ping-pong bank 0, then pixels are
//    streamed; while they run, a second block is preloaded into bank 1 and the
//    stream switches to it without a gap. Each partial-sum vector is compared
//    with the reference and its latency (P_SA1 + P_SA2 - 1) is checked.
module tb_systolic_array;
  import dynamap_pkg::*;

  localparam int unsigned R = 5, C = 4, B = 7, NPIX = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pe_mode_e mode;
  hop_t     left_in [R];
  data_t    top_in  [C];
  logic     top_valid, pl_shift, pl_latch, pl_bank, congest;
  data_t    pl_in   [R];
  res_t     out     [C];

  systolic_array #(.P_SA1(R), .P_SA2(C)) dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // operands
  int x [2][R][B];   // NS: two passes of R rows
  int w [2][B][C];
  int xs [2*NPIX][R];  // WS pixels
  int ws [2][R][C];    // WS blocks

  // output capture
  int got [$][C];
  int got_cyc [$];
  always @(posedge clk) begin
    if (rst_n && out[0].valid) begin
      automatic int v [C];
      for (int j = 0; j < C; j++) begin
        v[j] = out[j].data;
        if (!out[j].valid) begin
          failures++;
          $display("lane %0d not aligned with lane 0", j);
        end
      end
      got.push_back(v);
      got_cyc.push_back(cyc);
    end
    if (rst_n && congest) begin
      failures++;
      $display("unexpected congestion at %0d", cyc);
    end
  end

  task automatic idle();
    for (int i = 0; i < R; i++) left_in[i] = '0;
    for (int j = 0; j < C; j++) top_in[j] = '0;
    for (int i = 0; i < R; i++) pl_in[i] = '0;
    top_valid = 0; pl_shift = 0; pl_latch = 0; pl_bank = 0;
  endtask

  int start_cyc [2*NPIX];

  initial begin
    idle();
    mode = PE_MOVE;
    for (int p = 0; p < 2; p++) begin
      for (int i = 0; i < R; i++) for (int k = 0; k < B; k++) x[p][i][k] = $urandom_range(0, 255) - 128;
      for (int k = 0; k < B; k++) for (int j = 0; j < C; j++) w[p][k][j] = $urandom_range(0, 255) - 128;
    end
    for (int n = 0; n < 2*NPIX; n++) for (int i = 0; i < R; i++) xs[n][i] = $urandom_range(0, 255) - 128;
    for (int s = 0; s < 2; s++) for (int i = 0; i < R; i++) for (int j = 0; j < C; j++)
      ws[s][i][j] = $urandom_range(0, 255) - 128;

    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---------------- NS ----------------
    for (int p = 0; p < 2; p++)
      for (int k = 0; k < B; k++) begin
        for (int i = 0; i < R; i++)
          left_in[i] = '{valid: 1'b1, first: (k == 0), last: (k == B-1), bank: 1'b0,
                         data: data_t'(x[p][i][k])};
        for (int j = 0; j < C; j++) top_in[j] = data_t'(w[p][k][j]);
        @(negedge clk);
      end
    idle();
    repeat (3*(R+C)) @(negedge clk);
    checks++;
    if (got.size() != 2*R) begin
      failures++;
      $display("NS: expected %0d result rows, got %0d", 2*R, got.size());
    end
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < R; i++) begin
        automatic int idx = p*R + i;
        if (idx < got.size())
          for (int j = 0; j < C; j++) begin
            automatic int ref_v = 0;
            for (int k = 0; k < B; k++) ref_v += x[p][i][k] * w[p][k][j];
            checks++;
            if (got[idx][j] != ref_v) begin
              failures++;
              $display("NS p%0d row %0d lane %0d: got %0d exp %0d", p, i, j, got[idx][j], ref_v);
            end
          end
      end
    got.delete();
    got_cyc.delete();

    // ---------------- WS ----------------
    mode = PE_STATIONARY;
    // preload block 0 into bank 0: shift s injects column C-1-s
    for (int s = 0; s < C; s++) begin
      pl_shift = 1;
      for (int i = 0; i < R; i++) pl_in[i] = data_t'(ws[0][i][C-1-s]);
      @(negedge clk);
    end
    pl_shift = 0; pl_latch = 1; pl_bank = 0;
    @(negedge clk);
    pl_latch = 0;
    // stream NPIX pixels on bank 0 while preloading block 1, then NPIX on bank 1
    for (int n = 0; n < 2*NPIX; n++) begin
      automatic int s = n;
      for (int i = 0; i < R; i++)
        left_in[i] = '{valid: 1'b1, first: 1'b0, last: 1'b0, bank: (n >= NPIX),
                       data: data_t'(xs[n][i])};
      top_valid = 1;
      pl_shift = (s < C);
      for (int i = 0; i < R; i++) pl_in[i] = (s < C) ? data_t'(ws[1][i][C-1-s]) : '0;
      pl_latch = (s == C);
      pl_bank  = 1;
      start_cyc[n] = cyc;
      @(negedge clk);
    end
    idle();
    repeat (3*(R+C)) @(negedge clk);
    checks++;
    if (got.size() != 2*NPIX) begin
      failures++;
      $display("WS: expected %0d vectors, got %0d", 2*NPIX, got.size());
    end
    for (int n = 0; n < 2*NPIX && n < got.size(); n++) begin
      automatic int blk = (n >= NPIX);
      checks++;
      if (got_cyc[n] - start_cyc[n] != int'(R + C - 1)) begin
        failures++;
        $display("WS latency of pixel %0d: %0d", n, got_cyc[n] - start_cyc[n]);
      end
      for (int j = 0; j < C; j++) begin
        automatic int ref_v = 0;
        for (int i = 0; i < R; i++) ref_v += xs[n][i] * ws[blk][i][j];
        checks++;
        if (got[n][j] != ref_v) begin
          failures++;
          $display("WS pix %0d lane %0d: got %0d exp %0d", n, j, got[n][j], ref_v);
        end
      end
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
