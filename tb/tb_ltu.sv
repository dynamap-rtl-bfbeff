// tb_ltu: runs the three layout transformations on small maps and compares
// every emitted (B, D) tuple with the index formula of the target layout,
// computed here independently:
//  * 3-D tensor -> Toeplitz: 6 x 6 map, 3 x 3 kernel, stride 1, one output row;
//  * 3-D tensor -> Winograd input: 6 x 6 map, F(2,3): 4 x 4 tiles, stride 2,
//    one row of tiles; element (r,c) of tile t goes to D = (r*4+c)*T + t;
//  * Winograd output -> 3-D tensor: tile element (r,c) of tile t is read at
//    B = (r*2+c)*T + t and written to D = 4t + 2r + c.
// Random back-pressure on out_ready checks that the FSM holds.
module tb_ltu;
  import dynamap_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, out_valid, out_ready, busy, done;
  ltu_cfg_t cfg;
  logic [31:0] out_b, out_d;
  always #5 clk = ~clk;
  ltu dut (.*);
  int checks = 0, failures = 0;
  int eb [$], ed [$];
  int ndone = 0;
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      checks++;
      if (eb.size() == 0) begin failures++; $display("extra tuple"); end
      else begin
        automatic int xb = eb.pop_front(), xd = ed.pop_front();
        if (int'(out_b) != xb || int'(out_d) != xd) begin
          failures++; $display("tuple (%0d,%0d) exp (%0d,%0d)", out_b, out_d, xb, xd);
        end
      end
    end
    if (done) ndone++;
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  task automatic run(ltu_cfg_t k);
    cfg = k; start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    checks++;
    if (eb.size() != 0) begin failures++; $display("%0d tuples missing", eb.size()); end
    eb.delete(); ed.delete();
  endtask

  initial begin
    ltu_cfg_t k;
    repeat (2) @(negedge clk); rst_n = 1;
    // 3-D tensor -> Toeplitz, H1 = 6, K = 3, S = 1, output row 0: 4 windows
    for (int o = 0; o < 4; o++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
      eb.push_back(ky*6 + o + kx); ed.push_back(o*9 + ky*3 + kx);
    end
    k = '0; k.n_outer = 4; k.step_b = 1; k.step_d = 9; k.n_row = 3; k.inc_b2 = 1; k.inc_d2 = 1;
    k.n_rows = 3; k.inc_b3 = 6 - 3 + 1; k.inc_d3 = 1;
    run(k);
    // 3-D tensor -> Winograd input, H1 = 6, m = 2, r = 3, tiles along one row: T = 2
    for (int t = 0; t < 2; t++) for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) begin
      eb.push_back(r*6 + 2*t + c); ed.push_back((r*4 + c)*2 + t);
    end
    k = '0; k.n_outer = 2; k.step_b = 2; k.step_d = 1; k.n_row = 4; k.inc_b2 = 1; k.inc_d2 = 2;
    k.n_rows = 4; k.inc_b3 = 6 - 4 + 1; k.inc_d3 = 2;
    run(k);
    // Winograd output -> 3-D tensor style, T = 3 tiles of 2 x 2
    for (int t = 0; t < 3; t++) for (int r = 0; r < 2; r++) for (int c = 0; c < 2; c++) begin
      eb.push_back((r*2 + c)*3 + t); ed.push_back(4*t + 2*r + c);
    end
    k = '0; k.n_outer = 3; k.step_b = 1; k.step_d = 4; k.n_row = 2; k.inc_b2 = 3; k.inc_d2 = 1;
    k.n_rows = 2; k.inc_b3 = 3; k.inc_d3 = 1; k.b_start = 0; k.d_start = 0;
    run(k);
    checks++;
    if (ndone != 3) begin failures++; $display("done pulses %0d", ndone); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
