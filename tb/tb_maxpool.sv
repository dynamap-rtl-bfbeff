// tb_maxpool: 3 lanes, a 7 x 9 map pooled 3 x 3 with stride 2 and then with
// stride 1 (and 2 x 2 stride 2), each output compared with a max over the
// window computed here; output count and order are checked.
module tb_maxpool;
  import dynamap_pkg::*;
  localparam int L = 3, H = 7, W = 9;
  logic clk = 0, rst_n = 0, restart = 0, in_valid = 0, out_valid;
  logic [7:0] cfg_k, cfg_s;
  logic [15:0] cfg_w = W;
  acc_t in_data [L], out_data [L];
  always #5 clk = ~clk;
  maxpool #(.LANES(L), .KMAX(3), .OWMAX(8)) dut (.*);
  int checks = 0, failures = 0;
  int img [L][H][W];
  int exp_q [$];
  int nout;
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    nout++;
    for (int l = 0; l < L; l++) begin
      automatic int e = exp_q.pop_front();
      checks++;
      if (out_data[l] != e) begin failures++; $display("out %0d lane %0d: %0d exp %0d", nout, l, out_data[l], e); end
    end
  end
  task automatic run(int k, int s);
    int oh = (H - k) / s + 1, ow = (W - k) / s + 1;
    cfg_k = 8'(k); cfg_s = 8'(s);
    for (int l = 0; l < L; l++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      img[l][y][x] = $urandom_range(0, 1000) - 500;
    for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < ow; ox++) for (int l = 0; l < L; l++) begin
      automatic int m = -100000;
      for (int dy = 0; dy < k; dy++) for (int dx = 0; dx < k; dx++)
        if (img[l][oy*s+dy][ox*s+dx] > m) m = img[l][oy*s+dy][ox*s+dx];
      exp_q.push_back(m);
    end
    nout = 0;
    restart = 1; @(negedge clk); restart = 0;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      for (int l = 0; l < L; l++) in_data[l] = acc_t'(img[l][y][x]);
      in_valid = 1; @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (nout != oh*ow || exp_q.size() != 0) begin
      failures++; $display("k%0d s%0d: %0d outputs, exp %0d", k, s, nout, oh*ow); exp_q.delete();
    end
  endtask
  initial begin
    in_data = '{default: '0};
    repeat (2) @(negedge clk); rst_n = 1;
    run(3, 2);
    run(3, 1);
    run(2, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
