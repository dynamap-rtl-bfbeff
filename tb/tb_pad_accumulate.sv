// tb_pad_accumulate: a 3 x 3 kn2row layer on a 4 x 5 map with 2 lanes.
// Nine random patches are sent back to back (centre first), then the buffer
// is drained; every output pixel must equal the sum of the shifted patches
// computed here directly from the kn2row formula, and the number of dropped
// (padding) pixels must match.
module tb_pad_accumulate;
  import dynamap_pkg::*;
  localparam int L = 2, H = 4, W = 5, K = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [15:0] cfg_h = H, cfg_w = W;
  logic [7:0] cfg_k1n = K, cfg_k2n = K, cfg_k1, cfg_k2;
  logic cfg_init, patch_start = 0, in_valid = 0, drain_start = 0, out_valid, busy;
  logic [5:0] cfg_base = 0, n_drain = H*W, out_addr;
  acc_t in_data [L], out_data [L];
  logic [31:0] dropped;
  pad_accumulate #(.LANES(L), .DEPTH(64)) dut (.*);
  int checks = 0, failures = 0;
  int z [L][H][W];
  int ndrop = 0, nout = 0;
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    for (int l = 0; l < L; l++) begin
      checks++;
      if (out_data[l] != z[l][out_addr / W][out_addr % W]) begin
        failures++;
        $display("lane %0d pix %0d: got %0d exp %0d", l, out_addr, out_data[l], z[l][out_addr/W][out_addr%W]);
      end
    end
    nout++;
  end
  initial begin
    int order [9] = '{4, 0, 8, 2, 6, 1, 7, 3, 5};
    for (int l = 0; l < L; l++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) z[l][y][x] = 0;
    in_data = '{default: '0};
    cfg_k1 = 1; cfg_k2 = 1; cfg_init = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int pi = 0; pi < 9; pi++) begin
      automatic int k1 = order[pi] / 3, k2 = order[pi] % 3;
      cfg_k1 = 8'(k1); cfg_k2 = 8'(k2); cfg_init = (pi == 0);
      patch_start = 1; @(negedge clk); patch_start = 0;
      for (int u = 0; u < H; u++) for (int v = 0; v < W; v++) begin
        automatic int ty = u - (k1 - 1), tx = v - (k2 - 1);
        for (int l = 0; l < L; l++) begin
          automatic int p = $urandom_range(0, 2000) - 1000;
          in_data[l] = acc_t'(p);
          if (ty >= 0 && ty < H && tx >= 0 && tx < W) z[l][ty][tx] += p;
        end
        if (!(ty >= 0 && ty < H && tx >= 0 && tx < W)) ndrop++;
        in_valid = 1;
        @(negedge clk);
      end
      in_valid = 0;
    end
    repeat (3) @(negedge clk);
    drain_start = 1; @(negedge clk); drain_start = 0;
    repeat (H*W + 5) @(negedge clk);
    checks += 2;
    if (nout != H*W) begin failures++; $display("drained %0d words", nout); end
    if (dropped != ndrop) begin failures++; $display("dropped %0d exp %0d", dropped, ndrop); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
