// tb_wino_output_transform: end-to-end Winograd check. For a random 4x4 input
// tile d and 3x3 kernel g, M = (4 G g G^T) .* (B^T d B) is formed here and
// fed to the output transform; its 2x2 result must equal the direct 3x3
// correlation of d with g (valid positions 0..1 in each direction).
module tb_wino_output_transform;
  import dynamap_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  always #5 clk = ~clk;
  acc_t m [4][4];
  acc_t y [2][2];
  wino_output_transform dut (.*);
  int checks = 0, failures = 0;
  int BT [4][4] = '{'{1,0,-1,0}, '{0,1,1,0}, '{0,-1,1,0}, '{0,1,0,-1}};
  int G2 [4][3] = '{'{2,0,0}, '{1,1,1}, '{1,-1,1}, '{0,0,2}};
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int d [4][4], g [3][3], t [4][4], v [4][4], tk [4][3], u [4][4], e;
    m = '{default: '0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) d[a][b] = $urandom_range(0, 255) - 128;
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) g[a][b] = $urandom_range(0, 255) - 128;
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        t[a][b] = 0; for (int k = 0; k < 4; k++) t[a][b] += BT[a][k] * d[k][b];
      end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        v[a][b] = 0; for (int k = 0; k < 4; k++) v[a][b] += t[a][k] * BT[b][k];
      end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 3; b++) begin
        tk[a][b] = 0; for (int k = 0; k < 3; k++) tk[a][b] += G2[a][k] * g[k][b];
      end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        u[a][b] = 0; for (int k = 0; k < 3; k++) u[a][b] += tk[a][k] * G2[b][k];
        m[a][b] = acc_t'(u[a][b] * v[a][b]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid"); end
      for (int oy = 0; oy < 2; oy++) for (int ox = 0; ox < 2; ox++) begin
        e = 0;
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) e += d[oy+ky][ox+kx] * g[ky][kx];
        checks++;
        if (y[oy][ox] != e) begin
          failures++; $display("tile %0d (%0d,%0d): got %0d exp %0d", n, oy, ox, y[oy][ox], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
