// tb_wino_kernel_transform: random 3x3 INT8 kernels, compared with
// 4 * G g G^T computed here with the fractional matrix G in real arithmetic.
module tb_wino_kernel_transform;
  import dynamap_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  always #5 clk = ~clk;
  data_t g [3][3];
  logic signed [DATA_W+3:0] u4 [4][4];
  wino_kernel_transform dut (.*);
  int checks = 0, failures = 0;
  real G [4][3] = '{'{1.0,0.0,0.0}, '{0.5,0.5,0.5}, '{0.5,-0.5,0.5}, '{0.0,0.0,1.0}};
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real gg [3][3], t [4][3], e;
    g = '{default: '0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++) begin
        automatic int x = (n < 2) ? ((n == 0) ? 127 : -128) : $urandom_range(0, 255) - 128;
        gg[a][b] = real'(x);
        g[a][b] = data_t'(x);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid after one cycle"); end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 3; b++) begin
        t[a][b] = 0.0;
        for (int k = 0; k < 3; k++) t[a][b] += G[a][k] * gg[k][b];
      end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        e = 0.0;
        for (int k = 0; k < 3; k++) e += t[a][k] * G[b][k];
        checks++;
        if (real'(u4[a][b]) != 4.0 * e) begin
          failures++; $display("kernel %0d (%0d,%0d): got %0d exp %f", n, a, b, u4[a][b], 4.0*e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
