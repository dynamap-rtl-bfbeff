// tb_wino_input_transform: random 4x4 INT8 tiles, compared with B^T d B
// computed here by plain matrix multiplication; the one-cycle latency is checked.
module tb_wino_input_transform;
  import dynamap_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  always #5 clk = ~clk;
  data_t d [4][4];
  logic signed [DATA_W+1:0] v [4][4];
  wino_input_transform dut (.*);
  int checks = 0, failures = 0;
  int BT [4][4] = '{'{1,0,-1,0}, '{0,1,1,0}, '{0,-1,1,0}, '{0,1,0,-1}};
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int dd [4][4], t [4][4], e;
    d = '{default: '0};
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        dd[a][b] = (n < 2) ? ((n == 0) ? 127 : -128) : $urandom_range(0, 255) - 128;
        d[a][b] = data_t'(dd[a][b]);
      end
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) begin failures++; $display("no out_valid after one cycle"); end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        t[a][b] = 0;
        for (int k = 0; k < 4; k++) t[a][b] += BT[a][k] * dd[k][b];
      end
      for (int a = 0; a < 4; a++) for (int b = 0; b < 4; b++) begin
        e = 0;
        for (int k = 0; k < 4; k++) e += t[a][k] * BT[b][k];   // times B = (B^T)^T
        checks++;
        if (int'(v[a][b]) != e) begin
          failures++; $display("tile %0d (%0d,%0d): got %0d exp %0d", n, a, b, v[a][b], e);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("out_valid held"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
