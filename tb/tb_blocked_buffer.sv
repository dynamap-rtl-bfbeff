// tb_blocked_buffer: fills 3 tiles of a 5 x 4 blocked buffer with a known
// pattern, then reads every row (fixed i) and every column (fixed j) of every
// tile and compares each element with the pattern; also checks the
// one-cycle read latency.
module tb_blocked_buffer;
  import dynamap_pkg::*;
  localparam int NB = 5, NJ = 4, NT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0, rd_col = 0, rd_valid;
  logic [1:0] wr_tile, rd_tile;
  logic [2:0] wr_i, rd_line;
  logic [1:0] wr_j;
  data_t wr_data, rd_data [NB];
  blocked_buffer #(.NB(NB), .NJ(NJ), .NTILES(4)) dut (.*);
  int checks = 0, failures = 0;
  function automatic int pat(int t, int i, int j); return (t*37 + i*11 + j*3) % 256 - 128; endfunction
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < NT; t++) for (int i = 0; i < NB; i++) for (int j = 0; j < NJ; j++) begin
      wr_en = 1; wr_tile = 2'(t); wr_i = 3'(i); wr_j = 2'(j); wr_data = data_t'(pat(t, i, j));
      @(negedge clk);
    end
    wr_en = 0;
    for (int t = 0; t < NT; t++) for (int dir = 0; dir < 2; dir++)
      for (int ln = 0; ln < ((dir == 0) ? NB : NJ); ln++) begin
        rd_en = 1; rd_col = dir[0]; rd_tile = 2'(t); rd_line = 3'(ln);
        @(negedge clk);
        rd_en = 0;
        checks++;
        if (!rd_valid) begin failures++; $display("rd_valid missing"); end
        for (int e = 0; e < ((dir == 0) ? NJ : NB); e++) begin
          automatic int expv = (dir == 0) ? pat(t, ln, e) : pat(t, e, ln);
          checks++;
          if (int'(rd_data[e]) != expv) begin
            failures++;
            $display("tile %0d dir %0d line %0d elem %0d: got %0d exp %0d", t, dir, ln, e, rd_data[e], expv);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
