// tb_output_buffer: writes distinct patterns to both bank groups with a lane
// mask, then reads them back on both read ports and checks that masked lanes
// kept their old value and that the groups do not alias.
module tb_output_buffer;
  import dynamap_pkg::*;
  localparam int L = 3, D = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_grp, rd0_en = 0, rd0_grp, rd1_en = 0, rd1_grp;
  logic [3:0] wr_addr, rd0_addr, rd1_addr;
  logic wr_mask [L];
  acc_t wr_data [L], rd0_data [L], rd1_data [L];
  output_buffer #(.LANES(L), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0;
  function automatic int pat(int g, int a, int l, int pass); return g*100000 + a*100 + l + pass*7; endfunction
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(negedge clk);
    for (int pass = 0; pass < 2; pass++)
      for (int g = 0; g < 2; g++) for (int a = 0; a < D; a++) begin
        wr_en = 1; wr_grp = g[0]; wr_addr = 4'(a);
        for (int l = 0; l < L; l++) begin
          wr_mask[l] = (pass == 0) || (l != 1);   // second pass leaves lane 1 alone
          wr_data[l] = acc_t'(pat(g, a, l, pass));
        end
        @(negedge clk);
      end
    wr_en = 0;
    for (int a = 0; a < D; a++) begin
      rd0_en = 1; rd0_grp = 0; rd0_addr = 4'(a);
      rd1_en = 1; rd1_grp = 1; rd1_addr = 4'(D-1-a);
      @(negedge clk);
      for (int l = 0; l < L; l++) begin
        automatic int e0 = pat(0, a, l, (l == 1) ? 0 : 1);
        automatic int e1 = pat(1, D-1-a, l, (l == 1) ? 0 : 1);
        checks += 2;
        if (rd0_data[l] != e0) begin failures++; $display("A %0d/%0d: %0d exp %0d", a, l, rd0_data[l], e0); end
        if (rd1_data[l] != e1) begin failures++; $display("B %0d/%0d: %0d exp %0d", a, l, rd1_data[l], e1); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
