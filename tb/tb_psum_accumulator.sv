// tb_psum_accumulator: two rounds of random partial sums (3 passes of 5
// vectors, then 1 pass in bypass) on 4 lanes; the output of each round must be
// the lane-wise sum over its passes, one cycle after the last pass's input.
module tb_psum_accumulator;
  import dynamap_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, clear = 0, bypass = 0, in_valid = 0, out_valid, round_done;
  logic [31:0] n_per_pass, n_pass;
  acc_t in_data [L], out_data [L];
  always #5 clk = ~clk;
  psum_accumulator #(.LANES(L), .DEPTH(8)) dut (.*);
  int checks = 0, failures = 0, rounds = 0;
  int ref_q [$];
  initial begin : watchdog
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (ref_q.size() == 0) begin failures++; $display("unexpected output"); end
      else begin
        for (int l = 0; l < L; l++) begin
          automatic int e = ref_q.pop_front();
          if (out_data[l] != e) begin
            failures++; $display("lane %0d got %0d exp %0d", l, out_data[l], e);
          end
        end
      end
    end
    if (round_done) rounds++;
  end
  initial begin
    int p [3][5][L];
    in_data = '{default: '0};
    n_per_pass = 5; n_pass = 3;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 3; k++) for (int n = 0; n < 5; n++) for (int l = 0; l < L; l++)
      p[k][n][l] = $urandom_range(0, 200000) - 100000;
    for (int n = 0; n < 5; n++) begin
      for (int l = 0; l < L; l++) ref_q.push_back(p[0][n][l] + p[1][n][l] + p[2][n][l]);
    end
    for (int k = 0; k < 3; k++) for (int n = 0; n < 5; n++) begin
      in_valid = 1;
      for (int l = 0; l < L; l++) in_data[l] = acc_t'(p[k][n][l]);
      @(negedge clk);
      if (k < 2) begin
        checks++;
        if (out_valid) begin failures++; $display("early output"); end
      end
    end
    in_valid = 0;
    bypass = 1;
    for (int n = 0; n < 3; n++) begin
      for (int l = 0; l < L; l++) begin ref_q.push_back(1000*n + l); in_data[l] = acc_t'(1000*n + l); end
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (ref_q.size() != 0 || rounds != 1) begin
      failures++; $display("left %0d expected outputs, rounds %0d", ref_q.size(), rounds);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
