// tb_dlt_store: a 3-D tensor -> Toeplitz job (4 windows of 3 x 3 on a 6-wide
// map = 36 tuples) with BL = 16 from a behavioural output-buffer memory. The
// DDR side checks every beat (address and requantised lane data against values
// computed here), the burst sizes (16, 16, 4) and the wr_last flags, with
// random back-pressure on ddr_wr_ready.
module tb_dlt_store;
  import dynamap_pkg::*;
  localparam int L = 3;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  always #5 clk = ~clk;
  ltu_cfg_t cfg;
  logic [4:0] cfg_shift = 2;
  logic ob_rd_en, ddr_wr_valid, ddr_wr_ready, ddr_wr_last;
  logic [7:0] ob_rd_addr;
  acc_t ob_rd_data [L];
  logic [31:0] ddr_wr_addr, bursts;
  data_t ddr_wr_data [L];
  dlt_store #(.LANES(L), .BL(16), .OB_AW(8)) dut (.*);
  int checks = 0, failures = 0;
  int mem [256][L];
  int eb [$], ed [$];
  int beats = 0, nlast = 0, burst_len [$], cur = 0;
  function automatic int rq(int v);
    int s = v >>> 2;
    return (s > 127) ? 127 : (s < -128) ? -128 : s;
  endfunction
  initial begin : watchdog
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) if (ob_rd_en) for (int l = 0; l < L; l++) ob_rd_data[l] <= acc_t'(mem[ob_rd_addr][l]);
  always @(negedge clk) ddr_wr_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk) if (rst_n && ddr_wr_valid && ddr_wr_ready) begin
    automatic int xb = eb.pop_front(), xd = ed.pop_front();
    checks++;
    if (int'(ddr_wr_addr) != xd) begin failures++; $display("beat addr %0d exp %0d", ddr_wr_addr, xd); end
    for (int l = 0; l < L; l++) begin
      checks++;
      if (int'(ddr_wr_data[l]) != rq(mem[xb][l])) begin
        failures++; $display("beat %0d lane %0d: %0d exp %0d", beats, l, ddr_wr_data[l], rq(mem[xb][l]));
      end
    end
    beats++; cur++;
    if (ddr_wr_last) begin nlast++; burst_len.push_back(cur); cur = 0; end
  end
  initial begin
    for (int a = 0; a < 256; a++) for (int l = 0; l < L; l++) mem[a][l] = $urandom_range(0, 1200) - 600;
    for (int o = 0; o < 4; o++) for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
      eb.push_back(10 + ky*6 + o + kx); ed.push_back(1000 + o*9 + ky*3 + kx);
    end
    cfg = '0; cfg.b_start = 10; cfg.d_start = 1000;
    cfg.n_outer = 4; cfg.step_b = 1; cfg.step_d = 9; cfg.n_row = 3; cfg.inc_b2 = 1; cfg.inc_d2 = 1;
    cfg.n_rows = 3; cfg.inc_b3 = 4; cfg.inc_d3 = 1;
    repeat (2) @(negedge clk); rst_n = 1;
    start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks += 3;
    if (beats != 36) begin failures++; $display("beats %0d", beats); end
    if (nlast != 3 || bursts != 3) begin failures++; $display("bursts %0d/%0d", nlast, bursts); end
    if (burst_len.size() == 3 && !(burst_len[0] == 16 && burst_len[1] == 16 && burst_len[2] == 4)) begin
      failures++; $display("burst lengths %p", burst_len);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
