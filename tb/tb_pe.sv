// tb_pe: self-checking test of one processing element.
//
// 1. NS: random dot products of random length stream through h (with
//    first/last tags) and v; each finished sum must appear on r_out one cycle
//    after its last term when the chain is free. Results arriving from above
//    on r_in get priority: the PE's own result is parked and must come out in
//    the next free cycle, and a second result arriving while one is parked
//    must raise `congest`.
// 2. Preload: values shifted into pl_in appear on pl_out one cycle later;
//    pl_latch copies them into ping-pong register 0 or 1.
// 3. WS: r_out = r_in + h * st[h.bank] for random operands in both banks, one
//    cycle later, and r_out.valid follows r_in.valid.
// Operand and result values are checked against sums computed here.
module tb_pe;
  import dynamap_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pe_mode_e mode;
  hop_t     h_in, h_out;
  data_t    v_in, v_out, pl_in, pl_out;
  res_t     r_in, r_out;
  logic     pl_shift, pl_latch, pl_bank, congest;

  pe dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic idle();
    h_in = '0; v_in = '0; r_in = '0; pl_in = '0;
    pl_shift = 0; pl_latch = 0; pl_bank = 0;
  endtask

  // drive one NS term; returns the running sum
  task automatic term(int x, int y, bit first, bit last);
    h_in = '{valid: 1'b1, first: first, last: last, bank: 1'b0, data: data_t'(x)};
    v_in = data_t'(y);
  endtask

  initial begin
    automatic int sum;
    automatic data_t stv [2];
    idle();
    mode = PE_MOVE;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // ---- 1a. NS, free chain ----
    for (int d = 0; d < 20; d++) begin
      automatic int n = $urandom_range(1, 9);
      sum = 0;
      for (int k = 0; k < n; k++) begin
        automatic int x = $urandom_range(0, 255) - 128, y = $urandom_range(0, 255) - 128;
        sum += x * y;
        term(x, y, k == 0, k == n - 1);
        @(negedge clk);
        chk("h pass-through", h_out.data, data_t'(x));
        chk("v pass-through", v_out, data_t'(y));
        if (k < n - 1) chk("no early result", r_out.valid, 0);
      end
      chk("NS result valid", r_out.valid, 1);
      chk("NS result", r_out.data, sum);
      idle();
    end
    @(negedge clk);

    // ---- 1b. NS, result collides with the chain ----
    sum = 0;
    for (int k = 0; k < 3; k++) begin
      automatic int x = $urandom_range(0, 255) - 128, y = $urandom_range(0, 255) - 128;
      sum += x * y;
      term(x, y, k == 0, k == 2);
      if (k == 2) r_in = '{valid: 1'b1, data: 12345};
      @(negedge clk);
    end
    // chain value has priority
    chk("chain first (valid)", r_out.valid, 1);
    chk("chain first (data)", r_out.data, 12345);
    // second dot product of length 1 finishes now while one result is parked
    r_in = '{valid: 1'b1, data: -777};
    term(3, 4, 1, 1);
    @(negedge clk);
    chk("chain again", r_out.data, -777);
    chk("congest raised", congest, 1);
    idle();
    @(negedge clk);
    chk("parked result out", r_out.valid, 1);
    chk("parked result (newest)", r_out.data, 12);
    @(negedge clk);
    chk("chain idle", r_out.valid, 0);
    chk("congest cleared", congest, 0);

    // ---- 2. preload both banks ----
    mode = PE_STATIONARY;
    for (int b = 0; b < 2; b++) begin
      stv[b] = data_t'($urandom_range(0, 255) - 128);
      pl_shift = 1; pl_in = stv[b];
      @(negedge clk);
      chk("pl_out", pl_out, stv[b]);
      pl_shift = 0; pl_latch = 1; pl_bank = b[0];
      @(negedge clk);
      pl_latch = 0;
    end

    // ---- 3. WS ----
    for (int t = 0; t < 50; t++) begin
      automatic int x = $urandom_range(0, 255) - 128;
      automatic int bk = $urandom_range(0, 1);
      automatic int ps = $urandom_range(0, 200000) - 100000;
      automatic bit vv = $urandom_range(0, 3) != 0;
      h_in = '{valid: 1'b1, first: 1'b0, last: 1'b0, bank: bk[0], data: data_t'(x)};
      r_in = '{valid: vv, data: ps};
      @(negedge clk);
      chk("WS psum", r_out.data, ps + x * stv[bk]);
      chk("WS valid", r_out.valid, vv);
    end
    idle();

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
