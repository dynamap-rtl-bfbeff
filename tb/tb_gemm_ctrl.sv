// tb_gemm_ctrl: checks the operand schedule issued by the GEMM sequencer at
// a 4 x 3 array.
//
// NS (a=7, b=6, c=5 and a=3, b=2, c=2): every cycle of the run is compared
// with a reference schedule built here from the loop order
// (channel tile, pixel tile, reduction step): input-buffer column read
// (tile, line), kernel-buffer row read (tile, line) and the first/last tags,
// which must arrive one cycle after the reads. The run must take exactly
// CT * AT * max(b, P_SA1) cycles (the NS term of the cost model).
// WS (a=5, b=9, c=4): the X row reads of each pass and their bank tag are
// compared with the reference; each pass must be preceded by P_SA2 column
// reads of the right weight tile in the order P_SA2-1 .. 0 and by one
// pl_latch into alternating banks; rows_valid must mark the partly filled
// last reduction block.
module tb_gemm_ctrl;
  import dynamap_pkg::*;
  localparam int P1 = 4, P2 = 3, IW = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, issue_done;
  gemm_cfg_t cfg;
  logic x_rd_en, x_rd_col, w_rd_en, w_rd_col;
  logic [9:0] x_rd_tile, w_rd_tile;
  logic [IW-1:0] x_rd_line, w_rd_line;
  pe_mode_e mode;
  hop_t tag;
  logic [IW:0] rows_valid;
  logic top_valid, pl_shift, pl_latch, pl_bank, acc_clear, acc_bypass;
  logic [31:0] acc_per_pass, acc_n_pass, out_per_round;

  gemm_ctrl #(.P_SA1(P1), .P_SA2(P2), .XTW(10), .WTW(10)) dut (.*);

  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int cdiv(int x, int d); return (x + d - 1) / d; endfunction

  // one recorded cycle
  typedef struct {
    bit xe, xc, we, wc; int xt, xl, wt, wl;
  } rd_t;
  rd_t   rec [$];
  hop_t  tags [$];
  int    rows [$];
  bit    lat [$], lbank [$], tv [$], sh [$];
  int    nbusy = 0;
  always @(posedge clk) if (rst_n && busy) nbusy++;

  always @(posedge clk) if (rst_n && (busy || tag.valid || pl_latch || pl_shift)) begin
    rec.push_back('{x_rd_en, x_rd_col, w_rd_en, w_rd_col,
                    int'(x_rd_tile), int'(x_rd_line), int'(w_rd_tile), int'(w_rd_line)});
    tags.push_back(tag); rows.push_back(int'(rows_valid));
    lat.push_back(pl_latch); lbank.push_back(pl_bank); tv.push_back(top_valid); sh.push_back(pl_shift);
  end

  task automatic go(dataflow_e df, int a, int b, int c, int xb, int wb);
    nbusy = 0; rec.delete(); tags.delete(); rows.delete(); lat.delete(); lbank.delete(); tv.delete(); sh.delete();
    cfg = '{df: df, a: 16'(a), b: 16'(b), c: 16'(c), x_base: 16'(xb), w_base: 16'(wb)};
    start = 1; @(negedge clk); start = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
  endtask

  task automatic check_ns(int a, int b, int c, int xb, int wb);
    int kt = cdiv(b, P1), ct = cdiv(c, P2), at = cdiv(a, P1);
    int per = (b > P1) ? b : P1;
    int n = 0;
    go(DF_NS, a, b, c, xb, wb);
    chk("NS cycles", nbusy, ct * at * per);
    chk("NS bypass", acc_bypass, 1);
    for (int cc = 0; cc < ct; cc++) for (int aa = 0; aa < at; aa++) for (int s = 0; s < per; s++) begin
      if (n + 1 < rec.size()) begin
        automatic rd_t r = rec[n];
        automatic hop_t t = tags[n + 1];
        chk("NS x_en", r.xe, s < b);
        chk("NS w_en", r.we, s < b);
        chk("NS tag valid", t.valid, s < b);
        if (s < b) begin
          chk("NS x col", r.xc, 1); chk("NS w row", r.wc, 0);
          chk("NS x tile", r.xt, xb + aa * kt + s / P1); chk("NS x line", r.xl, s % P1);
          chk("NS w tile", r.wt, wb + (s / P1) * ct + cc); chk("NS w line", r.wl, s % P1);
          chk("NS first", t.first, s == 0); chk("NS last", t.last, s == b - 1);
        end
      end
      n++;
    end
  endtask

  task automatic check_ws(int a, int b, int c, int xb, int wb);
    int kt = cdiv(b, P1), ct = cdiv(c, P2);
    int xr [$], wr [$], wl [$], bk [$], rv [$], latches = 0, nshift = 0;
    go(DF_WS, a, b, c, xb, wb);
    chk("WS acc per pass", acc_per_pass, a);
    chk("WS acc passes", acc_n_pass, kt);
    foreach (rec[i]) begin
      if (rec[i].xe) begin
        chk("WS x row", rec[i].xc, 0);
        xr.push_back(rec[i].xt * 16 + rec[i].xl);
      end
      if (rec[i].we) begin
        chk("WS w col", rec[i].wc, 1);
        wr.push_back(rec[i].wt); wl.push_back(rec[i].wl);
      end
      if (i + 1 < tags.size() && rec[i].xe) begin
        bk.push_back(tags[i + 1].bank); rv.push_back(rows[i + 1]);
        chk("WS top_valid", tv[i + 1], 1);
      end
      if (lat[i]) begin
        chk("WS latch bank", lbank[i], latches % 2);
        latches++;
      end
      if (sh[i]) nshift++;
    end
    chk("WS latches", latches, kt * ct);
    chk("WS shifts", nshift, kt * ct * P2);
    chk("WS x reads", xr.size(), kt * ct * a);
    chk("WS w reads", wr.size(), kt * ct * P2);
    for (int p = 0; p < kt * ct; p++) begin
      automatic int cc = p / kt, k = p % kt;
      for (int s = 0; s < P2 && p * P2 + s < wr.size(); s++) begin
        chk("WS w tile", wr[p * P2 + s], wb + k * ct + cc);
        chk("WS w line", wl[p * P2 + s], P2 - 1 - s);
      end
      for (int i = 0; i < a && p * a + i < xr.size(); i++) begin
        chk("WS x tile/line", xr[p * a + i], (xb + (i / P1) * kt + k) * 16 + i % P1);
        chk("WS bank", bk[p * a + i], p % 2);
        chk("WS rows_valid", rv[p * a + i], (k == kt - 1 && b - k * P1 < P1) ? b - k * P1 : P1);
      end
    end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_ns(7, 6, 5, 3, 5);
    check_ns(3, 2, 2, 0, 0);
    check_ws(5, 9, 4, 2, 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
