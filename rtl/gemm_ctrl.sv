// gemm_ctrl: sequencer that runs one GEMM Z(a x c) = X(a x b) * W(b x c)
// on the systolic array in the NS, WS or IS dataflow.
//
// Operand storage (both buffers use the blocked layout):
//   X: input buffer, square P_SA1 x P_SA1 tiles, element (pixel p, index k) in
//      tile x_base + (p / P_SA1) * KT + k / P_SA1 at (i, j) = (p, k) mod P_SA1;
//   W: kernel buffer, P_SA1 x P_SA2 tiles, element (k, n) in tile
//      w_base + (k / P_SA1) * CT + n / P_SA2 at (i, j) = (k mod P_SA1, n mod P_SA2);
// with KT = ceil(b / P_SA1), CT = ceil(c / P_SA2), AT = ceil(a / P_SA1).
//
// NS: for each channel tile ct and pixel tile at, one pass of max(b, P_SA1)
//     cycles streams X columns into the array rows and W rows into the array
//     columns (both conflict-free buffer reads); passes follow each other with
//     no gap. The pass length is padded to P_SA1 when b < P_SA1 so that
//     finished results never collide on the result chain. Cycles:
//     CT * AT * max(b, P_SA1) (the NS line of the paper's cost model, with
//     b replaced by max(b, P_SA1)).
// WS: for each ct, KT passes; pass kt first preloads the P_SA1 x P_SA2 weight
//     block (P_SA2 cycles, one tile column per cycle), then streams all a
//     pixels (one X tile row each). The preload of the next block overlaps the
//     current stream (ping-pong registers); a block may be latched into a
//     ping-pong register only once the pass that used it last has drained
//     from the array (P_SA1 + P_SA2 cycles). Cycles per pass: max(a,
//     P_SA2) + 1 (+ drain wait when a is small). psum_accumulator adds the KT
//     partial results of a round.
// IS: the mirror of WS. For each pixel tile of P_SA2 pixels, KT passes; a
//     pass preloads P_SA1 reduction values of each of the P_SA2 pixels (one
//     input-buffer row per shift) and then streams the c weight columns
//     (kernel-buffer column reads), one output channel per cycle. The result
//     lanes are pixels: the output is Z transposed. Cycles per pass: about c.
// Buffer reads have one cycle of latency, so every array-side control output
// (tags, top_valid, pl_shift, pl_latch) is registered once to line up with
// the data. In WS the rows of a partly filled last reduction block (k >= b)
// are flagged through rows_valid so that the array sees zeros there; in NS
// the reduction only runs over k < b and padding rows/lanes are not written
// back. issue_done pulses after the last operand was issued.
// The three dataflows and their cost follow the paper; the loop orders,
// address formulas and drain rule are this design's.
module gemm_ctrl
  import dynamap_pkg::*;
#(
  parameter int unsigned P_SA1 = 92,
  parameter int unsigned P_SA2 = 66,
  parameter int unsigned XTW   = 10,   // tile-index width, input buffer
  parameter int unsigned WTW   = 10,   // tile-index width, kernel buffer
  localparam int unsigned IW = $clog2(P_SA1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  gemm_cfg_t      cfg,
  output logic           busy,
  output logic           issue_done,
  // input buffer read
  output logic           x_rd_en,
  output logic           x_rd_col,
  output logic [XTW-1:0] x_rd_tile,
  output logic [IW-1:0]  x_rd_line,
  // kernel buffer read
  output logic           w_rd_en,
  output logic           w_rd_col,
  output logic [WTW-1:0] w_rd_tile,
  output logic [IW-1:0]  w_rd_line,
  // array controls, aligned with buffer read data
  output pe_mode_e       mode,
  output hop_t           tag,          // valid/first/last/bank for the left edge
  output logic [IW:0]    rows_valid,   // rows < rows_valid carry real reduction terms
  output logic           top_valid,
  output logic           pl_shift,
  output logic           pl_latch,
  output logic           pl_bank,
  // accumulator configuration
  output logic           acc_clear,
  output logic           acc_bypass,
  output logic [31:0]    acc_per_pass,
  output logic [31:0]    acc_n_pass,
  output logic [31:0]    out_per_round  // result vectors per channel tile
);
  typedef enum logic [2:0] {G_IDLE, G_NS, G_WS_PRE, G_WS_LATCH, G_WS_STREAM, G_WS_WAIT} gstate_e;
  gstate_e st;
  gemm_cfg_t c;
  logic [15:0] kt_n, ct_n, at_n, per;
  logic [15:0] wct_n;                      // channel tiles of W
  logic        is_m;                       // IS dataflow
  logic [15:0] slen;                       // vectors streamed per WS/IS pass
  int          pp;                         // IS: pixel being preloaded
  logic [15:0] ct, at, kt, s, kq, ks, ps;     // counters
  logic        bank;
  logic        pre_busy;                   // next-block preload running (WS)
  logic [15:0] pkt, pct;                   // block being preloaded
  logic [31:0] now, t_end [2];
  logic        have_next;
  logic        last_pass;

  // control signals before the one-cycle alignment register
  hop_t tag_d;
  logic [IW:0] rows_d;
  logic top_valid_d, pl_shift_d, pl_latch_d, pl_bank_d;

  function automatic logic [15:0] cdiv(logic [15:0] x, int unsigned d);
    return 16'((int'(x) + d - 1) / d);
  endfunction

  assign busy = (st != G_IDLE);
  assign mode = (c.df == DF_NS) ? PE_MOVE : PE_STATIONARY;
  assign acc_bypass   = (c.df == DF_NS);
  assign is_m = (c.df == DF_IS);
  assign slen = is_m ? c.c : c.a;
  assign acc_per_pass = 32'(slen);
  assign acc_n_pass   = 32'(kt_n);
  assign out_per_round = (c.df == DF_NS) ? 32'(at_n) * P_SA1 : 32'(slen);
  assign last_pass = (kt == kt_n - 1) && (ct == ct_n - 1);
  assign have_next = !last_pass;

  always_comb begin
    x_rd_en = 1'b0; x_rd_col = 1'b0; x_rd_tile = '0; x_rd_line = '0;
    w_rd_en = 1'b0; w_rd_col = 1'b0; w_rd_tile = '0; w_rd_line = '0;
    pp = 0;
    tag_d = '0; rows_d = (IW+1)'(P_SA1); top_valid_d = 1'b0; pl_shift_d = 1'b0; pl_latch_d = 1'b0; pl_bank_d = 1'b0;
    unique case (st)
      G_NS: if (s < c.b) begin
        x_rd_en = 1'b1; x_rd_col = 1'b1;
        x_rd_tile = XTW'(c.x_base + at * kt_n + kq);
        x_rd_line = IW'(ks);
        w_rd_en = 1'b1; w_rd_col = 1'b0;
        w_rd_tile = WTW'(c.w_base + kq * wct_n + ct);
        w_rd_line = IW'(ks);
        tag_d = '{valid: 1'b1, first: (s == 0), last: (s == c.b - 1), bank: 1'b0, data: '0};
      end
      G_WS_PRE: begin
        if (is_m) begin
          pp = int'(ct) * P_SA2 + P_SA2 - 1 - int'(ps);
          x_rd_en = 1'b1; x_rd_col = 1'b0;
          x_rd_tile = XTW'(int'(c.x_base) + (pp / P_SA1) * int'(kt_n) + int'(kt));
          x_rd_line = IW'(pp % P_SA1);
        end else begin
          w_rd_en = 1'b1; w_rd_col = 1'b1;
          w_rd_tile = WTW'(c.w_base + kt * wct_n + ct);
          w_rd_line = IW'(P_SA2 - 1 - int'(ps));
        end
        pl_shift_d = 1'b1;
      end
      G_WS_LATCH: begin
        pl_latch_d = 1'b1; pl_bank_d = bank;
      end
      G_WS_STREAM: begin
        if (is_m) begin
          // IS: one W tile column (output channel s) per cycle
          w_rd_en = 1'b1; w_rd_col = 1'b1;
          w_rd_tile = WTW'(int'(c.w_base) + int'(kt) * int'(wct_n) + int'(s) / P_SA2);
          w_rd_line = IW'(int'(s) % P_SA2);
        end else begin
          x_rd_en = 1'b1; x_rd_col = 1'b0;
          x_rd_tile = XTW'(c.x_base + kq * kt_n + kt);   // kq = pixel / P_SA1 here
          x_rd_line = IW'(ks);                          // ks = pixel mod P_SA1
        end
        tag_d = '{valid: 1'b1, first: 1'b0, last: 1'b0, bank: bank, data: '0};
        // the last reduction block may be partly filled: rows k >= b are zeroed
        if (kt == kt_n - 1 && 32'(c.b) - 32'(kt) * P_SA1 < P_SA1)
          rows_d = (IW+1)'(32'(c.b) - 32'(kt) * P_SA1);
        top_valid_d = 1'b1;
        if (pre_busy) begin
          if (is_m) begin
            pp = int'(pct) * P_SA2 + P_SA2 - 1 - int'(ps);
            x_rd_en = 1'b1; x_rd_col = 1'b0;
            x_rd_tile = XTW'(int'(c.x_base) + (pp / P_SA1) * int'(kt_n) + int'(pkt));
            x_rd_line = IW'(pp % P_SA1);
          end else begin
            w_rd_en = 1'b1; w_rd_col = 1'b1;
            w_rd_tile = WTW'(c.w_base + pkt * wct_n + pct);
            w_rd_line = IW'(P_SA2 - 1 - int'(ps));
          end
          pl_shift_d = 1'b1;
        end
      end
      G_WS_WAIT: if (pre_busy) begin
        if (is_m) begin
          pp = int'(pct) * P_SA2 + P_SA2 - 1 - int'(ps);
          x_rd_en = 1'b1; x_rd_col = 1'b0;
          x_rd_tile = XTW'(int'(c.x_base) + (pp / P_SA1) * int'(kt_n) + int'(pkt));
          x_rd_line = IW'(pp % P_SA1);
        end else begin
          w_rd_en = 1'b1; w_rd_col = 1'b1;
          w_rd_tile = WTW'(c.w_base + pkt * wct_n + pct);
          w_rd_line = IW'(P_SA2 - 1 - int'(ps));
        end
        pl_shift_d = 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= G_IDLE; c <= '0;
      kt_n <= '0; ct_n <= '0; wct_n <= '0; at_n <= '0; per <= '0;
      ct <= '0; at <= '0; kt <= '0; s <= '0; kq <= '0; ks <= '0; ps <= '0;
      bank <= 1'b0; pre_busy <= 1'b0; pkt <= '0; pct <= '0;
      now <= '0; t_end[0] <= '0; t_end[1] <= '0;
      issue_done <= 1'b0; acc_clear <= 1'b0;
      tag <= '0; rows_valid <= '0; top_valid <= 1'b0; pl_shift <= 1'b0; pl_latch <= 1'b0; pl_bank <= 1'b0;
    end else begin
      now <= now + 1;
      issue_done <= 1'b0;
      acc_clear  <= 1'b0;
      tag <= tag_d; rows_valid <= rows_d; top_valid <= top_valid_d;
      pl_shift <= pl_shift_d; pl_latch <= pl_latch_d; pl_bank <= pl_bank_d;

      // background preload of the next WS block
      if (pl_shift_d && st != G_WS_PRE) begin
        if (ps == 16'(P_SA2 - 1)) pre_busy <= 1'b0;
        ps <= ps + 1'b1;
      end

      unique case (st)
        G_IDLE: if (start) begin
          c    <= cfg;
          kt_n <= cdiv(cfg.b, P_SA1);
          wct_n <= cdiv(cfg.c, P_SA2);
          ct_n <= (cfg.df == DF_IS) ? cdiv(cfg.a, P_SA2) : cdiv(cfg.c, P_SA2);
          at_n <= cdiv(cfg.a, P_SA1);
          per  <= (cfg.b > 16'(P_SA1)) ? cfg.b : 16'(P_SA1);
          ct <= '0; at <= '0; kt <= '0; s <= '0; kq <= '0; ks <= '0; ps <= '0;
          bank <= 1'b0; pre_busy <= 1'b0;
          t_end[0] <= '0; t_end[1] <= '0;
          acc_clear <= 1'b1;
          st <= (cfg.df == DF_NS) ? G_NS : G_WS_PRE;
        end

        // ---------------- NS ----------------
        G_NS: begin
          if (ks == 16'(P_SA1 - 1)) begin ks <= '0; kq <= kq + 1'b1; end
          else ks <= ks + 1'b1;
          if (s == per - 1) begin
            s <= '0; ks <= '0; kq <= '0;
            if (at == at_n - 1) begin
              at <= '0;
              if (ct == ct_n - 1) begin
                st <= G_IDLE; issue_done <= 1'b1;
              end else ct <= ct + 1'b1;
            end else at <= at + 1'b1;
          end else s <= s + 1'b1;
        end

        // ---------------- WS ----------------
        G_WS_PRE: begin            // first block of the GEMM
          if (ps == 16'(P_SA2 - 1)) begin ps <= '0; st <= G_WS_LATCH; end
          else ps <= ps + 1'b1;
        end
        G_WS_LATCH: begin
          st <= G_WS_STREAM;
          s <= '0; kq <= '0; ks <= '0;
          // start preloading the following block during the stream
          if (have_next) begin
            pre_busy <= 1'b1; ps <= '0;
            if (kt == kt_n - 1) begin pkt <= '0; pct <= ct + 1'b1; end
            else begin pkt <= kt + 1'b1; pct <= ct; end
          end
        end
        G_WS_STREAM: begin
          if (ks == 16'(P_SA1 - 1)) begin ks <= '0; kq <= kq + 1'b1; end
          else ks <= ks + 1'b1;
          if (s == slen - 1) begin
            t_end[bank] <= now;
            if (last_pass) begin
              st <= G_IDLE; issue_done <= 1'b1;
            end else begin
              st <= G_WS_WAIT;
              if (kt == kt_n - 1) begin kt <= '0; ct <= ct + 1'b1; end
              else kt <= kt + 1'b1;
              bank <= ~bank;
            end
          end else s <= s + 1'b1;
        end
        G_WS_WAIT: begin
          // next block fully shifted in and the pass that last used this
          // ping-pong register has left the array
          if (!pre_busy && (t_end[bank] == '0 || now - t_end[bank] > 32'(P_SA1 + P_SA2 + 1)))
            st <= G_WS_LATCH;
        end
        default: st <= G_IDLE;
      endcase
    end
  end
endmodule
