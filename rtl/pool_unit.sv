// pool_unit: one Pooling Unit (PU) of the MaxPool module, for one channel.
//
// A horizontal PU (HPU) keeps the last KMAX pixels of the current row in a
// shift register and, whenever a K-wide window with stride S is complete,
// outputs its maximum: at most one intermediate result per cycle. A vertical
// PU (VPU) of the same kind keeps the last KMAX-1 rows of HPU results in a
// small line buffer; once K rows of HPU results exist, each new HPU result of
// a row that ends a vertical window (stride S) is combined with the K-1
// stored values above it, giving one pooling result per cycle, overlapped
// with the HPU. Pixels arrive row-major (W per row, H rows); valid windows
// only (no padding). Output follows the input pixel that completes the window
// by one cycle. Runtime K <= KMAX and W/S <= OWMAX.
// The HPU/VPU split is the paper's; line-buffer organisation, valid-only
// windows and the register stage are this design's choices.
module pool_unit
  import dynamap_pkg::*;
#(
  parameter int unsigned KMAX  = 3,
  parameter int unsigned OWMAX = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        restart,     // start of a new map
  input  logic [7:0]  cfg_k,
  input  logic [7:0]  cfg_s,
  input  logic [15:0] cfg_w,
  input  logic        in_valid,
  input  acc_t        in_data,
  output logic        out_valid,
  output acc_t        out_data
);
  localparam int unsigned NR = (KMAX > 2) ? KMAX - 1 : 1;
  acc_t hsr [KMAX];                 // HPU shift register, hsr[0] newest
  localparam int unsigned OXW = $clog2(OWMAX);
  localparam int unsigned SLW = (NR > 1) ? $clog2(NR) : 1;
  acc_t lbuf [NR][OWMAX];           // VPU line buffer
  logic [15:0] col, row, ox;
  logic [15:0] hcnt, vcnt;          // position within the stride pattern
  int unsigned slot;

  logic h_fire, v_fire;
  acc_t hmax, vmax;
  always_comb begin
    // HPU: window of cfg_k pixels ending at this one
    hmax = in_data;
    for (int j = 1; j < KMAX; j++)
      if (j < int'(cfg_k) && hsr[j-1] > hmax) hmax = hsr[j-1];
    h_fire = in_valid && (col >= 16'(cfg_k - 1)) && (hcnt == 0);
    // VPU: combine with the cfg_k-1 HPU rows above
    vmax = hmax;
    for (int j = 1; j < KMAX; j++)
      if (j < int'(cfg_k)) begin
        automatic logic [SLW-1:0] sl = SLW'((slot + NR * 4 - j) % NR);
        if (lbuf[sl][OXW'(ox)] > vmax) vmax = lbuf[sl][OXW'(ox)];
      end
    v_fire = h_fire && (row >= 16'(cfg_k - 1)) && (vcnt == 0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col <= '0; row <= '0; ox <= '0; hcnt <= '0; vcnt <= '0; slot <= 0;
      out_valid <= 1'b0; out_data <= '0;
      hsr <= '{default: '0};
    end else begin
      out_valid <= 1'b0;
      if (restart) begin
        col <= '0; row <= '0; ox <= '0; hcnt <= '0; vcnt <= '0; slot <= 0;
      end else if (in_valid) begin
        hsr[0] <= in_data;
        for (int j = 1; j < KMAX; j++) hsr[j] <= hsr[j-1];
        if (h_fire) begin
          lbuf[slot][OXW'(ox)] <= hmax;
          ox <= ox + 1'b1;
          if (v_fire) begin
            out_valid <= 1'b1;
            out_data  <= vmax;
          end
        end
        // horizontal stride phase
        if (col >= 16'(cfg_k - 1)) hcnt <= (hcnt == 16'(cfg_s - 1)) ? '0 : hcnt + 1'b1;
        if (col == cfg_w - 1) begin
          col <= '0; ox <= '0; hcnt <= '0;
          row <= row + 1'b1;
          slot <= (slot + 1) % NR;
          if (row >= 16'(cfg_k - 1)) vcnt <= (vcnt == 16'(cfg_s - 1)) ? '0 : vcnt + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end
endmodule
