// blocked_buffer: on-chip operand buffer in the dual-parallelism blocked layout.
//
// Holds a matrix as tiles of NB x NJ elements (NJ <= NB). Element (i, j) of
// tile t is stored in bank (i + j) mod NB at word t*NJ + y(i, j), where y is the
// block slot of blocked_layout_map. Two kinds of single-cycle reads are
// conflict-free because every element of them lies in a different bank:
//   * RD_ROW: fixed i, all j = 0..NJ-1   -> rd_data[0..NJ-1]
//   * RD_COL: fixed j, all i = 0..NB-1   -> rd_data[0..NB-1]
// The rotation from bank order into element order is done after the banks.
// Used as the kernel buffer (i = reduction index k, j = output channel; NS
// reads rows, WS preload reads columns) and as the input buffer (square tiles,
// i = pixel, j = reduction index; NS reads columns, WS reads rows).
// Writes: one element per cycle. Reads: data valid one cycle after rd_en.
// The layout is the paper's; word-level addressing, the single write port and
// the one-cycle read latency are this design's choices.
module blocked_buffer
  import dynamap_pkg::*;
#(
  parameter int unsigned NB     = 92,     // banks = P_SA1
  parameter int unsigned NJ     = 66,     // tile width = P_SA2 (kernel) or P_SA1 (input)
  parameter int unsigned NTILES = 64,     // tiles held
  localparam int unsigned IW = $clog2(NB),
  localparam int unsigned JW = (NJ > 1) ? $clog2(NJ) : 1,
  localparam int unsigned TW = (NTILES > 1) ? $clog2(NTILES) : 1,
  localparam int unsigned WORDS = NTILES * NJ,
  localparam int unsigned AW = $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  // write port
  input  logic          wr_en,
  input  logic [TW-1:0] wr_tile,
  input  logic [IW-1:0] wr_i,
  input  logic [JW-1:0] wr_j,
  input  data_t         wr_data,
  // read port
  input  logic          rd_en,
  input  logic          rd_col,     // 0: RD_ROW (fixed i), 1: RD_COL (fixed j)
  input  logic [TW-1:0] rd_tile,
  input  logic [IW-1:0] rd_line,    // the fixed i (row) or j (column)
  output logic          rd_valid,
  output data_t         rd_data [NB]
);
  data_t mem [NB][WORDS];

  function automatic int unsigned slot(int unsigned i, int unsigned j);
    return (i + j < NB) ? (i % NJ) : (i - (NB - NJ));
  endfunction

  // ---- write ----
  logic [IW-1:0] wbank;
  int unsigned   wslot;
  always_comb begin
    wbank = IW'((int'(wr_i) + int'(wr_j)) % NB);
    wslot = slot(int'(wr_i), int'(wr_j));
  end
  always_ff @(posedge clk) begin
    if (wr_en) mem[wbank][AW'(int'(wr_tile) * NJ + wslot)] <= wr_data;
  end

  // ---- read: each bank computes which element it serves ----
  logic [AW-1:0] raddr [NB];
  logic          rsel  [NB];
  always_comb begin
    for (int x = 0; x < NB; x++) begin
      int unsigned e, ii, jj;
      // element index served by bank x: (x - line) mod NB
      e = (x >= int'(rd_line)) ? (x - int'(rd_line)) : (x + NB - int'(rd_line));
      if (rd_col) begin ii = e; jj = int'(rd_line); end
      else        begin ii = int'(rd_line); jj = e; end
      rsel[x]  = rd_col || (e < NJ);
      raddr[x] = AW'(int'(rd_tile) * NJ + slot(ii, jj));
    end
  end

  data_t         q [NB];
  logic [IW-1:0] line_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      line_q   <= '0;
    end else begin
      rd_valid <= rd_en;
      if (rd_en) line_q <= rd_line;
    end
  end
  always_ff @(posedge clk) begin
    for (int x = 0; x < NB; x++)
      if (rd_en && rsel[x]) q[x] <= mem[x][raddr[x]];
  end

  // rotate back: element e was read from bank (e + line) mod NB
  always_comb begin
    for (int e = 0; e < NB; e++)
      rd_data[e] = q[(e + int'(line_q)) % NB];
  end

  initial assert (NJ <= NB) else $error("blocked_buffer needs NJ <= NB");
endmodule
