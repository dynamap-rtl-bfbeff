// blocked_layout_map: dual-parallelism blocked data layout address map.
//
// A P_SA1 x P_SA2 tile of a matrix is split into blocks (i, j), 0 <= i < P_SA1,
// 0 <= j < P_SA2, stored in P_SA1 single-port banks. Block (i, j) lives in bank
// x = (i + j) mod P_SA1 at block slot
//     y = i mod P_SA2            if i + j <  P_SA1
//     y = i - (P_SA1 - P_SA2)    if i + j >= P_SA1
// Because the bank index is circularly shifted by j, all blocks of one tile
// row (fixed j) and all blocks of one tile column (fixed i) sit in different
// banks, so either can be read in a single cycle, which is what switching
// between the NS and WS/IS dataflows needs. The formula and its figure
// example (P_SA1 = 5, P_SA2 = 4) are the paper's and require P_SA2 <= P_SA1.
// Purely combinational.
module blocked_layout_map #(
  parameter int unsigned P_SA1 = 92,
  parameter int unsigned P_SA2 = 66,
  localparam int unsigned IW = (P_SA1 > 1) ? $clog2(P_SA1) : 1,
  localparam int unsigned JW = (P_SA2 > 1) ? $clog2(P_SA2) : 1
) (
  input  logic [IW-1:0] i,
  input  logic [JW-1:0] j,
  output logic [IW-1:0] bank_x,
  output logic [JW-1:0] block_y
);
  int unsigned s, y;
  always_comb begin
    s = int'(i) + int'(j);
    if (s < P_SA1) begin
      bank_x = IW'(s);
      y      = int'(i) % P_SA2;
    end else begin
      bank_x = IW'(s - P_SA1);
      y      = int'(i) - (P_SA1 - P_SA2);
    end
    block_y = JW'(y);
  end

  initial assert (P_SA2 <= P_SA1) else $error("blocked layout needs P_SA2 <= P_SA1");
endmodule
