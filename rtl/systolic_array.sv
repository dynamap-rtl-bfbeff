// systolic_array: the Computing Unit, a P_SA1 x P_SA2 grid of PEs.
//
// Geometry (i1 = row 0..P_SA1-1, i2 = column 0..P_SA2-1):
//   * row i1 receives a horizontally moving operand at its left edge
//     (input-buffer bank i1 in NS/WS, kernel data in IS);
//   * column i2 receives the vertically moving operand (NS) and the partial
//     sum injection (WS/IS) at its top edge;
//   * results leave at the bottom edge, one lane per column.
// The edge vectors are given unskewed: everything presented in one cycle
// belongs to the same step. The array delays row i1 by i1 cycles and column i2
// by i2 cycles on the way in, and lane i2 by P_SA2-1-i2 cycles on the way out,
// so all output lanes are aligned again. Latency from an edge vector to the
// corresponding WS partial sum at the outputs: P_SA1 + P_SA2 - 1 cycles.
//
// NS: PE(i1,i2) computes the dot product of left row i1 and top column i2;
//     a pass over a reduction length b >= P_SA1 streams out with no stall, one
//     row of results per cycle, in row order.
// WS/IS: PE(i1,i2) holds a stationary element; each left vector produces,
//     P_SA1 + P_SA2 - 1 cycles later, one P_SA2-wide vector of partial sums
//     out[i2] = sum_i1 left[i1] * st(i1,i2).
// Stationary blocks are preloaded through the per-row preload chains (left to
// right): P_SA2 pl_shift pulses, the value shifted in at pulse s ending in
// column P_SA2-1-s, then pl_latch copies them into ping-pong register pl_bank.
// A preload vector is one tile column (P_SA1 values), so the weight buffer is
// read along P_SA1 for WS preload and along P_SA2 for NS streaming.
// The array size is the paper's (92 x 66 for GoogleNet); edge buffering and
// port layout are this design's choices.
module systolic_array
  import dynamap_pkg::*;
#(
  parameter int unsigned P_SA1 = 92,
  parameter int unsigned P_SA2 = 66
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  hop_t     left_in  [P_SA1],
  input  data_t    top_in   [P_SA2],
  input  logic     top_valid,          // partial-sum injection (WS/IS)
  input  logic     pl_shift,
  input  logic     pl_latch,
  input  logic     pl_bank,
  input  data_t    pl_in    [P_SA1],
  output res_t     out      [P_SA2],
  output logic     congest
);

  hop_t  h   [P_SA1][P_SA2+1];
  data_t v   [P_SA1+1][P_SA2];
  res_t  r   [P_SA1+1][P_SA2];
  data_t pl  [P_SA1][P_SA2+1];
  logic  cg  [P_SA1][P_SA2];

  // ---- input skew: row i1 delayed by i1 cycles ----
  for (genvar i1 = 0; i1 < P_SA1; i1++) begin : g_lskew
    if (i1 == 0) begin : g_nodly
      assign h[0][0] = left_in[0];
    end else begin : g_dly
      hop_t sr [i1];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < i1; k++) sr[k] <= '0;
        end else begin
          sr[0] <= left_in[i1];
          for (int k = 1; k < i1; k++) sr[k] <= sr[k-1];
        end
      end
      assign h[i1][0] = sr[i1-1];
    end
    assign pl[i1][0] = pl_in[i1];
  end

  // ---- input skew: column i2 delayed by i2 cycles ----
  for (genvar i2 = 0; i2 < P_SA2; i2++) begin : g_tskew
    if (i2 == 0) begin : g_nodly
      assign v[0][0] = top_in[0];
      assign r[0][0] = '{valid: top_valid, data: '0};
    end else begin : g_dly
      data_t sr [i2];
      logic  vv [i2];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < i2; k++) begin
            sr[k] <= '0;
            vv[k] <= 1'b0;
          end
        end else begin
          sr[0] <= top_in[i2];
          vv[0] <= top_valid;
          for (int k = 1; k < i2; k++) begin
            sr[k] <= sr[k-1];
            vv[k] <= vv[k-1];
          end
        end
      end
      assign v[0][i2] = sr[i2-1];
      assign r[0][i2] = '{valid: vv[i2-1], data: '0};
    end
  end

  // ---- PE grid ----
  for (genvar i1 = 0; i1 < P_SA1; i1++) begin : g_row
    for (genvar i2 = 0; i2 < P_SA2; i2++) begin : g_col
      pe u_pe (
        .clk, .rst_n, .mode,
        .h_in (h[i1][i2]),   .h_out (h[i1][i2+1]),
        .v_in (v[i1][i2]),   .v_out (v[i1+1][i2]),
        .r_in (r[i1][i2]),   .r_out (r[i1+1][i2]),
        .pl_shift, .pl_latch, .pl_bank,
        .pl_in(pl[i1][i2]),  .pl_out(pl[i1][i2+1]),
        .congest (cg[i1][i2])
      );
    end
  end

  // ---- output deskew: lane i2 delayed by P_SA2-1-i2 cycles ----
  for (genvar i2 = 0; i2 < P_SA2; i2++) begin : g_oskew
    localparam int unsigned DLY = P_SA2 - 1 - i2;
    if (DLY == 0) begin : g_nodly
      assign out[i2] = r[P_SA1][i2];
    end else begin : g_dly
      res_t sr [DLY];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < int'(DLY); k++) sr[k] <= '0;
        end else begin
          sr[0] <= r[P_SA1][i2];
          for (int k = 1; k < int'(DLY); k++) sr[k] <= sr[k-1];
        end
      end
      assign out[i2] = sr[DLY-1];
    end
  end

  always_comb begin
    congest = 1'b0;
    for (int i1 = 0; i1 < P_SA1; i1++)
      for (int i2 = 0; i2 < P_SA2; i2++)
        congest |= cg[i1][i2];
  end

  // unused right-edge / bottom-edge pass-through signals
  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int i1 = 0; i1 < P_SA1; i1++) unused ^= (^h[i1][P_SA2]) ^ (^pl[i1][P_SA2]);
    for (int i2 = 0; i2 < P_SA2; i2++) unused ^= ^v[P_SA1][i2];
  end

endmodule
