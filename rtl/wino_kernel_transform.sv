// wino_kernel_transform: Winograd F(2x2,3x3) kernel transform, scaled by 4.
//
// Computes U4 = (2G) g (2G)^T = 4 G g G^T for one 3 x 3 kernel g, with
//   2G = [ 2 0 0 ; 1 1 1 ; 1 -1 1 ; 0 0 2 ].
// The paper notes that F(2,3) needs only +-1 and +-1/2, i.e. shifts and adds.
// Instead of keeping fractional bits, this design scales the kernel tile by 4
// so that it stays an exact integer; wino_output_transform divides the final
// result by 4 (an exact arithmetic shift). Output width DATA_W+4 bits.
// One register stage: out follows in by one cycle.
module wino_kernel_transform
  import dynamap_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t g [3][3],
  output logic  out_valid,
  output logic signed [DATA_W+3:0] u4 [4][4]
);
  typedef logic signed [DATA_W+3:0] w_t;
  w_t t [4][3];   // (2G) g
  w_t o [4][4];   // (2G) g (2G)^T

  always_comb begin
    for (int c = 0; c < 3; c++) begin
      t[0][c] = w_t'(g[0][c]) <<< 1;
      t[1][c] = w_t'(g[0][c]) + w_t'(g[1][c]) + w_t'(g[2][c]);
      t[2][c] = w_t'(g[0][c]) - w_t'(g[1][c]) + w_t'(g[2][c]);
      t[3][c] = w_t'(g[2][c]) <<< 1;
    end
    for (int rr = 0; rr < 4; rr++) begin
      o[rr][0] = t[rr][0] <<< 1;
      o[rr][1] = t[rr][0] + t[rr][1] + t[rr][2];
      o[rr][2] = t[rr][0] - t[rr][1] + t[rr][2];
      o[rr][3] = t[rr][2] <<< 1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      u4 <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      if (in_valid) u4 <= o;
    end
  end
endmodule
