// wino_output_transform: Winograd F(2x2,3x3) output transform Y = A^T M A.
//
// M is the 4 x 4 tile gathered from the 16 GEMM results (already summed over
// the input channels in the transformed space). With
//   A^T = [ 1 1 1 0 ; 0 1 -1 -1 ]
// the 2 x 2 output tile needs only additions. Because the kernel transform is
// scaled by 4 (see wino_kernel_transform), the result is shifted right by
// KSHIFT = 2 bits, which is exact. One register stage.
module wino_output_transform
  import dynamap_pkg::*;
#(
  parameter int unsigned KSHIFT = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  acc_t m [4][4],
  output logic out_valid,
  output acc_t y [2][2]
);
  acc_t t [2][4];
  acc_t o [2][2];

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      t[0][c] = m[0][c] + m[1][c] + m[2][c];
      t[1][c] = m[1][c] - m[2][c] - m[3][c];
    end
    for (int rr = 0; rr < 2; rr++) begin
      o[rr][0] = (t[rr][0] + t[rr][1] + t[rr][2]) >>> KSHIFT;
      o[rr][1] = (t[rr][1] - t[rr][2] - t[rr][3]) >>> KSHIFT;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      if (in_valid) y <= o;
    end
  end
endmodule
