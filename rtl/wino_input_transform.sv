// wino_input_transform: Winograd F(2x2,3x3) input-tile transform V = B^T d B.
//
// Takes one 4 x 4 input tile d (tiles overlap by r-1 = 2 in the feature map)
// and returns the 4 x 4 transformed tile, which the overlay scatters into 16
// independent GEMM operands. For F(2,3)
//   B^T = [ 1  0 -1  0 ;  0  1  1  0 ;  0 -1  1  0 ;  0  1  0 -1 ]
// so only additions and subtractions are needed (two levels, +2 bits).
// One register stage: out/out_valid follow in/in_valid by one cycle.
// The transform matrix is the standard F(2,3) one named by the paper; the
// output width and the register stage are this design's choices.
module wino_input_transform
  import dynamap_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t d [4][4],
  output logic  out_valid,
  output logic signed [DATA_W+1:0] v [4][4]
);
  typedef logic signed [DATA_W+1:0] w_t;
  w_t t [4][4];   // B^T d
  w_t o [4][4];   // (B^T d) B

  always_comb begin
    for (int c = 0; c < 4; c++) begin
      t[0][c] = w_t'(d[0][c]) - w_t'(d[2][c]);
      t[1][c] = w_t'(d[1][c]) + w_t'(d[2][c]);
      t[2][c] = w_t'(d[2][c]) - w_t'(d[1][c]);
      t[3][c] = w_t'(d[1][c]) - w_t'(d[3][c]);
    end
    for (int rr = 0; rr < 4; rr++) begin
      o[rr][0] = t[rr][0] - t[rr][2];
      o[rr][1] = t[rr][1] + t[rr][2];
      o[rr][2] = t[rr][2] - t[rr][1];
      o[rr][3] = t[rr][1] - t[rr][3];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      v <= '{default: '0};
    end else begin
      out_valid <= in_valid;
      if (in_valid) v <= o;
    end
  end
endmodule
