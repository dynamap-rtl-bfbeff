// maxpool: the MaxPool module, an array of LANES Pooling Units.
//
// Each lane (one output channel, i.e. one output-buffer bank) has its own
// pool_unit; all lanes run in lock step on the same row-major pixel stream,
// exploiting parallelism across feature maps. out_valid/out_data follow the
// pixel that completes a window by one cycle; pooled pixels come out
// row-major. AvgPool is not built here: the paper maps it to a convolution.
// The lane count equals the output-buffer bank count (this design's choice).
module maxpool
  import dynamap_pkg::*;
#(
  parameter int unsigned LANES = 66,
  parameter int unsigned KMAX  = 3,
  parameter int unsigned OWMAX = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        restart,
  input  logic [7:0]  cfg_k,
  input  logic [7:0]  cfg_s,
  input  logic [15:0] cfg_w,
  input  logic        in_valid,
  input  acc_t        in_data  [LANES],
  output logic        out_valid,
  output acc_t        out_data [LANES]
);
  logic ov [LANES];
  for (genvar l = 0; l < LANES; l++) begin : g_pu
    pool_unit #(.KMAX(KMAX), .OWMAX(OWMAX)) u_pu (
      .clk, .rst_n, .restart, .cfg_k, .cfg_s, .cfg_w,
      .in_valid, .in_data(in_data[l]),
      .out_valid(ov[l]), .out_data(out_data[l])
    );
  end
  assign out_valid = ov[0];
endmodule
