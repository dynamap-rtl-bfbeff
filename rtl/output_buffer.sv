// output_buffer: LANES-bank output buffer, split into two bank groups.
//
// Bank l holds output channel n with n mod LANES = l. Each bank group (0 = A,
// 1 = B) has DEPTH words per bank. The array side writes a whole lane vector
// per cycle (with a lane mask for a partly used last channel tile); two vector
// read ports let one unit drain group A while another one reads group B
// (e.g. MaxPool reads A and writes B while the store-side layout unit reads B).
// Reads return data one cycle after rd*_en. Write-before-read to the same word
// in the same cycle returns the old word.
// The bank count and the two bank groups follow the paper; depth, widths and
// port count are this design's choices.
module output_buffer
  import dynamap_pkg::*;
#(
  parameter int unsigned LANES = 66,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic          wr_grp,
  input  logic [AW-1:0] wr_addr,
  input  logic          wr_mask [LANES],
  input  acc_t          wr_data [LANES],
  input  logic          rd0_en,
  input  logic          rd0_grp,
  input  logic [AW-1:0] rd0_addr,
  output acc_t          rd0_data [LANES],
  input  logic          rd1_en,
  input  logic          rd1_grp,
  input  logic [AW-1:0] rd1_addr,
  output acc_t          rd1_data [LANES]
);
  acc_t mem [2][LANES][DEPTH];

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (wr_en && wr_mask[l]) mem[wr_grp][l][wr_addr] <= wr_data[l];
      if (rd0_en) rd0_data[l] <= mem[rd0_grp][l][rd0_addr];
      if (rd1_en) rd1_data[l] <= mem[rd1_grp][l][rd1_addr];
    end
  end
endmodule
