// dlt_store: store-side Data Layout Transformation module.
//
// Moves a layer's output from the output buffer to DRAM in the layout the
// next layer's algorithm needs. An ltu generates (B, D) tuples; for each one
// the lane vector at output-buffer word B (all LANES output channels of one
// pixel, as the channels of one address are accessed together) is read,
// requantised to INT8 (arithmetic shift right by cfg_shift, then saturation)
// and put in a burst buffer together with its DRAM address D. When BL tuples
// are buffered the burst is sent on the DDR write port (one beat per tuple,
// beat address and LANES bytes of data, wr_last on the final beat); the ltu
// waits meanwhile. A last, shorter burst is sent when the ltu is done.
// Timing: one tuple per cycle while filling; output-buffer read latency 1.
// Following the paper: ltu-driven address generation, buffering up to the DDR
// burst length before writing. This design's choices: BL = 16, the
// requantisation rule and the beat format (one DRAM address per beat).
module dlt_store
  import dynamap_pkg::*;
#(
  parameter int unsigned LANES = 66,
  parameter int unsigned BL    = 16,
  parameter int unsigned OB_AW = 12
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  ltu_cfg_t         cfg,
  input  logic [4:0]       cfg_shift,
  output logic             busy,
  output logic             done,
  // output-buffer read port
  output logic             ob_rd_en,
  output logic [OB_AW-1:0] ob_rd_addr,
  input  acc_t             ob_rd_data [LANES],
  // DDR write port
  output logic             ddr_wr_valid,
  input  logic             ddr_wr_ready,
  output logic [31:0]      ddr_wr_addr,
  output data_t            ddr_wr_data [LANES],
  output logic             ddr_wr_last,
  output logic [31:0]      bursts
);
  localparam int unsigned CW = $clog2(BL + 1);
  localparam int unsigned BW = $clog2(BL);

  logic        t_valid, t_ready, ltu_busy, ltu_done;
  logic [31:0] t_b, t_d;

  ltu u_ltu (
    .clk, .rst_n, .start, .cfg,
    .out_valid(t_valid), .out_ready(t_ready), .out_b(t_b), .out_d(t_d),
    .busy(ltu_busy), .done(ltu_done)
  );

  data_t       bdata [BL][LANES];
  logic [31:0] baddr [BL];
  logic [CW-1:0] fill, drain_idx;
  logic        draining, rd_q, fin_pending;

  assign t_ready    = !draining && (fill < CW'(BL));
  assign ob_rd_en   = t_valid && t_ready;
  assign ob_rd_addr = OB_AW'(t_b);   // upper address bits beyond the buffer are ignored

  function automatic data_t requant(acc_t v, logic [4:0] sh);
    acc_t s;
    s = v >>> sh;
    if (s > acc_t'(127))       return data_t'(127);
    else if (s < acc_t'(-128)) return data_t'(-128);
    else                       return data_t'(s);
  endfunction

  assign ddr_wr_valid = draining;
  assign ddr_wr_addr  = baddr[BW'(drain_idx)];
  assign ddr_wr_last  = draining && (drain_idx == fill - 1'b1);
  always_comb for (int l = 0; l < LANES; l++) ddr_wr_data[l] = bdata[BW'(drain_idx)][l];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fill <= '0; drain_idx <= '0; draining <= 1'b0;
      rd_q <= 1'b0; fin_pending <= 1'b0;
      done <= 1'b0; bursts <= '0;
    end else begin
      done <= 1'b0;
      rd_q <= ob_rd_en;
      if (ltu_done) fin_pending <= 1'b1;
      // capture the vector read in the previous cycle
      if (rd_q) begin
        for (int l = 0; l < LANES; l++) bdata[BW'(fill - 1'b1)][l] <= requant(ob_rd_data[l], cfg_shift);
      end
      if (ob_rd_en) baddr[BW'(fill)] <= t_d;
      if (ob_rd_en) fill <= fill + 1'b1;
      // start a burst when full, or at the end with a partial one
      if (!draining && !rd_q && !ob_rd_en && fill != '0 &&
          (fill == CW'(BL) || fin_pending || ltu_done)) begin
        draining  <= 1'b1;
        drain_idx <= '0;
      end
      if (draining && ddr_wr_ready) begin
        if (drain_idx == fill - 1'b1) begin
          draining <= 1'b0;
          fill     <= '0;
          bursts   <= bursts + 1;
        end else begin
          drain_idx <= drain_idx + 1'b1;
        end
      end
      if ((fin_pending || ltu_done) && !draining && fill == '0 && !rd_q && !ob_rd_en) begin
        fin_pending <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  assign busy = ltu_busy || draining || (fill != '0) || fin_pending;
  logic unused;
  assign unused = ^t_b;
endmodule
