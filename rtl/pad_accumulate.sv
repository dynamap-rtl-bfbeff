// pad_accumulate: Pad-and-Accumulate stage of the kn2row algorithm.
//
// kn2row computes a K1 x K2 convolution as K1*K2 unit (1 x 1) convolutions.
// Each produces a patch p(k1,k2) of H x W pixels per output channel. This
// module shifts each patch by its offset from the kernel centre and adds it
// into an accumulation buffer: input pixel (u, v) of patch (k1, k2) is added
// to output pixel (u - (k1 - K1/2), v - (k2 - K2/2)); pixels that fall
// outside the H x W map are dropped (zero padding of the non-overlapping part).
// All LANES lanes (output channels) are processed in parallel.
//
// Patch pixels arrive in row-major order, one lane vector per cycle; the
// module counts (u, v) itself from patch_start. The first patch of a layer
// must be the centre one (k1 = K1/2, k2 = K2/2) with `init` set: it covers
// every output pixel exactly once and is written instead of added, so the
// buffer needs no clearing pass. Read-modify-write is pipelined over two
// cycles at one pixel per cycle, so the array can deliver the next patch
// while the previous one is still being accumulated.
// drain_start then streams the n_drain words from word 0 on out_*, one per cycle.
// `base` offsets all buffer addresses (one region per channel tile).
// The shift-and-add rule is the paper's; the centre-first initialisation and
// the interface are this design's choices.
module pad_accumulate
  import dynamap_pkg::*;
#(
  parameter int unsigned LANES = 66,
  parameter int unsigned DEPTH = 4096,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // layer / patch configuration
  input  logic [15:0]   cfg_h,
  input  logic [15:0]   cfg_w,
  input  logic [7:0]    cfg_k1n,      // K1
  input  logic [7:0]    cfg_k2n,      // K2
  input  logic [7:0]    cfg_k1,       // current patch k1
  input  logic [7:0]    cfg_k2,       // current patch k2
  input  logic          cfg_init,     // centre patch: write instead of add
  input  logic [AW-1:0] cfg_base,
  input  logic          patch_start,
  // patch stream
  input  logic          in_valid,
  input  acc_t          in_data [LANES],
  // drain
  input  logic          drain_start,
  input  logic [AW-1:0] n_drain,
  output logic          out_valid,
  output logic [AW-1:0] out_addr,
  output acc_t          out_data [LANES],
  output logic          busy,
  output logic [31:0]   dropped        // pixels dropped as padding (statistics)
);
  acc_t mem [LANES][DEPTH];

  logic [15:0] u, v;
  // stage 1
  logic          s1_v, s1_init;
  logic [AW-1:0] s1_addr;
  acc_t          s1_data [LANES];
  acc_t          rd_q    [LANES];
  // drain
  logic          dr_on;
  logic [AW-1:0] dr_cnt;

  int tx, ty;
  logic in_map;
  always_comb begin
    ty = int'(u) - (int'(cfg_k1) - int'(cfg_k1n) / 2);
    tx = int'(v) - (int'(cfg_k2) - int'(cfg_k2n) / 2);
    in_map = (ty >= 0) && (ty < int'(cfg_h)) && (tx >= 0) && (tx < int'(cfg_w));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      u <= '0; v <= '0;
      s1_v <= 1'b0; s1_init <= 1'b0; s1_addr <= '0;
      dr_on <= 1'b0; dr_cnt <= '0;
      out_valid <= 1'b0; out_addr <= '0;
      dropped <= '0;
    end else begin
      // ---- stage 1: position counter, target address, buffer read ----
      s1_v <= 1'b0;
      if (patch_start) begin
        u <= '0; v <= '0;
      end else if (in_valid) begin
        if (v == cfg_w - 1) begin v <= '0; u <= u + 1'b1; end
        else v <= v + 1'b1;
        s1_v    <= in_map;
        s1_init <= cfg_init;
        s1_addr <= AW'(int'(cfg_base) + ty * int'(cfg_w) + tx);
        if (!in_map) dropped <= dropped + 1;
      end
      // ---- drain sequencer ----
      out_valid <= 1'b0;
      if (drain_start) begin
        dr_on <= 1'b1; dr_cnt <= '0;
      end else if (dr_on) begin
        out_valid <= 1'b1;
        out_addr  <= dr_cnt;
        if (dr_cnt == n_drain - 1) dr_on <= 1'b0;
        dr_cnt <= dr_cnt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int l = 0; l < LANES; l++) begin
      if (in_valid && in_map) rd_q[l] <= mem[l][AW'(int'(cfg_base) + ty * int'(cfg_w) + tx)];
      if (in_valid) s1_data[l] <= in_data[l];
      // ---- stage 2: add and write back ----
      if (s1_v) mem[l][s1_addr] <= s1_init ? s1_data[l] : s1_data[l] + rd_q[l];
      if (dr_on && !drain_start) out_data[l] <= mem[l][dr_cnt];
    end
  end

  assign busy = dr_on || out_valid || s1_v;
endmodule
