// dynamap_top: the DYNAMAP overlay, one Computing Unit shared by all layers.
//
// Blocks and data path:
//   load port --(raw / input transform)--> input buffer  (blocked layout)
//   load port --(raw / kernel transform)-> kernel buffer (blocked layout)
//   gemm_ctrl reads both buffers and drives the P_SA1 x P_SA2 systolic array
//   in the NS or WS dataflow; the array's result lanes pass through the
//   partial-sum accumulator (used by WS, bypassed by NS) and are written
//   either straight into the output buffer (im2col, Winograd) or into the
//   Pad-and-Accumulate unit (kn2row); the output buffer feeds the Winograd
//   output transform, the max-pool unit and the DLT store, which writes the
//   next layer's layout to external memory.
//
// Interfaces (all plain signals / structs):
//   * load port  ld_valid/ld_ready, ld_kind, ld_tile, ld_i, ld_j, ld_data
//     (raw words) or ld_blk (a 4x4 input tile or, in its top-left 3x3, a
//     kernel). A transformed tile/kernel becomes 16 INT8 words, component
//     e = 4*xi+nu going to tile ld_tile + e*ld_stride at (ld_i, ld_j); the
//     port is busy for 17 cycles meanwhile. The transformed values are
//     saturated to INT8.
//   * command port cmd_valid/cmd_ready, cmd (cmd_t). Commands run one at a
//     time; cmd_ready is high when the engine is idle.
//       OP_GEMM: Z = X * W per cmd.gemm. NS/WS: result row p, channel n goes
//         to the output buffer word dst_base + (n / P_SA2) * a + p, lane
//         n mod P_SA2 (lanes n >= c masked), or into Pad-and-Accumulate
//         (c <= P_SA2). IS (pixels held in the array, weights streaming)
//         produces the transposed layout: word dst_base + (p / P_SA2) * c + n,
//         lane p mod P_SA2.
//       OP_PA_DRAIN: P&A words 0..n-1 to output-buffer words dst_base + k.
//       OP_WINO_OUT: for tile t < n, reads words src_base + e*stride + t,
//         e = 0..15, and writes the 2x2 result to dst_base + 4t + (2*row+col).
//       OP_POOL: streams n words from src_base (a pool_w wide map, row-major)
//         through the max-pool unit and writes the pooled words from dst_base.
//       OP_STORE: DLT store driven by cmd.ltu from bank group src_grp.
//   * external-memory write port ddr_wr_* (bursts of BL lane vectors).
//   * stats: event counters; congest: NS result-chain congestion.
// The output buffer has two bank groups so that a result stage and the next
// stage (transform, pool, store) can use different groups.
//
// Follows the paper: the block set, the buffers' blocked layout, the
// dataflow-switchable array, P&A for kn2row, the Winograd linear transforms,
// the LTU-driven store. This design's choices: the command and load
// interfaces, the two bank groups, INT8 saturation after the transforms,
// one command at a time, and the external memory controller left outside
// (its ports are exposed instead).
module dynamap_top
  import dynamap_pkg::*;
#(
  parameter int unsigned P_SA1     = 92,
  parameter int unsigned P_SA2     = 66,
  parameter int unsigned XTILES    = 64,    // input-buffer tiles (P_SA1 x P_SA1)
  parameter int unsigned WTILES    = 64,    // kernel-buffer tiles (P_SA1 x P_SA2)
  parameter int unsigned OB_DEPTH  = 4096,  // output-buffer words per lane and group
  parameter int unsigned PA_DEPTH  = 4096,
  parameter int unsigned ACC_DEPTH = 1024,
  parameter int unsigned BL        = 16,
  parameter int unsigned POOL_K    = 3,
  parameter int unsigned POOL_W    = 64,
  localparam int unsigned XTW = $clog2(XTILES),
  localparam int unsigned WTW = $clog2(WTILES),
  localparam int unsigned IW  = $clog2(P_SA1),
  localparam int unsigned WJW = $clog2(P_SA2),
  localparam int unsigned OAW = $clog2(OB_DEPTH),
  localparam int unsigned PAW = $clog2(PA_DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // load port
  input  logic        ld_valid,
  output logic        ld_ready,
  input  ld_kind_e    ld_kind,
  input  logic [15:0] ld_tile,
  input  logic [15:0] ld_stride,
  input  logic [15:0] ld_i,
  input  logic [15:0] ld_j,
  input  data_t       ld_data,
  input  data_t       ld_blk [WINO_T][WINO_T],
  // command port
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        cmd_done,
  // external-memory write port
  output logic        ddr_wr_valid,
  input  logic        ddr_wr_ready,
  output logic [31:0] ddr_wr_addr,
  output data_t       ddr_wr_data [P_SA2],
  output logic        ddr_wr_last,
  // status
  output logic        congest,
  output stats_t      stats
);

  // ------------------------------------------------------------------
  // Load port and linear transforms
  // ------------------------------------------------------------------
  logic signed [DATA_W+1:0] vin [4][4];
  logic signed [DATA_W+3:0] u4  [4][4];
  logic vin_ok, u4_ok;
  data_t g3 [3][3];
  always_comb
    for (int r = 0; r < 3; r++)
      for (int q = 0; q < 3; q++) g3[r][q] = ld_blk[r][q];

  logic take;
  assign take = ld_valid && ld_ready;

  wino_input_transform  u_lt_in  (.clk, .rst_n, .in_valid(take && ld_kind == LD_WINX),
                                  .d(ld_blk), .out_valid(vin_ok), .v(vin));
  wino_kernel_transform u_lt_ker (.clk, .rst_n, .in_valid(take && ld_kind == LD_WINW),
                                  .g(g3), .out_valid(u4_ok), .u4(u4));

  function automatic data_t sat8(int x);
    if (x > 127) return data_t'(127);
    if (x < -128) return data_t'(-128);
    return data_t'(x);
  endfunction

  // serializer for the 16 transformed components
  data_t       lt_q [16];
  logic        lt_on, lt_to_w, lt_wait;
  logic [4:0]  lt_e;
  logic [15:0] lt_tile, lt_stride, lt_i, lt_j;

  assign ld_ready = !lt_on && !lt_wait;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lt_on <= 1'b0; lt_wait <= 1'b0; lt_to_w <= 1'b0; lt_e <= '0;
      lt_tile <= '0; lt_stride <= '0; lt_i <= '0; lt_j <= '0;
      for (int e = 0; e < 16; e++) lt_q[e] <= '0;
    end else begin
      if (take && (ld_kind == LD_WINX || ld_kind == LD_WINW)) begin
        lt_wait <= 1'b1; lt_to_w <= (ld_kind == LD_WINW);
        lt_tile <= ld_tile; lt_stride <= ld_stride; lt_i <= ld_i; lt_j <= ld_j;
      end
      if (vin_ok || u4_ok) begin
        for (int e = 0; e < 16; e++)
          lt_q[e] <= vin_ok ? sat8(int'(vin[e/4][e%4])) : sat8(int'(u4[e/4][e%4]));
        lt_wait <= 1'b0; lt_on <= 1'b1; lt_e <= '0;
      end
      if (lt_on) begin
        lt_e <= lt_e + 1'b1;
        if (lt_e == 5'd15) lt_on <= 1'b0;
      end
    end
  end

  // buffer write ports
  logic          xw_en, ww_en;
  logic [15:0]   bw_tile, bw_i, bw_j;
  data_t         bw_data;
  always_comb begin
    if (lt_on) begin
      xw_en   = !lt_to_w;
      ww_en   = lt_to_w;
      bw_tile = lt_tile + 16'(lt_e) * lt_stride;
      bw_i    = lt_i;
      bw_j    = lt_j;
      bw_data = lt_q[lt_e[3:0]];
    end else begin
      xw_en   = take && ld_kind == LD_X;
      ww_en   = take && ld_kind == LD_W;
      bw_tile = ld_tile;
      bw_i    = ld_i;
      bw_j    = ld_j;
      bw_data = ld_data;
    end
  end

  // ------------------------------------------------------------------
  // Command engine state
  // ------------------------------------------------------------------
  typedef enum logic [2:0] {E_IDLE, E_GEMM, E_PA, E_WINO, E_POOL, E_STORE} eng_e;
  eng_e eng;
  cmd_t c;
  assign cmd_ready = (eng == E_IDLE);

  // ------------------------------------------------------------------
  // Buffers and GEMM datapath
  // ------------------------------------------------------------------
  logic           g_busy, g_issue_done;
  logic           x_rd_en, x_rd_col, w_rd_en, w_rd_col;
  logic [XTW-1:0] x_rd_tile;
  logic [WTW-1:0] w_rd_tile;
  logic [IW-1:0]  x_rd_line, w_rd_line;
  pe_mode_e       mode;
  hop_t           tag;
  logic [IW:0]    rows_valid;
  logic           top_valid, pl_shift, pl_latch, pl_bank;
  logic           acc_clear, acc_bypass;
  logic [31:0]    acc_per_pass, acc_n_pass, out_per_round;
  logic           g_start;

  gemm_ctrl #(.P_SA1(P_SA1), .P_SA2(P_SA2), .XTW(XTW), .WTW(WTW)) u_ctrl (
    .clk, .rst_n, .start(g_start), .cfg(c.gemm), .busy(g_busy), .issue_done(g_issue_done),
    .x_rd_en, .x_rd_col, .x_rd_tile, .x_rd_line,
    .w_rd_en, .w_rd_col, .w_rd_tile, .w_rd_line,
    .mode, .tag, .rows_valid, .top_valid, .pl_shift, .pl_latch, .pl_bank,
    .acc_clear, .acc_bypass, .acc_per_pass, .acc_n_pass, .out_per_round);

  logic  x_rd_valid, w_rd_valid;
  data_t x_q [P_SA1];
  data_t w_q [P_SA1];

  blocked_buffer #(.NB(P_SA1), .NJ(P_SA1), .NTILES(XTILES)) u_ibuf (
    .clk, .rst_n,
    .wr_en(xw_en), .wr_tile(XTW'(bw_tile)), .wr_i(IW'(bw_i)), .wr_j(IW'(bw_j)), .wr_data(bw_data),
    .rd_en(x_rd_en), .rd_col(x_rd_col), .rd_tile(x_rd_tile), .rd_line(x_rd_line),
    .rd_valid(x_rd_valid), .rd_data(x_q));

  blocked_buffer #(.NB(P_SA1), .NJ(P_SA2), .NTILES(WTILES)) u_kbuf (
    .clk, .rst_n,
    .wr_en(ww_en), .wr_tile(WTW'(bw_tile)), .wr_i(IW'(bw_i)), .wr_j(WJW'(bw_j)), .wr_data(bw_data),
    .rd_en(w_rd_en), .rd_col(w_rd_col), .rd_tile(w_rd_tile), .rd_line(w_rd_line),
    .rd_valid(w_rd_valid), .rd_data(w_q));

  hop_t  left_in [P_SA1];
  data_t top_in  [P_SA2];
  data_t pl_in   [P_SA1];
  res_t  sa_out  [P_SA2];
  // IS swaps the operand roles: inputs are preloaded, weights stream
  logic g_is;
  assign g_is = (c.gemm.df == DF_IS);
  always_comb begin
    for (int i = 0; i < P_SA1; i++) begin
      left_in[i]      = tag;
      left_in[i].data = (tag.valid && (IW+1)'(i) < rows_valid) ? (g_is ? w_q[i] : x_q[i]) : '0;
      pl_in[i]        = g_is ? x_q[i] : w_q[i];
    end
    for (int j = 0; j < P_SA2; j++) top_in[j] = (mode == PE_MOVE) ? w_q[j] : '0;
  end

  systolic_array #(.P_SA1(P_SA1), .P_SA2(P_SA2)) u_sa (
    .clk, .rst_n, .mode, .left_in, .top_in, .top_valid,
    .pl_shift, .pl_latch, .pl_bank, .pl_in, .out(sa_out), .congest);

  logic acc_in_valid, acc_out_valid, acc_round_done;
  acc_t acc_in [P_SA2];
  acc_t acc_out [P_SA2];
  always_comb begin
    acc_in_valid = sa_out[0].valid;
    for (int j = 0; j < P_SA2; j++) acc_in[j] = sa_out[j].data;
  end

  psum_accumulator #(.LANES(P_SA2), .DEPTH(ACC_DEPTH)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .bypass(acc_bypass),
    .n_per_pass(acc_per_pass), .n_pass(acc_n_pass),
    .in_valid(acc_in_valid), .in_data(acc_in),
    .out_valid(acc_out_valid), .out_data(acc_out), .round_done(acc_round_done));

  // result writer: counts result vectors of a GEMM
  logic [15:0] wr_idx, wr_ct, g_ct_n;
  logic        wr_keep;             // row is a real pixel (not NS padding)
  logic        g_all_written;
  logic [15:0] g_rows, g_lanes;     // result rows per tile / valid lanes (a, c; c, a in IS)
  assign g_rows  = g_is ? c.gemm.c : c.gemm.a;
  assign g_lanes = g_is ? c.gemm.a : c.gemm.c;
  assign wr_keep = (wr_idx < g_rows);

  // ------------------------------------------------------------------
  // Pad-and-Accumulate
  // ------------------------------------------------------------------
  logic           pa_patch_start, pa_drain_start, pa_out_valid, pa_busy;
  logic [PAW-1:0] pa_out_addr;
  acc_t           pa_out [P_SA2];
  logic [31:0]    pa_dropped;

  pad_accumulate #(.LANES(P_SA2), .DEPTH(PA_DEPTH)) u_pa (
    .clk, .rst_n,
    .cfg_h(c.pa_h), .cfg_w(c.pa_w), .cfg_k1n(c.pa_k1n), .cfg_k2n(c.pa_k2n),
    .cfg_k1(c.pa_k1), .cfg_k2(c.pa_k2), .cfg_init(c.pa_init), .cfg_base('0),
    .patch_start(pa_patch_start),
    .in_valid(eng == E_GEMM && c.to_pa && acc_out_valid && wr_keep), .in_data(acc_out),
    .drain_start(pa_drain_start), .n_drain(PAW'(c.n)),
    .out_valid(pa_out_valid), .out_addr(pa_out_addr), .out_data(pa_out),
    .busy(pa_busy), .dropped(pa_dropped));

  // ------------------------------------------------------------------
  // Output buffer
  // ------------------------------------------------------------------
  logic           ob_we, ob_wgrp;
  logic [OAW-1:0] ob_waddr;
  logic           ob_wmask [P_SA2];
  acc_t           ob_wdata [P_SA2];
  logic           ob_r0_en, ob_r1_en;
  logic [OAW-1:0] ob_r0_addr, ob_r1_addr;
  acc_t           ob_r0 [P_SA2];
  acc_t           ob_r1 [P_SA2];

  output_buffer #(.LANES(P_SA2), .DEPTH(OB_DEPTH)) u_ob (
    .clk,
    .wr_en(ob_we), .wr_grp(ob_wgrp), .wr_addr(ob_waddr), .wr_mask(ob_wmask), .wr_data(ob_wdata),
    .rd0_en(ob_r0_en), .rd0_grp(c.src_grp), .rd0_addr(ob_r0_addr), .rd0_data(ob_r0),
    .rd1_en(ob_r1_en), .rd1_grp(c.src_grp), .rd1_addr(ob_r1_addr), .rd1_data(ob_r1));

  // ------------------------------------------------------------------
  // Winograd output transform (one per lane)
  // ------------------------------------------------------------------
  acc_t        wm [P_SA2][4][4];
  acc_t        wy [P_SA2][2][2];
  logic        wy_ok [P_SA2];
  logic        wo_in_valid;
  logic [15:0] wo_t;           // tile
  logic [4:0]  wo_e;           // component being read
  logic        wo_rd_q;        // read issued last cycle
  logic [3:0]  wo_e_q;
  logic [2:0]  wo_q;           // result word being written (4 = idle)
  logic        wo_reading;

  for (genvar l = 0; l < P_SA2; l++) begin : g_wo
    wino_output_transform u_wo (.clk, .rst_n, .in_valid(wo_in_valid), .m(wm[l]),
                                .out_valid(wy_ok[l]), .y(wy[l]));
  end

  // ------------------------------------------------------------------
  // Max pooling
  // ------------------------------------------------------------------
  logic        mp_restart, mp_in_valid, mp_out_valid;
  acc_t        mp_out [P_SA2];
  logic [15:0] mp_rd, mp_wr;
  logic [3:0]  mp_idle;

  maxpool #(.LANES(P_SA2), .KMAX(POOL_K), .OWMAX(POOL_W)) u_mp (
    .clk, .rst_n, .restart(mp_restart), .cfg_k(c.pool_k), .cfg_s(c.pool_s), .cfg_w(c.pool_w),
    .in_valid(mp_in_valid), .in_data(ob_r0), .out_valid(mp_out_valid), .out_data(mp_out));

  // ------------------------------------------------------------------
  // DLT store
  // ------------------------------------------------------------------
  logic st_start, st_busy, st_done;
  logic [31:0] st_bursts;
  dlt_store #(.LANES(P_SA2), .BL(BL), .OB_AW(OAW)) u_store (
    .clk, .rst_n, .start(st_start), .cfg(c.ltu), .cfg_shift(c.shift),
    .busy(st_busy), .done(st_done),
    .ob_rd_en(ob_r1_en), .ob_rd_addr(ob_r1_addr), .ob_rd_data(ob_r1),
    .ddr_wr_valid, .ddr_wr_ready, .ddr_wr_addr, .ddr_wr_data, .ddr_wr_last,
    .bursts(st_bursts));

  // ------------------------------------------------------------------
  // Output-buffer write mux and read port 0
  // ------------------------------------------------------------------
  always_comb begin
    ob_we = 1'b0; ob_wgrp = c.dst_grp; ob_waddr = '0;
    for (int j = 0; j < P_SA2; j++) begin ob_wmask[j] = 1'b1; ob_wdata[j] = '0; end
    ob_r0_en = 1'b0; ob_r0_addr = '0;
    unique case (eng)
      E_GEMM: begin
        ob_we    = acc_out_valid && wr_keep && !c.to_pa;
        ob_waddr = OAW'(c.dst_base + wr_ct * g_rows + wr_idx);
        for (int j = 0; j < P_SA2; j++) begin
          ob_wmask[j] = (32'(wr_ct) * P_SA2 + j) < 32'(g_lanes);
          ob_wdata[j] = acc_out[j];
        end
      end
      E_PA: begin
        ob_we    = pa_out_valid;
        ob_waddr = OAW'(c.dst_base + 16'(pa_out_addr));
        ob_wdata = pa_out;
      end
      E_WINO: begin
        ob_r0_en   = wo_reading;
        ob_r0_addr = OAW'(c.src_base + 16'(wo_e) * c.stride + wo_t);
        ob_we      = (wo_q != 3'd4);
        ob_waddr   = OAW'(c.dst_base + wo_t * 16'd4 + 16'(wo_q));
        for (int j = 0; j < P_SA2; j++) ob_wdata[j] = wy[j][wo_q[1]][wo_q[0]];
      end
      E_POOL: begin
        ob_r0_en   = (mp_rd < c.n);
        ob_r0_addr = OAW'(c.src_base + mp_rd);
        ob_we      = mp_out_valid;
        ob_waddr   = OAW'(c.dst_base + mp_wr);
        ob_wdata   = mp_out;
      end
      default: ;
    endcase
  end
  assign wo_reading = (eng == E_WINO) && (wo_e < 5'd16) && (wo_q == 3'd4) && !wo_in_valid;

  // ------------------------------------------------------------------
  // Engine sequencer
  // ------------------------------------------------------------------
  dataflow_e last_df;
  logic      have_df;
  logic      started;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      eng <= E_IDLE; c <= '0; cmd_done <= 1'b0; started <= 1'b0;
      g_start <= 1'b0; wr_idx <= '0; wr_ct <= '0; g_ct_n <= '0; g_all_written <= 1'b0;
      pa_patch_start <= 1'b0; pa_drain_start <= 1'b0;
      wo_t <= '0; wo_e <= '0; wo_rd_q <= 1'b0; wo_e_q <= '0; wo_q <= 3'd4; wo_in_valid <= 1'b0;
      mp_restart <= 1'b0; mp_in_valid <= 1'b0; mp_rd <= '0; mp_wr <= '0; mp_idle <= '0;
      st_start <= 1'b0;
      last_df <= DF_NS; have_df <= 1'b0;
      stats <= '0;
    end else begin
      cmd_done <= 1'b0; g_start <= 1'b0; pa_patch_start <= 1'b0; pa_drain_start <= 1'b0;
      mp_restart <= 1'b0; st_start <= 1'b0; wo_in_valid <= 1'b0;

      // ---- event counters ----
      if (tag.valid && tag.first && mode == PE_MOVE) stats.ns_passes <= stats.ns_passes + 1;
      if (pl_latch)       stats.ws_latches <= stats.ws_latches + 1;
      if (acc_round_done && !acc_bypass) stats.acc_rounds <= stats.acc_rounds + 1;
      if (congest)        stats.congest <= stats.congest + 1;
      if (xw_en || ww_en) stats.lt_writes <= stats.lt_writes + (lt_on ? 1 : 0);
      stats.pa_dropped <= pa_dropped;
      stats.bursts     <= st_bursts;

      unique case (eng)
        E_IDLE: if (cmd_valid) begin
          c <= cmd; started <= 1'b0;
          unique case (cmd.op)
            OP_GEMM: begin
              eng <= E_GEMM; g_start <= 1'b1;
              wr_idx <= '0; wr_ct <= '0; g_all_written <= 1'b0;
              g_ct_n <= 16'((((cmd.gemm.df == DF_IS) ? int'(cmd.gemm.a) : int'(cmd.gemm.c)) + P_SA2 - 1) / P_SA2);
              if (cmd.to_pa) pa_patch_start <= 1'b1;
              if (have_df && cmd.gemm.df != last_df) stats.df_switches <= stats.df_switches + 1;
              last_df <= cmd.gemm.df; have_df <= 1'b1;
            end
            OP_PA_DRAIN: begin eng <= E_PA; pa_drain_start <= 1'b1; end
            OP_WINO_OUT: begin eng <= E_WINO; wo_t <= '0; wo_e <= '0; wo_q <= 3'd4; end
            OP_POOL:     begin eng <= E_POOL; mp_restart <= 1'b1; mp_rd <= '0; mp_wr <= '0; mp_idle <= '0; end
            OP_STORE:    begin eng <= E_STORE; st_start <= 1'b1; end
            default:     cmd_done <= 1'b1;
          endcase
        end

        E_GEMM: begin
          if (acc_out_valid) begin
            if (32'(wr_idx) == out_per_round - 1) begin
              wr_idx <= '0;
              if (wr_ct == g_ct_n - 1) g_all_written <= 1'b1;
              wr_ct <= wr_ct + 1'b1;
            end else wr_idx <= wr_idx + 1'b1;
          end
          // all results written and the P&A pipeline empty
          if (g_all_written && !g_busy && !pa_busy) begin
            eng <= E_IDLE; cmd_done <= 1'b1;
          end
        end

        E_PA: begin
          started <= 1'b1;
          if (started && !pa_busy) begin eng <= E_IDLE; cmd_done <= 1'b1; end
        end

        E_WINO: begin
          // read the 16 components of tile wo_t (one per cycle)
          wo_rd_q <= wo_reading;
          wo_e_q  <= wo_e[3:0];
          if (wo_reading) wo_e <= wo_e + 1'b1;
          if (wo_rd_q)
            for (int l = 0; l < P_SA2; l++) wm[l][wo_e_q / 4][wo_e_q % 4] <= ob_r0[l];
          if (wo_rd_q && wo_e_q == 4'd15) wo_in_valid <= 1'b1;
          if (wy_ok[0]) wo_q <= 3'd0;
          if (wo_q != 3'd4) begin
            if (wo_q == 3'd3) begin
              wo_q <= 3'd4; wo_e <= '0;
              stats.wino_tiles <= stats.wino_tiles + 1;
              if (wo_t == c.n - 1) begin eng <= E_IDLE; cmd_done <= 1'b1; end
              else wo_t <= wo_t + 1'b1;
            end else wo_q <= wo_q + 1'b1;
          end
        end

        E_POOL: begin
          if (mp_rd < c.n) mp_rd <= mp_rd + 1'b1;
          mp_in_valid <= (mp_rd < c.n);
          if (mp_out_valid) mp_wr <= mp_wr + 1'b1;
          // finished when all inputs were sent and no output came for 8 cycles
          if (mp_rd == c.n && !mp_in_valid && !mp_out_valid) mp_idle <= mp_idle + 1'b1;
          else mp_idle <= '0;
          if (mp_idle == 4'd8) begin eng <= E_IDLE; cmd_done <= 1'b1; end
        end

        E_STORE: if (st_done) begin eng <= E_IDLE; cmd_done <= 1'b1; end

        default: eng <= E_IDLE;
      endcase
    end
  end

  // signals not used further
  logic unused;
  always_comb begin
    unused = x_rd_valid ^ w_rd_valid ^ g_issue_done ^ st_busy ^ (^c.op)
           ^ (^bw_tile) ^ (^bw_i) ^ (^bw_j);
    for (int l = 0; l < P_SA2; l++) unused ^= wy_ok[l];
    for (int i = P_SA2; i < P_SA1; i++) unused ^= ^w_q[i];
  end
endmodule
