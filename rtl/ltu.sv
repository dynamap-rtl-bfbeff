// ltu: Layout Transformation Unit, the address generator of the DLT module.
//
// Walks a feature map in the order another algorithm needs and emits
// (B, D) address tuples: B is an on-chip SRAM word address, D a DRAM address.
// Three nested loops, one per state of the controller:
//   state 1: once per window / tile (n_outer times): B <= b_start,
//            D <= d_start, then b_start += step_b, d_start += step_d;
//   state 2: emits one tuple per cycle along a row of the window and steps
//            B += inc_b2, D += inc_d2 between elements (n_row elements);
//   state 3: at the end of a row (n_rows rows per window) steps
//            B += inc_b3, D += inc_d3 to the start of the next row.
// All increments are two's-complement, so negative steps are allowed.
// Example, 3-D tensor -> Toeplitz (im2col input), one output row, stride S,
// map width H1: n_outer = output width, step_b = S, step_d = K1*K2,
// n_row = K1, inc_b2 = 1, inc_d2 = 1, n_rows = K2, inc_b3 = H1 - K1 + 1,
// inc_d3 = 1.
// Handshake: out_valid/out_ready; the FSM holds while the consumer (the DDR
// burst buffer) is full. done pulses for one cycle after the last tuple.
// The three-state structure and the parameter set are the paper's. Exactly
// when an increment is applied is this design's reading: state 3 replaces
// the state-2 step after the last element of a row, and the step_* values are
// applied to the start registers.
module ltu
  import dynamap_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  ltu_cfg_t    cfg,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] out_b,
  output logic [31:0] out_d,
  output logic        busy,
  output logic        done
);
  typedef enum logic [1:0] {S_IDLE, S_1, S_2, S_3} state_e;
  state_e st;
  ltu_cfg_t c;
  logic [31:0] b, d, bs, ds, it1, it2, it3;

  assign out_valid = (st == S_2);
  assign out_b = b;
  assign out_d = d;
  assign busy = (st != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; c <= '0;
      b <= '0; d <= '0; bs <= '0; ds <= '0;
      it1 <= '0; it2 <= '0; it3 <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          c <= cfg; bs <= cfg.b_start; ds <= cfg.d_start; it1 <= '0;
          st <= S_1;
        end
        S_1: begin
          if (it1 == c.n_outer) begin
            st <= S_IDLE;           // STOP
            done <= 1'b1;
          end else begin
            b <= bs; d <= ds;
            bs <= bs + c.step_b; ds <= ds + c.step_d;
            it1 <= it1 + 1; it2 <= '0; it3 <= '0;
            st <= S_2;
          end
        end
        S_2: if (out_ready) begin
          if (it2 == c.n_row - 1) begin
            it2 <= '0;
            st <= (it3 == c.n_rows - 1) ? S_1 : S_3;
          end else begin
            it2 <= it2 + 1;
            b <= b + c.inc_b2; d <= d + c.inc_d2;
          end
        end
        S_3: begin
          b <= b + c.inc_b3; d <= d + c.inc_d3;
          it3 <= it3 + 1;
          st <= S_2;
        end
        default: st <= S_IDLE;
      endcase
    end
  end
  // the start values are copied into bs/ds when a job starts
  logic unused;
  assign unused = ^{c.b_start, c.d_start};
endmodule
