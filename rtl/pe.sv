// pe: dataflow-switchable, stall-free processing element.
//
// One PE of the Computing Unit. Every cycle it performs one signed 8-bit
// multiply-accumulate. Three paths pass through it, each with one register
// stage so that neighbouring PEs form a systolic array:
//   * h  : the horizontally moving operand (from the left neighbour to the
//          right one) with its tags valid/first/last/bank;
//   * v  : the vertically moving operand (top to bottom), used only when both
//          operands move (NS dataflow);
//   * r  : the result chain (top to bottom). In NS it carries finished dot
//          products towards the bottom edge; in WS/IS it carries the partial
//          sum, to which the PE adds its own product.
// A fourth, slow path, the preload chain pl (left to right), fills one of two
// ping-pong stationary registers while the other one is in use, so that the
// next stationary block is ready when the current pass ends (WS/IS).
//
// NS (mode PE_MOVE): acc <= (first ? 0 : acc) + h*v. On `last` the finished
// sum is put on the result chain. A result coming down from the PE above has
// priority; the PE's own result then waits in a one-entry hold register and
// is put on the chain in the first free slot. This is the grey multiplexer of
// the PE figure: a PE can start its next dot product while results of other
// PEs are still being shifted out. `congest` flags a result arriving while the
// hold register is still full (the array must then be fed more slowly).
// WS/IS (mode PE_STATIONARY): r_out <= r_in + h * st[h.bank].
//
// Follows the paper: one MAC per cycle, moving/stationary operand mux,
// accumulate-result shift mux, two ping-pong stationary registers.
// This design's own choices: the hold register with priority to the chain
// (the paper widens the result wires of lower rows instead, which is not
// built), the tag bits carried with the operand, and the preload chain.
module pe
  import dynamap_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  // horizontal operand
  input  hop_t     h_in,
  output hop_t     h_out,
  // vertical operand (NS)
  input  data_t    v_in,
  output data_t    v_out,
  // result / partial-sum chain
  input  res_t     r_in,
  output res_t     r_out,
  // stationary-operand preload chain
  input  logic     pl_shift,
  input  logic     pl_latch,
  input  logic     pl_bank,
  input  data_t    pl_in,
  output data_t    pl_out,
  output logic     congest
);

  data_t st [2];          // ping-pong stationary registers
  data_t pl_sr;           // preload shift register
  acc_t  acc;             // NS accumulator
  acc_t  hold;            // NS finished result waiting for the chain
  logic  hold_v;

  data_t opnd_b;
  acc_t  prod, acc_new;
  logic  emit;

  always_comb begin
    opnd_b  = (mode == PE_MOVE) ? v_in : st[h_in.bank];
    prod    = h_in.valid ? acc_t'(h_in.data) * acc_t'(opnd_b) : '0;
    acc_new = (h_in.first ? acc_t'(0) : acc) + prod;
    emit    = (mode == PE_MOVE) && h_in.valid && h_in.last;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      h_out   <= '0;
      v_out   <= '0;
      r_out   <= '0;
      acc     <= '0;
      hold    <= '0;
      hold_v  <= 1'b0;
      congest <= 1'b0;
      pl_sr   <= '0;
      st[0]   <= '0;
      st[1]   <= '0;
    end else begin
      h_out <= h_in;
      v_out <= v_in;
      if (pl_shift) pl_sr <= pl_in;
      if (pl_latch) st[pl_bank] <= pl_sr;
      congest <= 1'b0;
      if (mode == PE_STATIONARY) begin
        r_out.valid <= r_in.valid;
        r_out.data  <= r_in.data + prod;
        hold_v      <= 1'b0;
      end else begin
        if (h_in.valid) acc <= acc_new;
        if (r_in.valid) begin
          // the chain is busy: pass it on, park our own result
          r_out <= r_in;
          if (emit) begin
            hold    <= acc_new;
            hold_v  <= 1'b1;
            congest <= hold_v;
          end
        end else if (hold_v) begin
          // older parked result first, newly finished one is parked
          r_out <= '{valid: 1'b1, data: hold};
          if (emit) hold <= acc_new;
          hold_v <= emit;
        end else if (emit) begin
          r_out <= '{valid: 1'b1, data: acc_new};
        end else begin
          r_out.valid <= 1'b0;
        end
      end
    end
  end

  assign pl_out = pl_sr;

endmodule
