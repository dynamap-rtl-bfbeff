// psum_accumulator: accumulators with FIFOs at the output edge of the array.
//
// In WS/IS a pass over one P_SA1 x P_SA2 stationary block yields only a
// partial sum for each output element; a round of n_pass passes (b / P_SA1 in
// WS) must be added up. Each of the LANES lanes has an adder and a FIFO: in the
// first pass of a round the partial sums are pushed, in the middle passes they
// are popped, added to the new ones and pushed again, and in the last pass the
// sum is sent to the output instead. All lanes move in lock step, so they share
// one set of FIFO pointers and a counter of n_per_pass vectors per pass.
// With bypass set (NS, or a round of one pass) inputs go straight through.
// Timing: out follows in by one cycle. A round may hold up to DEPTH vectors
// per pass (the paper sizes the FIFOs at P_SA1 + c; the depth here is this
// design's parameter). The counters restart when `clear` is pulsed.
module psum_accumulator
  import dynamap_pkg::*;
#(
  parameter int unsigned LANES = 66,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        bypass,
  input  logic [31:0] n_per_pass,
  input  logic [31:0] n_pass,
  input  logic        in_valid,
  input  acc_t        in_data  [LANES],
  output logic        out_valid,
  output acc_t        out_data [LANES],
  output logic        round_done
);
  acc_t        fifo [LANES][DEPTH];
  logic [AW-1:0] wp, rp;
  logic [31:0] cnt, pass;
  logic        first_p, last_p;

  assign first_p = (pass == 0);
  assign last_p  = (pass == n_pass - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; pass <= '0;
      out_valid <= 1'b0; round_done <= 1'b0;
      out_data <= '{default: '0};
    end else begin
      out_valid  <= 1'b0;
      round_done <= 1'b0;
      if (clear) begin
        wp <= '0; rp <= '0; cnt <= '0; pass <= '0;
      end else if (in_valid) begin
        if (bypass) begin
          out_valid <= 1'b1;
          out_data  <= in_data;
        end else begin
          for (int l = 0; l < LANES; l++) begin
            acc_t s;
            s = first_p ? in_data[l] : in_data[l] + fifo[l][rp];
            if (last_p) out_data[l] <= s;
            else        fifo[l][wp] <= s;
          end
          if (!first_p) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
          if (!last_p)  wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
          out_valid <= last_p;
          if (cnt == n_per_pass - 1) begin
            cnt <= '0;
            if (last_p) begin
              pass <= '0;
              round_done <= 1'b1;
            end else begin
              pass <= pass + 1;
            end
          end else begin
            cnt <= cnt + 1;
          end
        end
      end
    end
  end

  initial assert (DEPTH >= 2 && (DEPTH & (DEPTH - 1)) == 0) else $error("DEPTH must be a power of two");
endmodule
