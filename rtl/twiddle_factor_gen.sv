// twiddle_factor_gen: on-the-fly twiddle factors for the butterfly unit.
//
// Twiddles are produced by repeated modular multiplication instead of being
// read from memory, so all memory bandwidth serves the polynomial itself.
// Every butterfly of a twiddle block uses
//     w = omega_0 * step^k  (k = 0, 1, 2, ... within the block)
// which is the omega <- omega * r_omega recurrence of the C1/C2 command
// definitions. All values are in Montgomery form.
//
// Interface, one butterfly issue per cycle:
//   issue      - a butterfly is issued this cycle and consumes w
//   restart    - this butterfly starts a block: it uses omega_0
//   step_sel   - which rw_pow entry is the step of the current block
//   w          - twiddle for the butterfly issued this cycle (combinational)
// After an issue the running value becomes w * step (one Montgomery product,
// registered), ready for the next cycle. Without an issue it holds.
//
// The restart/step_sel split is this design's choice: C2 uses step
// rw_pow[0] = r_omega and restarts when told by the command, C1 restarts at
// every butterfly block and takes the step of each stage from rw_pow.
module twiddle_factor_gen
  import ntt_pim_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  word_t     q,
  input  word_t     qp,
  input  word_t     w0,
  input  word_t     rw_pow [LOG_NA],
  input  logic      issue,
  input  logic      restart,
  input  logic [$clog2(LOG_NA)-1:0] step_sel,
  output word_t     w
);

  word_t w_run;

  always_comb w = restart ? w0 : w_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) w_run <= '0;
    else if (issue) w_run <= mont_mul(w, rw_pow[step_sel], q, qp);
  end

endmodule
