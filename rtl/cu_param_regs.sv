// cu_param_regs: scalar parameter registers of the compute unit.
//
// The modulus q, the twiddle start value omega_0 and the twiddle step
// r_omega are 32-bit values, but the bank receives parameters as 16-bit
// values from the global buffer; each register is therefore written in two
// load commands (low and high half), as the architecture describes for
// values wider than 16 bits. Everything else here is this design's choice:
//   * after q changes, four Newton steps (one per cycle) derive the
//     Montgomery constant qp = -q^-1 mod 2^32, so the host never sends it;
//   * after r_omega (or q) changes, the registers hold the repeated squares
//     rw_pow[i] = r_omega^(2^i), i = 0..LOG_NA-1, computed one per cycle.
//     C1 uses them as the per-stage twiddle steps.
// busy is high while either computation runs; a C1/C2 must not start then.
// The command timer waits PARAM_LAT cycles after the last load, which
// covers the worst case (q loaded last: 4 + LOG_NA-1 cycles).
module cu_param_regs
  import ntt_pim_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       ld_valid,
  input  param_sel_e ld_sel,
  input  logic       ld_hi,
  input  logic [15:0] ld_data,
  output word_t      q,
  output word_t      qp,
  output word_t      w0,
  output word_t      rw_pow [LOG_NA],
  output logic       busy
);

  word_t       qinv;                 // q^-1 mod 2^32 during refinement
  logic [2:0]  newton_left;          // Newton steps still to run
  logic [$clog2(LOG_NA)-1:0] sq_next; // next square index, 0 = idle
  logic        sq_pending;           // squares must be recomputed

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q           <= 32'd1;
      w0          <= '0;
      for (int i = 0; i < int'(LOG_NA); i++) rw_pow[i] <= '0;
      qinv        <= 32'd1;
      newton_left <= '0;
      sq_next     <= '0;
      sq_pending  <= 1'b0;
    end else begin
      // Newton refinement of q^-1
      if (newton_left != 0) begin
        qinv        <= newton_step(qinv, q);
        newton_left <= newton_left - 3'd1;
      end
      // repeated squaring of r_omega, after qp is final
      if (sq_next != 0) begin
        rw_pow[sq_next] <= mont_mul(rw_pow[sq_next-1], rw_pow[sq_next-1], q, qp);
        sq_next <= (32'(sq_next) == LOG_NA - 1) ? '0 : sq_next + 1'b1;
      end else if (sq_pending && newton_left == 0 && !ld_valid) begin
        sq_pending <= 1'b0;
        sq_next    <= (LOG_NA > 1) ? 1 : 0;
      end
      if (ld_valid) begin
        unique case (ld_sel)
          PAR_Q: begin
            if (ld_hi) q[31:16] <= ld_data; else q[15:0] <= ld_data;
            qinv        <= ld_hi ? {ld_data, q[15:0]} : {q[31:16], ld_data};
            newton_left <= 3'd4;
            sq_pending  <= 1'b1;
            sq_next     <= '0;
          end
          PAR_W0: begin
            if (ld_hi) w0[31:16] <= ld_data; else w0[15:0] <= ld_data;
          end
          PAR_RW: begin
            if (ld_hi) rw_pow[0][31:16] <= ld_data; else rw_pow[0][15:0] <= ld_data;
            sq_pending <= 1'b1;
            sq_next    <= '0;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    qp   = -qinv;
    busy = (newton_left != 0) || (sq_next != 0) || sq_pending;
  end

endmodule
