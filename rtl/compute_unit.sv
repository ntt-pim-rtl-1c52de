// compute_unit: the per-bank compute unit (CU) that runs C1 and C2.
//
// C1 (one buffer): the first LOG_NA stages of the NTT inside one atom, in
//   place. Stage s (s = 0..LOG_NA-1, span m = 2^s) has NA/2 butterflies on
//   words (blk*2m + j, blk*2m + j + m), issued in the loop order of the C1
//   definition (blocks, then j). Twiddle of butterfly j is
//   omega_0 * (r_omega^(NA/(2m)))^j: it restarts at omega_0 in every block and
//   the per-stage step is a power of r_omega. With omega_0 = 1 and
//   r_omega = a primitive NA-th root this is the radix-2 NTT of the atom.
// C2 (two buffers P=buf_a, S=buf_b): NA butterflies P[j], S[j] -> P[j], S[j]
//   with twiddle omega_0 * r_omega^j, or, when tw_reset is low, continuing the
//   twiddle sequence where the previous C2 left it.
//
// One butterfly is issued per cycle through the crossbar into the pipelined
// butterfly unit; results are stored back three cycles after the operands
// were loaded. C1 has read-after-write dependences between stages: a small
// per-word pending mask stalls issue until both operands are written back.
// This gives the published latencies: C2 takes 10 cycles and C1 15 cycles,
// counted from the cycle the command is on the bus (busy is high for exactly
// these cycles; the operation starts in the command's own cycle).
//
// Design choices, not given by the architecture description: the per-block
// twiddle restart and the per-stage step r_omega^(NA/(2m)) of C1 (the C1
// pseudo-code keeps one running twiddle per stage, which does not give an
// NTT); the tw_reset flag of C2; the stall logic; parameter loads are
// refused (assertion) while a command runs.
module compute_unit
  import ntt_pim_pkg::*;
#(
  parameter int unsigned NB = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  // command from the bank's decoder (C1 / C2 only)
  input  logic       cmd_valid,
  input  logic       cmd_c1,       // 1 = C1, 0 = C2
  input  buf_idx_t   cmd_buf_a,
  input  buf_idx_t   cmd_buf_b,
  input  logic       cmd_tw_reset,
  // parameter load (16 bits from the global buffer)
  input  logic       ld_valid,
  input  param_sel_e ld_sel,
  input  logic       ld_hi,
  input  logic [15:0] ld_data,
  // atom buffers
  input  atom_t      bufs   [NB],
  output logic       st_we  [NB][2],
  output elem_idx_t  st_idx [NB][2],
  output word_t      st_din [NB][2],
  output logic       busy,
  output logic       param_busy
);

  localparam int unsigned C1_OPS = (NA / 2) * LOG_NA;
  localparam int unsigned OPN_W  = $clog2(C1_OPS + 1);
  localparam int unsigned STG_W  = $clog2(LOG_NA);
  localparam int unsigned TAG_W  = 2 * (BUF_IW + LOG_NA);

  // ---------------- parameters
  word_t q, qp, w0;
  word_t rw_pow [LOG_NA];

  cu_param_regs u_params (
    .clk, .rst_n, .ld_valid, .ld_sel, .ld_hi, .ld_data,
    .q, .qp, .w0, .rw_pow, .busy(param_busy)
  );

  // ---------------- sequencer state
  logic             act;
  logic             r_c1;
  buf_idx_t         r_ba, r_bb;
  logic             r_twr;
  logic [OPN_W-1:0] opn;
  logic [NA-1:0]    pend;

  logic             start;
  logic             e_c1, e_twr;
  buf_idx_t         e_ba, e_bb;
  logic [OPN_W-1:0] e_op;
  logic [OPN_W-1:0] e_total;
  logic             running;

  always_comb begin
    start   = cmd_valid && !act;
    e_c1    = act ? r_c1  : cmd_c1;
    e_ba    = act ? r_ba  : cmd_buf_a;
    e_bb    = act ? r_bb  : cmd_buf_b;
    e_twr   = act ? r_twr : cmd_tw_reset;
    e_op    = act ? opn   : '0;
    e_total = e_c1 ? OPN_W'(C1_OPS) : OPN_W'(NA);
    running = act || start;
  end

  // ---------------- butterfly selection
  elem_idx_t         i0, i1;
  logic              restart;
  logic [STG_W-1:0]  step_sel;
  logic              issue;

  always_comb begin
    int unsigned o, s, m, blk, j;
    o = 0; s = 0; m = 1; blk = 0; j = 0;
    i0       = '0;
    i1       = '0;
    restart  = 1'b0;
    step_sel = '0;
    if (e_c1) begin
      s   = int'(e_op) / (NA / 2);
      o   = int'(e_op) % (NA / 2);
      m   = 1 << s;
      blk = o / m;
      j   = o % m;
      i0       = elem_idx_t'(blk * 2 * m + j);
      i1       = elem_idx_t'(blk * 2 * m + j + m);
      restart  = (j == 0);
      step_sel = STG_W'(LOG_NA - 1 - s);
    end else begin
      i0       = elem_idx_t'(e_op);
      i1       = elem_idx_t'(e_op);
      restart  = (e_op == '0) && e_twr;
      step_sel = '0;
    end
    issue = running && (e_op < e_total) &&
            (!e_c1 || (!pend[i0] && !pend[i1]));
  end

  // ---------------- datapath: crossbar, twiddle generator, butterfly
  word_t            opa, opb, tw, bx, by;
  logic             bv;
  logic [TAG_W-1:0] btag;
  buf_idx_t         x_buf, y_buf;
  elem_idx_t        x_idx, y_idx;

  twiddle_factor_gen u_tfg (
    .clk, .rst_n, .q, .qp, .w0, .rw_pow,
    .issue, .restart, .step_sel, .w(tw)
  );

  butterfly_unit #(.TAG_W(TAG_W)) u_bu (
    .clk, .rst_n, .q, .qp,
    .in_valid(issue), .a(opa), .b(opb), .w(tw),
    .in_tag({e_ba, i0, (e_c1 ? e_ba : e_bb), i1}),
    .out_valid(bv), .x(bx), .y(by), .out_tag(btag)
  );

  assign {x_buf, x_idx, y_buf, y_idx} = btag;

  cu_crossbar #(.NB(NB)) u_xbar (
    .bufs,
    .a_buf(e_ba), .a_idx(i0),
    .b_buf(e_c1 ? e_ba : e_bb), .b_idx(i1),
    .a(opa), .b(opb),
    .st_valid(bv),
    .x_buf, .x_idx, .x(bx),
    .y_buf, .y_idx, .y(by),
    .st_we, .st_idx, .st_din
  );

  // ---------------- sequencer registers
  logic s1_issue;  // a butterfly is in the operand-register stage
  logic [NA-1:0] pend_nxt;

  // pending words (C1 only): set on issue, cleared on store
  always_comb begin
    pend_nxt = pend;
    if (bv && r_c1) begin
      pend_nxt[x_idx] = 1'b0;
      pend_nxt[y_idx] = 1'b0;
    end
    if (issue && e_c1) begin
      pend_nxt[i0] = 1'b1;
      pend_nxt[i1] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act      <= 1'b0;
      r_c1     <= 1'b0;
      r_ba     <= '0;
      r_bb     <= '0;
      r_twr    <= 1'b0;
      opn      <= '0;
      pend     <= '0;
      s1_issue <= 1'b0;
    end else begin
      s1_issue <= issue;
      if (start) begin
        act   <= 1'b1;
        r_c1  <= cmd_c1;
        r_ba  <= cmd_buf_a;
        r_bb  <= cmd_buf_b;
        r_twr <= cmd_tw_reset;
      end
      if (issue) opn <= e_op + 1'b1;
      else if (start) opn <= '0;
      pend     <= pend_nxt;
      // finished once the last butterfly is in its store cycle
      if (act && opn == e_total && !s1_issue && !issue) act <= 1'b0;
    end
  end

  always_comb busy = running;

  a_no_cmd_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                        !(cmd_valid && act));
  a_no_param_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                          !(ld_valid && running));
  a_no_start_while_param: assert property (@(posedge clk) disable iff (!rst_n)
                                           !(cmd_valid && param_busy));

endmodule
