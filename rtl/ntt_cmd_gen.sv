// ntt_cmd_gen: NTT mapping in the memory controller.
//
// One NTT request (length N = 2^logn words, stored from column 0 of row
// base_row, one atom = NA words, COLS atoms per row) is turned into the
// program-ordered command sequence for one PIM bank. The input is expected
// in bit-reversed order; the result is the natural-order cyclic NTT,
// written in place. The stages run with growing butterfly span m:
//
//   intra-atom (m < NA)         : C1 on every atom of a row
//   intra-row  (NA <= m < row)  : C2 on atom pairs of the same row
//   inter-row  (m >= row)       : C2 on atom pairs in different rows
//
// The first log(row) stages are split into independent row-sized blocks,
// and each row is finished (its C1 stages and then its intra-row stages)
// under a single activation. The inter-row stages run stage by stage, pairs
// in ascending order.
//
// Pipelining over NB buffers: commands are emitted in groups. A C1 group
// holds up to NB atoms (read all, compute all, write all); a C2 group holds
// up to NB/2 pairs. For inter-row pairs the group reads all lower atoms
// (one row), switches row once, reads all upper atoms, computes, writes the
// upper atoms while that row is still open, switches back and writes the
// lower atoms, so one group needs two row switches however many pairs it
// holds. This grouping follows the pipelined schedules of the architecture;
// group sizes, the exact orders and the row-switch rule (PRE then ACT when
// a needed row is not open) are this design's choice.
//
// Twiddles: the controller derives qp = -q^-1 mod 2^32 and the table
// pw[i] = w_n^(2^i) (w_n a primitive N-th root, Montgomery form) at the
// start. Per stage of span m it loads r_omega = w_n^(N/2m) into the bank,
// and for C1 it loads w_n^(N/NA); omega_0 is the Montgomery one. C2 of the
// first pair of every twiddle block restarts the twiddle sequence, all
// others continue it.
//
// Interface: start with the request fields (held by the caller while busy);
// commands leave through a valid/ready handshake; done pulses once the last
// command (a PRE) has been handed over.
module ntt_cmd_gen
  import ntt_pim_pkg::*;
#(
  parameter int unsigned NB   = 4,
  parameter int unsigned ROWS = 32768
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LOGN_W-1:0] logn,     // LOG_NA .. LOGN_MAX
  input  logic [ROW_W-1:0] base_row,
  input  word_t            q,
  input  word_t            w_n,       // primitive N-th root, Montgomery form
  input  word_t            one_m,     // 2^32 mod q (Montgomery one)
  output logic             out_valid,
  output pim_cmd_t         out_cmd,
  input  logic             out_ready,
  output logic             busy,
  output logic             done
);

  localparam int unsigned LOG_ROWW = LOG_NA + LOG_COLS;          // words per row
  localparam int unsigned LOGN_MAX = $clog2(ROWS) + LOG_ROWW;
  localparam int unsigned G1 = NB;                                // atoms per C1 group
  localparam int unsigned G2 = (NB / 2 > 0) ? NB / 2 : 1;         // pairs per C2 group
  localparam int unsigned IW = LOGN_MAX;                          // item index width

  typedef enum logic [3:0] {
    G_IDLE, G_NEWTON, G_POW, G_PARAM, G_PH_LDP, G_RD, G_C, G_WR, G_FIN, G_DONE
  } gstate_e;
  typedef enum logic [1:0] { PH_C1, PH_INTRA, PH_INTER } phase_e;

  gstate_e          st;
  phase_e           ph;
  logic [LOGN_W-1:0] L;
  logic [ROW_W-1:0] base;
  word_t            r_q, r_qp, r_one;
  word_t            pw [LOGN_MAX];
  logic [LOGN_W-1:0] cnt;        // preparation counter
  logic [2:0]       pk;          // preamble step
  logic [LOGN_W-1:0] s;          // stage (span m = 2^s)
  logic [ROW_W-1:0] r;           // row block (intra phases)
  logic [IW-1:0]    p0;          // first item of the current group
  logic [IW:0]      k;           // step inside the group / LDP half
  logic             open_v;
  logic [ROW_W-1:0] open_row;

  // ---------------- derived quantities
  logic [IW-1:0] apr;            // atoms per row block
  logic [IW-1:0] nrows;          // row blocks
  logic [LOGN_W-1:0] intra_end;  // first stage that is not intra-row
  logic [IW-1:0] item_lo, item_hi; // item range of the phase
  logic [IW-1:0] g;              // size of the current group

  always_comb begin
    apr   = (L >= LOGN_W'(LOG_ROWW)) ? IW'(COLS) : (IW'(1) << (L - LOGN_W'(LOG_NA)));
    nrows = (L >= LOGN_W'(LOG_ROWW)) ? (IW'(1) << (L - LOGN_W'(LOG_ROWW))) : IW'(1);
    intra_end = (L < LOGN_W'(LOG_ROWW)) ? L : LOGN_W'(LOG_ROWW);
    unique case (ph)
      PH_C1:    begin item_lo = IW'(r) * apr;        item_hi = item_lo + apr; end
      PH_INTRA: begin item_lo = IW'(r) * (apr >> 1); item_hi = item_lo + (apr >> 1); end
      default:  begin item_lo = '0; item_hi = IW'(1) << (L - LOGN_W'(LOG_NA) - 1); end
    endcase
  end

  // pair p of the stage with span 2^s words -> lower / upper atom index
  function automatic logic [IW-1:0] pair_lo(input logic [IW-1:0] p, input logic [LOGN_W-1:0] st_s);
    logic [LOGN_W-1:0] sh;
    logic [IW-1:0] half;
    sh   = st_s - LOGN_W'(LOG_NA);
    half = IW'(1) << sh;
    return ((p >> sh) << (sh + 1)) | (p & (half - 1'b1));
  endfunction

  function automatic logic [IW-1:0] pair_half(input logic [LOGN_W-1:0] st_s);
    return IW'(1) << (st_s - LOGN_W'(LOG_NA));
  endfunction

  always_comb begin
    logic [IW-1:0] left, room;
    left = item_hi - p0;
    room = '0;
    unique case (ph)
      PH_C1:   g = (left < IW'(G1)) ? left : IW'(G1);
      PH_INTRA: g = (left < IW'(G2)) ? left : IW'(G2);
      default: begin
        // keep a group inside one row of lower atoms
        room = IW'(COLS) - IW'(pair_lo(p0, s) & IW'(COLS - 1));
        g = (left < IW'(G2)) ? left : IW'(G2);
        if (room < g) g = room;
      end
    endcase
  end

  // ---------------- command of the current step
  logic          adv;     // the step's own command (not a row switch)
  logic [IW-1:0] atom;    // atom addressed by RD / WR
  buf_idx_t      bsel;    // buffer of RD / WR / C1, upper buffer of C2
  logic          is_col;  // step is a RD or WR

  always_comb begin
    logic [IW-1:0] pi, lo, hi;
    logic [ROW_W-1:0] need;
    logic          upper;
    word_t         rw;
    int unsigned   kk, gg;
    rw        = '0;
    out_valid = 1'b0;
    out_cmd   = CMD_IDLE;
    adv       = 1'b1;
    atom      = '0;
    bsel      = '0;
    is_col    = 1'b0;
    kk        = int'(k);
    gg        = int'(g);
    pi        = '0;
    upper     = 1'b0;
    lo        = '0;
    hi        = '0;
    // which item / buffer this step works on
    unique case (ph)
      PH_C1: begin
        pi   = p0 + IW'(kk);
        atom = pi;
        bsel = buf_idx_t'(kk);
      end
      PH_INTRA: begin
        if (st == G_C) begin
          pi = p0 + IW'(kk);
          bsel = buf_idx_t'(2 * kk);
        end else begin
          pi    = p0 + IW'(kk >> 1);
          upper = kk[0];
          bsel  = buf_idx_t'(kk);
        end
      end
      default: begin
        if (st == G_C) begin
          pi = p0 + IW'(kk);
          bsel = buf_idx_t'(2 * kk);
        end else begin
          // RD: lower atoms then upper atoms; WR: upper atoms then lower
          upper = (kk < gg) ? (st == G_WR) : (st == G_RD);
          pi    = p0 + IW'((kk < gg) ? kk : kk - gg);
          bsel  = buf_idx_t'(2 * ((kk < gg) ? kk : kk - gg) + (upper ? 1 : 0));
        end
      end
    endcase
    if (ph != PH_C1) begin
      lo   = pair_lo(pi, s);
      hi   = lo + pair_half(s);
      atom = upper ? hi : lo;
    end
    need = base + ROW_W'(atom >> LOG_COLS);

    unique case (st)
      G_PARAM: begin
        out_valid     = 1'b1;
        out_cmd.op    = CMD_LDP;
        out_cmd.psel  = (pk < 3'd2) ? PAR_Q : PAR_W0;
        out_cmd.phi   = pk[0];
        out_cmd.pdata = (pk < 3'd2) ? (pk[0] ? r_q[31:16] : r_q[15:0])
                                    : (pk[0] ? r_one[31:16] : r_one[15:0]);
      end
      G_PH_LDP: begin
        rw = (ph == PH_C1) ? pw[L - LOGN_W'(LOG_NA)] : pw[L - 1'b1 - s];
        out_valid     = 1'b1;
        out_cmd.op    = CMD_LDP;
        out_cmd.psel  = PAR_RW;
        out_cmd.phi   = k[0];
        out_cmd.pdata = k[0] ? rw[31:16] : rw[15:0];
      end
      G_RD, G_WR: begin
        out_valid = 1'b1;
        is_col    = 1'b1;
        if (!open_v) begin
          adv         = 1'b0;
          out_cmd.op  = CMD_ACT;
          out_cmd.row = need;
        end else if (open_row != need) begin
          adv        = 1'b0;
          out_cmd.op = CMD_PRE;
        end else begin
          out_cmd.op    = (st == G_RD) ? CMD_RD : CMD_WR;
          out_cmd.col   = LOG_COLS'(atom);
          out_cmd.buf_a = bsel;
        end
      end
      G_C: begin
        out_valid     = 1'b1;
        out_cmd.op    = (ph == PH_C1) ? CMD_C1 : CMD_C2;
        out_cmd.buf_a = bsel;
        out_cmd.buf_b = bsel + 1'b1;
        out_cmd.tw_reset = (ph != PH_C1) &&
                           ((pi & (pair_half(s) - 1'b1)) == '0);
      end
      G_FIN: begin
        if (open_v) begin
          out_valid  = 1'b1;
          out_cmd.op = CMD_PRE;
        end
      end
      default: ;
    endcase
  end

  // ---------------- sequencing
  logic fire;
  assign fire = out_valid && out_ready;

  // number of steps in the current group phase
  logic [IW:0] nsteps;
  always_comb begin
    if (ph == PH_C1 || st == G_C) nsteps = {1'b0, g};
    else                          nsteps = {g, 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= G_IDLE;
      ph       <= PH_C1;
      L        <= '0;
      base     <= '0;
      r_q      <= 32'd1;
      r_qp     <= '0;
      r_one    <= '0;
      cnt      <= '0;
      pk       <= '0;
      s        <= '0;
      r        <= '0;
      p0       <= '0;
      k        <= '0;
      open_v   <= 1'b0;
      open_row <= '0;
      for (int i = 0; i < LOGN_MAX; i++) pw[i] <= '0;
    end else begin
      unique case (st)
        G_IDLE: if (start) begin
          L      <= logn;
          base   <= base_row;
          r_q    <= q;
          r_qp   <= q;              // Newton start value
          r_one  <= one_m;
          pw[0]  <= w_n;
          cnt    <= '0;
          st     <= G_NEWTON;
        end
        G_NEWTON: begin
          r_qp <= newton_step(r_qp, r_q);
          cnt  <= cnt + 1'b1;
          if (cnt == LOGN_W'(3)) begin
            cnt <= LOGN_W'(1);
            st  <= G_POW;
          end
        end
        G_POW: begin
          // pw[cnt] = pw[cnt-1]^2 ; r_qp still holds +q^-1 here
          if (cnt < L) pw[cnt] <= mont_mul(pw[cnt - 1'b1], pw[cnt - 1'b1], r_q, -r_qp);
          cnt <= cnt + 1'b1;
          if (cnt >= L - 1'b1) begin
            pk <= '0;
            st <= G_PARAM;
          end
        end
        G_PARAM: if (fire) begin
          pk <= pk + 1'b1;
          if (pk == 3'd3) begin
            ph <= PH_C1;
            r  <= '0;
            k  <= '0;
            st <= G_PH_LDP;
          end
        end
        G_PH_LDP: if (fire) begin
          k <= k + 1'b1;
          if (k[0]) begin
            k  <= '0;
            p0 <= item_lo;
            st <= G_RD;
          end
        end
        G_RD, G_C, G_WR: if (fire) begin
          if (is_col && !adv) begin
            // row switch
            if (!open_v) begin
              open_v   <= 1'b1;
              open_row <= out_cmd.row;
            end else begin
              open_v <= 1'b0;
            end
          end else if (k + 1'b1 < nsteps) begin
            k <= k + 1'b1;
          end else begin
            k <= '0;
            if (st == G_RD) st <= G_C;
            else if (st == G_C) st <= G_WR;
            else begin
              // group finished
              st <= G_RD;
              p0 <= p0 + g;
              if (p0 + g >= item_hi) begin
                // phase finished: choose the next one
                st <= G_PH_LDP;
                unique case (ph)
                  PH_C1: begin
                    if (L > LOGN_W'(LOG_NA)) begin
                      ph <= PH_INTRA;
                      s  <= LOGN_W'(LOG_NA);
                    end else begin
                      st <= G_FIN;
                    end
                  end
                  PH_INTRA: begin
                    if (s + 1'b1 < intra_end) begin
                      s <= s + 1'b1;
                    end else if (IW'(r) + 1'b1 < nrows) begin
                      r  <= r + 1'b1;
                      ph <= PH_C1;
                    end else if (L > LOGN_W'(LOG_ROWW)) begin
                      ph <= PH_INTER;
                      s  <= LOGN_W'(LOG_ROWW);
                    end else begin
                      st <= G_FIN;
                    end
                  end
                  default: begin
                    if (s + 1'b1 < L) s <= s + 1'b1;
                    else st <= G_FIN;
                  end
                endcase
              end
            end
          end
        end
        G_FIN: begin
          if (!open_v) st <= G_DONE;
          else if (fire) open_v <= 1'b0;
        end
        G_DONE: st <= G_IDLE;
        default: st <= G_IDLE;
      endcase
    end
  end

  assign busy = (st != G_IDLE);
  assign done = (st == G_DONE);

  a_logn_range: assert property (@(posedge clk) disable iff (!rst_n)
                                 start && st == G_IDLE |->
                                 logn >= LOGN_W'(LOG_NA) && 32'(logn) <= LOGN_MAX);
  a_nb_min: assert property (@(posedge clk) disable iff (!rst_n)
                             start |-> NB >= 2);

endmodule
