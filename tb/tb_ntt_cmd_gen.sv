// tb_ntt_cmd_gen: runs the mapping generator alone for N = 8 ... 4096 at
// random base rows, with a consumer that is ready only some of the time,
// and checks the command program:
//  - row legality: ACT only with no open row and only to rows of the
//    polynomial, RD/WR only to the open row, PRE only with an open row,
//    no open row at the end, done pulses exactly once;
//  - data flow: every CU-write writes an atom back to the place it was read
//    from; every atom is read and written once per stage group
//    (1 + log2(N/8) times in total);
//  - C1 count N/8; C2 count N/16 per C2 stage, with the two buffers holding
//    atoms 2^(s-3) apart and the lower one having that bit clear;
//  - parameters: q and omega_0 = Montgomery one are loaded, every C1 runs
//    with r_omega = w^(N/8) and every C2 of span m with r_omega = w^(N/2m);
//  - in C2 pairs, the twiddle sequence restarts exactly at pairs whose
//    lower atom is the first of its block.
module tb_ntt_cmd_gen;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start = 1'b0, out_valid, out_ready = 1'b0, busy, done;
  logic [LOGN_W-1:0] logn = '0;
  logic [ROW_W-1:0] base_row = '0;
  word_t            q = 32'd1, w_n = '0, one_m = '0;
  pim_cmd_t         out_cmd;

  ntt_cmd_gen dut (.clk, .rst_n, .start, .logn, .base_row, .q, .w_n,
    .one_m, .out_valid, .out_cmd, .out_ready, .busy, .done);

  int checks = 0, failures = 0;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    if (failures < 10) $display("N=2^%0d: %s", logn, s);
  endtask

  // program state of the current case
  int  open_row = -1, n_done = 0, n_c1 = 0, n_ldp = 0;
  int  buf_atom [NB];
  int  rd_cnt [int], wr_cnt [int];
  int  c2_per_d [int];
  logic [31:0] par_q, par_w0, par_rw;
  longint unsigned wroot;
  int  nn;

  always @(negedge clk) out_ready = ($urandom % 3) != 0;

  always @(posedge clk) if (rst_n) begin
    if (done) n_done++;
    if (out_valid && out_ready) begin
      pim_cmd_t c;
      int atom;
      c = out_cmd;
      atom = (open_row - int'(base_row)) * int'(COLS) + int'(c.col);
      unique case (c.op)
        CMD_ACT: begin
          checks++;
          if (open_row != -1) fail("ACT with a row open");
          if (int'(c.row) < int'(base_row) ||
              int'(c.row) >= int'(base_row) + (nn + 255) / 256) fail("ACT outside polynomial");
          open_row = int'(c.row);
        end
        CMD_PRE: begin
          checks++;
          if (open_row == -1) fail("PRE with no open row");
          open_row = -1;
        end
        CMD_RD: begin
          checks++;
          if (open_row == -1 || atom >= nn / 8) fail("RD outside open row / polynomial");
          buf_atom[c.buf_a] = atom;
          rd_cnt[atom] = rd_cnt.exists(atom) ? rd_cnt[atom] + 1 : 1;
        end
        CMD_WR: begin
          checks++;
          if (open_row == -1 || buf_atom[c.buf_a] != atom) fail("WR to a different atom");
          wr_cnt[atom] = wr_cnt.exists(atom) ? wr_cnt[atom] + 1 : 1;
        end
        CMD_LDP: begin
          n_ldp++;
          unique case (c.psel)
            PAR_Q:  if (c.phi) par_q[31:16]  = c.pdata; else par_q[15:0]  = c.pdata;
            PAR_W0: if (c.phi) par_w0[31:16] = c.pdata; else par_w0[15:0] = c.pdata;
            default: if (c.phi) par_rw[31:16] = c.pdata; else par_rw[15:0] = c.pdata;
          endcase
        end
        CMD_C1: begin
          n_c1++;
          checks++;
          if (par_q != q || par_w0 != one_m ||
              par_rw != to_mont(powmod(wroot, nn / 8, Q1), Q1)) fail("C1 parameters");
        end
        CMD_C2: begin
          int lo, hi, d;
          lo = buf_atom[c.buf_a];
          hi = buf_atom[c.buf_b];
          d  = hi - lo;
          checks++;
          if (d <= 0 || (d & (d - 1)) != 0 || (lo & d) != 0) fail("C2 operands are not a pair");
          else begin
            c2_per_d[d] = c2_per_d.exists(d) ? c2_per_d[d] + 1 : 1;
            if (par_rw != to_mont(powmod(wroot, nn / (16 * d), Q1), Q1)) fail("C2 r_omega");
            if (c.tw_reset != ((lo % d) == 0)) fail("C2 twiddle restart flag");
          end
        end
        default: ;
      endcase
    end
  end

  initial begin
    int lgs [10] = '{3, 4, 5, 6, 7, 8, 9, 10, 11, 12};
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    foreach (lgs[t]) begin
      int L;
      L  = lgs[t];
      nn = 1 << L;
      wroot = powmod(G1, (Q1 - 1) >> L, Q1);
      @(negedge clk);
      logn = LOGN_W'(L);
      base_row = ROW_W'($urandom % 1000);
      q = 32'(Q1);
      w_n = to_mont(wroot, Q1);
      one_m = to_mont(1, Q1);
      open_row = -1; n_done = 0; n_c1 = 0; n_ldp = 0;
      rd_cnt.delete(); wr_cnt.delete(); c2_per_d.delete();
      par_q = '0; par_w0 = '0; par_rw = '0;
      foreach (buf_atom[i]) buf_atom[i] = -1;
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      while (busy) @(negedge clk);
      repeat (3) @(negedge clk);
      checks++;
      if (n_done != 1) fail($sformatf("done pulsed %0d times", n_done));
      checks++;
      if (open_row != -1) fail("row left open");
      checks++;
      if (n_c1 != nn / 8) fail($sformatf("%0d C1 commands", n_c1));
      checks++;
      if (n_ldp < 6) fail("too few parameter loads");
      for (int d = 1; d < nn / 8; d *= 2) begin
        checks++;
        if (!c2_per_d.exists(d) || c2_per_d[d] != nn / 16)
          fail($sformatf("C2 count for distance %0d", d));
      end
      for (int a = 0; a < nn / 8; a++) begin
        checks++;
        if (!rd_cnt.exists(a) || !wr_cnt.exists(a) || rd_cnt[a] != L - 2 || wr_cnt[a] != L - 2)
          fail($sformatf("atom %0d read/written a wrong number of times", a));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
