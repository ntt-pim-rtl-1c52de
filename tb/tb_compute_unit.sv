// tb_compute_unit: the compute unit with four buffers modelled in the
// testbench. Parameters are loaded through the 16-bit load port. Checks:
//  - C1 with omega_0 = 1 and r_omega a primitive 8th root turns the buffer
//    into the 8-point NTT of its bit-reversed contents;
//  - C1 with random omega_0, r_omega: the twiddle of butterfly j in stage s
//    is omega_0 * r_omega^((8/2m) j) (checked against a reference C1);
//  - C2 on two buffers with twiddle omega_0 * r_omega^j, and a following C2
//    without twiddle reset continuing with r_omega^(8+j);
//  - busy lasts exactly 15 cycles for C1 and 10 for C2 (published
//    latencies) and all results are in the buffers when busy drops;
//  - other buffers are untouched.
module tb_compute_unit;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       cmd_valid = 1'b0, cmd_c1 = 1'b0, cmd_tw_reset = 1'b0;
  buf_idx_t   cmd_buf_a = '0, cmd_buf_b = '0;
  logic       ld_valid = 1'b0, ld_hi = 1'b0;
  param_sel_e ld_sel = PAR_Q;
  logic [15:0] ld_data = '0;
  atom_t      bufs [NB];
  logic       st_we  [NB][2];
  elem_idx_t  st_idx [NB][2];
  word_t      st_din [NB][2];
  logic       busy, param_busy;

  compute_unit dut (.clk, .rst_n, .cmd_valid, .cmd_c1, .cmd_buf_a,
    .cmd_buf_b, .cmd_tw_reset, .ld_valid, .ld_sel, .ld_hi, .ld_data, .bufs,
    .st_we, .st_idx, .st_din, .busy, .param_busy);

  // buffer model
  always @(posedge clk)
    for (int i = 0; i < int'(NB); i++)
      for (int l = 0; l < 2; l++)
        if (st_we[i][l]) bufs[i][st_idx[i][l]] <= st_din[i][l];

  int checks = 0, failures = 0;
  longint unsigned qq;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(param_sel_e s, logic [31:0] v);
    for (int h = 0; h < 2; h++) begin
      @(negedge clk);
      ld_valid = 1'b1; ld_sel = s; ld_hi = 1'(h); ld_data = h ? v[31:16] : v[15:0];
    end
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  task automatic set_params(longint unsigned q_i, longint unsigned w0, longint unsigned rw);
    qq = q_i;
    ld(PAR_Q, 32'(q_i));
    ld(PAR_W0, to_mont(w0, q_i));
    ld(PAR_RW, to_mont(rw, q_i));
    while (param_busy) @(negedge clk);
  endtask

  // issue one command and check its busy length
  task automatic run(logic c1, buf_idx_t ba, buf_idx_t bb, logic twr, int lat);
    int n;
    @(negedge clk);
    cmd_valid = 1'b1; cmd_c1 = c1; cmd_buf_a = ba; cmd_buf_b = bb; cmd_tw_reset = twr;
    n = 0;
    #1;
    while (busy) begin
      @(negedge clk);
      cmd_valid = 1'b0;
      n++;
      #1;
    end
    checks++;
    if (n != lat) begin
      failures++;
      $display("%s busy for %0d cycles, expected %0d", c1 ? "C1" : "C2", n, lat);
    end
  endtask

  task automatic fill(int i);
    for (int k = 0; k < int'(NA); k++) bufs[i][k] = word_t'(longint'($urandom) % qq);
  endtask

  task automatic cmp(int i, longint unsigned ex [NA], string what);
    checks++;
    for (int k = 0; k < int'(NA); k++)
      if (bufs[i][k] != word_t'(ex[k])) begin
        failures++;
        $display("%s: buffer %0d word %0d = %0d expected %0d", what, i, k, bufs[i][k], ex[k]);
        break;
      end
  endtask

  // reference C1 (Cooley-Tukey, twiddle restarts per block)
  function automatic void ref_c1(ref longint unsigned v [NA], input longint unsigned w0,
                                 input longint unsigned rw);
    for (int s = 0; s < int'(LOG_NA); s++) begin
      int m;
      longint unsigned st;
      m  = 1 << s;
      st = powmod(rw, NA / (2 * m), qq);
      for (int blk = 0; blk < int'(NA) / (2 * m); blk++)
        for (int j = 0; j < m; j++) begin
          longint unsigned w, t, a;
          int i0;
          i0 = blk * 2 * m + j;
          w  = mulmod(w0, powmod(st, j, qq), qq);
          t  = mulmod(w, v[i0 + m], qq);
          a  = v[i0];
          v[i0]     = (a + t) % qq;
          v[i0 + m] = (a + qq - t) % qq;
        end
    end
  endfunction

  initial begin
    longint unsigned ex [NA], ex2 [NA], keep [NA], w0, rw, w8, wk, t;
    for (int i = 0; i < int'(NB); i++) bufs[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      longint unsigned qi, gi;
      qi = pass ? Q2 : Q1;
      gi = pass ? G2 : G1;
      w8 = powmod(gi, (qi - 1) / 8, qi);
      // --- C1 = 8-point NTT of the bit-reversed atom
      set_params(qi, 1, w8);
      for (int r = 0; r < 6; r++) begin
        int b;
        b = $urandom % NB;
        fill(b);
        for (int k = 0; k < int'(NB); k++) if (k == (b + 1) % NB) for (int e = 0; e < int'(NA); e++) keep[e] = bufs[k][e];
        for (int k = 0; k < int'(NA); k++) begin
          ex[k] = 0;
          for (int n = 0; n < int'(NA); n++)
            ex[k] = (ex[k] + mulmod(bufs[b][brv(n, LOG_NA)], powmod(w8, n * k, qq), qq)) % qq;
        end
        run(1'b1, buffer_idx(b), '0, 1'b0, C1_LAT);
        cmp(b, ex, "C1 NTT");
        cmp((b + 1) % NB, keep, "untouched buffer");
      end
      // --- C1 with general twiddles
      for (int r = 0; r < 6; r++) begin
        int b;
        w0 = longint'($urandom) % qi;
        rw = longint'($urandom) % qi;
        set_params(qi, w0, rw);
        b = $urandom % NB;
        fill(b);
        for (int k = 0; k < int'(NA); k++) ex[k] = bufs[b][k];
        ref_c1(ex, w0, rw);
        run(1'b1, buffer_idx(b), '0, 1'b0, C1_LAT);
        cmp(b, ex, "C1 general");
      end
      // --- C2, then C2 continuing the twiddle sequence
      for (int r = 0; r < 6; r++) begin
        int pa, pb;
        w0 = longint'($urandom) % qi;
        rw = longint'($urandom) % qi;
        set_params(qi, w0, rw);
        for (int c = 0; c < 2; c++) begin
          pa = $urandom % NB;
          pb = (pa + 1 + $urandom % (NB - 1)) % NB;
          fill(pa); fill(pb);
          for (int j = 0; j < int'(NA); j++) begin
            wk = mulmod(w0, powmod(rw, c * NA + j, qi), qi);
            t  = mulmod(wk, bufs[pb][j], qi);
            ex[j]  = (bufs[pa][j] + t) % qi;
            ex2[j] = (bufs[pa][j] + qi - t) % qi;
          end
          run(1'b0, buffer_idx(pa), buffer_idx(pb), c == 0, C2_LAT);
          cmp(pa, ex, c ? "C2 continued (upper)" : "C2 (upper)");
          cmp(pb, ex2, c ? "C2 continued (lower)" : "C2 (lower)");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic buf_idx_t buffer_idx(int i);
    return buf_idx_t'(i);
  endfunction
endmodule
