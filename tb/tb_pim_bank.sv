// tb_pim_bank: the bank (decoder, four atom buffers, compute unit) driven by
// a hand-written command program against the DRAM model, with the gaps the
// timing table requires:
//   parameter loads; ACT row 1; CU-read three atoms into buffers 0, 2, 1;
//   C1 on buffer 1; C2 on buffers 0 and 2; CU-write all three back; PRE;
//   then ACT row 2, copy atom 0 to atom 5 through buffer 3, PRE.
// After the program the DRAM contents are compared with a reference
// computed here (C1 = 8-point NTT of the bit-reversed atom, C2 butterflies
// with omega_0 * r_omega^j); untouched atoms must keep their values, the
// model must report no timing violation and cu_busy must last exactly the
// published C1 / C2 latencies.
module tb_pim_bank;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  localparam int unsigned NB = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  pim_cmd_t cmd = CMD_IDLE;
  logic     dram_act, dram_pre, dram_rd, dram_wr, dram_rvalid, cu_busy, param_busy;
  logic [ROW_W-1:0] dram_row;
  logic [LOG_COLS-1:0] dram_col;
  atom_t    dram_wdata, dram_rdata;

  pim_bank dut (.clk, .rst_n, .cmd, .dram_act, .dram_pre, .dram_row,
    .dram_rd, .dram_wr, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata,
    .cu_busy, .param_busy);

  dram_bank_model #(.ROWS_M(4)) u_dram (.clk, .act(dram_act), .pre(dram_pre),
    .row(dram_row), .rd(dram_rd), .wr(dram_wr), .col(dram_col), .wdata(dram_wdata),
    .rvalid(dram_rvalid), .rdata(dram_rdata));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cu_busy length of each CU command
  int busy_len = 0, last_busy = 0;
  always @(posedge clk) begin
    if (cu_busy) busy_len++;
    else if (busy_len != 0) begin last_busy = busy_len; busy_len = 0; end
  end

  task automatic send(pim_cmd_t c, int gap);
    @(negedge clk);
    cmd = c;
    @(negedge clk);
    cmd = CMD_IDLE;
    repeat (gap - 1) @(negedge clk);
  endtask

  function automatic pim_cmd_t mk(cmd_op_e op, int row = 0, int col = 0, int ba = 0,
                                  int bb = 0, logic twr = 1'b0);
    pim_cmd_t c;
    c = CMD_IDLE;
    c.op = op; c.row = ROW_W'(row); c.col = LOG_COLS'(col);
    c.buf_a = buf_idx_t'(ba); c.buf_b = buf_idx_t'(bb); c.tw_reset = twr;
    return c;
  endfunction

  task automatic ldp(param_sel_e s, logic [31:0] v);
    pim_cmd_t c;
    for (int h = 0; h < 2; h++) begin
      c = CMD_IDLE;
      c.op = CMD_LDP; c.psel = s; c.phi = 1'(h); c.pdata = h ? v[31:16] : v[15:0];
      send(c, 1);
    end
  endtask

  task automatic chk_busy(int exp, string what);
    @(negedge clk);
    checks++;
    if (last_busy != exp) begin
      failures++;
      $display("%s: cu_busy for %0d cycles, expected %0d", what, last_busy, exp);
    end
  endtask

  initial begin
    atom_t init [4][COLS];
    longint unsigned qq, w8, w0, rw, ex [COLS][NA], t, wk;
    qq = Q1;
    w8 = powmod(G1, (Q1 - 1) / 8, Q1);
    w0 = 1;
    rw = w8;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < int'(COLS); c++)
        for (int k = 0; k < int'(NA); k++) begin
          init[r][c][k] = word_t'(longint'($urandom) % qq);
          u_dram.mem[r][c][k] = init[r][c][k];
        end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // expected row 1: col 9 = C1 NTT, cols 3/7 = C2 (w_j = w8^j)
    for (int c = 0; c < int'(COLS); c++)
      for (int k = 0; k < int'(NA); k++) ex[c][k] = init[1][c][k];
    for (int k = 0; k < int'(NA); k++) begin
      ex[9][k] = 0;
      for (int n = 0; n < int'(NA); n++)
        ex[9][k] = (ex[9][k] + mulmod(init[1][9][brv(n, LOG_NA)], powmod(w8, n * k, qq), qq)) % qq;
    end
    for (int j = 0; j < int'(NA); j++) begin
      wk = powmod(w8, j, qq);
      t  = mulmod(wk, init[1][7][j], qq);
      ex[3][j] = (init[1][3][j] + t) % qq;
      ex[7][j] = (init[1][3][j] + qq - t) % qq;
    end

    ldp(PAR_Q, 32'(qq));
    ldp(PAR_W0, to_mont(w0, qq));
    ldp(PAR_RW, to_mont(rw, qq));
    repeat (PARAM_LAT) @(negedge clk);
    send(mk(CMD_ACT, 1), 14);
    send(mk(CMD_RD, 0, 3, 0), 2);
    send(mk(CMD_RD, 0, 7, 2), 2);
    send(mk(CMD_RD, 0, 9, 1), 15);
    send(mk(CMD_C1, 0, 0, 1), 15);
    chk_busy(C1_LAT, "C1");
    send(mk(CMD_C2, 0, 0, 0, 2, 1'b1), 10);
    chk_busy(C2_LAT, "C2");
    send(mk(CMD_WR, 0, 3, 0), 2);
    send(mk(CMD_WR, 0, 7, 2), 2);
    send(mk(CMD_WR, 0, 9, 1), 16);
    send(mk(CMD_PRE), 14);
    send(mk(CMD_ACT, 2), 14);
    send(mk(CMD_RD, 0, 0, 3), 15);
    send(mk(CMD_WR, 0, 5, 3), 34);
    send(mk(CMD_PRE), 14);
    repeat (4) @(negedge clk);

    for (int c = 0; c < int'(COLS); c++) begin
      checks++;
      for (int k = 0; k < int'(NA); k++)
        if (u_dram.mem[1][c][k] != word_t'(ex[c][k])) begin
          failures++;
          $display("row 1 atom %0d word %0d: %0d expected %0d", c, k, u_dram.mem[1][c][k], ex[c][k]);
          break;
        end
      checks++;
      if (u_dram.mem[2][c] != ((c == 5) ? init[2][0] : init[2][c])) begin
        failures++;
        $display("row 2 atom %0d wrong", c);
      end
      checks++;
      if (u_dram.mem[0][c] != init[0][c] || u_dram.mem[3][c] != init[3][c]) begin
        failures++;
        $display("rows 0/3 atom %0d changed", c);
      end
    end
    checks++;
    if (u_dram.violations != 0) begin failures++; $display("DRAM timing violations"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
