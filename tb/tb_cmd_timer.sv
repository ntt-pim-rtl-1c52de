// tb_cmd_timer: streams 600 random commands (all kinds, random buffers)
// into the timer, sometimes with input gaps, and checks that they leave in
// order and each exactly in the earliest cycle allowed by the timing rules
// (HBM2E values: CL 14, tCCD 2, tRP 14, tRAS 34, tRCD 14, tWR 16; C1 15 and
// C2 10 cycles; 8 cycles after a parameter load), computed here from the
// issue times of earlier commands. Also checks that idle rises once all
// counters have expired.
module tb_cmd_timer;
  import ntt_pim_pkg::*;

  localparam int NB = 4;
  localparam int NCMD = 600;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic     in_valid = 1'b0, in_ready, idle;
  pim_cmd_t in_cmd = CMD_IDLE, bus;

  cmd_timer dut (.clk, .rst_n, .in_valid, .in_cmd, .in_ready, .bus, .idle);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  pim_cmd_t list [NCMD];
  longint   avail [NCMD];  // first cycle the command is held by the timer

  // reference state (issue cycles)
  longint t_prev = -1000, t_act = -1000, t_pre = -1000, t_col = -1000,
          t_wr = -1000, t_cu_free = -1000, t_par = -1000;
  longint t_buf [NB];
  int     n_in = 0, n_out = 0;
  int     n_op [8];

  function automatic longint mx(longint a, longint b);
    return (a > b) ? a : b;
  endfunction

  // input side
  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      avail[n_in] = cyc + 1;
      n_in++;
    end
  end
  always @(negedge clk) if (rst_n) begin
    in_valid = (n_in < NCMD) && ($urandom % 6 != 0);
    in_cmd   = (n_in < NCMD) ? list[n_in] : CMD_IDLE;
  end

  // output side
  always @(posedge clk) if (rst_n && bus.op != CMD_NOP) begin
    pim_cmd_t c;
    longint e;
    c = list[n_out];
    e = mx(t_prev + 1, avail[n_out]);
    unique case (c.op)
      CMD_ACT: e = mx(e, t_pre + 14);
      CMD_PRE: e = mx(e, mx(t_act + 34, t_wr + 16));
      CMD_RD, CMD_WR: e = mx(e, mx(mx(t_act + 14, t_col + 2), t_buf[c.buf_a]));
      CMD_C1: e = mx(e, mx(mx(t_cu_free, t_par + 8), t_buf[c.buf_a]));
      CMD_C2: e = mx(e, mx(mx(t_cu_free, t_par + 8), mx(t_buf[c.buf_a], t_buf[c.buf_b])));
      CMD_LDP: e = mx(e, t_cu_free);
      default: ;
    endcase
    checks++;
    if (bus != c || cyc != e) begin
      failures++;
      if (failures < 8)
        $display("cmd %0d (%s): at %0d expected %0d, same=%0d", n_out, c.op.name(),
                 cyc, e, bus == c);
    end
    n_op[int'(c.op)]++;
    t_prev = cyc;
    unique case (c.op)
      CMD_ACT: t_act = cyc;
      CMD_PRE: t_pre = cyc;
      CMD_RD:  begin t_col = cyc; t_buf[c.buf_a] = cyc + 15; end
      CMD_WR:  begin t_col = cyc; t_wr = cyc; end
      CMD_C1:  begin t_cu_free = cyc + 15; t_buf[c.buf_a] = cyc + 15; end
      CMD_C2:  begin t_cu_free = cyc + 10; t_buf[c.buf_a] = cyc + 10;
                     t_buf[c.buf_b] = cyc + 10; end
      CMD_LDP: t_par = cyc;
      default: ;
    endcase
    n_out++;
  end

  initial begin
    foreach (t_buf[i]) t_buf[i] = -1000;
    foreach (n_op[i]) n_op[i] = 0;
    for (int i = 0; i < NCMD; i++) begin
      pim_cmd_t c;
      int r;
      c = CMD_IDLE;
      r = $urandom % 7;
      c.op    = cmd_op_e'(r + 1);
      c.row   = ROW_W'($urandom);
      c.col   = LOG_COLS'($urandom);
      c.buf_a = buf_idx_t'($urandom % NB);
      c.buf_b = buf_idx_t'((int'(c.buf_a) + 1 + $urandom % (NB - 1)) % NB);
      c.tw_reset = 1'($urandom);
      c.psel  = param_sel_e'($urandom % 3);
      c.phi   = 1'($urandom);
      c.pdata = 16'($urandom);
      list[i] = c;
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (n_out == NCMD);
    repeat (40) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("idle not set after draining"); end
    for (int k = 1; k < 8; k++) begin
      checks++;
      if (n_op[k] < 20) begin failures++; $display("few commands of kind %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
