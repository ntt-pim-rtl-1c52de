// tb_twiddle_factor_gen: drives random issue/restart/step patterns and
// checks every twiddle against omega_0 * step^k mod q computed with integer
// powers (k counted since the last restart).
module tb_twiddle_factor_gen;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  word_t q = word_t'(Q1), qp = neg_qinv(word_t'(Q1)), w0 = '0, w;
  word_t rw_pow [LOG_NA];
  logic issue = 1'b0, restart = 1'b0;
  logic [1:0] step_sel = '0;

  twiddle_factor_gen dut (.clk, .rst_n, .q, .qp, .w0, .rw_pow, .issue, .restart,
                          .step_sel, .w);

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned w0v, st [LOG_NA], cur;
    int sel;
    foreach (rw_pow[i]) rw_pow[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int blk = 0; blk < 60; blk++) begin
      @(negedge clk);
      w0v = longint'($urandom) % Q1;
      w0  = to_mont(w0v, Q1);
      for (int i = 0; i < int'(LOG_NA); i++) begin
        st[i] = longint'($urandom) % Q1;
        rw_pow[i] = to_mont(st[i], Q1);
      end
      sel = $urandom % LOG_NA;
      step_sel = 2'(sel);
      cur = w0v;
      for (int k = 0; k < 12; k++) begin
        restart = (k == 0);
        issue = 1'b1;
        if (($urandom % 3) == 0 && k > 0) issue = 1'b0;
        #1;
        checks++;
        if (w != to_mont(cur, Q1)) begin
          failures++;
          if (failures < 6) $display("block %0d step %0d: w wrong", blk, k);
        end
        if (issue) cur = mulmod(cur, st[sel], Q1);
        else k--;
        @(negedge clk);
      end
      issue = 1'b0;
      restart = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
