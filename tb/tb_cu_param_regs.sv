// tb_cu_param_regs: loads q, omega_0 and r_omega 16 bits at a time (in
// several orders), then checks the registers, qp = -q^-1 mod 2^32, the
// squares rw_pow[i] = r_omega^(2^i) (Montgomery form), and that busy has
// dropped within PARAM_LAT cycles of the last load.
module tb_cu_param_regs;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic ld_valid = 1'b0, ld_hi = 1'b0, busy;
  param_sel_e ld_sel = PAR_Q;
  logic [15:0] ld_data = '0;
  word_t q, qp, w0;
  word_t rw_pow [LOG_NA];

  cu_param_regs dut (.clk, .rst_n, .ld_valid, .ld_sel, .ld_hi, .ld_data,
                     .q, .qp, .w0, .rw_pow, .busy);

  int checks = 0, failures = 0;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ld(param_sel_e s, logic hi, logic [15:0] d);
    @(negedge clk);
    ld_valid = 1'b1; ld_sel = s; ld_hi = hi; ld_data = d;
    @(negedge clk);
    ld_valid = 1'b0;
  endtask

  task automatic chk(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      longint unsigned qq, r, e;
      logic [31:0] qv, w0v, rwm;
      qq  = (t % 3 == 0) ? Q1 : (t % 3 == 1) ? Q2 : (longint'($urandom) | 64'd1);
      qv  = 32'(qq);
      w0v = $urandom % qv;
      r   = longint'($urandom) % qq;
      rwm = to_mont(r, qq);
      if (t % 2 == 0) begin
        ld(PAR_Q, 1'b0, qv[15:0]);  ld(PAR_Q, 1'b1, qv[31:16]);
        ld(PAR_W0, 1'b1, w0v[31:16]); ld(PAR_W0, 1'b0, w0v[15:0]);
        ld(PAR_RW, 1'b0, rwm[15:0]); ld(PAR_RW, 1'b1, rwm[31:16]);
      end else begin
        ld(PAR_RW, 1'b1, rwm[31:16]); ld(PAR_RW, 1'b0, rwm[15:0]);
        ld(PAR_W0, 1'b0, w0v[15:0]); ld(PAR_W0, 1'b1, w0v[31:16]);
        ld(PAR_Q, 1'b1, qv[31:16]);  ld(PAR_Q, 1'b0, qv[15:0]);
      end
      // last load was in the previous cycle: PARAM_LAT - 1 cycles remain
      repeat (PARAM_LAT - 1) @(negedge clk);
      checks++;
      if (busy) begin failures++; $display("busy beyond PARAM_LAT"); end
      chk("q", q, qv);
      chk("w0", w0, w0v);
      chk("qp", qp, neg_qinv(qv));
      e = 1;
      for (int i = 0; i < int'(LOG_NA); i++) begin
        chk($sformatf("rw_pow[%0d]", i), rw_pow[i], to_mont(powmod(r, e, qq), qq));
        e = e * 2;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
