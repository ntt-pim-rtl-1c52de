// tb_butterfly_unit: random butterflies streamed one per cycle (with gaps),
// two moduli. Checks x = a + w*b and y = a - w*b mod q against 64-bit
// integer arithmetic, the tag, and that each result appears exactly two
// cycles after its operands.
module tb_butterfly_unit;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  word_t q = 32'd1, qp = '0, a = '0, b = '0, w = '0, x, y;
  logic in_valid = 1'b0, out_valid;
  logic [7:0] in_tag = '0, out_tag;

  butterfly_unit dut (.clk, .rst_n, .q, .qp, .in_valid, .a, .b, .w, .in_tag,
                      .out_valid, .x, .y, .out_tag);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, indexed by tag, with issue cycle
  longint unsigned ex_x [256], ex_y [256];
  longint ex_t [256];

  always @(posedge clk) if (rst_n && out_valid) begin
    checks++;
    if (x != word_t'(ex_x[out_tag]) || y != word_t'(ex_y[out_tag]) ||
        cyc - ex_t[out_tag] != 2) begin
      failures++;
      if (failures < 6)
        $display("tag %0d: x=%0d y=%0d (exp %0d %0d), latency %0d", out_tag, x, y,
                 ex_x[out_tag], ex_y[out_tag], cyc - ex_t[out_tag]);
    end
  end

  int issued = 0;
  initial begin
    longint unsigned qq;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      qq = (pass == 0) ? Q1 : Q2;
      @(negedge clk);
      q  = word_t'(qq);
      qp = neg_qinv(word_t'(qq));
      for (int i = 0; i < 600; i++) begin
        longint unsigned av, bv, wv, t;
        @(negedge clk);
        in_valid = ($urandom % 4) != 0;
        if (in_valid) begin
          av = longint'($urandom) % qq;
          bv = (i < 4) ? qq - 1 : longint'($urandom) % qq;
          wv = (i < 4) ? qq - 1 : longint'($urandom) % qq;
          a = word_t'(av); b = word_t'(bv); w = to_mont(wv, qq);
          in_tag = 8'(issued);
          t = mulmod(wv, bv, qq);
          ex_x[in_tag] = (av + t) % qq;
          ex_y[in_tag] = (av + qq - t) % qq;
          ex_t[in_tag] = cyc;
          issued++;
        end
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (4) @(negedge clk);
    end
    checks++;
    if (checks < 800) begin failures++; $display("too few results"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
