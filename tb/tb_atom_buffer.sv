// tb_atom_buffer: random whole-atom writes and two-lane word writes
// (distinct words, never together with an atom write), compared each cycle
// with a reference copy of the buffer; also checks the reset value.
module tb_atom_buffer;
  import ntt_pim_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      col_we = 1'b0;
  atom_t     col_din = '0;
  logic      cu_we  [2];
  elem_idx_t cu_idx [2];
  word_t     cu_din [2];
  atom_t     dout;

  atom_buffer dut (.clk, .rst_n, .col_we, .col_din, .cu_we, .cu_idx, .cu_din, .dout);

  int checks = 0, failures = 0;
  atom_t ref_m = '0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int col_writes = 0, lane_writes = 0;
    for (int l = 0; l < 2; l++) begin cu_we[l] = 1'b0; cu_idx[l] = '0; cu_din[l] = '0; end
    repeat (2) @(negedge clk);
    checks++;
    if (dout != '0) begin failures++; $display("reset value wrong"); end
    rst_n = 1'b1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      col_we = ($urandom % 5) == 0;
      for (int i = 0; i < int'(NA); i++) col_din[i] = $urandom;
      cu_idx[0] = elem_idx_t'($urandom);
      cu_idx[1] = cu_idx[0] + elem_idx_t'(1 + $urandom % (NA - 1));
      for (int l = 0; l < 2; l++) begin
        cu_we[l]  = !col_we && ($urandom % 2 == 0);
        cu_din[l] = $urandom;
      end
      @(posedge clk);
      if (col_we) begin ref_m = col_din; col_writes++; end
      for (int l = 0; l < 2; l++)
        if (cu_we[l]) begin ref_m[cu_idx[l]] = cu_din[l]; lane_writes++; end
      #1;
      checks++;
      if (dout != ref_m) begin
        failures++;
        if (failures < 6) $display("cycle %0d: buffer contents differ", t);
      end
    end
    checks++;
    if (col_writes < 100 || lane_writes < 100) begin failures++; $display("too few writes"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
