// dram_bank_model: behavioural model of the unmodified DRAM bank (cell
// array, bitline sense amplifiers as the row buffer, column mux) as seen by
// the PIM logic. Not synthesizable logic of the design; testbench use only.
//
// ACT copies a row into the row buffer, PRE writes it back and closes it.
// A column read returns the addressed atom of the row buffer T_CL cycles
// later with rvalid; a column write updates the row buffer at once. Every
// command is checked against the timing rules (tRP, tRAS, tRCD, tCCD, tWR)
// and against the row state; each breach is counted in `violations` and
// printed. Only ROWS_M rows are stored; the row address must stay below it.
// Testbenches access `mem` directly to load and inspect data while no row is
// open.
module dram_bank_model
  import ntt_pim_pkg::*;
#(
  parameter int unsigned ROWS_M = 64,
  parameter int unsigned T_CL   = 14,
  parameter int unsigned T_CCD  = 2,
  parameter int unsigned T_RP   = 14,
  parameter int unsigned T_RAS  = 34,
  parameter int unsigned T_RCD  = 14,
  parameter int unsigned T_WR   = 16
) (
  input  logic             clk,
  input  logic             act,
  input  logic             pre,
  input  logic [ROW_W-1:0] row,
  input  logic             rd,
  input  logic             wr,
  input  logic [LOG_COLS-1:0] col,
  input  atom_t            wdata,
  output logic             rvalid,
  output atom_t            rdata
);

  atom_t mem [ROWS_M][COLS];
  atom_t rowbuf [COLS];
  logic  open_v = 1'b0;
  int unsigned open_row = 0;
  longint cyc = 0;
  longint t_act = -1000, t_pre = -1000, t_col = -1000, t_wr = -1000;
  int violations = 0;
  int n_act = 0, n_pre = 0, n_rd = 0, n_wr = 0;

  logic  pv [T_CL];
  atom_t pd [T_CL];

  initial for (int i = 0; i < int'(T_CL); i++) begin pv[i] = 1'b0; pd[i] = '0; end

  assign rvalid = pv[T_CL-1];
  assign rdata  = pd[T_CL-1];

  task automatic viol(input string what);
    violations++;
    $display("DRAM model: %s at cycle %0d", what, cyc);
  endtask

  always @(posedge clk) begin
    for (int i = int'(T_CL) - 1; i > 0; i--) begin pv[i] <= pv[i-1]; pd[i] <= pd[i-1]; end
    pv[0] <= 1'b0;
    if (int'(act) + int'(pre) + int'(rd) + int'(wr) > 1) viol("two commands in one cycle");
    if (act) begin
      n_act++;
      if (open_v) viol("ACT with a row open");
      if (cyc - t_pre < T_RP) viol("tRP");
      if (row >= ROW_W'(ROWS_M)) viol("row outside model");
      else begin
        for (int c = 0; c < int'(COLS); c++) rowbuf[c] = mem[row][c];
        open_v   = 1'b1;
        open_row = row;
      end
      t_act = cyc;
    end
    if (pre) begin
      n_pre++;
      if (!open_v) viol("PRE with no row open");
      else begin
        if (cyc - t_act < T_RAS) viol("tRAS");
        if (cyc - t_wr < T_WR) viol("tWR");
        for (int c = 0; c < int'(COLS); c++) mem[open_row][c] = rowbuf[c];
      end
      open_v = 1'b0;
      t_pre  = cyc;
    end
    if (rd || wr) begin
      if (!open_v) viol("column command with no row open");
      if (cyc - t_act < T_RCD) viol("tRCD");
      if (cyc - t_col < T_CCD) viol("tCCD");
      t_col = cyc;
    end
    if (rd) begin
      n_rd++;
      pv[0] <= 1'b1;
      pd[0] <= rowbuf[col];
    end
    if (wr) begin
      n_wr++;
      rowbuf[col] = wdata;
      t_wr = cyc;
    end
    cyc++;
  end

endmodule
