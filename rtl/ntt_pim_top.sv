// ntt_pim_top: one NTT-PIM bank together with its memory-controller mapper.
//
// A host request (length 2^logn, base row, modulus, root of unity) enters the
// controller-side mapper (ntt_cmd_gen), whose program-ordered DRAM/PIM
// commands are put on the command bus by the timing-aware issuer
// (cmd_timer). The bank side (pim_bank) executes them with its atom buffers
// and compute unit against the unmodified DRAM array, which is outside this
// module: its activate/precharge/column-read/column-write interface is
// brought out as the dram_* ports. done pulses when the last command has
// been issued and all its timing has expired; the polynomial then holds its
// NTT in place. The request fields must stay stable while busy.
//
// Parameters: NB atom buffers including the primary one (4 by default; the
// evaluated configurations are 2, 4 and 6), ROWS rows per bank (32,768), and
// the HBM2E timing in cycles (CL 14, tCCD 2, tRP 14, tRAS 34, tRCD 14,
// tWR 16). The 32-byte atom, 32 columns per row and 32-bit words are fixed in
// ntt_pim_pkg.
module ntt_pim_top
  import ntt_pim_pkg::*;
#(
  parameter int unsigned NB    = 4,
  parameter int unsigned ROWS  = 32768,
  parameter int unsigned T_CL  = 14,
  parameter int unsigned T_CCD = 2,
  parameter int unsigned T_RP  = 14,
  parameter int unsigned T_RAS = 34,
  parameter int unsigned T_RCD = 14,
  parameter int unsigned T_WR  = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  // NTT request (write request carrying the NTT parameters)
  input  logic             req_valid,
  input  logic [LOGN_W-1:0] req_logn,
  input  logic [ROW_W-1:0] req_base_row,
  input  word_t            req_q,
  input  word_t            req_w_n,    // primitive 2^logn-th root, Montgomery form
  input  word_t            req_one_m,  // 2^32 mod q
  output logic             busy,
  output logic             done,       // write response
  // DRAM array of the bank
  output logic             dram_act,
  output logic             dram_pre,
  output logic [ROW_W-1:0] dram_row,
  output logic             dram_rd,
  output logic             dram_wr,
  output logic [LOG_COLS-1:0] dram_col,
  output atom_t            dram_wdata,
  input  logic             dram_rvalid,
  input  atom_t            dram_rdata,
  // observation
  output pim_cmd_t         cmd_bus,
  output logic             cu_busy
);

  logic     g_valid, g_ready, g_busy, g_done, t_idle, param_busy;
  pim_cmd_t g_cmd;
  logic     wait_drain;

  ntt_cmd_gen #(.NB(NB), .ROWS(ROWS)) u_gen (
    .clk, .rst_n,
    .start    (req_valid && !busy),
    .logn     (req_logn),
    .base_row (req_base_row),
    .q        (req_q),
    .w_n      (req_w_n),
    .one_m    (req_one_m),
    .out_valid(g_valid),
    .out_cmd  (g_cmd),
    .out_ready(g_ready),
    .busy     (g_busy),
    .done     (g_done)
  );

  cmd_timer #(
    .NB(NB), .T_CL(T_CL), .T_CCD(T_CCD), .T_RP(T_RP), .T_RAS(T_RAS),
    .T_RCD(T_RCD), .T_WR(T_WR)
  ) u_timer (
    .clk, .rst_n,
    .in_valid(g_valid),
    .in_cmd  (g_cmd),
    .in_ready(g_ready),
    .bus     (cmd_bus),
    .idle    (t_idle)
  );

  pim_bank #(.NB(NB)) u_bank (
    .clk, .rst_n,
    .cmd(cmd_bus),
    .dram_act, .dram_pre, .dram_row, .dram_rd, .dram_wr, .dram_col,
    .dram_wdata, .dram_rvalid, .dram_rdata,
    .cu_busy, .param_busy
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    wait_drain <= 1'b0;
    else if (g_done)               wait_drain <= 1'b1;
    else if (wait_drain && t_idle) wait_drain <= 1'b0;
  end

  always_comb begin
    busy = g_busy || wait_drain;
    done = wait_drain && t_idle;
  end

  // the issue timer must never start a CU command before the parameter
  // registers have settled
  a_no_cu_cmd_while_param: assert property (@(posedge clk) disable iff (!rst_n)
    !((cmd_bus.op == CMD_C1 || cmd_bus.op == CMD_C2) && param_busy));

endmodule
