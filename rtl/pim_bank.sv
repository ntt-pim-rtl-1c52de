// pim_bank: the processing-in-memory extension of one DRAM bank.
//
// The cell array, sense amplifiers (row buffer) and column mux of the bank
// are unchanged and sit outside this module, behind the dram_* interface.
// This module adds what the bank needs to run an NTT on its own data:
//   * NB atom buffers: buffer 0 is the primary buffer (the global sense
//     amplifiers), buffers 1..NB-1 are secondary atom buffers;
//   * the compute unit (crossbar, twiddle generator, butterfly unit and
//     parameter registers);
//   * decoding of the command bus: ACT/PRE pass to the array; CU-read (RD)
//     moves one atom column of the open row into a buffer and CU-write (WR)
//     moves a buffer to an atom column, instead of going to chip I/O; C1, C2
//     and parameter loads go to the compute unit.
//
// Timing: commands are not acknowledged. The array returns CU-read data with
// dram_rvalid some fixed cycles (CL) later; a small queue remembers the
// destination buffer of every read in flight. CU-write data is taken from
// the buffer in the command's cycle. The memory controller is responsible
// for spacing commands (DRAM timing, CU latency); assertions flag overlaps
// the hardware cannot handle. The row and column address outputs are the
// command's fields, passed on unchanged: the array decodes them only when
// its act / rd / wr strobe is set.
module pim_bank
  import ntt_pim_pkg::*;
#(
  parameter int unsigned NB = 4,       // atom buffers incl. the primary one
  parameter int unsigned RDQ_DEPTH = 8 // CU-reads in flight
) (
  input  logic             clk,
  input  logic             rst_n,
  input  pim_cmd_t         cmd,
  // DRAM array side (cell array + row buffer + column mux)
  output logic             dram_act,
  output logic             dram_pre,
  output logic [ROW_W-1:0] dram_row,
  output logic             dram_rd,
  output logic             dram_wr,
  output logic [LOG_COLS-1:0] dram_col,
  output atom_t            dram_wdata,
  input  logic             dram_rvalid,
  input  atom_t            dram_rdata,
  // status
  output logic             cu_busy,
  output logic             param_busy
);

  localparam int unsigned QW = $clog2(RDQ_DEPTH);

  atom_t     bufs   [NB];
  logic      st_we  [NB][2];
  elem_idx_t st_idx [NB][2];
  word_t     st_din [NB][2];
  logic      col_we [NB];

  // ---------------- command decode to the array
  always_comb begin
    dram_act   = (cmd.op == CMD_ACT);
    dram_pre   = (cmd.op == CMD_PRE);
    dram_row   = cmd.row;
    dram_rd    = (cmd.op == CMD_RD);
    dram_wr    = (cmd.op == CMD_WR);
    dram_col   = cmd.col;
    dram_wdata = '0;
    for (int i = 0; i < NB; i++)
      if (cmd.buf_a == buf_idx_t'(i)) dram_wdata = bufs[i];
  end

  // ---------------- destination queue of CU-reads in flight
  buf_idx_t      rdq [RDQ_DEPTH];
  logic [QW-1:0] rdq_wp, rdq_rp;
  logic [QW:0]   rdq_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rdq_wp  <= '0;
      rdq_rp  <= '0;
      rdq_cnt <= '0;
      for (int i = 0; i < RDQ_DEPTH; i++) rdq[i] <= '0;
    end else begin
      if (dram_rd) begin
        rdq[rdq_wp] <= cmd.buf_a;
        rdq_wp      <= rdq_wp + 1'b1;
      end
      if (dram_rvalid) rdq_rp <= rdq_rp + 1'b1;
      rdq_cnt <= rdq_cnt + {{QW{1'b0}}, dram_rd} - {{QW{1'b0}}, dram_rvalid};
    end
  end

  always_comb
    for (int i = 0; i < NB; i++)
      col_we[i] = dram_rvalid && (rdq[rdq_rp] == buf_idx_t'(i));

  // ---------------- atom buffers
  for (genvar g = 0; g < NB; g++) begin : g_buf
    atom_buffer u_buf (
      .clk, .rst_n,
      .col_we (col_we[g]),
      .col_din(dram_rdata),
      .cu_we  (st_we[g]),
      .cu_idx (st_idx[g]),
      .cu_din (st_din[g]),
      .dout   (bufs[g])
    );
  end

  // ---------------- compute unit
  compute_unit #(.NB(NB)) u_cu (
    .clk, .rst_n,
    .cmd_valid   (cmd.op == CMD_C1 || cmd.op == CMD_C2),
    .cmd_c1      (cmd.op == CMD_C1),
    .cmd_buf_a   (cmd.buf_a),
    .cmd_buf_b   (cmd.buf_b),
    .cmd_tw_reset(cmd.tw_reset),
    .ld_valid    (cmd.op == CMD_LDP),
    .ld_sel      (cmd.psel),
    .ld_hi       (cmd.phi),
    .ld_data     (cmd.pdata),
    .bufs, .st_we, .st_idx, .st_din,
    .busy        (cu_busy),
    .param_busy
  );

  a_rdq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(dram_rd && !dram_rvalid && 32'(rdq_cnt) == RDQ_DEPTH));
  a_rdq_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                       !(dram_rvalid && rdq_cnt == 0));
  a_buf_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                   (cmd.op inside {CMD_NOP, CMD_ACT, CMD_PRE, CMD_LDP}) ||
                                   (32'(cmd.buf_a) < NB && (cmd.op != CMD_C2 || 32'(cmd.buf_b) < NB)));

endmodule
