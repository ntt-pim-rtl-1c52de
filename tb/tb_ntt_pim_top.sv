// tb_ntt_pim_top: end-to-end test of the NTT-PIM bank with its mapper, at
// the top's default parameters (4 atom buffers, 32,768-row address space,
// HBM2E timing).
//
// For each case a random polynomial is stored in bit-reversed order in the
// DRAM model, the NTT request is issued and, after done, every coefficient
// is compared with a direct O(N^2) evaluation X[k] = sum x[n] w^(nk) mod q
// computed here. The cases cover all three mapping regimes (N = 8 ... 4096),
// two moduli, and nonzero base rows; a neighbouring row is checked to be
// untouched. The DRAM model checks every command against the timing rules.
// The test also counts how often each mechanism of the design occurred:
// C1 and C2 commands, C2 across rows, row switches, compute overlapped with
// CU-reads/writes (pipelining), stalls inside C1, C2 continuing the twiddle
// sequence, and parameter loads; a mechanism that never occurs is a failure.
// The cycle count of each NTT is printed next to the published latency for
// four buffers (1.2 GHz).
module tb_ntt_pim_top;
  import ntt_pim_pkg::*;

  localparam int ROWS_M = 64;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             req_valid = 1'b0;
  logic [LOGN_W-1:0] req_logn = '0;
  logic [ROW_W-1:0] req_base_row = '0;
  word_t            req_q = 32'd1, req_w_n = '0, req_one_m = '0;
  logic             busy, done;
  logic             dram_act, dram_pre, dram_rd, dram_wr, dram_rvalid;
  logic [ROW_W-1:0] dram_row;
  logic [LOG_COLS-1:0] dram_col;
  atom_t            dram_wdata, dram_rdata;
  pim_cmd_t         cmd_bus;
  logic             cu_busy;

  ntt_pim_top dut (
    .clk, .rst_n, .req_valid, .req_logn, .req_base_row, .req_q, .req_w_n,
    .req_one_m, .busy, .done,
    .dram_act, .dram_pre, .dram_row, .dram_rd, .dram_wr, .dram_col,
    .dram_wdata, .dram_rvalid, .dram_rdata, .cmd_bus, .cu_busy
  );

  dram_bank_model #(.ROWS_M(ROWS_M)) u_dram (
    .clk, .act(dram_act), .pre(dram_pre), .row(dram_row), .rd(dram_rd),
    .wr(dram_wr), .col(dram_col), .wdata(dram_wdata), .rvalid(dram_rvalid),
    .rdata(dram_rdata)
  );

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // watchdog
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters (observed on the command bus)
  int n_c1 = 0, n_c2 = 0, n_c2_xrow = 0, n_act = 0, n_overlap = 0;
  int n_c1_stall = 0, n_tw_cont = 0, n_ldp = 0;
  int unsigned buf_row [8];
  int unsigned cur_row = 0;
  always @(posedge clk) if (rst_n) begin
    unique case (cmd_bus.op)
      CMD_ACT: begin n_act++; cur_row = cmd_bus.row; end
      CMD_RD: begin
        buf_row[cmd_bus.buf_a] = cur_row;
        if (cu_busy) n_overlap++;
      end
      CMD_WR: if (cu_busy) n_overlap++;
      CMD_C1: n_c1++;
      CMD_C2: begin
        n_c2++;
        if (buf_row[cmd_bus.buf_a] != buf_row[cmd_bus.buf_b]) n_c2_xrow++;
        if (!cmd_bus.tw_reset) n_tw_cont++;
      end
      CMD_LDP: n_ldp++;
      default: ;
    endcase
    if (dut.u_bank.u_cu.act && dut.u_bank.u_cu.r_c1 && !dut.u_bank.u_cu.issue &&
        dut.u_bank.u_cu.opn != dut.u_bank.u_cu.e_total)
      n_c1_stall++;
  end

  // ---------------- modular helpers (plain 64-bit arithmetic)
  function automatic longint unsigned mulmod(longint unsigned a, longint unsigned b,
                                             longint unsigned q);
    return (a * b) % q;
  endfunction
  function automatic longint unsigned powmod(longint unsigned b, longint unsigned e,
                                             longint unsigned q);
    longint unsigned r = 1;
    b = b % q;
    while (e != 0) begin
      if (e[0]) r = mulmod(r, b, q);
      b = mulmod(b, b, q);
      e = e >> 1;
    end
    return r;
  endfunction
  function automatic int unsigned brv(int unsigned i, int unsigned bits);
    int unsigned r = 0;
    for (int b = 0; b < int'(bits); b++) r |= ((i >> b) & 1) << (bits - 1 - b);
    return r;
  endfunction

  function automatic word_t get_word(int unsigned base, int unsigned idx);
    return u_dram.mem[base + idx / 256][(idx / 8) % 32][idx % 8];
  endfunction
  task automatic set_word(int unsigned base, int unsigned idx, word_t v);
    u_dram.mem[base + idx / 256][(idx / 8) % 32][idx % 8] = v;
  endtask

  // published latency with four buffers, ns (N = 256 ... 4096)
  function automatic real published_ns(int unsigned n);
    case (n)
      256: return 2500.0;   512: return 8330.0;   1024: return 21620.0;
      2048: return 53030.0; 4096: return 124950.0;
      default: return 0.0;
    endcase
  endfunction

  task automatic run_case(int unsigned logn, longint unsigned q, longint unsigned gen,
                          int unsigned base);
    int unsigned n = 1 << logn;
    longint unsigned w, x [], xr [];
    longint t0, t1;
    atom_t guard_lo, guard_hi;
    int bad = 0;
    x  = new[n];
    xr = new[n];
    w  = powmod(gen, (q - 1) / n, q);
    for (int i = 0; i < int'(n); i++) x[i] = longint'($urandom) % q;
    for (int i = 0; i < int'(n); i++) set_word(base, i, word_t'(x[brv(i, logn)]));
    for (int c = 0; c < 32; c++) begin
      u_dram.mem[base + (n + 255) / 256][c] = {8{$urandom}};
      if (base > 0) u_dram.mem[base - 1][c] = {8{$urandom}};
    end
    guard_hi = u_dram.mem[base + (n + 255) / 256][5];
    guard_lo = (base > 0) ? u_dram.mem[base - 1][7] : '0;
    // reference: direct evaluation
    for (int k = 0; k < int'(n); k++) begin
      longint unsigned acc = 0, wk = powmod(w, k, q), p = 1;
      for (int j = 0; j < int'(n); j++) begin
        acc = (acc + mulmod(x[j], p, q)) % q;
        p = mulmod(p, wk, q);
      end
      xr[k] = acc;
    end
    // request
    @(negedge clk);
    req_logn     = LOGN_W'(logn);
    req_base_row = ROW_W'(base);
    req_q        = word_t'(q);
    req_w_n      = word_t'((w << 32) % q);
    req_one_m    = word_t'((64'd1 << 32) % q);
    req_valid    = 1'b1;
    t0 = cycle;
    @(negedge clk);
    req_valid = 1'b0;
    while (!done) @(negedge clk);
    t1 = cycle;
    repeat (2) @(negedge clk);
    for (int k = 0; k < int'(n); k++) begin
      checks++;
      if (longint'(get_word(base, k)) != xr[k]) begin
        failures++;
        bad++;
        if (bad < 5) $display("N=%0d q=%0d X[%0d] = %0d, expected %0d", n, q, k,
                              get_word(base, k), xr[k]);
      end
    end
    checks++;
    if (u_dram.mem[base + (n + 255) / 256][5] != guard_hi ||
        (base > 0 && u_dram.mem[base - 1][7] != guard_lo)) begin
      failures++;
      $display("N=%0d: a row outside the polynomial was modified", n);
    end
    if (published_ns(n) > 0.0)
      $display("N=%0d q=%0d: %0d cycles = %0.2f us at 1.2 GHz (published, 4 buffers: %0.2f us), %0d errors",
               n, q, t1 - t0, real'(t1 - t0) / 1200.0, published_ns(n) / 1000.0, bad);
    else
      $display("N=%0d q=%0d: %0d cycles, %0d errors", n, q, t1 - t0, bad);
  endtask

  initial begin
    int c1_before, c2_before;
    for (int r = 0; r < ROWS_M; r++)
      for (int c = 0; c < 32; c++) u_dram.mem[r][c] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // q1 = 15*2^27+1 (generator 31), q2 = 119*2^23+1 (generator 3)
    run_case(3,  64'd2013265921, 64'd31, 0);
    run_case(4,  64'd998244353,  64'd3,  2);
    run_case(6,  64'd2013265921, 64'd31, 1);
    c1_before = n_c1; c2_before = n_c2;
    run_case(8,  64'd2013265921, 64'd31, 0);
    // command counts of one N = 256 NTT: N/8 C1 and (N/16)(log N - 3) C2
    checks++;
    if (n_c1 - c1_before != 32 || n_c2 - c2_before != 16 * 5) begin
      failures++;
      $display("N=256: %0d C1 / %0d C2, expected 32 / 80", n_c1 - c1_before, n_c2 - c2_before);
    end
    run_case(9,  64'd998244353,  64'd3,  3);
    run_case(10, 64'd2013265921, 64'd31, 0);
    run_case(11, 64'd998244353,  64'd3,  5);
    run_case(12, 64'd2013265921, 64'd31, 0);

    checks++;
    if (u_dram.violations != 0) begin
      failures++;
      $display("%0d DRAM timing/state violations", u_dram.violations);
    end
    $display("mechanisms: C1 %0d, C2 %0d, C2 across rows %0d, ACT %0d, RD/WR during compute %0d, C1 stall cycles %0d, C2 continuing twiddles %0d, parameter loads %0d",
             n_c1, n_c2, n_c2_xrow, n_act, n_overlap, n_c1_stall, n_tw_cont, n_ldp);
    checks += 8;
    if (n_c1 == 0)       begin failures++; $display("C1 never issued"); end
    if (n_c2 == 0)       begin failures++; $display("C2 never issued"); end
    if (n_c2_xrow == 0)  begin failures++; $display("no inter-row C2"); end
    if (n_act == 0)      begin failures++; $display("no row activation"); end
    if (n_overlap == 0)  begin failures++; $display("no pipelining overlap"); end
    if (n_c1_stall == 0) begin failures++; $display("no C1 stall"); end
    if (n_tw_cont == 0)  begin failures++; $display("no twiddle continuation"); end
    if (n_ldp == 0)      begin failures++; $display("no parameter load"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
