// tb_ntt_workloads: the evaluated workloads, run on five configurations of
// the bank side by side:
//   cfg 0..2 : 2, 4 and 6 atom buffers at 1200 MHz (HBM2E timing);
//   cfg 3, 4 : 2 atom buffers at 600 and 300 MHz. The DRAM timing stays
//              fixed in nanoseconds, so its cycle counts scale with the clock
//              (rounded up); the C1/C2 latencies stay fixed in cycles.
// Each configuration computes NTTs of N = 256, 512, 1024, 2048, 4096 and
// 8192 (random data, modulus 2013265921). Every result is checked at 64
// random output positions against a direct evaluation of the transform,
// the DRAM model checks the timing, and the latency is printed in
// microseconds next to the published value where one is printed.
// Checks on the trends the evaluation reports: at every N, more buffers are
// faster (2 > 4 > 6 buffers), and lowering the clock fourfold (1200 to 300
// MHz) slows the NTT down by less than four times, most of the time being
// DRAM access.
module tb_ntt_workloads;
  import ntt_pim_pkg::*;
  import tb_util_pkg::*;

  localparam int NCFG = 5;
  localparam int NW   = 6;             // N = 2^8 ... 2^13
  localparam int ROWS_M = 40;
  localparam int CFG_NB  [NCFG] = '{2, 4, 6, 2, 2};
  localparam int CFG_MHZ [NCFG] = '{1200, 1200, 1200, 600, 300};

  // HBM2E cycles at 1200 MHz, rescaled to the configuration's clock
  function automatic int unsigned tsc(int unsigned t1200, int unsigned mhz);
    return (t1200 * mhz + 1199) / 1200;
  endfunction

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint lat [NCFG][NW];
  bit     fin [NCFG];

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int unsigned MHZ = CFG_MHZ[c];
    localparam int unsigned TCL = tsc(14, MHZ), TCCD = tsc(2, MHZ), TRP = tsc(14, MHZ),
                            TRAS = tsc(34, MHZ), TRCD = tsc(14, MHZ), TWR = tsc(16, MHZ);

    logic              req_valid = 1'b0, busy, done;
    logic [LOGN_W-1:0] req_logn = '0;
    logic [ROW_W-1:0]  req_base_row = '0;
    word_t             req_q = 32'd1, req_w_n = '0, req_one_m = '0;
    logic              dram_act, dram_pre, dram_rd, dram_wr, dram_rvalid, cu_busy;
    logic [ROW_W-1:0]  dram_row;
    logic [LOG_COLS-1:0] dram_col;
    atom_t             dram_wdata, dram_rdata;
    pim_cmd_t          cmd_bus;

    ntt_pim_top #(.NB(CFG_NB[c]), .T_CL(TCL), .T_CCD(TCCD), .T_RP(TRP), .T_RAS(TRAS),
                  .T_RCD(TRCD), .T_WR(TWR)) dut (
      .clk, .rst_n, .req_valid, .req_logn, .req_base_row, .req_q, .req_w_n,
      .req_one_m, .busy, .done, .dram_act, .dram_pre, .dram_row, .dram_rd,
      .dram_wr, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata, .cmd_bus, .cu_busy);

    dram_bank_model #(.ROWS_M(ROWS_M), .T_CL(TCL), .T_CCD(TCCD), .T_RP(TRP),
                      .T_RAS(TRAS), .T_RCD(TRCD), .T_WR(TWR)) u_dram (
      .clk, .act(dram_act), .pre(dram_pre), .row(dram_row), .rd(dram_rd),
      .wr(dram_wr), .col(dram_col), .wdata(dram_wdata), .rvalid(dram_rvalid),
      .rdata(dram_rdata));

    initial begin
      longint unsigned x [], w, acc;
      int unsigned n, base;
      longint t0;
      @(posedge rst_n);
      for (int wl = 0; wl < NW; wl++) begin
        int L, bad;
        L    = 8 + wl;
        n    = 1 << L;
        base = 1 + c;
        x    = new[n];
        w    = powmod(G1, (Q1 - 1) >> L, Q1);
        for (int i = 0; i < int'(n); i++) x[i] = longint'($urandom) % Q1;
        for (int i = 0; i < int'(n); i++) begin
          int unsigned j;
          j = brv(i, L);
          u_dram.mem[base + i / 256][(i / 8) % 32][i % 8] = word_t'(x[j]);
        end
        @(negedge clk);
        req_valid = 1'b1; req_logn = LOGN_W'(L); req_base_row = ROW_W'(base);
        req_q = word_t'(Q1); req_w_n = to_mont(w, Q1); req_one_m = to_mont(1, Q1);
        t0 = cyc;
        @(negedge clk);
        req_valid = 1'b0;
        while (!done) @(negedge clk);
        lat[c][wl] = cyc - t0;
        bad = 0;
        for (int s = 0; s < 64; s++) begin
          int unsigned k;
          k = (s == 0) ? 0 : (s == 1) ? n - 1 : $urandom % n;
          acc = 0;
          for (int i = 0; i < int'(n); i++)
            acc = (acc + mulmod(x[i], powmod(w, (longint'(i) * k) % n, Q1), Q1)) % Q1;
          if (u_dram.mem[base + k / 256][(k / 8) % 32][k % 8] != word_t'(acc)) bad++;
        end
        checks++;
        if (bad != 0) begin
          failures++;
          $display("config %0d (%0d buffers, %0d MHz) N=%0d: %0d wrong outputs",
                   c, CFG_NB[c], MHZ, n, bad);
        end
      end
      checks++;
      if (u_dram.violations != 0) begin
        failures++;
        $display("config %0d: %0d DRAM timing violations", c, u_dram.violations);
      end
      fin[c] = 1'b1;
    end
  end

  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // published latency in microseconds for 2, 4 and 6 buffers, 0 = none
  function automatic real published_us(int nb, int wl);
    real t [3][5] = '{'{3.90, 14.16, 38.19, 95.84, 230.45},
                      '{2.50,  8.33, 21.62, 53.03, 124.95},
                      '{1.94,  6.58, 16.89, 41.18,  96.62}};
    if (wl > 4) return 0.0;
    return t[nb / 2 - 1][wl];
  endfunction

  initial begin
    foreach (fin[i]) fin[i] = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < NCFG; c++) wait (fin[c]);
    $display("latency in microseconds (measured / published):");
    for (int wl = 0; wl < NW; wl++) begin
      string s;
      s = $sformatf("N=%5d:", 1 << (8 + wl));
      for (int c = 0; c < NCFG; c++) begin
        real us;
        us = real'(lat[c][wl]) / real'(CFG_MHZ[c]);
        if (c < 3 && published_us(CFG_NB[c], wl) > 0.0)
          s = {s, $sformatf("  Nb=%0d %8.2f / %7.2f", CFG_NB[c], us, published_us(CFG_NB[c], wl))};
        else
          s = {s, $sformatf("  Nb=%0d@%0dMHz %8.2f", CFG_NB[c], CFG_MHZ[c], us)};
      end
      $display("%s", s);
      checks++;
      if (!(lat[0][wl] > lat[1][wl] && lat[1][wl] > lat[2][wl])) begin
        failures++;
        $display("N=%0d: more buffers not faster", 1 << (8 + wl));
      end
      checks++;
      // time ratio 300 MHz / 1200 MHz = (cycles300 / 300) / (cycles1200 / 1200)
      if (!(lat[4][wl] * 4 < lat[0][wl] * 4 * 4 && lat[4][wl] * 4 > lat[0][wl])) begin
        failures++;
        $display("N=%0d: 4x lower clock does not give a slowdown between 1x and 4x",
                 1 << (8 + wl));
      end
    end
    $display("slowdown at 300 MHz against 1200 MHz (2 buffers), N=8192: %0.2f",
             (real'(lat[4][NW-1]) / 300.0) / (real'(lat[0][NW-1]) / 1200.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
