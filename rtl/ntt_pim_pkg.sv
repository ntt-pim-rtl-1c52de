// ntt_pim_pkg: shared types, constants and arithmetic for the NTT-PIM bank.
//
// The data word is 32 bits and a DRAM atom holds 8 words (32 bytes, HBM2E);
// a row has 32 atom columns (1 KB). These numbers are the published
// architecture parameters. The command set (ACT, PRE, CU-read, CU-write, C1,
// C2, parameter load) follows the command list of the architecture; the
// bit-level encoding of the command word is this design's own choice.
//
// Modular arithmetic uses Montgomery multiplication with R = 2^32. Operands
// are plain residues below an odd modulus q < 2^32; twiddle factors are held
// in Montgomery form (w * R mod q), so mont_mul(x, wR) = x * w mod q and
// mont_mul(wR, vR) = (w * v) R mod q. The constant qp = -q^-1 mod 2^32 is
// derived in hardware from q (newton_step).
package ntt_pim_pkg;

  localparam int unsigned W       = 32;  // coefficient width
  localparam int unsigned NA      = 8;   // words per DRAM atom (32 B / 4 B)
  localparam int unsigned LOG_NA  = 3;
  localparam int unsigned COLS    = 32;  // atom columns per row
  localparam int unsigned LOG_COLS = 5;
  localparam int unsigned BUF_IW  = 3;   // buffer index width
  localparam int unsigned ROW_W   = 15;  // row address width (32,768 rows)
  localparam int unsigned LOGN_W  = 5;   // width of log2(N)

  // Fixed CU command latencies (cycles from issue to results in the buffer).
  localparam int unsigned C1_LAT  = 15;
  localparam int unsigned C2_LAT  = 10;
  // Cycles after the last parameter-load command before a C1/C2 may start.
  localparam int unsigned PARAM_LAT = 8;

  typedef logic [W-1:0]     word_t;
  typedef word_t [NA-1:0]   atom_t;
  typedef logic [BUF_IW-1:0] buf_idx_t;
  typedef logic [LOG_NA-1:0] elem_idx_t;

  // Commands on the shared DRAM command bus (one per cycle).
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,  // row activate
    CMD_PRE = 3'd2,  // precharge
    CMD_RD  = 3'd3,  // CU-read: atom column of open row -> atom buffer
    CMD_WR  = 3'd4,  // CU-write: atom buffer -> atom column of open row
    CMD_C1  = 3'd5,  // intra-atom NTT on one buffer
    CMD_C2  = 3'd6,  // 8-way butterfly on two buffers
    CMD_LDP = 3'd7   // load 16 bits of a CU scalar parameter
  } cmd_op_e;

  // CU scalar parameter selector for CMD_LDP.
  typedef enum logic [1:0] {
    PAR_Q   = 2'd0,
    PAR_W0  = 2'd1,
    PAR_RW  = 2'd2
  } param_sel_e;

  typedef struct packed {
    cmd_op_e          op;
    logic [ROW_W-1:0] row;      // ACT
    logic [LOG_COLS-1:0] col;   // RD / WR
    buf_idx_t         buf_a;    // RD/WR/C1 buffer, C2 upper-operand buffer
    buf_idx_t         buf_b;    // C2 lower-operand buffer
    logic             tw_reset; // C2: restart twiddle sequence at omega_0
    param_sel_e       psel;     // LDP
    logic             phi;      // LDP: 1 = bits 31:16, 0 = bits 15:0
    logic [15:0]      pdata;    // LDP: value from the global buffer
  } pim_cmd_t;

  localparam pim_cmd_t CMD_IDLE = '{op: CMD_NOP, row: '0, col: '0, buf_a: '0,
                                    buf_b: '0, tw_reset: 1'b0, psel: PAR_Q,
                                    phi: 1'b0, pdata: '0};

  // Montgomery product a*b*2^-32 mod q, for a*b < q*2^32 and odd q.
  function automatic word_t mont_mul(input word_t a, input word_t b,
                                     input word_t q, input word_t qp);
    logic [2*W-1:0] t;
    logic [W-1:0]   m;
    logic [2*W:0]   u;
    logic [W:0]     r;
    t = {{W{1'b0}}, a} * {{W{1'b0}}, b};
    m = t[W-1:0] * qp;
    u = {1'b0, t} + ({{(W+1){1'b0}}, m} * {{(W+1){1'b0}}, q});
    r = u[2*W:W];
    if (r >= {1'b0, q}) r = r - {1'b0, q};
    return r[W-1:0];
  endfunction

  function automatic word_t mod_add(input word_t a, input word_t b, input word_t q);
    logic [W:0] s;
    s = {1'b0, a} + {1'b0, b};
    if (s >= {1'b0, q}) s = s - {1'b0, q};
    return s[W-1:0];
  endfunction

  function automatic word_t mod_sub(input word_t a, input word_t b, input word_t q);
    word_t d;
    d = a - b;
    if (a < b) d = d + q;
    return d;
  endfunction

  // One Newton step towards x = q^-1 mod 2^32: x <- x * (2 - q*x).
  // Starting from x = q (correct to 3 bits for odd q), four steps suffice.
  function automatic word_t newton_step(input word_t x, input word_t q);
    word_t e;
    e = 32'd2 - q * x;
    return x * e;
  endfunction

endpackage
