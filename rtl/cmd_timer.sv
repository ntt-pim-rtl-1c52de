// cmd_timer: issues the program-ordered command stream on the command bus.
//
// The memory controller knows every latency in advance, so it spaces the
// commands itself and the bank never acknowledges anything. This block takes
// the commands in program order (valid/ready) and puts each on the bus in
// the first cycle all of its constraints hold, one command per cycle:
//   ACT        tRP after PRE
//   PRE        tRAS after ACT, tWR after the last CU-write
//   RD / WR    tRCD after ACT, tCCD after the previous RD/WR,
//              and the buffer must hold its final data (see below)
//   C1 / C2    compute unit idle, parameters settled (PARAM_LAT after the
//              last LDP), operand buffers hold their final data
//   LDP        compute unit idle
// A buffer holds final data CL+1 cycles after its CU-read and C1_LAT/C2_LAT
// cycles after the C1/C2 that uses it. Because issue is in order but does
// not wait for earlier commands to complete, reads for the next operation
// overlap the compute of the current one whenever the program offers them
// (pipelining over several buffers).
//
// Each constraint is a down-counter loaded with (delay - 1) at issue; a
// command may go when its counters are zero. tWR is counted from the
// CU-write command (no write-burst delay is modelled), and no read-to-
// precharge or write-to-read spacing is applied: neither is in the timing
// table. The timing values are the published HBM2E ones (cycles).
module cmd_timer
  import ntt_pim_pkg::*;
#(
  parameter int unsigned NB    = 4,
  parameter int unsigned T_CL   = 14,
  parameter int unsigned T_CCD  = 2,
  parameter int unsigned T_RP   = 14,
  parameter int unsigned T_RAS  = 34,
  parameter int unsigned T_RCD  = 14,
  parameter int unsigned T_WR   = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  input  pim_cmd_t in_cmd,
  output logic     in_ready,
  output pim_cmd_t bus,        // CMD_NOP when nothing is issued
  output logic     idle        // nothing held and every counter expired
);

  localparam int unsigned CW = 6;

  logic      held_v;
  pim_cmd_t  held;
  logic [CW-1:0] cd_act, cd_pre, cd_col, cd_cu, cd_par;
  logic [CW-1:0] cd_buf [NB];
  logic      ok, go;

  function automatic logic [CW-1:0] dly(input int unsigned t);
    return (t > 0) ? CW'(t - 1) : '0;
  endfunction
  function automatic logic [CW-1:0] maxc(input logic [CW-1:0] a, input logic [CW-1:0] b);
    return (a > b) ? a : b;
  endfunction

  always_comb begin
    logic ba_ok, bb_ok;
    ba_ok = 1'b1;
    bb_ok = 1'b1;
    for (int i = 0; i < NB; i++) begin
      if (held.buf_a == buf_idx_t'(i) && cd_buf[i] != 0) ba_ok = 1'b0;
      if (held.buf_b == buf_idx_t'(i) && cd_buf[i] != 0) bb_ok = 1'b0;
    end
    unique case (held.op)
      CMD_ACT: ok = (cd_act == 0);
      CMD_PRE: ok = (cd_pre == 0);
      CMD_RD,
      CMD_WR:  ok = (cd_col == 0) && ba_ok;
      CMD_C1:  ok = (cd_cu == 0) && (cd_par == 0) && ba_ok;
      CMD_C2:  ok = (cd_cu == 0) && (cd_par == 0) && ba_ok && bb_ok;
      CMD_LDP: ok = (cd_cu == 0);
      default: ok = 1'b1;
    endcase
    go       = held_v && ok;
    in_ready = !held_v || go;
    bus      = go ? held : CMD_IDLE;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_v <= 1'b0;
      held   <= CMD_IDLE;
      cd_act <= '0;
      cd_pre <= '0;
      cd_col <= '0;
      cd_cu  <= '0;
      cd_par <= '0;
      for (int i = 0; i < NB; i++) cd_buf[i] <= '0;
    end else begin
      // count down
      cd_act <= (cd_act != 0) ? cd_act - 1'b1 : '0;
      cd_pre <= (cd_pre != 0) ? cd_pre - 1'b1 : '0;
      cd_col <= (cd_col != 0) ? cd_col - 1'b1 : '0;
      cd_cu  <= (cd_cu  != 0) ? cd_cu  - 1'b1 : '0;
      cd_par <= (cd_par != 0) ? cd_par - 1'b1 : '0;
      for (int i = 0; i < NB; i++)
        cd_buf[i] <= (cd_buf[i] != 0) ? cd_buf[i] - 1'b1 : '0;
      // load on issue
      if (go) begin
        unique case (held.op)
          CMD_ACT: begin
            cd_col <= maxc(cd_col, dly(T_RCD));
            cd_pre <= dly(T_RAS);
          end
          CMD_PRE: cd_act <= dly(T_RP);
          CMD_RD: begin
            cd_col <= dly(T_CCD);
            for (int i = 0; i < NB; i++)
              if (held.buf_a == buf_idx_t'(i)) cd_buf[i] <= dly(T_CL + 1);
          end
          CMD_WR: begin
            cd_col <= dly(T_CCD);
            cd_pre <= maxc((cd_pre != 0) ? cd_pre - 1'b1 : '0, dly(T_WR));
          end
          CMD_C1: begin
            cd_cu <= dly(C1_LAT);
            for (int i = 0; i < NB; i++)
              if (held.buf_a == buf_idx_t'(i)) cd_buf[i] <= dly(C1_LAT);
          end
          CMD_C2: begin
            cd_cu <= dly(C2_LAT);
            for (int i = 0; i < NB; i++)
              if (held.buf_a == buf_idx_t'(i) || held.buf_b == buf_idx_t'(i))
                cd_buf[i] <= dly(C2_LAT);
          end
          CMD_LDP: cd_par <= dly(PARAM_LAT);
          default: ;
        endcase
      end
      // take the next command
      if (in_ready) begin
        held_v <= in_valid;
        if (in_valid) held <= in_cmd;
      end
    end
  end

  always_comb begin
    logic bz;
    bz = 1'b0;
    for (int i = 0; i < NB; i++) if (cd_buf[i] != 0) bz = 1'b1;
    idle = !held_v && cd_act == 0 && cd_pre == 0 && cd_col == 0 &&
           cd_cu == 0 && cd_par == 0 && !bz;
  end

endmodule
