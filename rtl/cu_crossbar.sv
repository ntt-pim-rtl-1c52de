// cu_crossbar: load/store units and crossbar of the compute unit.
//
// Each atom buffer has a load/store unit; a crossbar joins them to the two
// butterfly operand registers so that any word of any buffer can feed either
// operand, and each butterfly result can be stored to any word of any
// buffer. With NB buffers the crossbar grows with NB, which is the extra
// hardware that pipelining over more buffers costs.
//
// Loads (combinational): operand a = buffer[a_buf][a_idx],
//                        operand b = buffer[b_buf][b_idx].
// Stores (combinational enables, the buffer writes at the clock edge):
//   result x -> buffer[x_buf][x_idx] on lane 0,
//   result y -> buffer[y_buf][y_idx] on lane 1, both when st_valid.
// The store word index and data of a lane are broadcast to every buffer
// (only the write enable is decoded), so those outputs are copies of the
// x/y inputs; this is the usual way to build a write demux and saves NB-1
// sets of multiplexers.
module cu_crossbar
  import ntt_pim_pkg::*;
#(
  parameter int unsigned NB = 4
) (
  input  atom_t     bufs   [NB],
  input  buf_idx_t  a_buf,
  input  elem_idx_t a_idx,
  input  buf_idx_t  b_buf,
  input  elem_idx_t b_idx,
  output word_t     a,
  output word_t     b,
  input  logic      st_valid,
  input  buf_idx_t  x_buf,
  input  elem_idx_t x_idx,
  input  word_t     x,
  input  buf_idx_t  y_buf,
  input  elem_idx_t y_idx,
  input  word_t     y,
  output logic      st_we  [NB][2],
  output elem_idx_t st_idx [NB][2],
  output word_t     st_din [NB][2]
);

  always_comb begin
    a = '0;
    b = '0;
    for (int i = 0; i < NB; i++) begin
      if (a_buf == buf_idx_t'(i)) a = bufs[i][a_idx];
      if (b_buf == buf_idx_t'(i)) b = bufs[i][b_idx];
    end
    for (int i = 0; i < NB; i++) begin
      st_we[i][0]  = st_valid && (x_buf == buf_idx_t'(i));
      st_idx[i][0] = x_idx;
      st_din[i][0] = x;
      st_we[i][1]  = st_valid && (y_buf == buf_idx_t'(i));
      st_idx[i][1] = y_idx;
      st_din[i][1] = y;
    end
  end

endmodule
