// atom_buffer: one DRAM-atom-sized buffer (NA words of W bits).
//
// Buffer 0 of a bank stands for the global sense amplifiers (the primary
// atom buffer); the others are the added secondary atom buffers. Both kinds
// hold exactly one atom. The buffer has a single access port, used in any
// cycle either by the column path (a CU-read fills the whole atom from the
// row buffer) or by the compute unit, which writes up to two words per cycle
// (the two results of a butterfly) through its store units. The whole atom
// is always visible on dout: the column path drains it for a CU-write and
// the load units select words from it.
//
// Timing: writes take effect at the clock edge; dout shows the new contents
// from the next cycle. Reset clears the buffer.
// The buffer is described as flip-flops; a real bank would build it from
// SRAM cells with inverters for the complementary signals, which is a
// process-specific circuit and not modelled here.
module atom_buffer
  import ntt_pim_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  // column path: whole-atom write
  input  logic      col_we,
  input  atom_t     col_din,
  // compute unit: two word-write lanes
  input  logic      cu_we  [2],
  input  elem_idx_t cu_idx [2],
  input  word_t     cu_din [2],
  output atom_t     dout
);

  atom_t mem;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mem <= '0;
    end else if (col_we) begin
      mem <= col_din;
    end else begin
      for (int l = 0; l < 2; l++)
        if (cu_we[l]) mem[cu_idx[l]] <= cu_din[l];
    end
  end

  assign dout = mem;

  // single port: the column path and the CU never use the buffer together
  a_single_port: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(col_we && (cu_we[0] || cu_we[1])));
  // the two butterfly results always go to different words
  a_lane_distinct: assert property (@(posedge clk) disable iff (!rst_n)
                                    !(cu_we[0] && cu_we[1] && cu_idx[0] == cu_idx[1]));

endmodule
