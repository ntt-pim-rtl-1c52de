// butterfly_unit: pipelined modular butterfly of the compute unit.
//
// One butterfly per cycle: x = (a + w*b) mod q, y = (a - w*b) mod q, where
// the twiddle w is given in Montgomery form (w*2^32 mod q) so a single
// Montgomery product yields w*b mod q. Two ModAdd/Sub operations and one
// ModMult make up the unit, as in the architecture; the modular multiplier
// uses Montgomery reduction, as published.
//
// Pipeline (two register stages, result combinational in the third cycle):
//   cycle t   : in_valid with a, b, w, tag      -> operand registers
//   cycle t+1 : ModMult w*b                      -> product register
//   cycle t+2 : ModAdd / ModSub, out_valid with x, y, tag
// The caller writes x and y back at the end of cycle t+2, so a result is
// readable three cycles after its operands were read. This depth is what
// gives the published C2 (10 cycles) and C1 (15 cycles) latencies.
//
// Design choice: the twiddle multiplies operand b before the add/sub
// (Cooley-Tukey form). The butterfly drawing and the C1/C2 pseudo-code place
// the multiply after the subtraction, (a - b)*w; with the small-span-first
// stage order and the per-index twiddles of the dataflow graph, only the
// Cooley-Tukey form computes an NTT, so that form is built here.
module butterfly_unit
  import ntt_pim_pkg::*;
#(
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  word_t            q,       // odd modulus
  input  word_t            qp,      // -q^-1 mod 2^32
  input  logic             in_valid,
  input  word_t            a,
  input  word_t            b,
  input  word_t            w,       // twiddle, Montgomery form
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output word_t            x,       // a + w*b
  output word_t            y,       // a - w*b
  output logic [TAG_W-1:0] out_tag
);

  // stage 1: operand registers (the two BU operand registers + twiddle)
  logic             s1_v;
  word_t            s1_a, s1_b, s1_w;
  logic [TAG_W-1:0] s1_tag;
  // stage 2: product register
  logic             s2_v;
  word_t            s2_a, s2_t;
  logic [TAG_W-1:0] s2_tag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0;
      s2_v <= 1'b0;
    end else begin
      s1_v <= in_valid;
      s2_v <= s1_v;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_a   <= a;
      s1_b   <= b;
      s1_w   <= w;
      s1_tag <= in_tag;
    end
    if (s1_v) begin
      s2_a   <= s1_a;
      s2_t   <= mont_mul(s1_b, s1_w, q, qp);
      s2_tag <= s1_tag;
    end
  end

  always_comb begin
    out_valid = s2_v;
    x         = mod_add(s2_a, s2_t, q);
    y         = mod_sub(s2_a, s2_t, q);
    out_tag   = s2_tag;
  end

endmodule
