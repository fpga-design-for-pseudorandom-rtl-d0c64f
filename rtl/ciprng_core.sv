// ciprng_core -- chaotic-iteration pseudorandom generator CIPRNG(BBS,
// XORshift), producing a 16-bit word per clock.
//
// Two 64-bit XORshift generators supply the chaotic strategy and a 32-bit
// Blum Blum Shub generator supplies four switch bits.  Each XORshift word is
// split into two 32-bit halves (low half first); half j drives a
// shift_xor_compute unit that builds a 4-bit negation mask from 12 two-bit
// blocks, plus a 13th block when BBS bit j is set.  The four masks are
// placed side by side (half 1 -> state bits [3:0], ..., half 4 -> [15:12])
// and XORed into the 16-bit state z, which is also the output.  This is
// the published algorithm and block diagram.
//
// Timing.  As published, a round takes two clocks: in the first the three
// generators step in parallel (their results are the registers inside
// xorshift64 and bbs); in the second the masks are combined with the
// state.  The two stages overlap, so after a 2-clock fill one new 16-bit
// value appears every clock (16 bits x f_clk).  z_valid rises when the
// first value reaches z.  The run enable `en`, which freezes all registers
// when low, and z_valid are this design's own additions.
//
// Interface: rst is synchronous, active high, and loads every seed (the
// seeds and the BBS modulus are parameters, see ciprng_pkg).
module ciprng_core #(
  parameter logic [63:0] XS1_SEED = ciprng_pkg::XS1_SEED_DEF,
  parameter logic [63:0] XS2_SEED = ciprng_pkg::XS2_SEED_DEF,
  parameter logic [31:0] BBS_SEED = ciprng_pkg::BBS_SEED_DEF,
  parameter logic [31:0] BBS_M    = ciprng_pkg::BBS_M_DEF,
  parameter logic [15:0] Z_SEED   = ciprng_pkg::Z_SEED_DEF
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  output logic [15:0] z,
  output logic        z_valid
);

  logic [63:0] x1, x2;     // xorshift1 and xorshift2 outputs
  logic [31:0] bbs_state;
  logic [3:0]  t;          // BBS switch bits
  logic [31:0] half [4];   // z1..z4 of the published algorithm
  logic [3:0]  w    [4];   // w1..w4
  logic        s1_valid;   // stage-1 registers hold a generated round

  // Stage 1: the three generators.
  xorshift64 u_xorshift1 (.clk, .rst, .en, .seed(XS1_SEED), .x(x1));
  xorshift64 u_xorshift2 (.clk, .rst, .en, .seed(XS2_SEED), .x(x2));
  bbs u_bbs (.clk, .rst, .en, .seed(BBS_SEED), .modulus(BBS_M),
             .b(bbs_state), .t(t));

  assign half[0] = x1[31:0];
  assign half[1] = x1[63:32];
  assign half[2] = x2[31:0];
  assign half[3] = x2[63:32];

  // Stage 2: masks and state update.
  for (genvar j = 0; j < 4; j++) begin : g_group
    shift_xor_compute u_sxc (.word(half[j]), .pass(t[j]), .w(w[j]));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      z        <= Z_SEED;
      z_valid  <= 1'b0;
    end else if (en) begin
      s1_valid <= 1'b1;
      if (s1_valid) begin
        z       <= z ^ {w[3], w[2], w[1], w[0]};
        z_valid <= 1'b1;
      end
    end
  end

  // z can only carry a generated value once stage 1 has produced one.
  a_valid_order: assert property (@(posedge clk) disable iff (rst) z_valid |-> s1_valid)
    else $error("z_valid set before the generators produced a round");

endmodule
