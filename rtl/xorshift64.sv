// xorshift64 -- 64-bit XORshift pseudorandom generator, one round per clock.
//
// A 64-bit register x is fed back through three XOR-with-shifted-self
// stages in series:  x ^= x << A;  x ^= x >> B;  x ^= x << C.  The shifts
// are constants, so in hardware they are only wiring and each stage costs
// 64 - shift two-input XORs.  The register, the three chained XOR stages and
// the feedback path follow the published structure.  The published block
// diagram labels the shifters >>, <<, >>, while the published algorithm
// uses <<, >>, <<; this module follows the algorithm (Marsaglia's form).
// The shift amounts are not published: (13, 7, 17) is Marsaglia's
// full-period triple and is this design's choice.
//
// Interface: rst (synchronous, active high) loads seed; on every clock with
// en high, x advances one round.  x is the register itself, so a new value
// is visible one clock after en.  A zero seed locks the generator at zero.
module xorshift64 #(
  parameter int unsigned SHIFT_A = ciprng_pkg::XS_SHIFT_A,
  parameter int unsigned SHIFT_B = ciprng_pkg::XS_SHIFT_B,
  parameter int unsigned SHIFT_C = ciprng_pkg::XS_SHIFT_C
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        en,
  input  logic [63:0] seed,
  output logic [63:0] x
);

  logic [63:0] s1, s2, s3;

  always_comb begin
    s1 = x  ^ (x  << SHIFT_A);
    s2 = s1 ^ (s1 >> SHIFT_B);
    s3 = s2 ^ (s2 << SHIFT_C);
  end

  always_ff @(posedge clk) begin
    if (rst)     x <= seed;
    else if (en) x <= s3;
  end

endmodule
