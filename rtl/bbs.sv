// bbs -- Blum Blum Shub generator with a 32-bit modulus, one step per clock.
//
// Register b holds the state and register m the modulus M, loaded at reset
// and never changed afterwards.  Each step zero-extends b to 64 bits (so
// the square cannot overflow), squares it and reduces it modulo m; the
// result is written back to b.  The low OUT_BITS bits of the state are the
// generator's output t.  The b / m registers, the 64-bit extension, the
// square and the % unit and the feedback follow the published structure; the
// published design states one step per clock.  The text names both three
// and four output bits; four are used here because the generator downstream
// needs four switch bits.  The squarer and the 64-by-32 remainder are one
// combinational path: this is the design's critical path.
//
// Interface: rst (synchronous, active high) loads b <= seed and
// m <= modulus.  With en high, b <= b*b mod m at the clock edge; b and t are
// valid one clock after en.  For a proper BBS, modulus = p*q with p, q
// primes equal to 3 mod 4, and seed coprime to the modulus.
module bbs #(
  parameter int unsigned WIDTH    = ciprng_pkg::BBS_W,
  parameter int unsigned OUT_BITS = ciprng_pkg::N_SWITCH
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                en,
  input  logic [WIDTH-1:0]    seed,
  input  logic [WIDTH-1:0]    modulus,
  output logic [WIDTH-1:0]    b,
  output logic [OUT_BITS-1:0] t
);

  logic [WIDTH-1:0]   m;
  logic [2*WIDTH-1:0] b_extend;
  logic [2*WIDTH-1:0] square;
  logic [2*WIDTH-1:0] remainder;

  always_comb begin
    b_extend  = {{WIDTH{1'b0}}, b};
    square    = b_extend * b_extend;
    remainder = square % {{WIDTH{1'b0}}, m};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      b <= seed;
      m <= modulus;
    end else if (en) begin
      b <= remainder[WIDTH-1:0];
    end
  end

  assign t = b[OUT_BITS-1:0];

endmodule
