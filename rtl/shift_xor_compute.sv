// shift_xor_compute -- the chaotic-iteration strategy for one 4-bit group
// of the generator state.
//
// The 32-bit input word is read as sixteen 2-bit blocks; block k (k = 1..16)
// is word[2k-1:2k-2].  Each block names one of the four state bits of the
// group.  The output mask w is the XOR of the one-hot codes 1 << block for
// blocks 1..BLOCKS, and also for block BLOCKS+1 when the BBS switch bit
// `pass` is set.  XORing w into the state therefore negates the named bit
// once per occurrence, which is exactly BLOCKS (or BLOCKS+1) chaotic
// iterations with Boolean negation as the iteration function.  Blocks
// above BLOCKS+1 are unused.  All of this follows the published algorithm
// (12 blocks, block 13 gated by one BBS bit).
//
// Interface: purely combinational, word and pass in, w out.
module shift_xor_compute #(
  parameter int unsigned BLOCKS = ciprng_pkg::N_BLOCKS
) (
  input  logic [31:0] word,
  input  logic        pass,
  output logic [3:0]  w
);

  always_comb begin
    w = 4'b0000;
    for (int unsigned i = 0; i < BLOCKS; i++)
      w ^= 4'b0001 << word[2*i +: 2];
    if (pass)
      w ^= 4'b0001 << word[2*BLOCKS +: 2];
  end

  initial assert (BLOCKS < 16) else $error("BLOCKS must leave room for the switched block");

endmodule
