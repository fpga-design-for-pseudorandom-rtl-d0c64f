// bbs_xorshift_ci -- the CIPRNG generator as attached to a 32-bit
// processor bus: ports clk, rst, ask and out[31:0].
//
// The port list is the published system schematic, where a soft processor
// drives rst and ask from two output ports and reads out through a 32-bit
// input port.  Inside, ciprng_core produces one 16-bit value per clock;
// this module packs two consecutive values into one 32-bit word, the
// earlier one in out[31:16] and the later one in out[15:0].  The packing,
// the meaning of ask and the reset polarity are not published and are this
// design's choices:
//   * ask is a level run-enable.  While ask is high the generator runs and
//     out changes every second clock (once the 2-clock pipeline has filled,
//     the first word appears 4 clocks after ask rises: two to fill the
//     pipeline and two to collect the 16-bit halves).  While ask is low
//     every register holds, so a slow reader sees a stable word.
//   * rst is synchronous and active high; it reloads all seeds and clears
//     out to zero.
// Throughput while ask is high: 16 bits per clock, i.e. 32 bits per two
// clocks on out.
module bbs_xorshift_ci #(
  parameter logic [63:0] XS1_SEED = ciprng_pkg::XS1_SEED_DEF,
  parameter logic [63:0] XS2_SEED = ciprng_pkg::XS2_SEED_DEF,
  parameter logic [31:0] BBS_SEED = ciprng_pkg::BBS_SEED_DEF,
  parameter logic [31:0] BBS_M    = ciprng_pkg::BBS_M_DEF,
  parameter logic [15:0] Z_SEED   = ciprng_pkg::Z_SEED_DEF
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        ask,
  output logic [31:0] out
);

  logic [15:0] z;
  logic        z_valid;
  logic [15:0] upper;      // first value of the word being packed
  logic        have_upper;

  ciprng_core #(
    .XS1_SEED(XS1_SEED), .XS2_SEED(XS2_SEED),
    .BBS_SEED(BBS_SEED), .BBS_M(BBS_M), .Z_SEED(Z_SEED)
  ) u_core (
    .clk, .rst, .en(ask), .z, .z_valid
  );

  // z changes exactly at the clock edges where ask is high and z_valid is
  // set, so each value is taken once, at the edge that replaces it.
  always_ff @(posedge clk) begin
    if (rst) begin
      upper      <= '0;
      have_upper <= 1'b0;
      out        <= '0;
    end else if (ask && z_valid) begin
      if (!have_upper) begin
        upper      <= z;
        have_upper <= 1'b1;
      end else begin
        out        <= {upper, z};
        have_upper <= 1'b0;
      end
    end
  end

  // A processor reading while ask is low must see a stable word.
  a_hold: assert property (@(posedge clk) disable iff (rst) !ask |=> $stable(out))
    else $error("out changed while ask was low");

endmodule
