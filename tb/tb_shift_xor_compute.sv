// tb_shift_xor_compute -- self-checking testbench for shift_xor_compute.
//
// The reference counts, for each of the four state bits, how many of the
// applied two-bit blocks name it; the bit is flipped when that count is
// odd.  Directed words (all blocks zero, all blocks three, only block 13
// set) and 3000 random words are checked with pass low and high.
module tb_shift_xor_compute;
  logic [31:0] word;
  logic        pass;
  logic [3:0]  w;
  int checks = 0, failures = 0;
  logic [31:0] rand_word;
  logic        rand_pass;

  shift_xor_compute dut (.word, .pass, .w);

  function automatic logic [3:0] model(logic [31:0] v, logic p);
    int cnt [4] = '{0, 0, 0, 0};
    logic [3:0] r;
    for (int k = 1; k <= 13; k++)
      if (k <= 12 || p) cnt[(v >> (2 * (k - 1))) & 3]++;
    for (int b = 0; b < 4; b++) r[b] = cnt[b][0];
    return r;
  endfunction

  task automatic apply(logic [31:0] v, logic p, logic [3:0] exp);
    word = v; pass = p; #1;
    checks++;
    if (w !== exp) begin
      failures++;
      $display("FAIL word=%h pass=%b: got %b expected %b", v, p, w, exp);
    end
  endtask

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // 12 blocks of 0 -> bit 0 flipped 12 times -> 0; block 13 adds one more.
    apply(32'h0000_0000, 1'b0, 4'b0000);
    apply(32'h0000_0000, 1'b1, 4'b0001);
    // all blocks 3: 12 flips of bit 3, 13 with pass
    apply(32'hFFFF_FFFF, 1'b0, 4'b0000);
    apply(32'hFFFF_FFFF, 1'b1, 4'b1000);
    // only block 13 = 2 (bits 25:24), others 0
    apply(32'h0200_0000, 1'b0, 4'b0000);
    apply(32'h0200_0000, 1'b1, 4'b0100);
    // blocks 14..16 must be ignored
    apply(32'hFC00_0000, 1'b0, 4'b0000);
    // block 1 = 1, rest 0: bit0 flipped 11 times, bit1 once
    apply(32'h0000_0001, 1'b0, 4'b0011);
    for (int i = 0; i < 3000; i++) begin
      rand_word = $urandom();
      rand_pass = 1'($urandom_range(0, 1));
      apply(rand_word, rand_pass, model(rand_word, rand_pass));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
