// tb_bbs -- self-checking testbench for bbs.
//
// First a tiny Blum integer (m = 7 * 11 = 77, seed 3) whose sequence
// 9, 4, 16, 25, 9 is worked out by hand; then the full 32-bit modulus
// 65519 * 65479 for 1000 random-enable steps against a 64-bit software
// model, including the 4-bit output t and the hold when en is low.
module tb_bbs;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [31:0] seed, modulus, b;
  logic [3:0]  t;
  int checks = 0, failures = 0;

  bbs dut (.clk, .rst, .en, .seed, .modulus, .b, .t);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic [31:0] hand [5] = '{32'd9, 32'd4, 32'd16, 32'd25, 32'd9};
  longint unsigned ref_b;

  initial begin
    seed = 32'd3; modulus = 32'd77;
    @(posedge clk); #1 rst = 1'b0;
    check(b, 32'd3, "seed loaded");
    modulus = 32'd5;   // m is a register: a changed input must not matter
    en = 1'b1;
    foreach (hand[i]) begin
      @(posedge clk); #1;
      check(b, hand[i], $sformatf("m=77 step %0d", i));
      check({28'd0, t}, hand[i] & 32'hF, $sformatf("m=77 t %0d", i));
    end

    seed = 32'd74565; modulus = 32'hFFB6_03C9; rst = 1'b1;
    @(posedge clk); #1 rst = 1'b0;
    ref_b = 64'(seed);
    for (int i = 0; i < 1000; i++) begin
      en = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (en) ref_b = (ref_b * ref_b) % 64'(modulus);
      check(b, 32'(ref_b), $sformatf("step %0d", i));
      check({28'd0, t}, 32'(ref_b & 64'hF), $sformatf("t step %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
