// tb_xorshift64 -- self-checking testbench for xorshift64.
//
// Checks the first three outputs from Marsaglia's published xorshift64
// sequence (seed 88172645463325252, shifts 13/7/17), then 500 further steps
// against a software model, that en low holds the state, that each new
// value appears one clock after en, and that rst reloads the seed.
module tb_xorshift64;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [63:0] seed, x;
  int checks = 0, failures = 0;

  xorshift64 dut (.clk, .rst, .en, .seed, .x);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] model(logic [63:0] v);
    v ^= v << 13;
    v ^= v >> 7;
    v ^= v << 17;
    return v;
  endfunction

  task automatic check(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [63:0] known [3] = '{64'd8748534153485358512, 64'd3040900993826735515,
                             64'd3453997556048239312};
  logic [63:0] ref_x;

  initial begin
    seed = 64'd88172645463325252;
    @(posedge clk); #1 rst = 1'b0;
    check(x, seed, "seed after reset");
    for (int i = 0; i < 3; i++) begin
      en = 1'b1; @(posedge clk); #1;
      check(x, known[i], $sformatf("published value %0d", i));
    end
    ref_x = x;
    for (int i = 0; i < 500; i++) begin
      en = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (en) ref_x = model(ref_x);
      check(x, ref_x, $sformatf("step %0d", i));
    end
    // reset with a new seed
    seed = 64'h0123_4567_89AB_CDEF; rst = 1'b1; en = 1'b1;
    @(posedge clk); #1 rst = 1'b0;
    check(x, seed, "reload");
    @(posedge clk); #1;
    check(x, model(seed), "first step after reload");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
