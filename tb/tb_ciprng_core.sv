// tb_ciprng_core -- self-checking testbench for ciprng_core at its default
// seeds and modulus.
//
// The reference is the generator algorithm written out sequentially: step
// both XORshifts and the BBS, split the XORshift words into four 32-bit
// halves, build each 4-bit mask from 12 two-bit blocks plus block 13 when the
// matching BBS bit is set, and XOR the masks into the 16-bit state.  The
// first four values are also compared with constants computed offline.
// Timing checks: z_valid rises exactly two enabled clocks after reset, and
// from then on every enabled clock yields a new value; en low holds z.
module tb_ciprng_core;
  logic clk = 1'b0, rst = 1'b1, en = 1'b0;
  logic [15:0] z;
  logic        z_valid;
  int checks = 0, failures = 0;

  ciprng_core dut (.clk, .rst, .en, .z, .z_valid);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model ----
  logic [63:0] mx, my;
  longint unsigned mb;
  logic [15:0] mz;

  function automatic logic [63:0] xs(logic [63:0] v);
    v ^= v << 13; v ^= v >> 7; v ^= v << 17;
    return v;
  endfunction

  task automatic model_reset();
    mx = 64'd88172645463325252;
    my = 64'h2545_F491_4F6C_DD1D;
    mb = 64'd74565;
    mz = 16'hACE1;
  endtask

  task automatic model_round();
    logic [31:0] zz [4];
    logic [3:0]  ww [4];
    mx = xs(mx);
    my = xs(my);
    mb = (mb * mb) % 64'hFFB6_03C9;
    zz[0] = mx[31:0]; zz[1] = mx[63:32]; zz[2] = my[31:0]; zz[3] = my[63:32];
    for (int k = 0; k < 4; k++) begin
      ww[k] = 4'd0;
      for (int i = 0; i <= 11; i++) ww[k] ^= 4'd1 << ((zz[k] >> (i * 2)) & 3);
      if ((mb & (64'd1 << k)) != 0) ww[k] ^= 4'd1 << ((zz[k] >> 24) & 3);
    end
    mz = mz ^ 16'(ww[0]) ^ (16'(ww[1]) << 4) ^ (16'(ww[2]) << 8) ^ (16'(ww[3]) << 12);
  endtask

  task automatic check(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [15:0] golden [4] = '{16'h9A28, 16'hADF7, 16'h03AE, 16'h2BBE};
  logic [15:0] prev;
  int n;

  initial begin
    model_reset();
    @(posedge clk); #1 rst = 1'b0;
    check(16'(z_valid), 16'd0, "z_valid low after reset");
    en = 1'b1;
    @(posedge clk); #1;
    check(16'(z_valid), 16'd0, "z_valid low after one clock");
    @(posedge clk); #1;
    check(16'(z_valid), 16'd1, "z_valid high after two clocks");
    model_round();
    check(z, mz, "first value (model)");
    check(z, golden[0], "first value (offline)");
    for (int i = 1; i < 4; i++) begin
      prev = z;
      @(posedge clk); #1;
      model_round();
      check(z, golden[i], $sformatf("value %0d (offline)", i));
      check(z, mz, $sformatf("value %0d (model)", i));
    end
    // random enable: a new value exactly on every enabled clock
    n = 0;
    for (int i = 0; i < 4000; i++) begin
      en = ($urandom_range(0, 4) != 0);
      prev = z;
      @(posedge clk); #1;
      if (en) begin model_round(); n++; end
      check(z, mz, $sformatf("stream %0d", i));
    end
    $display("%0d values compared in the random-enable stream", n);
    // reset mid-stream restarts the sequence
    rst = 1'b1; en = 1'b1;
    @(posedge clk); #1 rst = 1'b0;
    check(z, 16'hACE1, "state seed after reset");
    check(16'(z_valid), 16'd0, "z_valid cleared by reset");
    repeat (2) @(posedge clk); #1;
    check(z, golden[0], "first value after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
