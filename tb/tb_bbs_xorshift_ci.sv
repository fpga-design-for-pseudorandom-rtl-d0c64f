// tb_bbs_xorshift_ci -- end-to-end testbench of the generator top at its
// default parameters (no overrides).
//
// A processor is imitated: it pulses rst, raises ask and samples out.  Every
// 32-bit word is compared with a reference that runs the generator
// algorithm in software and packs two 16-bit values per word (earlier value
// in the upper half).  The first four words are also compared with
// constants computed offline.  The test then streams 2^20 bits (32768
// words) with ask dropping at random, checks each word, and applies the
// frequency (monobit) test of NIST SP 800-22 to the stream.
//
// Mechanisms that must each occur at least once (counted and reported):
// pipeline fill (first word 4 clocks after ask), ask low holding out,
// a mid-stream reset, and, for each of the four 32-bit halves, rounds with
// the BBS switch bit set (13 blocks applied) and clear (12 blocks).
// Throughput: with ask held high a new word must appear every 2 clocks.
module tb_bbs_xorshift_ci;
  logic clk = 1'b0, rst = 1'b1, ask = 1'b0;
  logic [31:0] out;
  int checks = 0, failures = 0;

  bbs_xorshift_ci dut (.clk, .rst, .ask, .out);

  always #5 clk = ~clk;

  localparam int unsigned STREAM_WORDS = 32768;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- reference model of the generator ----
  logic [63:0] mx, my;
  longint unsigned mb;
  logic [15:0] mz;
  int switch_on [4], switch_off [4];

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

  task automatic model_round(output logic [15:0] r);
    logic [31:0] zz [4];
    logic [3:0]  ww [4];
    mx = xs(mx); my = xs(my);
    mb = (mb * mb) % 64'hFFB6_03C9;
    zz[0] = mx[31:0]; zz[1] = mx[63:32]; zz[2] = my[31:0]; zz[3] = my[63:32];
    for (int k = 0; k < 4; k++) begin
      ww[k] = 4'd0;
      for (int i = 0; i <= 11; i++) ww[k] ^= 4'd1 << ((zz[k] >> (i * 2)) & 3);
      if ((mb & (64'd1 << k)) != 0) begin
        ww[k] ^= 4'd1 << ((zz[k] >> 24) & 3);
        switch_on[k]++;
      end else switch_off[k]++;
    end
    mz = mz ^ 16'(ww[0]) ^ (16'(ww[1]) << 4) ^ (16'(ww[2]) << 8) ^ (16'(ww[3]) << 12);
    r = mz;
  endtask

  task automatic model_word(output logic [31:0] r);
    logic [15:0] hi, lo;
    model_round(hi);
    model_round(lo);
    r = {hi, lo};
  endtask

  task automatic check(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  logic [31:0] golden [4] = '{32'h9A28_ADF7, 32'h03AE_2BBE, 32'hF455_DD7B, 32'h718C_914B};
  logic [31:0] exp_w, last;
  int n_fill = 0, n_hold = 0, n_reset = 0, n_rate = 0;
  int cyc, words, ones;
  longint excess;
  real p_value;

  // Wait for out to change, counting clocks.
  task automatic wait_word(output int clocks);
    logic [31:0] prior = out;
    clocks = 0;
    do begin
      @(posedge clk); #1;
      clocks++;
    end while (out === prior && clocks < 50);
  endtask

  initial begin
    for (int k = 0; k < 4; k++) begin switch_on[k] = 0; switch_off[k] = 0; end
    model_reset();
    repeat (2) @(posedge clk);
    #1 rst = 1'b0;
    check(out, 32'd0, "out cleared by reset");

    // pipeline fill: two pipeline clocks, then two values packed
    ask = 1'b1;
    wait_word(cyc);
    checks++;
    if (cyc != 4) begin
      failures++;
      $display("FAIL first word after %0d clocks, expected 4", cyc);
    end else n_fill++;
    model_word(exp_w);
    check(out, exp_w, "word 0 (model)");
    check(out, golden[0], "word 0 (offline)");

    // full rate: one word every 2 clocks while ask stays high
    for (int i = 1; i < 4; i++) begin
      wait_word(cyc);
      checks++;
      if (cyc != 2) begin
        failures++;
        $display("FAIL word %0d after %0d clocks, expected 2", i, cyc);
      end else n_rate++;
      model_word(exp_w);
      check(out, exp_w, $sformatf("word %0d (model)", i));
      check(out, golden[i], $sformatf("word %0d (offline)", i));
    end

    // ask low holds the word for as long as it stays low
    @(negedge clk) ask = 1'b0;
    last = out;
    repeat (7) begin
      @(posedge clk); #1;
      check(out, last, "hold while ask low");
    end
    n_hold++;

    // mid-stream reset: the sequence restarts from the seeds
    @(negedge clk) begin rst = 1'b1; ask = 1'b1; end
    @(posedge clk); #1 rst = 1'b0;
    n_reset++;
    check(out, 32'd0, "out cleared by mid-stream reset");
    model_reset();
    wait_word(cyc);
    model_word(exp_w);
    check(out, exp_w, "first word after mid-stream reset");
    check(out, golden[0], "first word after mid-stream reset (offline)");

    // long stream with random ask pauses; monobit test on the words
    words = 0; ones = 0;
    while (words < STREAM_WORDS) begin
      @(negedge clk) ask = ($urandom_range(0, 7) != 0);
      if (!ask) begin
        last = out;
        @(posedge clk); #1;
        check(out, last, "hold during stream");
        n_hold++;
        continue;
      end
      @(posedge clk); #1;
      if (out !== last) begin
        model_word(exp_w);
        check(out, exp_w, $sformatf("stream word %0d", words));
        ones += $countones(out);
        words++;
        last = out;
      end
    end
    // Frequency (monobit) test: S_obs = |#ones - #zeros| / sqrt(n),
    // p = erfc(S_obs / sqrt(2)); pass when p >= 0.01 (S_obs < 2.5758).
    excess = 2 * longint'(ones) - longint'(words) * 32;
    p_value = real'(excess < 0 ? -excess : excess) / $sqrt(real'(words) * 32.0);
    $display("monobit: %0d ones in %0d bits, S_obs = %f", ones, words * 32, p_value);
    checks++;
    if (p_value >= 2.5758) begin
      failures++;
      $display("FAIL monobit frequency test");
    end

    $display("mechanisms: fill=%0d full_rate=%0d hold=%0d reset=%0d", n_fill, n_rate, n_hold, n_reset);
    for (int k = 0; k < 4; k++)
      $display("half %0d: block 13 applied %0d times, skipped %0d times", k + 1, switch_on[k], switch_off[k]);
    checks++;
    if (n_fill == 0 || n_rate == 0 || n_hold == 0 || n_reset == 0) begin
      failures++;
      $display("FAIL a mechanism never occurred");
    end
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (switch_on[k] == 0 || switch_off[k] == 0) begin
        failures++;
        $display("FAIL BBS switch %0d never took both values", k + 1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
