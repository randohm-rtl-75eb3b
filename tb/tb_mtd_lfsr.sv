// tb_mtd_lfsr: self-checking test of mtd_lfsr.
//
// A reference model computes each next state from the feedback polynomial
// x^16+x^14+x^13+x^11+1 bit by bit (independently of the tap mask constant)
// and the test compares every state. It also checks the zero-seed
// substitution, that step low holds the state, and that the sequence from a
// seed returns to it after exactly 2^16-1 steps and not before.
module tb_mtd_lfsr;
  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_load = 1'b0, step = 1'b0;
  logic [15:0] seed = '0, state, model;
  int checks = 0, failures = 0;

  mtd_lfsr dut (.clk, .rst_n, .seed_load, .seed, .step, .state);

  always #5 clk = ~clk;

  // Galois step: shift right; if the dropped bit is 1, flip the bits for
  // the exponents 16, 14, 13 and 11, i.e. positions 15, 13, 12 and 10.
  function automatic logic [15:0] ref_next(input logic [15:0] s);
    logic [15:0] n;
    n = s >> 1;
    if (s[0]) begin
      n[15] = ~n[15]; n[13] = ~n[13]; n[12] = ~n[12]; n[10] = ~n[10];
    end
    return n;
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int period;
    repeat (2) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    check(state == 16'hACE1, "reset state");
    // Zero seed is substituted.
    seed_load <= 1'b1; seed <= '0; @(posedge clk); seed_load <= 1'b0; @(negedge clk);
    check(state == 16'hACE1, "zero seed substituted");
    // Random seeds, compare 200 steps with the model.
    for (int t = 0; t < 5; t++) begin
      seed = 16'($urandom_range(1, 65535));
      seed_load <= 1'b1; @(posedge clk); seed_load <= 1'b0; @(negedge clk);
      check(state == seed, "seed loaded");
      model = seed;
      for (int i = 0; i < 200; i++) begin
        step <= ($urandom_range(0, 3) != 0);
        @(posedge clk); #1;
        if (step) model = ref_next(model);
        check(state == model, $sformatf("state %0d after seed %h", i, seed));
      end
      step <= 1'b0;
    end
    // Period: maximal length.
    seed = 16'h1234;
    seed_load <= 1'b1; @(posedge clk); seed_load <= 1'b0; step <= 1'b1;
    period = 0;
    do begin
      @(posedge clk); #1; period++;
    end while (state != seed && period < 70000);
    step <= 1'b0;
    check(period == 65535, $sformatf("period %0d", period));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
