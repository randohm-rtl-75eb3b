// tb_pr_rate_ctrl: self-checking test of the PR-rate controller at its
// default rate of 16.
//
// It drives random encryption completions and external requests, with a
// busy window after each issued trigger, and compares the trigger pulses
// with a reference that counts encryptions since the last request: a
// request is due on the 16th encryption or on an external request, and is
// issued at the first cycle the store is not busy. It checks that no request
// is lost and that a held request is counted.
module tb_pr_rate_ctrl;
  logic clk = 1'b0, rst_n = 1'b0;
  logic enc_done = 1'b0, ext_trigger = 1'b0, busy = 1'b0, trigger;
  logic [3:0] enc_count;
  logic [15:0] pending_hits;
  int checks = 0, failures = 0;

  pr_rate_ctrl dut (.clk, .rst_n, .enc_done, .ext_trigger, .busy, .trigger,
                    .enc_count, .pending_hits);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int since = 0, owed = 0, busy_left = 0, issued = 0, rate_triggers = 0;
    int exp_trig;
    bit req;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Plain rate check: 16 encryptions, never busy -> one trigger after the
    // 16th, on the next cycle.
    for (int e = 0; e < 16; e++) begin
      enc_done = 1'b1; @(negedge clk); enc_done = 1'b0;
      check(trigger == (e == 15), $sformatf("trigger after encryption %0d", e + 1));
      @(negedge clk);
      check(!trigger, "single-cycle pulse");
    end
    // Random traffic against the reference.
    exp_trig = 0;
    for (int c = 0; c < 20000; c++) begin
      enc_done    = ($urandom_range(0, 2) == 0);
      ext_trigger = ($urandom_range(0, 400) == 0);
      busy        = (busy_left > 0);
      req = ext_trigger || (enc_done && since == 15);
      if (req) since = 0; else if (enc_done) since++;
      if (req && !ext_trigger) rate_triggers++;
      @(negedge clk);
      if (busy_left > 0) busy_left--;
      // Reference for the issue decision made at this edge.
      if (req || owed > 0) begin
        if (!busy && exp_trig == 0) begin
          exp_trig = 1; owed = 0;
        end else owed = 1;
      end else exp_trig = 0;
      if (exp_trig == 1) begin
        check(trigger, $sformatf("trigger expected at cycle %0d", c));
        issued++;
        busy_left = $urandom_range(3, 12);
        exp_trig = 2;
      end else begin
        check(!trigger, $sformatf("no trigger at cycle %0d", c));
        if (exp_trig == 2) exp_trig = 0;
      end
      check(enc_count == 4'(since), "encryption count");
    end
    $display("issued %0d triggers, %0d by rate, pending holds %0d", issued, rate_triggers, pending_hits);
    check(rate_triggers > 100, "rate triggers happened");
    check(pending_hits > 0, "held requests happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
