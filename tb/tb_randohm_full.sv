// tb_randohm_full: randohm_top exactly as configured by default (register
// sequence multiplexer, 4 words of 8 bits, PR rate 16), with no parameter
// overrides, taken through 400 encryptions by the cipher model in
// randohm_env.
module tb_randohm_full;
  int c, f;
  bit d;

  randohm_env #(.DEFAULTS(1'b1), .ENCS(400)) u_env (.checks(c), .failures(f), .finished(d));

  initial begin
    #4ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c, f + 1);
    $finish;
  end

  initial begin
    wait (d);
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
