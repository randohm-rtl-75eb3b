// tb_randohm_top: end-to-end test of randohm_top in both hardware forms of
// the defence: the register sequence multiplexer (the default) and the
// target slice multiplexer. Each runs 200 encryptions of the cipher model
// in randohm_env, with PR rate 16, external and held requests and stream
// gaps.
module tb_randohm_top;
  int c0, f0, c1, f1;
  bit d0, d1;

  randohm_env #(.DEFAULTS(1'b0), .MODE(randohm_pkg::MTD_REG_SEQUENCE), .ENCS(200))
    u_seq (.checks(c0), .failures(f0), .finished(d0));
  randohm_env #(.DEFAULTS(1'b0), .MODE(randohm_pkg::MTD_TARGET_SLICE), .ENCS(200))
    u_slice (.checks(c1), .failures(f1), .finished(d1));

  initial begin
    #2ms;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1);
    $finish;
  end
endmodule
