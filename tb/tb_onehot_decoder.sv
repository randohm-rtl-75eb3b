// tb_onehot_decoder: exhaustive self-checking test of the 2:4 decoder with
// enable: every index with enable low (all outputs 0) and high (only output
// idx set), including the case drawn in the reference diagram, input 2'b10
// selecting output 2.
module tb_onehot_decoder;
  logic en;
  logic [1:0] idx;
  logic [3:0] onehot;
  int checks = 0, failures = 0;

  onehot_decoder #(.N(4)) dut (.en, .idx, .onehot);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int i = 0; i < 4; i++) begin
        en = e[0]; idx = 2'(i); #1;
        checks++;
        if (onehot != ((e != 0) ? (4'b0001 << i) : 4'b0000)) begin
          failures++;
          $display("FAIL: en=%0d idx=%0d onehot=%b", e, i, onehot);
        end
      end
    en = 1'b1; idx = 2'b10; #1;
    checks++;
    if (onehot != 4'b0100) begin failures++; $display("FAIL: 10 -> %b", onehot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
