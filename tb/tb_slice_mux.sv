// tb_slice_mux: self-checking test of the target slice multiplexer.
//
// For many triggers it streams DEPTH random words and checks: on the cycle
// after a trigger every copy is cleared; exactly one copy is selected; only
// that copy ever holds non-zero data and its contents equal the words sent
// (data_o[k] is word k); serial_o is the first word; the trigger-to-loaded
// latency is DEPTH cycles at full rate; a trigger while loading is
// ignored; and every one of the N_SLICES copies gets chosen over the run.
module tb_slice_mux;
  localparam int NS = 4;
  localparam int D  = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_load = 1'b0, trigger = 1'b0;
  logic [15:0] seed = '0;
  logic stream_ready, stream_valid = 1'b0, busy, loaded;
  logic [0:0] stream_data = '0, serial_o;
  logic [NS-1:0] slice_sel;
  logic [D-1:0][0:0] data_o;
  int checks = 0, failures = 0;

  slice_mux #(.N_SLICES(NS), .DEPTH(D), .DATA_W(1)) dut (
    .clk, .rst_n, .seed_load, .seed, .trigger, .stream_ready, .stream_valid,
    .stream_data, .busy, .loaded, .slice_sel, .data_o, .serial_o);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits [NS];
    int chosen, cyc, k;
    logic [D-1:0] bits;
    for (int s = 0; s < NS; s++) hits[s] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    seed = 16'($urandom_range(1, 65535));
    seed_load = 1'b1; @(negedge clk); seed_load = 1'b0;
    for (int t = 0; t < 200; t++) begin
      bits = D'($urandom);
      if (t == 0) bits = 6'b001011;  // reference stream 110100, last bit first
      trigger = 1'b1; @(negedge clk); trigger = 1'b0;
      check(data_o == '0 && serial_o == '0, "all copies cleared on trigger");
      for (int s = 0; s < NS; s++) check(dut.sr[s] == '0, "copy cleared");
      check($onehot(slice_sel), "exactly one copy selected");
      chosen = 0;
      for (int s = 0; s < NS; s++) if (slice_sel[s]) chosen = s;
      hits[chosen]++;
      cyc = 1; k = 0;
      while (!loaded && cyc < 100) begin
        stream_valid = stream_ready && ((t % 4 != 3) || $urandom_range(0, 1));
        stream_data  = stream_valid ? bits[k] : 1'($urandom);
        if (t == 5 && k == 2) trigger = 1'b1;   // ignored while loading
        @(negedge clk); cyc++;
        trigger = 1'b0;
        if (stream_valid) k++;
        stream_valid = 1'b0;
      end
      if (t % 4 != 3) check(cyc - 1 == D, $sformatf("latency %0d", cyc - 1));
      check(k == D, "DEPTH words accepted");
      for (int j = 0; j < D; j++) check(data_o[j] == bits[j], $sformatf("word %0d", j));
      check(serial_o == bits[0], "serial output");
      for (int s = 0; s < NS; s++)
        if (s != chosen) check(dut.sr[s] == '0, "unselected copy stays clear");
        else             check(dut.sr[s] == bits, "selected copy holds the data");
    end
    for (int s = 0; s < NS; s++) begin
      $display("slice %0d chosen %0d times", s, hits[s]);
      check(hits[s] > 10, $sformatf("slice %0d used", s));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
