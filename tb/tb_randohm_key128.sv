// tb_randohm_key128: the 128-bit AES master-key case. The top is built with
// 128 one-bit target registers (one flip-flop per key bit, the granularity at
// which the key register is scrambled) and PR rate 1, the strongest setting:
// every encryption is followed by a fresh random permutation of the 128 key
// flip-flops.
//
// For 12 encryptions it streams the key bit by bit, checks that the cipher
// side reads back every bit in its original position, that each reload uses
// every flip-flop exactly once, that a reload takes 2*128 cycles at full
// rate, and that consecutive permutations differ and move most bits.
module tb_randohm_key128;
  localparam int N = 128;

  logic clk = 1'b0, rst_n = 1'b0;
  logic trng_valid = 1'b0, mitigation_trigger = 1'b0;
  logic [15:0] trng_seed = '0;
  logic stream_ready, stream_valid = 1'b0, target_valid, mtd_busy, mtd_trigger;
  logic [0:0] stream_data = '0, rd_data;
  logic enc_done = 1'b0;
  logic [6:0] rd_idx = '0;
  logic [0:0] enc_count;
  logic [15:0] pending_hits;
  logic [N-1:0] key;
  int checks = 0, failures = 0;

  randohm_top #(.WORDS(N), .WORD_W(1), .PR_RATE(1)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pos [N], prev [N];

  // Stream the key while the store asks for it; record where each bit went.
  task automatic reload(output int lat);
    int k;
    bit used [N];
    k = 0; lat = 0;
    for (int r = 0; r < N; r++) used[r] = 0;
    while (!target_valid || k == 0) begin
      stream_valid = stream_ready;
      stream_data  = key[k % N];
      #1;
      if (stream_valid) begin
        logic [N-1:0] ld;
        ld = dut.g_seq.u_store.ld;
        check($onehot(ld), "one flip-flop loaded per bit");
        for (int r = 0; r < N; r++) if (ld[r]) begin pos[k] = r; check(!used[r], "flip-flop reused"); used[r] = 1; end
        k++;
      end
      @(negedge clk); lat++;
      stream_valid = 1'b0;
    end
    check(k == N, "128 bits streamed");
  endtask

  initial begin
    int lat, moved;
    for (int w = 0; w < N / 32; w++) key[w*32 +: 32] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    trng_seed = 16'($urandom_range(1, 65535));
    trng_valid = 1'b1; @(negedge clk); trng_valid = 1'b0;
    mitigation_trigger = 1'b1; @(negedge clk); mitigation_trigger = 1'b0;
    for (int e = 0; e < 12; e++) begin
      reload(lat);
      if (e > 0) check(lat == 2 * N, $sformatf("reload latency %0d", lat));
      moved = 0;
      if (e > 0) for (int i = 0; i < N; i++) moved += (pos[i] != prev[i]);
      if (e > 0) check(moved > N / 2, $sformatf("only %0d of 128 bits moved", moved));
      for (int i = 0; i < N; i++) prev[i] = pos[i];
      // Cipher reads the key in order.
      for (int i = 0; i < N; i++) begin
        rd_idx = 7'(i); #1;
        check(rd_data == key[i], $sformatf("key bit %0d", i));
      end
      @(negedge clk);
      enc_done = 1'b1; @(negedge clk); enc_done = 1'b0;
      // PR rate 1: the next reload starts at once.
      @(negedge clk);
      check(!target_valid && mtd_busy, $sformatf("reload after every encryption (valid %b busy %b trig %b)", target_valid, mtd_busy, mtd_trigger));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
