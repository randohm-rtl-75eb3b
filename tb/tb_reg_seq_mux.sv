// tb_reg_seq_mux: self-checking test of the register sequence multiplexer.
//
// For many triggers it streams N_REGS random words (sometimes with gaps),
// then checks, from the observed load strobes only:
//   - every register was loaded exactly once (the load order is a
//     permutation of the registers),
//   - the read port returns word k for rd_idx = k (the read side undoes the
//     permutation),
//   - the trigger-to-loaded latency is 2*N_REGS cycles when the stream never
//     stalls,
//   - the load order changes between triggers and, over many triggers,
//     covers all of the N_REGS! orders,
//   - re-seeding with the same TRNG value reproduces the same order sequence.
module tb_reg_seq_mux;
  localparam int N = 4;
  localparam int W = 8;
  localparam int TRIGGERS = 400;

  logic clk = 1'b0, rst_n = 1'b0;
  logic seed_load = 1'b0, trigger = 1'b0;
  logic [15:0] seed = '0;
  logic stream_ready, stream_valid = 1'b0, busy, loaded;
  logic [W-1:0] stream_data = '0, rd_data;
  logic [1:0] rd_idx = '0;
  logic [N-1:0] ld;
  int checks = 0, failures = 0;

  reg_seq_mux #(.N_REGS(N), .REG_W(W)) dut (
    .clk, .rst_n, .seed_load, .seed, .trigger, .stream_ready, .stream_valid,
    .stream_data, .busy, .loaded, .rd_idx, .rd_data, .ld);

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

  // One reload: returns the observed order (word k went to register ord[k])
  // packed as a code, and the latency.
  task automatic reload(input bit stalls, output int code, output int lat);
    logic [W-1:0] words [N];
    int ord [N];
    int k, cyc;
    bit seen [N];
    for (int i = 0; i < N; i++) begin words[i] = W'($urandom); seen[i] = 0; end
    @(negedge clk); trigger = 1'b1;
    @(negedge clk); trigger = 1'b0;
    cyc = 1; k = 0;
    while (!loaded) begin
      stream_valid = stream_ready && (!stalls || ($urandom_range(0, 2) != 0));
      stream_data  = stream_valid ? words[k] : W'($urandom);
      #1;
      if (stream_valid) begin
        check($onehot(ld), "one strobe per accepted word");
        for (int r = 0; r < N; r++) if (ld[r]) ord[k] = r;
        k++;
      end else check(ld == '0, "no strobe without a word");
      @(negedge clk); cyc++;
      stream_valid = 1'b0;
      check(cyc < 100, "load finishes");
      if (cyc >= 100) break;
    end
    lat = cyc - 1;
    check(k == N, "N words accepted");
    for (int i = 0; i < N; i++) seen[ord[i]] = 1;
    for (int i = 0; i < N; i++) check(seen[i], $sformatf("register %0d loaded", i));
    for (int i = 0; i < N; i++) begin
      rd_idx = 2'(i); #1;
      check(rd_data == words[i], $sformatf("word %0d read back", i));
    end
    code = 0;
    for (int i = 0; i < N; i++) code = code * N + ord[i];
  endtask

  initial begin
    int code, lat, prev, changes, distinct;
    int first_run [20];
    bit hit [256];
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(!loaded && !busy, "idle after reset");
    seed = 16'h5EED;
    seed_load = 1'b1; @(negedge clk); seed_load = 1'b0;
    prev = -1; changes = 0;
    for (int i = 0; i < 256; i++) hit[i] = 0;
    for (int t = 0; t < TRIGGERS; t++) begin
      reload(t % 3 == 1, code, lat);
      if (t % 3 != 1) check(lat == 2 * N, $sformatf("latency %0d", lat));
      if (code != prev) changes++;
      prev = code;
      hit[code] = 1;
      if (t < 20) first_run[t] = code;
    end
    distinct = 0;
    for (int i = 0; i < 256; i++) distinct += hit[i];
    $display("distinct orders %0d of 24, changes %0d of %0d", distinct, changes, TRIGGERS);
    check(distinct == 24, "all 24 orders are reached");
    check(changes > TRIGGERS / 2, "order changes between triggers");
    // Same seed again: same sequence of orders.
    seed_load = 1'b1; @(negedge clk); seed_load = 1'b0;
    for (int t = 0; t < 20; t++) begin
      reload(1'b1, code, lat);
      check(code == first_run[t], "order sequence reproducible from seed");
    end
    // Trigger while busy is ignored: the load still takes N words.
    @(negedge clk); trigger = 1'b1; @(negedge clk); trigger = 1'b1;
    @(negedge clk); trigger = 1'b0;
    check(busy, "busy during reload");
    reload(1'b0, code, lat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
