// randohm_env: end-to-end stimulus and checking for randohm_top, shared by
// the top-level testbenches.
//
// It plays the three parties outside the top: a TRNG (one random seed), the
// secured data source (streams the secret words in order whenever asked,
// with random gaps) and a cipher that, per encryption, reads every secret
// word while target_valid is high and then pulses enc_done. It checks that
//   - every word the cipher reads equals the secret,
//   - a re-randomisation happens after exactly PR_RATE encryptions,
//   - an external trigger forces a reload, and one that arrives during a
//     reload is held and issued afterwards,
//   - the physical arrangement (register order, or chosen slice) changes
//     across reloads,
// and counts how often each of these mechanisms occurred; a mechanism that
// never occurred counts as a failure. DEFAULTS = 1 instantiates the top with
// no parameter overrides at all.
module randohm_env #(
  parameter bit                     DEFAULTS = 1'b1,
  parameter randohm_pkg::mtd_mode_e MODE     = randohm_pkg::MTD_REG_SEQUENCE,
  parameter int unsigned            ENCS     = 200
) (
  output int checks,
  output int failures,
  output bit finished
);
  localparam int unsigned WORDS   = 4;
  localparam int unsigned WORD_W  = 8;
  localparam int unsigned PR_RATE = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic trng_valid = 1'b0, mitigation_trigger = 1'b0;
  logic [15:0] trng_seed = '0;
  logic stream_ready, stream_valid, target_valid, mtd_busy, mtd_trigger;
  logic [WORD_W-1:0] stream_data, rd_data;
  logic enc_done = 1'b0;
  logic [1:0] rd_idx = '0;
  logic [3:0] enc_count;
  logic [15:0] pending_hits;

  if (DEFAULTS) begin : g_dut
    randohm_top dut (.*);
  end else begin : g_dut
    randohm_top #(.MTD_MODE(MODE)) dut (.*);
  end

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL[%s]: %s", MODE.name(), what); end
  endtask

  // Secured data source: word k of the secret on the k-th transfer.
  logic [WORD_W-1:0] secret [WORDS];
  int src_k = 0, stalls = 0;
  always_ff @(posedge clk) begin
    if (stream_valid && stream_ready) src_k <= (src_k == WORDS - 1) ? 0 : src_k + 1;
    if (stream_ready && !stream_valid) stalls <= stalls + 1;
  end
  always_comb begin
    stream_data = secret[src_k];
  end
  logic gap;
  always_ff @(posedge clk) gap <= ($urandom_range(0, 4) == 0);
  assign stream_valid = stream_ready && !gap;

  // Arrangement observed per reload.
  int reloads = 0, changes = 0, last_arr = -1, cur_arr = 0, ld_k = 0;
  if (!DEFAULTS && MODE == randohm_pkg::MTD_TARGET_SLICE) begin : g_obs
    always @(posedge clk) if (mtd_busy && !$past(mtd_busy)) begin
      for (int s = 0; s < 4; s++)
        if (g_dut.dut.g_slice.u_store.slice_sel[s]) cur_arr = s;
      reloads++;
      if (cur_arr != last_arr) changes++;
      last_arr = cur_arr;
    end
  end else begin : g_obs
    always @(posedge clk) begin
      logic [WORDS-1:0] ld;
      ld = g_dut.dut.g_seq.u_store.ld;
      for (int r = 0; r < WORDS; r++)
        if (ld[r]) begin
          cur_arr = cur_arr * WORDS + r;
          ld_k++;
        end
      if (ld_k == WORDS) begin
        reloads++;
        if (cur_arr != last_arr) changes++;
        last_arr = cur_arr;
        cur_arr = 0;
        ld_k = 0;
      end
    end
  end

  int triggers = 0, enc_since = 0, rate_groups = 0, ext_issued = 0, aborted_reads = 0;
  int ext_owed = 0;
  always @(posedge clk) if (rst_n) begin
    if (mtd_trigger) begin
      triggers++;
      if (ext_owed > 0) ext_owed--;
      else begin
        check(enc_since == PR_RATE, $sformatf("reload after %0d encryptions", enc_since));
        rate_groups++;
      end
      enc_since = 0;
    end
    if (enc_done) enc_since++;
  end

  task automatic encrypt();
    int k;
    k = 0;
    while (k < WORDS) begin
      @(negedge clk);
      if (!target_valid) begin
        if (k > 0) aborted_reads++;
        k = 0;
        continue;
      end
      rd_idx = 2'(k); #1;
      check(rd_data == secret[k], $sformatf("word %0d = %h, expected %h", k, rd_data, secret[k]));
      k++;
    end
    @(negedge clk);
    enc_done = 1'b1;
    @(negedge clk);
    enc_done = 1'b0;
  endtask

  initial begin
    checks = 0; failures = 0; finished = 0;
    for (int i = 0; i < WORDS; i++) secret[i] = WORD_W'($urandom);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    check(!target_valid, "nothing loaded after reset");
    trng_seed = 16'($urandom_range(1, 65535));
    trng_valid = 1'b1; @(negedge clk); trng_valid = 1'b0;
    ext_owed++; mitigation_trigger = 1'b1; @(negedge clk); mitigation_trigger = 1'b0;
    ext_issued++;
    for (int e = 0; e < ENCS; e++) begin
      encrypt();
      // Now and then an external request, sometimes while a reload runs.
      if (e % 37 == 20) begin
        ext_owed++; mitigation_trigger = 1'b1; @(negedge clk); mitigation_trigger = 1'b0;
        ext_issued++;
        // A second request while that reload runs must be held, not lost.
        wait (mtd_busy);
        @(negedge clk);
        ext_owed++; mitigation_trigger = 1'b1; @(negedge clk); mitigation_trigger = 1'b0;
        ext_issued++;
      end
    end
    wait (target_valid);
    repeat (2) @(negedge clk);
    $display("[%s] reloads %0d (changed arrangement %0d), rate reloads %0d, external %0d, held %0d, stream stalls %0d, interrupted reads %0d",
             MODE.name(), reloads, changes, rate_groups, ext_issued, pending_hits, stalls, aborted_reads);
    check(triggers == rate_groups + ext_issued, "every request issued once");
    check(rate_groups >= ENCS / (2 * PR_RATE), "rate reloads happened");
    check(ext_issued > 0, "external reloads happened");
    check(pending_hits > 0, "held requests happened");
    check(stalls > 0, "stream stalls happened");
    check(changes > reloads / 2, "arrangement changes between reloads");
    check(reloads == triggers, "one reload per request");
    finished = 1;
  end
endmodule
