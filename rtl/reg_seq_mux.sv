// reg_seq_mux: real-time register sequence multiplexer, the fine-grained
// moving-target defence.
//
// N_REGS target registers (R0..R3 by default) hold the secret words, for
// example key-share bytes, that a function block such as a masked AES core
// reads. Every time the mitigation trigger fires, the words are streamed in
// again in their natural order 0..N_REGS-1, but word k is written into
// register P[k], where P is a fresh random permutation. So the same secret
// bit sits in a different flip-flop after every trigger, and whatever the
// stored value does to the supply impedance moves around with it.
//
// Load side: a perm_shuffler (with its own LFSR) draws P; a one-hot decoder,
// enabled only during the load phase, turns P[k] into the load strobe of one
// register. Read side: a second perm_shuffler, seeded with the same initial
// state and started on the same cycle, rebuilds P; the N_REGS:1 read
// multiplexer selects register P[rd_idx], so the function block sees the
// words in their original order.
//
// Sequence after a trigger (ignored while busy): N_REGS-1 cycles of shuffle,
// then stream_ready is high until N_REGS words have been accepted (one per
// cycle at most, on stream_valid && stream_ready), then loaded goes high.
// loaded is low, and rd_data must not be used, from the trigger until the
// load finishes. At full stream rate loaded rises 2*N_REGS clock edges after
// the edge that samples the trigger.
//
// From the source: the two LFSRs with a common initial state from a TRNG,
// the decoder with the trigger as enable, the load strobes, the 4:1 read
// multiplexer and 4 registers. This design's own: the shuffle that turns the
// LFSR output into a permutation, the valid/ready stream handshake, the
// loaded flag, the word width and reset to zero.
module reg_seq_mux #(
  parameter int unsigned N_REGS = 4,
  parameter int unsigned REG_W  = 8,
  parameter int unsigned IW     = (N_REGS > 1) ? $clog2(N_REGS) : 1,
  parameter int unsigned RW     = randohm_pkg::LFSR_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // Initial state from the TRNG, shared by both LFSRs.
  input  logic               seed_load,
  input  logic [RW-1:0]      seed,
  // Mitigation trigger: re-randomise and reload.
  input  logic               trigger,
  // Secured data stream, words in natural order.
  output logic               stream_ready,
  input  logic               stream_valid,
  input  logic [REG_W-1:0]   stream_data,
  // Status.
  output logic               busy,
  output logic               loaded,
  // Function-block read port (combinational).
  input  logic [IW-1:0]      rd_idx,
  output logic [REG_W-1:0]   rd_data,
  // Load strobes, observable for test.
  output logic [N_REGS-1:0]  ld
);

  typedef enum logic [1:0] {S_IDLE, S_SHUFFLE, S_LOAD} state_e;
  state_e state_q;

  logic [N_REGS-1:0][IW-1:0] load_perm, read_perm;
  logic                      load_done, read_done, load_busy, read_busy;
  logic [IW:0]               k_q;
  logic                      start;
  logic [N_REGS-1:0][REG_W-1:0] regs;

  assign start = trigger && (state_q == S_IDLE);

  perm_shuffler #(.N(N_REGS), .IW(IW), .RW(RW)) u_load_perm (
    .clk, .rst_n, .seed_load, .seed, .start,
    .busy (load_busy), .done (load_done), .perm (load_perm)
  );

  perm_shuffler #(.N(N_REGS), .IW(IW), .RW(RW)) u_read_perm (
    .clk, .rst_n, .seed_load, .seed, .start,
    .busy (read_busy), .done (read_done), .perm (read_perm)
  );

  assign stream_ready = (state_q == S_LOAD);

  onehot_decoder #(.N(N_REGS), .IN_W(IW)) u_dec (
    .en     (stream_valid && stream_ready),
    .idx    (load_perm[IW'(k_q)]),
    .onehot (ld)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      k_q     <= '0;
      loaded  <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          state_q <= S_SHUFFLE;
          loaded  <= 1'b0;
        end
        S_SHUFFLE: if (load_done) begin
          state_q <= S_LOAD;
          k_q     <= '0;
        end
        S_LOAD: if (stream_valid) begin
          k_q <= k_q + 1'b1;
          if (k_q == (IW+1)'(N_REGS - 1)) begin
            state_q <= S_IDLE;
            loaded  <= 1'b1;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Target registers: each loads the stream word when its strobe is high.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) regs <= '0;
    else
      for (int unsigned r = 0; r < N_REGS; r++)
        if (ld[r]) regs[r] <= stream_data;
  end

  // Read multiplexer, select from the read-side permutation.
  assign rd_data = regs[read_perm[rd_idx]];

  assign busy = (state_q != S_IDLE);

  // Both permutation builders must stay in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    (load_done == read_done) && (load_busy == read_busy));
  // At most one register is written per cycle.
  a_one_load: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(ld));
  // The read side reproduces the load order once a load is complete.
  a_same_perm: assert property (@(posedge clk) disable iff (!rst_n)
    loaded |-> (load_perm == read_perm));

endmodule
