// perm_shuffler: builds a random permutation of N register indices from an
// LFSR, for the register sequence multiplexer.
//
// A pulse on start resets the table to the identity and runs a Fisher-Yates
// shuffle: for i = N-1 down to 1 it draws j in [0, i] and swaps entries i and
// j, one swap per clock, then pulses done. j is the high part of
// r * (i+1), where r is the current LFSR state (multiply-high range
// reduction, free of division). The LFSR leaps RW states per swap, so each
// draw sees RW fresh bits. The sequence is deterministic: two
// shufflers seeded alike and started on the same cycle produce the same
// table: this is how the read side of the multiplexer recovers the order in
// which the load side wrote the registers.
//
// Interface: seed_load/seed initialise the LFSR; start begins a shuffle (it
// is ignored while busy); perm[k] is the register that holds word k and is
// valid from the cycle done is high until the next start. Latency: N-1
// cycles from start to done (1 cycle when N is 1).
//
// The source states only that an LFSR decides a random load order which the
// read side must be able to undo. Fisher-Yates, the range reduction and the
// latency are this design's own: they make every draw a true permutation, so
// no register is loaded twice, and can reach all N! orders.
module perm_shuffler #(
  parameter int unsigned N    = 4,
  parameter int unsigned IW   = (N > 1) ? $clog2(N) : 1,
  parameter int unsigned RW   = randohm_pkg::LFSR_W
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  seed_load,
  input  logic [RW-1:0]         seed,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [N-1:0][IW-1:0]  perm
);

  logic [RW-1:0] rnd;
  logic [IW-1:0] i_q;
  logic [IW-1:0] j;
  logic          lfsr_step;

  mtd_lfsr #(.W(RW), .LEAP(RW)) u_lfsr (
    .clk       (clk),
    .rst_n     (rst_n),
    .seed_load (seed_load),
    .seed      (seed),
    .step      (lfsr_step),
    .state     (rnd)
  );

  // j = floor(rnd * (i+1) / 2^RW), always in [0, i].
  logic [RW+IW:0] prod;
  always_comb begin
    prod = (RW+IW+1)'(rnd) * (RW+IW+1)'({1'b0, i_q} + 1'b1);
    j    = IW'(prod >> RW);
  end

  assign lfsr_step = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      i_q  <= '0;
      for (int unsigned k = 0; k < N; k++) perm[k] <= IW'(k);
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        for (int unsigned k = 0; k < N; k++) perm[k] <= IW'(k);
        i_q <= IW'(N - 1);
        if (N > 1) busy <= 1'b1;
        else       done <= 1'b1;
      end else if (busy) begin
        perm[i_q] <= perm[j];
        perm[j]   <= perm[i_q];
        i_q       <= i_q - 1'b1;
        if (i_q == IW'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
