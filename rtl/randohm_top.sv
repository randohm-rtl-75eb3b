// randohm_top: hardware moving-target defence around the secret registers of
// a cryptographic core, against impedance side-channel analysis.
//
// An impedance attack halts the clock (or waits until the core is idle) and
// measures the reflection of RF signals injected into the power delivery
// network; the reading depends on the static values in specific flip-flops
// and on where those flip-flops and their wiring sit. Masking does not help
// against such a static snapshot. This top keeps the secret words (for
// instance the key-share bytes of a masked AES) in a store whose physical
// arrangement is re-randomised again and again while the core keeps working.
//
// Blocks:
//   u_rate   pr_rate_ctrl  requests a re-randomisation after every PR_RATE
//                          encryptions (enc_done) or on mitigation_trigger.
//   u_store  reg_seq_mux   (MTD_MODE = MTD_REG_SEQUENCE, the default) loads
//                          the words into a randomly permuted set of
//                          registers and reads them back in order; or
//            slice_mux     (MTD_MODE = MTD_TARGET_SLICE) loads them into one
//                          of N_SLICES replicated shift registers.
// The TRNG that seeds the LFSRs, the secured source of the data stream and
// the function block (the cipher) are outside this module: their signals are
// the top's ports.
//
// Operation: pulse trng_valid with a seed, then mitigation_trigger. The store
// asks for the WORDS secret words on the stream port (valid/ready, natural
// order) and raises target_valid; the cipher then reads word rd_idx on
// rd_data and pulses enc_done per encryption. After PR_RATE encryptions the
// store drops target_valid, re-randomises and requests the words again.
// The cipher must wait while target_valid is low.
//
// Default sizes: 4 registers as drawn for the register sequence multiplexer,
// PR rate 16 as in the reported experiments, 4 slices. The word width of 8
// (one key-share byte per register) is this design's choice.
module randohm_top
  import randohm_pkg::*;
#(
  parameter mtd_mode_e   MTD_MODE = MTD_REG_SEQUENCE,
  parameter int unsigned WORDS    = 4,
  parameter int unsigned WORD_W   = 8,
  parameter int unsigned N_SLICES = 4,
  parameter int unsigned PR_RATE  = 16,
  parameter int unsigned IW       = (WORDS > 1) ? $clog2(WORDS) : 1,
  parameter int unsigned CNT_W    = (PR_RATE > 1) ? $clog2(PR_RATE) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // TRNG seed (initial state of the LFSRs).
  input  logic               trng_valid,
  input  logic [LFSR_W-1:0]  trng_seed,
  // External re-randomisation request (first load, attack sensor).
  input  logic               mitigation_trigger,
  // Secured data stream.
  output logic               stream_ready,
  input  logic               stream_valid,
  input  logic [WORD_W-1:0]  stream_data,
  // Function block (cipher) side.
  input  logic               enc_done,
  input  logic [IW-1:0]      rd_idx,
  output logic [WORD_W-1:0]  rd_data,
  output logic               target_valid,
  // Status.
  output logic               mtd_busy,
  output logic               mtd_trigger,
  output logic [CNT_W-1:0]   enc_count,
  output logic [15:0]        pending_hits
);

  pr_rate_ctrl #(.PR_RATE(PR_RATE), .CNT_W(CNT_W)) u_rate (
    .clk, .rst_n,
    .enc_done,
    .ext_trigger (mitigation_trigger),
    .busy        (mtd_busy),
    .trigger     (mtd_trigger),
    .enc_count,
    .pending_hits
  );

  if (MTD_MODE == MTD_REG_SEQUENCE) begin : g_seq
    logic [WORDS-1:0] ld_unused;
    reg_seq_mux #(.N_REGS(WORDS), .REG_W(WORD_W), .IW(IW)) u_store (
      .clk, .rst_n,
      .seed_load (trng_valid),
      .seed      (trng_seed),
      .trigger   (mtd_trigger),
      .stream_ready,
      .stream_valid,
      .stream_data,
      .busy      (mtd_busy),
      .loaded    (target_valid),
      .rd_idx,
      .rd_data,
      .ld        (ld_unused)
    );
  end else begin : g_slice
    logic [WORDS-1:0][WORD_W-1:0] words;
    logic [N_SLICES-1:0]          sel_unused;
    logic [WORD_W-1:0]            serial_unused;
    slice_mux #(.N_SLICES(N_SLICES), .DEPTH(WORDS), .DATA_W(WORD_W)) u_store (
      .clk, .rst_n,
      .seed_load (trng_valid),
      .seed      (trng_seed),
      .trigger   (mtd_trigger),
      .stream_ready,
      .stream_valid,
      .stream_data,
      .busy      (mtd_busy),
      .loaded    (target_valid),
      .slice_sel (sel_unused),
      .data_o    (words),
      .serial_o  (serial_unused)
    );
    assign rd_data = words[rd_idx];
  end

endmodule
