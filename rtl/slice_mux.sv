// slice_mux: real-time target slice multiplexer, the coarse-grained
// moving-target defence.
//
// N_SLICES copies of the same target shift register are kept, each meant to
// be placed in a different FPGA slice (X2Y1, X1Y2, X2Y3 and X3Y2 in the
// reference floorplan). When the mitigation trigger fires, the two low LFSR
// bits pick one copy through a one-hot decoder whose enable is the trigger.
// At that moment every copy is cleared; the chosen one then shifts in the
// DEPTH words of the secured data stream, while the others stay at zero. The
// secret therefore lives in a randomly chosen slice, and its physical
// location, hence its impedance signature, changes at every trigger.
//
// Because all unselected copies hold zero, the function block can take the
// bitwise OR of all copies and see the chosen one's content (data_o), or of
// their last cells for the serial form (serial_o).
//
// Timing: the trigger (ignored while busy) clears all copies and records the
// selection on the next edge; stream_ready is then high until DEPTH words are
// accepted, one per cycle at most; loaded then rises. data_o[k] is the k-th
// word received, valid while loaded is high. The LFSR steps once per
// trigger. At full rate loaded rises DEPTH clock edges after the edge that
// samples the trigger.
//
// From the source: the LFSR seeded by a TRNG, the 2:4 decoder enabled by the
// mitigation trigger, the per-copy input multiplexer choosing between the
// stream and clear, 4 copies of 6 one-bit cells, and the clearing of the
// unselected copies. This design's own: the valid/ready handshake, the shift
// direction, the OR combining of the copies, and using the two low LFSR
// bits as the selector.
module slice_mux #(
  parameter int unsigned N_SLICES = 4,
  parameter int unsigned DEPTH    = 6,
  parameter int unsigned DATA_W   = 1,
  parameter int unsigned SW       = (N_SLICES > 1) ? $clog2(N_SLICES) : 1,
  parameter int unsigned RW       = randohm_pkg::LFSR_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          seed_load,
  input  logic [RW-1:0]                 seed,
  input  logic                          trigger,
  output logic                          stream_ready,
  input  logic                          stream_valid,
  input  logic [DATA_W-1:0]             stream_data,
  output logic                          busy,
  output logic                          loaded,
  output logic [N_SLICES-1:0]           slice_sel,
  output logic [DEPTH-1:0][DATA_W-1:0]  data_o,
  output logic [DATA_W-1:0]             serial_o
);

  logic [RW-1:0]  rnd;
  logic           start;
  logic [N_SLICES-1:0] dec;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic [N_SLICES-1:0][DEPTH-1:0][DATA_W-1:0] sr;

  assign start = trigger && !busy;

  mtd_lfsr #(.W(RW)) u_lfsr (
    .clk, .rst_n, .seed_load, .seed,
    .step  (start),
    .state (rnd)
  );

  onehot_decoder #(.N(N_SLICES), .IN_W(SW)) u_dec (
    .en     (start),
    .idx    (rnd[SW-1:0]),
    .onehot (dec)
  );

  assign stream_ready = busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      loaded    <= 1'b0;
      cnt_q     <= '0;
      slice_sel <= '0;
      sr        <= '0;
    end else if (start) begin
      // Clear every copy and remember the chosen one.
      busy      <= 1'b1;
      loaded    <= 1'b0;
      cnt_q     <= '0;
      slice_sel <= dec;
      sr        <= '0;
    end else if (busy && stream_valid) begin
      for (int unsigned s = 0; s < N_SLICES; s++)
        if (slice_sel[s])
          sr[s] <= {stream_data, sr[s][DEPTH-1:1]};
      cnt_q <= cnt_q + 1'b1;
      if (cnt_q == $bits(cnt_q)'(DEPTH - 1)) begin
        busy   <= 1'b0;
        loaded <= 1'b1;
      end
    end
  end

  always_comb begin
    data_o   = '0;
    serial_o = '0;
    for (int unsigned s = 0; s < N_SLICES; s++) begin
      data_o   = data_o | sr[s];
      serial_o = serial_o | sr[s][0];
    end
  end

  // Only the chosen copy may ever hold data.
  a_others_clear: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0(slice_sel));

endmodule
