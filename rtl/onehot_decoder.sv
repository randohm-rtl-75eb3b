// onehot_decoder: binary-to-one-hot decoder with enable (the "2:4 Decoder" of
// both hardware multiplexers).
//
// When en is high, output bit idx is 1 and all others are 0; when en is low
// all outputs are 0. In the multiplexers en is the mitigation trigger (or
// the load phase it starts) and the outputs are the per-register load or
// per-slice select lines. Purely combinational.
//
// The 2-bit input, the 4 outputs and the enable come from the source's
// diagrams; making N a parameter is this design's choice.
module onehot_decoder #(
  parameter int unsigned N    = 4,
  parameter int unsigned IN_W = (N > 1) ? $clog2(N) : 1
) (
  input  logic            en,
  input  logic [IN_W-1:0] idx,
  output logic [N-1:0]    onehot
);

  always_comb begin
    onehot = '0;
    for (int unsigned i = 0; i < N; i++)
      if (en && (idx == IN_W'(i))) onehot[i] = 1'b1;
  end

endmodule
