// pr_rate_ctrl: decides when the target circuit is re-randomised (the
// "PR Rate" of the defence).
//
// It counts completed encryptions (enc_done pulses) and fires a
// re-randomisation request after every PR_RATE of them: PR_RATE = 1 gives a
// new configuration for every encryption, the strongest setting. An
// external request (ext_trigger, for instance from an attack sensor or the
// first load after power-up) fires one as well and restarts the count. A
// request that arrives while the multiplexer is still busy with the previous
// reload is held pending and issued once busy falls, so no request is lost
// and two are never merged silently (pending_hits counts such holds).
//
// Interface: trigger is a one-cycle pulse. Timing: the pulse comes one cycle
// after the enc_done that completes a group, or after ext_trigger, or one
// cycle after busy falls for a held request.
//
// The meaning of PR Rate and the value 16 follow the source; the external
// request, the holding while busy and the counter are this design's own.
module pr_rate_ctrl #(
  parameter int unsigned PR_RATE = 16,
  parameter int unsigned CNT_W   = (PR_RATE > 1) ? $clog2(PR_RATE) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enc_done,
  input  logic             ext_trigger,
  input  logic             busy,
  output logic             trigger,
  output logic [CNT_W-1:0] enc_count,
  output logic [15:0]      pending_hits
);

  logic request, pending_q;

  // A group of PR_RATE encryptions is complete, or an external request.
  assign request = ext_trigger ||
                   (enc_done && (enc_count == CNT_W'(PR_RATE - 1)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_count    <= '0;
      pending_q    <= 1'b0;
      trigger      <= 1'b0;
      pending_hits <= '0;
    end else begin
      trigger <= 1'b0;
      if (request)       enc_count <= '0;
      else if (enc_done) enc_count <= enc_count + 1'b1;

      if ((request || pending_q) && !busy && !trigger) begin
        trigger   <= 1'b1;
        pending_q <= 1'b0;
      end else if (request) begin
        pending_q    <= 1'b1;
        pending_hits <= pending_hits + 1'b1;
      end
    end
  end

endmodule
