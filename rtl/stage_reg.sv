// stage_reg: one inter-stage register of the pipeline (RIFID, RIDEX,
// REXMEM, RMEMWB) together with its triggered-events field.
//
// The register holds a payload of any packed type T, a valid bit and the
// events_t vector of the instruction in the slot. On a clock edge with
// `advance` high it loads the next slot; with `advance` low it holds (the
// whole pipeline is stalled). Two modifiers act on the loaded slot:
//   squash - the incoming instruction is cancelled (wrong path after a taken
//            branch or jump, or younger than a trap). It continues as a NOP:
//            valid drops and the presumed-retirement bit is cleared, while
//            events that have already happened (its fetch) are kept, so they
//            are still counted when the slot leaves write-back.
//   bubble - the hazard unit inserts a bubble. The slot is empty but carries
//            the HAZARD event, so each bubble is counted once as a hazard.
// The events field is only ever copied or masked, never combined with logic
// in series with the pipeline's own paths: it is the parallel register of
// the monitor beside each existing inter-stage register.
// Reset empties the slot (valid 0, no events).
module stage_reg
  import hpm_pkg::*;
#(
  parameter type T = logic [31:0]
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    advance,
  input  logic    squash,
  input  logic    bubble,
  input  T        d,
  input  logic    d_valid,
  input  events_t d_ev,
  output T        q,
  output logic    q_valid,
  output events_t q_ev
);

  localparam events_t EV_BUBBLE  = events_t'((1 << EV_CYCLE) | (1 << EV_HAZARD));
  localparam events_t EV_NO_RET  = ~events_t'(1 << EV_INSTRET);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= T'(0);
      q_valid <= 1'b0;
      q_ev    <= '0;
    end else if (advance) begin
      if (squash) begin
        q       <= d;
        q_valid <= 1'b0;
        q_ev    <= d_ev & EV_NO_RET;
      end else if (bubble) begin
        q       <= T'(0);
        q_valid <= 1'b0;
        q_ev    <= EV_BUBBLE;
      end else begin
        q       <= d;
        q_valid <= d_valid;
        q_ev    <= d_ev;
      end
    end
  end

endmodule
