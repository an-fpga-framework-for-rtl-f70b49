// ivn_ctrl_fsm -- operating-state machine of the programmable logic.
//
// Four states, with the transitions printed in the paper's state diagram:
//   IDLE      stays while {start, ready} is 00, 01 or 10; goes to SEND_DATA
//             when start = 1 and ready = 1.
//   SEND_DATA the processor writes H, R and y through the register file
//             into the input buffer; stays while send = 0, goes to COMPUTE
//             when send = 1.
//   COMPUTE   the least-squares core runs; stays while done = 0, goes to
//             DONE when done = 1.
//   DONE      stays while done = 1 and start = 1; returns to IDLE when
//             done = 0 or start = 0.
// The diagram labels DONE's edges "done=1/start=1" (self-loop) and
// "done=0/start=0" (exit); reading the exit as "either one low" and the
// self-loop as "both high" is this design's interpretation. 'start', 'ready'
// and 'send' are control bits the processor writes; 'done' is the core's
// completion flag.
//
// Outputs: 'state'; 'load_en', high in SEND_DATA, gates buffer writes; and
// 'compute_go', a one-cycle pulse on the SEND_DATA -> COMPUTE edge that
// starts the core. State changes take one clock.
module ivn_ctrl_fsm
  import ivn_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       ready,
  input  logic       send,
  input  logic       done,
  output ivn_state_e state,
  output logic       load_en,
  output logic       compute_go
);

  ivn_state_e nxt;

  always_comb begin
    nxt = state;
    unique case (state)
      ST_IDLE:      if (start && ready) nxt = ST_SEND_DATA;
      ST_SEND_DATA: if (send)           nxt = ST_COMPUTE;
      ST_COMPUTE:   if (done)           nxt = ST_DONE;
      ST_DONE:      if (!done || !start) nxt = ST_IDLE;
      default:      nxt = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= ST_IDLE;
    else        state <= nxt;
  end

  assign load_en    = (state == ST_SEND_DATA);
  assign compute_go = (state == ST_SEND_DATA) && send;

endmodule
