// disparity_ctrl: per-pixel sequencer of the disparity machine.
//
// Runs one pixel: on start it spends one clock clearing the counters, then enables
// the generators and counters (run) until the counter bank reports an overflow,
// then holds the result (done) until the next start. cycles counts the clocks in
// which run was high, i.e. the number of stochastic bits the machine needed for the
// pixel; this is the per-pixel run time the machine is judged by.
//
// States: IDLE -> CLEAR -> RUN -> DONE, and DONE -> CLEAR on the next start. start
// is ignored while busy (CLEAR, RUN). run is dropped in the cycle ovf is seen, so
// the clocks counted are exactly those up to and including the one whose bit filled
// a counter. Likelihood memories may be written only while not busy.
//
// Stopping at the first overflow follows the described machine; the explicit
// clear state and the cycle counter are this design's choice. There is no time-out:
// the no-match line always carries a probability of at least pnm0, so a run ends.
module disparity_ctrl
  import sbm_pkg::*;
#(
  parameter int unsigned CYC_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             ovf,
  output logic             clear,
  output logic             run,
  output logic             busy,
  output logic             done,
  output logic [CYC_W-1:0] cycles
);

  ctrl_state_e state, state_nxt;

  always_comb begin
    state_nxt = state;
    unique case (state)
      ST_IDLE:  if (start) state_nxt = ST_CLEAR;
      ST_CLEAR: state_nxt = ST_RUN;
      ST_RUN:   if (ovf) state_nxt = ST_DONE;
      ST_DONE:  if (start) state_nxt = ST_CLEAR;
      default:  state_nxt = ST_IDLE;
    endcase
  end

  assign clear = (state == ST_CLEAR);
  assign run   = (state == ST_RUN) && !ovf;
  assign busy  = (state == ST_CLEAR) || (state == ST_RUN);
  assign done  = (state == ST_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= ST_IDLE;
      cycles <= '0;
    end else begin
      state <= state_nxt;
      if (clear)    cycles <= '0;
      else if (run) cycles <= cycles + CYC_W'(1);
    end
  end

endmodule
