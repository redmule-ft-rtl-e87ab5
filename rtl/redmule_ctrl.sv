// redmule_ctrl: control FSM of a job.
//
// IDLE: waits for a trigger from the register file, then copies the shadow
// context into the active one (load_o) and enters CHECK. CHECK: one cycle in
// which the freshly loaded context is parity-checked; the scheduler is started
// (start_o) and the FSM enters RUN. RUN: waits for the scheduler's done,
// pulses done_o and returns to IDLE. A fault (fault_i) in any state but IDLE
// returns the FSM to IDLE at the next edge and pulses clear_o, which flushes
// the streamers, the (de)duplicator and the checker (all of which give clear
// priority over a start in the same cycle), so the host can restart the same
// or another job. busy_o is high outside IDLE. Only clear_o depends
// combinationally on fault_i, so the copies' other outputs can be compared to
// form fault_i without a combinational loop.
//
// The design runs two copies in lockstep and compares their outputs; the
// states are this design's choice, the abort-to-idle on a fault is the paper's.
module redmule_ctrl (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic trigger_i,
  input  logic sched_done_i,
  input  logic fault_i,
  output logic load_o,
  output logic start_o,
  output logic done_o,
  output logic clear_o,
  output logic busy_o
);
  typedef enum logic [1:0] {S_IDLE, S_CHECK, S_RUN} state_e;
  state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    load_o = 1'b0; start_o = 1'b0; done_o = 1'b0; clear_o = 1'b0;
    unique case (state_q)
      S_IDLE:  if (trigger_i) begin load_o = 1'b1; state_d = S_CHECK; end
      S_CHECK: begin start_o = 1'b1; state_d = S_RUN; end
      S_RUN:   if (sched_done_i) begin done_o = 1'b1; state_d = S_IDLE; end
      default: state_d = S_IDLE;
    endcase
    if (fault_i && state_q != S_IDLE) begin
      state_d = S_IDLE; clear_o = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) state_q <= S_IDLE;
    else         state_q <= state_d;
  end

  assign busy_o = (state_q != S_IDLE);

endmodule
