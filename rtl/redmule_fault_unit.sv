// redmule_fault_unit: fault status registers and the fault interrupt.
//
// fault_i collects one bit per checker (bit meaning in redmule_pkg). While a
// job is active (active_i), any set bit is recorded in the sticky status
// register and abort_o is raised in the same cycle, so the control FSM returns
// to idle; the interrupt irq_o is then asserted for exactly two consecutive
// cycles, so that a single transient on the interrupt wire cannot hide it. The
// host reads the status and clears it (clr_i). The unit also counts corrected
// single-bit ECC errors (sec_i), cleared by ecc_clr_i. The recorded status, the
// two-cycle interrupt and the return to idle follow the paper; the counter and
// the bit order are this design's choices.
module redmule_fault_unit #(
  parameter int unsigned NF = redmule_pkg::NFAULT
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic          active_i,
  input  logic [NF-1:0] fault_i,
  input  logic          clr_i,
  input  logic          sec_i,
  input  logic          ecc_clr_i,
  output logic          abort_o,
  output logic          irq_o,
  output logic [NF-1:0] status_o,
  output logic [31:0]   ecc_cnt_o
);
  logic [1:0] irq_q;

  assign abort_o = active_i && (|fault_i);
  assign irq_o   = |irq_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      status_o <= '0; irq_q <= '0; ecc_cnt_o <= '0;
    end else begin
      if (clr_i)        status_o <= '0;
      else if (abort_o) status_o <= status_o | fault_i;
      // Two-cycle pulse: 11 -> 01 -> 00.
      irq_q <= abort_o ? 2'b11 : {1'b0, irq_q[1]};
      if (ecc_clr_i)  ecc_cnt_o <= '0;
      else if (sec_i) ecc_cnt_o <= ecc_cnt_o + 32'd1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $rose(irq_o) |=> irq_o);

endmodule
