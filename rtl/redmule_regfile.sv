// redmule_regfile: job configuration registers with a shadow context.
//
// The host writes the next job's configuration (matrix addresses, M, N, K, the
// mode bit and a parity word, see redmule_pkg) into the shadow context through
// a simple register port while a job may still be running. A write to TRIGGER
// raises trigger_o; the control FSM answers with load_i, which copies the
// shadow context into the active context that drives the accelerator for the
// whole job. Parity: the host computes PARITY = XOR of the eight other
// configuration words; the active context is checked continuously by
// redmule_rf_parity. Status words (busy, fault status, corrected ECC count) are
// readable; writes to FAULT and ECCCNT raise the matching clear pulse.
// Reads are combinational (rdata_o in the cycle of the request), writes take
// effect at the next clock edge. The bus and the map are this design's own;
// the paper gives the shadowed context and the XOR parity.
module redmule_regfile (
  input  logic                                      clk_i,
  input  logic                                      rst_ni,
  // register port
  input  logic                                      req_i,
  input  logic                                      we_i,
  input  logic [4:0]                                addr_i,
  input  logic [31:0]                               wdata_i,
  output logic [31:0]                               rdata_o,
  // status
  input  logic                                      busy_i,
  input  logic [redmule_pkg::NFAULT-1:0]            fault_status_i,
  input  logic [31:0]                               ecc_cnt_i,
  // control
  input  logic                                      load_i,
  output logic                                      trigger_o,
  output logic                                      fault_clr_o,
  output logic                                      ecc_clr_o,
  output logic [redmule_pkg::NCFG-1:0][31:0]        cfg_o
);
  import redmule_pkg::*;

  logic [NCFG-1:0][31:0] shadow_q, active_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      shadow_q <= '0;
      active_q <= '0;
    end else begin
      if (req_i && we_i && (32'(addr_i) < NCFG)) shadow_q[addr_i] <= wdata_i;
      if (load_i) active_q <= shadow_q;
    end
  end

  assign trigger_o   = req_i && we_i && (32'(addr_i) == REG_TRIGGER);
  assign fault_clr_o = req_i && we_i && (32'(addr_i) == REG_FAULT);
  assign ecc_clr_o   = req_i && we_i && (32'(addr_i) == REG_ECCCNT);
  assign cfg_o       = active_q;

  always_comb begin
    rdata_o = '0;
    if (32'(addr_i) < NCFG)               rdata_o = shadow_q[addr_i];
    else if (32'(addr_i) == REG_STATUS)   rdata_o = {31'd0, busy_i};
    else if (32'(addr_i) == REG_FAULT)    rdata_o = 32'(fault_status_i);
    else if (32'(addr_i) == REG_ECCCNT)   rdata_o = ecc_cnt_i;
  end

endmodule
