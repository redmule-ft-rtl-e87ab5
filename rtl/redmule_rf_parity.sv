// redmule_rf_parity: parity check of the active register-file context.
//
// The host stores in the last configuration word the XOR of all the others, so
// the XOR of every word is zero for an intact context. err_o is high whenever
// it is not (combinational, checked in every cycle of a job). The design
// instantiates this checker twice and compares the two results, as the paper
// does for the register file's parity checker.
module redmule_rf_parity #(
  parameter int unsigned NW = redmule_pkg::NCFG
) (
  input  logic [NW-1:0][31:0] cfg_i,
  output logic                err_o
);
  logic [31:0] x;
  always_comb begin
    x = '0;
    for (int unsigned i = 0; i < NW; i++) x ^= cfg_i[i];
  end
  assign err_o = (x != '0);
endmodule
