// redmule_ce: one compute element of the array.
//
// Each cycle in which en_i is high the element starts one fused multiply-add,
// acc_o(t + P + 1) = x_i * w_i + acc_i, and shifts its pipeline by one step;
// with en_i low the whole pipeline holds (stall). The FMA itself is
// combinational; its result passes P pipeline registers and one output register,
// so the latency is P + 1 enabled cycles. Placing all registers after the FMA
// and counting the output register in the latency are choices of this design
// (retiming may move them into the FMA).
//
// Fault tolerance: the broadcast weight arrives together with a parity bit that
// was produced and buffered by separate logic. The element recomputes the XOR
// parity of the weight it uses and flags par_err_o (combinational) when the two
// differ while chk_i marks the weight as valid. This is the paper's
// "parity verification at each CE post-broadcast".
module redmule_ce #(
  parameter int unsigned P = redmule_pkg::P_DEF
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic [15:0] x_i,
  input  logic [15:0] w_i,
  input  logic        w_par_i,
  input  logic        chk_i,
  input  logic [15:0] acc_i,
  output logic [15:0] acc_o,
  output logic        par_err_o
);
  logic [15:0] fma_res;
  logic [P:0][15:0] pipe_q;

  redmule_fma u_fma (.a_i(x_i), .b_i(w_i), .c_i(acc_i), .r_o(fma_res));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pipe_q <= '0;
    end else if (en_i) begin
      pipe_q[0] <= fma_res;
      for (int i = 1; i <= P; i++) pipe_q[i] <= pipe_q[i-1];
    end
  end

  assign acc_o     = pipe_q[P];
  assign par_err_o = chk_i && ((^w_i) != w_par_i);

endmodule
