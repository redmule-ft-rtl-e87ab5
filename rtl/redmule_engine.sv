// redmule_engine: the L x H array of compute elements.
//
// Row i is a chain of H elements: element j adds x(i, j) * w(j) to the partial
// sum handed over by element j - 1; element 0 takes either the Y value
// (use_y, first pass over N) or the row's own chain output, which closes a
// ring of H * (P + 1) cycles. The ring therefore holds D = H * (P + 1)
// independent accumulations, one per output column of the Z tile, and each
// pass round the ring consumes H more elements of the N dimension. Weights
// are broadcast per column to all rows together with their parity bit; every
// element checks the parity (par_err_o is the OR of all checks).
//
// Each row has its own enable, use_y and check-enable inputs so that rows can
// be driven by alternate copies of the duplicated scheduler (even rows by the
// primary, odd rows by the replica), as the paper describes. Row z_o(i) is the
// chain output of row i, registered. Latency per element: P + 1 enabled cycles.
module redmule_engine #(
  parameter int unsigned L = redmule_pkg::L_DEF,
  parameter int unsigned H = redmule_pkg::H_DEF,
  parameter int unsigned P = redmule_pkg::P_DEF
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic [L-1:0]               row_en_i,
  input  logic [L-1:0]               row_use_y_i,
  input  logic [L-1:0][H-1:0]        chk_i,
  input  logic [L-1:0][H-1:0][15:0]  x_i,
  input  logic [H-1:0][15:0]         w_i,
  input  logic [H-1:0]               w_par_i,
  input  logic [L-1:0][15:0]         y_i,
  output logic [L-1:0][15:0]         z_o,
  output logic                       par_err_o
);
  logic [L-1:0][H:0][15:0] acc;
  logic [L-1:0][H-1:0]     perr;

  for (genvar i = 0; i < L; i++) begin : g_row
    assign acc[i][0] = row_use_y_i[i] ? y_i[i] : acc[i][H];
    for (genvar j = 0; j < H; j++) begin : g_col
      redmule_ce #(.P(P)) u_ce (
        .clk_i, .rst_ni,
        .en_i     (row_en_i[i]),
        .x_i      (x_i[i][j]),
        .w_i      (w_i[j]),
        .w_par_i  (w_par_i[j]),
        .chk_i    (chk_i[i][j]),
        .acc_i    (acc[i][j]),
        .acc_o    (acc[i][j+1]),
        .par_err_o(perr[i][j])
      );
    end
    assign z_o[i] = acc[i][H];
  end

  assign par_err_o = |perr;

endmodule
