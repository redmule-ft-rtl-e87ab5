// redmule_w_buffer: W operand store and per-column broadcast.
//
// Two banks (ping-pong), each holding D rows of W (one chunk of the N
// dimension) by D columns (the K columns of the current Z tile), one memory
// word per row. Column j of the array receives w[bank_j][nloc_j][k_j] each
// cycle; the same value goes to that column's CEs in every row.
//
// The design instantiates this buffer twice: the primary holds the FP16
// weights and is read with the primary scheduler's selects, a one-bit-wide
// copy holds the parity of every weight (generated by its own logic from the
// incoming word) and is read with the replica scheduler's selects. Each CE
// compares the two, so a fault in either the weight data or the control that
// selects it is caught where the weight is used. Bank layout is this design's
// choice.
module redmule_w_buffer #(
  parameter int unsigned H  = redmule_pkg::H_DEF,
  parameter int unsigned P  = redmule_pkg::P_DEF,
  parameter int unsigned EW = 16,
  localparam int unsigned D  = H * (P + 1),
  localparam int unsigned DL = $clog2(D)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic                  wr_en_i,
  input  logic                  wr_bank_i,
  input  logic [DL-1:0]         wr_row_i,
  input  logic [D-1:0][EW-1:0]  wr_data_i,
  input  logic [H-1:0]          rd_bank_i,
  input  logic [H-1:0][DL-1:0]  rd_row_i,
  input  logic [H-1:0][DL-1:0]  rd_col_i,
  output logic [H-1:0][EW-1:0]  w_o
);
  logic [1:0][D-1:0][D-1:0][EW-1:0] mem_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      mem_q <= '0;
    else if (wr_en_i) mem_q[wr_bank_i][wr_row_i] <= wr_data_i;
  end

  for (genvar j = 0; j < H; j++) begin : g_col
    assign w_o[j] = mem_q[rd_bank_i[j]][rd_row_i[j]][rd_col_i[j]];
  end

endmodule
