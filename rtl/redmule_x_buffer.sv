// redmule_x_buffer: X operand store for the CE array.
//
// Two banks (ping-pong), each holding one memory word (D = H * (P + 1)
// elements of the N dimension) per CE row. While the array works on one chunk
// of N from one bank, the next chunk is written into the other. Writes come
// from the streamer, one row word per cycle. Reads are combinational: element
// (i, j) is x[bank_j][i][nloc_j], where column j of the array runs P + 1 cycles
// behind column j - 1 and may still read the previous bank.
//
// The read selects come in two sets, one from each scheduler copy. Row i uses
// set (i + SEL_OFS) % 2: the primary buffer (SEL_OFS = 0) gives even rows to the
// primary scheduler, the reduced-width shadow copy (EW = 1, SEL_OFS = 1) gives
// them to the replica, so a fault in either copy's select shows as a mismatch
// between the two buffers. The bank scheme and the row assignment of the
// shadow are this design's choices; the paper names the buffer and says it
// is duplicated with reduced data width.
module redmule_x_buffer #(
  parameter int unsigned L       = redmule_pkg::L_DEF,
  parameter int unsigned H       = redmule_pkg::H_DEF,
  parameter int unsigned P       = redmule_pkg::P_DEF,
  parameter int unsigned EW      = 16,
  parameter int unsigned SEL_OFS = 0,
  localparam int unsigned D      = H * (P + 1),
  localparam int unsigned DL     = $clog2(D),
  localparam int unsigned RL     = (L > 1) ? $clog2(L) : 1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        wr_en_i,
  input  logic                        wr_bank_i,
  input  logic [RL-1:0]               wr_row_i,
  input  logic [D-1:0][EW-1:0]        wr_data_i,
  input  logic [1:0][H-1:0]           rd_bank_i,
  input  logic [1:0][H-1:0][DL-1:0]   rd_idx_i,
  output logic [L-1:0][H-1:0][EW-1:0] x_o
);
  logic [1:0][L-1:0][D-1:0][EW-1:0] mem_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)      mem_q <= '0;
    else if (wr_en_i) mem_q[wr_bank_i][wr_row_i] <= wr_data_i;
  end

  for (genvar i = 0; i < L; i++) begin : g_row
    localparam int unsigned S = (i + SEL_OFS) % 2;
    for (genvar j = 0; j < H; j++) begin : g_col
      assign x_o[i][j] = mem_q[rd_bank_i[S][j]][i][rd_idx_i[S][j]];
    end
  end

endmodule
