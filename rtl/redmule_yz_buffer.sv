// redmule_yz_buffer: Y input and Z output store, one word (D elements) per row.
//
// Y side: the streamer writes one Y row word per cycle; during the first pass
// round the ring, element 0 of row i reads y[i][y_idx]. Z side: while the last
// pass leaves the ring, the chain output of row i is captured into
// z[i][z_idx] (on cycles with the row's enable and capture set); afterwards the
// streamer reads whole Z row words for storing. Y and Z use separate arrays so
// that the next tile's Y can be loaded while Z waits to be stored.
//
// Read/capture selects come in two sets, one per scheduler copy; row i uses
// set (i + SEL_OFS) % 2, as in the X buffer. The shadow copy (EW = 1) holds one
// parity bit per element. Separate Y and Z arrays are this design's choice.
module redmule_yz_buffer #(
  parameter int unsigned L       = redmule_pkg::L_DEF,
  parameter int unsigned H       = redmule_pkg::H_DEF,
  parameter int unsigned P       = redmule_pkg::P_DEF,
  parameter int unsigned EW      = 16,
  parameter int unsigned SEL_OFS = 0,
  localparam int unsigned D      = H * (P + 1),
  localparam int unsigned DL     = $clog2(D),
  localparam int unsigned RL     = (L > 1) ? $clog2(L) : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // Y write from the streamer
  input  logic                   y_wr_en_i,
  input  logic [RL-1:0]          y_wr_row_i,
  input  logic [D-1:0][EW-1:0]   y_wr_data_i,
  // Y read towards the array
  input  logic [1:0][DL-1:0]     y_idx_i,
  output logic [L-1:0][EW-1:0]   y_o,
  // Z capture from the array
  input  logic [L-1:0]           z_en_i,
  input  logic [1:0]             z_cap_i,
  input  logic [1:0][DL-1:0]     z_idx_i,
  input  logic [L-1:0][EW-1:0]   z_i,
  // Z read towards the streamer
  input  logic [RL-1:0]          z_rd_row_i,
  output logic [D-1:0][EW-1:0]   z_rd_data_o
);
  logic [L-1:0][D-1:0][EW-1:0] y_q, z_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)        y_q <= '0;
    else if (y_wr_en_i) y_q[y_wr_row_i] <= y_wr_data_i;
  end

  for (genvar i = 0; i < L; i++) begin : g_row
    localparam int unsigned S = (i + SEL_OFS) % 2;
    assign y_o[i] = y_q[i][y_idx_i[S]];
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni)                       z_q[i] <= '0;
      else if (z_en_i[i] && z_cap_i[S])  z_q[i][z_idx_i[S]] <= z_i[i];
    end
  end

  assign z_rd_data_o = z_q[z_rd_row_i];

endmodule
