// redmule_checker: equality check of the redundant Z rows before they are stored.
//
// Sits on the memory path between the ECC encoder and the (de)duplicator. In
// fault-tolerant mode every access arrives as a pair of identical requests,
// one from each of two consecutive CE rows; for a write pair the checker keeps
// the first (Z') word with its address when it is handed over, and compares the
// second (Z) with it. If they differ the second write is held back (never reaches
// memory) and err_o is raised for that cycle; the fault logic then aborts the job.
// Reads and performance-mode traffic pass unchanged. Comparing the ECC-encoded
// words also covers the encoder, which each word of a pair passes separately.
// Pair tracking follows upstream handshakes; clear_i resets it (abort).
module redmule_checker #(
  parameter int unsigned DW = 312
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           clear_i,
  input  logic                           dup_i,   // request is one of a duplicated pair
  // upstream (from the streamer, after ECC encoding)
  input  logic                           up_req_i,
  output logic                           up_gnt_o,
  input  logic [redmule_pkg::ADDR_W-1:0] up_addr_i,
  input  logic                           up_we_i,
  input  logic [DW-1:0]                  up_wdata_i,
  // downstream (towards the (de)duplicator)
  output logic                           dn_req_o,
  input  logic                           dn_gnt_i,
  output logic [redmule_pkg::ADDR_W-1:0] dn_addr_o,
  output logic                           dn_we_o,
  output logic [DW-1:0]                  dn_wdata_o,
  output logic                           err_o
);
  logic                           second_q;
  logic [DW-1:0]                  data_q;
  logic [redmule_pkg::ADDR_W-1:0] addr_q;
  logic                           mismatch;

  assign mismatch   = dup_i && second_q && up_req_i && up_we_i &&
                      ((up_wdata_i != data_q) || (up_addr_i != addr_q));
  assign dn_req_o   = up_req_i && !mismatch;
  assign dn_addr_o  = up_addr_i;
  assign dn_we_o    = up_we_i;
  assign dn_wdata_o = up_wdata_i;
  assign up_gnt_o   = dn_gnt_i && !mismatch;
  assign err_o      = mismatch;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      second_q <= 1'b0; data_q <= '0; addr_q <= '0;
    end else if (clear_i || !dup_i) begin
      second_q <= 1'b0;
    end else if (up_req_i && up_gnt_o) begin
      second_q <= !second_q;
      if (!second_q) begin
        data_q <= up_wdata_i;
        addr_q <= up_addr_i;
      end
    end
  end

endmodule
