// redmule_dedup: (de)duplicator between the accelerator and the shared memory.
//
// Requests marked dup_i (fault-tolerant mode, X, Y and Z) arrive in pairs to the same address (one per
// redundant CE row). For a read pair only the first request goes to memory; its
// response is passed up and kept, and the second request is granted locally and
// answered with the kept word in the cycle after its grant (granted once the
// first response has arrived), so both rows get the same data
// while memory sees a single access. For a write pair the first request is
// granted locally and dropped, the second (already checked against the first by
// the checker) is written. err_o flags a pair whose two addresses or directions
// differ. In performance mode everything passes through. The memory side is a
// request/grant port with the read response one or more cycles after the grant.
//
// The design instantiates the unit twice, the copy with a reduced data width,
// and compares their memory-side outputs. The pair protocol is this design's
// own reading of "duplicated read requests; filtered duplicate writes".
module redmule_dedup #(
  parameter int unsigned DW = 312
) (
  input  logic                           clk_i,
  input  logic                           rst_ni,
  input  logic                           clear_i,
  input  logic                           dup_i,   // request is one of a duplicated pair
  // upstream
  input  logic                           up_req_i,
  output logic                           up_gnt_o,
  input  logic [redmule_pkg::ADDR_W-1:0] up_addr_i,
  input  logic                           up_we_i,
  input  logic [DW-1:0]                  up_wdata_i,
  output logic                           up_rvalid_o,
  output logic [DW-1:0]                  up_rdata_o,
  // downstream (memory)
  output logic                           dn_req_o,
  input  logic                           dn_gnt_i,
  output logic [redmule_pkg::ADDR_W-1:0] dn_addr_o,
  output logic                           dn_we_o,
  output logic [DW-1:0]                  dn_wdata_o,
  input  logic                           dn_rvalid_i,
  input  logic [DW-1:0]                  dn_rdata_i,
  output logic                           err_o
);
  logic                           second_q, local_rsp_q, first_we_q, wait_q;
  logic [redmule_pkg::ADDR_W-1:0] addr_q;
  logic [DW-1:0]                  rsp_q;
  logic                           pair, local_req;

  assign pair      = dup_i && second_q;
  // Handled locally: the second read of a pair, the first write of a pair.
  assign local_req = dup_i && (up_we_i ? !second_q : second_q);

  assign dn_req_o   = up_req_i && !local_req;
  assign dn_addr_o  = up_addr_i;
  assign dn_we_o    = up_we_i;
  assign dn_wdata_o = up_wdata_i;
  // The local answer waits until the first read's memory response has arrived.
  assign up_gnt_o   = local_req ? (up_req_i && (up_we_i || !wait_q || dn_rvalid_i)) : dn_gnt_i;

  assign up_rvalid_o = dn_rvalid_i || local_rsp_q;
  assign up_rdata_o  = local_rsp_q ? rsp_q : dn_rdata_i;

  assign err_o = pair && up_req_i && ((up_addr_i != addr_q) || (up_we_i != first_we_q));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      second_q <= 1'b0; local_rsp_q <= 1'b0; first_we_q <= 1'b0; wait_q <= 1'b0;
      addr_q <= '0; rsp_q <= '0;
    end else begin
      local_rsp_q <= up_req_i && up_gnt_o && local_req && !up_we_i && !clear_i;
      if (dn_rvalid_i) rsp_q <= dn_rdata_i;
      if (clear_i || dn_rvalid_i)                     wait_q <= 1'b0;
      if (dn_req_o && dn_gnt_i && !up_we_i && !clear_i) wait_q <= 1'b1;
      if (clear_i || !dup_i) begin
        second_q <= 1'b0;
      end else if (up_req_i && up_gnt_o) begin
        second_q <= !second_q;
        if (!second_q) begin
          addr_q     <= up_addr_i;
          first_we_q <= up_we_i;
        end
      end
    end
  end

  // A locally answered read never collides with a memory response.
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(dn_rvalid_i && local_rsp_q));

endmodule
