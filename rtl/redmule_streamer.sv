// redmule_streamer: turns one job descriptor at a time into memory accesses.
//
// A job (redmule_pkg::job_t) moves COUNT memory words between memory and one
// of the buffers. Word i lives at BASE + row(i) * STRIDE, with row(i) = i, or
// i / 2 when DUP is set: in fault-tolerant mode two consecutive CE rows share
// one matrix row, so the streamer issues every read or write twice to the same
// address and the (de)duplicator further down merges the pair; mem_dup_o
// marks such paired requests.
//
// Loads: requests are issued back to back while the memory grants them; the
// responses (in order, any latency) are handed to the target buffer as
// wr_valid_o with the word index wr_idx_o, the target and the bank of the job.
// Stores: word i is read combinationally from the Z buffer (rd_idx_o /
// rd_data_i) and written. done_o pulses with the last response (load) or the
// last grant (store). clear_i drops the job (abort after a fault).
//
// The design instantiates the streamer twice: once at full width, carrying
// data, and once with DW = one bit per element, carrying element parities.
// Both receive the same jobs from their own scheduler copy and their memory
// side outputs are compared every cycle. The response FIFOs drawn around the
// streamer in the paper's figure are not needed here, because every buffer
// accepts a word in every cycle; this is this design's simplification.
module redmule_streamer #(
  parameter int unsigned DW = 256,
  parameter int unsigned IW = 8
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          clear_i,
  // job
  input  logic                          job_valid_i,
  input  redmule_pkg::job_t             job_i,
  output logic                          job_ready_o,
  output logic                          done_o,
  // memory side
  output logic                          mem_req_o,
  input  logic                          mem_gnt_i,
  output logic [redmule_pkg::ADDR_W-1:0] mem_addr_o,
  output logic                          mem_we_o,
  output logic                          mem_dup_o,
  output logic [DW-1:0]                 mem_wdata_o,
  input  logic                          mem_rvalid_i,
  input  logic [DW-1:0]                 mem_rdata_i,
  // buffer side
  output logic                          wr_valid_o,
  output redmule_pkg::tgt_e             wr_tgt_o,
  output logic                          wr_bank_o,
  output logic [IW-1:0]                 wr_idx_o,
  output logic [DW-1:0]                 wr_data_o,
  output logic [IW-1:0]                 rd_idx_o,
  input  logic [DW-1:0]                 rd_data_i
);
  import redmule_pkg::*;

  job_t        job_q;
  logic        busy_q;
  logic [15:0] req_cnt_q, rsp_cnt_q;
  logic [15:0] row;
  logic        last_req, last_rsp;

  assign job_ready_o = !busy_q;
  assign row         = job_q.dup ? (req_cnt_q >> 1) : req_cnt_q;
  assign mem_req_o   = busy_q && (req_cnt_q != job_q.count);
  assign mem_addr_o  = job_q.base + ADDR_W'(row) * job_q.stride;
  assign mem_we_o    = job_q.store;
  assign mem_dup_o   = job_q.dup;
  assign rd_idx_o    = IW'(req_cnt_q);
  assign mem_wdata_o = rd_data_i;

  assign wr_valid_o  = busy_q && !job_q.store && mem_rvalid_i;
  assign wr_tgt_o    = job_q.tgt;
  assign wr_bank_o   = job_q.bank;
  assign wr_idx_o    = IW'(rsp_cnt_q);
  assign wr_data_o   = mem_rdata_i;

  assign last_req = mem_req_o && mem_gnt_i && (req_cnt_q == job_q.count - 16'd1);
  assign last_rsp = wr_valid_o && (rsp_cnt_q == job_q.count - 16'd1);
  assign done_o   = busy_q && (job_q.store ? last_req : last_rsp);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q <= 1'b0; job_q <= '0; req_cnt_q <= '0; rsp_cnt_q <= '0;
    end else if (clear_i) begin
      busy_q <= 1'b0; req_cnt_q <= '0; rsp_cnt_q <= '0;
    end else if (!busy_q) begin
      if (job_valid_i) begin
        busy_q <= (job_i.count != 0);
        job_q  <= job_i;
        req_cnt_q <= '0; rsp_cnt_q <= '0;
      end
    end else begin
      if (mem_req_o && mem_gnt_i) req_cnt_q <= req_cnt_q + 16'd1;
      if (wr_valid_o)             rsp_cnt_q <= rsp_cnt_q + 16'd1;
      if (done_o)                 busy_q    <= 1'b0;
    end
  end

  // A response never arrives for a word that was not requested.
  assert property (@(posedge clk_i) disable iff (!rst_ni || clear_i)
                   wr_valid_o |-> (rsp_cnt_q < req_cnt_q));

endmodule
