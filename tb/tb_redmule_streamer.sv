// tb_redmule_streamer: load jobs (plain and duplicated rows) and a store job
// against a small memory model with random grants. Checks every request address
// (BASE + row * STRIDE, row = i or i / 2), the buffer-side word index, target,
// bank and data of each response, the store data taken from the buffer side,
// and that done pulses exactly once per job after the last word.
module tb_redmule_streamer;
  import redmule_pkg::*;
  localparam int unsigned DW = 32, IW = 8;
  logic clk = 0, rst_n = 1, clear = 0;
  logic job_valid = 0, job_ready, done;
  job_t job = '0;
  logic req, gnt, we, dup, rvalid = 0, wr_valid, wr_bank;
  logic [31:0] addr;
  logic [DW-1:0] wdata, rdata = '0, wr_data, rd_data;
  tgt_e wr_tgt;
  logic [IW-1:0] wr_idx, rd_idx;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_streamer #(.DW(DW), .IW(IW)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .job_valid_i(job_valid), .job_i(job), .job_ready_o(job_ready), .done_o(done),
    .mem_req_o(req), .mem_gnt_i(gnt), .mem_addr_o(addr), .mem_we_o(we), .mem_dup_o(dup),
    .mem_wdata_o(wdata), .mem_rvalid_i(rvalid), .mem_rdata_i(rdata),
    .wr_valid_o(wr_valid), .wr_tgt_o(wr_tgt), .wr_bank_o(wr_bank), .wr_idx_o(wr_idx),
    .wr_data_o(wr_data), .rd_idx_o(rd_idx), .rd_data_i(rd_data));

  assign rd_data = {24'hABCDEF, rd_idx};
  function automatic logic [DW-1:0] memval(input logic [31:0] a); return a ^ 32'h5A5A0000; endfunction

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nreq, nrsp, ndone;
  job_t cur;
  // Memory model: random grant, response one cycle later.
  always @(negedge clk) gnt <= ($urandom % 3) != 0;
  always @(posedge clk) begin
    rvalid <= 1'b0;
    if (done) ndone++;
    if (req && gnt) begin
      automatic int row = cur.dup ? nreq / 2 : nreq;
      check(addr == cur.base + 32'(row) * cur.stride, $sformatf("addr %h req %0d", addr, nreq));
      check(we == cur.store && dup == cur.dup, "direction/dup");
      if (cur.store) check(wdata == {24'hABCDEF, 8'(nreq)}, "store data");
      else begin rvalid <= 1'b1; rdata <= memval(addr); end
      nreq++;
    end
    if (wr_valid) begin
      automatic int row = cur.dup ? nrsp / 2 : nrsp;
      check(wr_idx == IW'(nrsp) && wr_tgt == cur.tgt && wr_bank == cur.bank, "buffer index/target");
      check(wr_data == memval(cur.base + 32'(row) * cur.stride), "load data");
      nrsp++;
    end
  end

  task automatic do_job(input job_t j);
    cur = j; nreq = 0; nrsp = 0; ndone = 0;
    @(negedge clk); wait (job_ready); job = j; job_valid = 1;
    @(negedge clk); job_valid = 0;
    wait (ndone == 1); repeat (3) @(negedge clk);
    check(nreq == int'(j.count), $sformatf("request count %0d", nreq));
    check(j.store || nrsp == int'(j.count), "response count");
    check(ndone == 1, "one done pulse");
  endtask

  initial begin
    job_t j;
    #1 rst_n = 0; #10 rst_n = 1;
    j = '0; j.tgt = TGT_X; j.base = 32'h100; j.stride = 32'h40; j.count = 6; j.bank = 1;
    do_job(j);
    j.dup = 1; j.tgt = TGT_Y; j.count = 8; j.bank = 0;
    do_job(j);
    j = '0; j.store = 1; j.tgt = TGT_Z; j.base = 32'h2000; j.stride = 32'h20; j.count = 5; j.dup = 1;
    do_job(j);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
