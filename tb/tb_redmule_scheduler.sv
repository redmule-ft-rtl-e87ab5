// tb_redmule_scheduler: L = 4, H = 2, P = 1 (D = 4). The testbench plays the
// streamer (random acceptance and completion delays) and checks, for a 6 x 8 x 8
// job in performance and in fault-tolerant mode: the exact job sequence with
// all descriptor fields, the number of array cycles per tile (N * (P + 1) + D),
// that the array never advances into a chunk that is not loaded, the Y and Z
// windows (D cycles each per tile), the column skew of the schedule, that
// stalls occur, and the done pulse.
module tb_redmule_scheduler;
  import redmule_pkg::*;
  localparam int unsigned L = 4, H = 2, P = 1, D = 4;
  logic clk = 0, rst_n = 1, clear = 0, start = 0;
  cfg_t cfg;
  logic job_valid, job_ready = 0, job_done = 0, en, use_y, z_cap, stall, busy, done;
  job_t job;
  logic [1:0] y_idx, z_idx;
  logic [H-1:0] cvalid, cbank;
  logic [H-1:0][1:0] cnloc, ck;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_scheduler #(.L(L), .H(H), .P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .start_i(start), .cfg_i(cfg), .job_valid_o(job_valid), .job_o(job), .job_ready_i(job_ready),
    .job_done_i(job_done), .en_o(en), .use_y_o(use_y), .y_idx_o(y_idx), .z_cap_o(z_cap),
    .z_idx_o(z_idx), .col_valid_o(cvalid), .col_bank_o(cbank), .col_nloc_o(cnloc), .col_k_o(ck),
    .stall_o(stall), .busy_o(busy), .done_o(done));

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  job_t exp_q [$];
  int en_cnt = 0, y_cnt = 0, z_cnt = 0, stall_cnt = 0, loaded = 0, t = 0, ndone = 0;

  // Streamer model and cycle checks.
  always @(posedge clk) begin
    if (done) ndone++;
    if (en) begin
      check(t / (D * (P + 1)) < loaded || t >= int'(cfg.n) * (P + 1), "no advance into unloaded chunk");
      // Column 1 runs P+1 cycles behind column 0.
      if (t >= P + 1 && t < int'(cfg.n) * (P + 1))
        check(cvalid[1] && ck[1] == 2'((t - (P + 1)) % D) && cnloc[1] == 2'(((t - (P + 1)) / D % (P + 1)) * H + 1),
              "column skew");
      en_cnt++; t++;
    end
    if (use_y && en) y_cnt++;
    if (z_cap && en) z_cnt++;
    if (stall) stall_cnt++;
  end

  initial begin
    forever begin
      @(negedge clk); job_done = 0;
      job_ready = ($urandom % 3) == 0;
      if (job_valid && job_ready) begin
        automatic job_t j = job;
        automatic job_t e = exp_q.pop_front();
        check(j == e, $sformatf("job %0d/%0d base %h exp %0d/%0d base %h", j.tgt, j.count, j.base, e.tgt, e.count, e.base));
        @(negedge clk); job_ready = 0;
        repeat ($urandom % 12) @(negedge clk);
        if (j.tgt == TGT_W) loaded++;
        if (j.tgt == TGT_Z) begin
          check(en_cnt == int'(cfg.n) * (P + 1) + D, $sformatf("array cycles per tile %0d", en_cnt));
          check(y_cnt == D && z_cnt == D, "Y and Z windows");
          en_cnt = 0; y_cnt = 0; z_cnt = 0; loaded = 0; t = 0;
        end
        job_done = 1;
      end
    end
  end

  task automatic run(input bit ft);
    int R = ft ? L / 2 : L;
    cfg.x = 32'h1000; cfg.w = 32'h2000; cfg.y = 32'h3000; cfg.z = 32'h4000;
    cfg.m = 6; cfg.n = 8; cfg.k = 8; cfg.ft = ft;
    exp_q.delete();
    for (int m0 = 0; m0 < 6; m0 += R)
      for (int k0 = 0; k0 < 8; k0 += D) begin
        int mr = (6 - m0 < R) ? 6 - m0 : R;
        job_t j = '0;
        j.dup = ft; j.count = 16'(ft ? 2 * mr : mr);
        j.tgt = TGT_Y; j.base = cfg.y + 32'((m0 * 8 + k0) * 2); j.stride = 16; exp_q.push_back(j);
        for (int c = 0; c < 2; c++) begin
          j.tgt = TGT_X; j.bank = c[0]; j.dup = ft; j.count = 16'(ft ? 2 * mr : mr);
          j.base = cfg.x + 32'((m0 * 8 + c * D) * 2); j.stride = 16; exp_q.push_back(j);
          j.tgt = TGT_W; j.dup = 0; j.count = 16'(D);
          j.base = cfg.w + 32'((c * D * 8 + k0) * 2); j.stride = 16; exp_q.push_back(j);
        end
        j.tgt = TGT_Z; j.store = 1; j.bank = 0; j.dup = ft; j.count = 16'(ft ? 2 * mr : mr);
        j.base = cfg.z + 32'((m0 * 8 + k0) * 2); j.stride = 16; exp_q.push_back(j);
      end
    ndone = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (ndone == 1);
    repeat (3) @(negedge clk);
    check(exp_q.size() == 0 && !busy && ndone == 1, "all jobs issued, done once");
  endtask

  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    run(1'b0);
    run(1'b1);
    check(stall_cnt > 0, "stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
