// tb_redmule_ft: end-to-end test of the accelerator at its default size
// (L = 12, H = 4, P = 3, FP16). A memory model with random grant back-pressure
// holds X, W, Y; the host side programs the register file, triggers a job, and
// waits for done or the fault interrupt. Z is compared with a sequential FP16
// FMA reference (acc = Y; acc = fma(X[m][n], W[n][k], acc) for n = 0..N-1).
//
// Runs: the 12 x 16 x 16 workload in fault-tolerant and performance mode
// (checking that fault-tolerant mode takes exactly twice the array cycles and
// that memory sees each X/Y word once and each Z word once), a 24 x 32 x 32
// workload in both modes, a corrected single-bit memory error, and injected
// faults (register parity, double-bit memory error, corrupted CE row, weight
// parity, scheduler copy, streamer copy), each of which must raise the
// two-cycle interrupt with the right status bit, abort the job, and be
// followed by a clean retry.
module tb_redmule_ft;
  import tb_fp16_pkg::*;
  import redmule_pkg::*;

  localparam int unsigned D  = 16;
  localparam int unsigned CW = 312;
  localparam logic [31:0] XA = 32'h0000, WA = 32'h4000, YA = 32'h8000, ZA = 32'hC000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic        reg_req = 0, reg_we = 0;
  logic [4:0]  reg_addr = 0;
  logic [31:0] reg_wdata = 0, reg_rdata;
  logic        mem_req, mem_gnt, mem_we, mem_rvalid, irq, done, busy;
  logic [31:0] mem_addr;
  logic [CW-1:0] mem_wdata, mem_rdata;

  redmule_ft dut (
    .clk_i(clk), .rst_ni(rst_n),
    .reg_req_i(reg_req), .reg_we_i(reg_we), .reg_addr_i(reg_addr), .reg_wdata_i(reg_wdata),
    .reg_rdata_o(reg_rdata),
    .mem_req_o(mem_req), .mem_gnt_i(mem_gnt), .mem_addr_o(mem_addr), .mem_we_o(mem_we),
    .mem_wdata_o(mem_wdata), .mem_rvalid_i(mem_rvalid), .mem_rdata_i(mem_rdata),
    .irq_o(irq), .done_o(done), .busy_o(busy)
  );

  tb_tcdm_model #(.WE(D)) u_mem (
    .clk_i(clk), .req_i(mem_req), .gnt_o(mem_gnt), .addr_i(mem_addr), .we_i(mem_we),
    .wdata_i(mem_wdata), .rvalid_o(mem_rvalid), .rdata_o(mem_rdata)
  );

  int checks = 0, failures = 0;
  // Mechanism counters.
  int n_stall = 0, n_local_rd = 0, n_drop_wr = 0, n_ft = 0, n_perf = 0, n_irq2 = 0;
  int n_sec = 0, n_retry = 0, n_abort = 0;
  int irq_len = 0;
  int en_cycles = 0;

  always @(posedge clk) begin
    if (dut.s_stall[0]) n_stall++;
    if (dut.s_en[0]) en_cycles++;
    if (dut.chk_req && dut.dd_gnt && !dut.mem_req_o && !dut.chk_we) n_local_rd++;
    if (dut.chk_req && dut.dd_gnt && !dut.mem_req_o && dut.chk_we) n_drop_wr++;
    if (dut.sec) n_sec++;
    if (irq) irq_len++;
    else begin
      if (irq_len == 2) n_irq2++;
      else if (irq_len != 0) begin failures++; $display("FAIL irq length %0d", irq_len); end
      irq_len = 0;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic reg_write(input int a, input logic [31:0] d);
    @(negedge clk); reg_req = 1; reg_we = 1; reg_addr = 5'(a); reg_wdata = d;
    @(negedge clk); reg_req = 0; reg_we = 0;
  endtask

  task automatic reg_read(input int a, output logic [31:0] d);
    @(negedge clk); reg_req = 1; reg_we = 0; reg_addr = 5'(a); #1 d = reg_rdata;
    @(negedge clk); reg_req = 0;
  endtask

  logic [15:0] zref [int];

  task automatic fill(input int m, input int n, input int k);
    for (int i = 0; i < m * n; i++) u_mem.mem[(XA >> 1) + i] = rand_fp16(13, 16);
    for (int i = 0; i < n * k; i++) u_mem.mem[(WA >> 1) + i] = rand_fp16(13, 16);
    for (int i = 0; i < m * k; i++) u_mem.mem[(YA >> 1) + i] = rand_fp16(10, 16);
    for (int i = 0; i < m * k; i++) u_mem.mem[(ZA >> 1) + i] = 16'hdead;
    zref.delete();
    for (int r = 0; r < m; r++)
      for (int c = 0; c < k; c++) begin
        logic [15:0] acc = u_mem.mem[(YA >> 1) + r * k + c];
        for (int j = 0; j < n; j++)
          acc = fma_ref(u_mem.mem[(XA >> 1) + r * n + j], u_mem.mem[(WA >> 1) + j * k + c], acc);
        zref[r * k + c] = acc;
      end
  endtask

  task automatic setup_job(input int m, input int n, input int k, input bit ft, input bit bad_par);
    logic [31:0] w[8] = '{XA, WA, YA, ZA, 32'(m), 32'(n), 32'(k), {31'd0, ft}};
    logic [31:0] par = '0;
    for (int i = 0; i < 8; i++) begin reg_write(i, w[i]); par ^= w[i]; end
    reg_write(REG_PARITY, bad_par ? par ^ 32'h100 : par);
  endtask

  // Run a job; returns 1 on done, 0 on fault interrupt. cycles = trigger to end.
  task automatic run(output bit ok, output int cycles);
    int c = 0;
    reg_write(REG_TRIGGER, 1);
    while (!done && !irq && c < 50000) begin @(posedge clk); c++; end
    ok = done;
    cycles = c;
    repeat (4) @(posedge clk);
  endtask

  task automatic check_z(input int m, input int k, input string tag);
    int bad = 0;
    for (int i = 0; i < m * k; i++)
      if (u_mem.mem[(ZA >> 1) + i] !== zref[i]) begin
        if (bad < 4) $display("  %s Z[%0d] got %h exp %h", tag, i, u_mem.mem[(ZA >> 1) + i], zref[i]);
        bad++;
      end
    check(bad == 0, $sformatf("%s: %0d wrong Z elements", tag, bad));
  endtask

  // Expect a fault with status bit fb, then clear and retry cleanly.
  task automatic expect_fault(input int fb, input int m, input int k, input string tag);
    bit ok; int cyc; logic [31:0] st;
    run(ok, cyc);
    check(!ok, {tag, ": job should abort"});
    check(!busy, {tag, ": accelerator back to idle"});
    reg_read(REG_FAULT, st);
    check(st[fb], $sformatf("%s: fault status %b lacks bit %0d", tag, st, fb));
    if (!ok) n_abort++;
    reg_write(REG_FAULT, 0);
    reg_read(REG_FAULT, st);
    check(st == 0, {tag, ": status cleared"});
  endtask

  task automatic retry(input int m, input int k, input string tag);
    bit ok; int cyc;
    for (int i = 0; i < m * k; i++) u_mem.mem[(ZA >> 1) + i] = 16'hdead;
    run(ok, cyc);
    check(ok, {tag, ": retry completes"});
    check_z(m, k, {tag, " retry"});
    if (ok) n_retry++;
  endtask

  initial begin
    bit ok; int cyc_ft, cyc_pf, en_ft, en_pf, rd0, wr0;
    logic [31:0] v;
    repeat (5) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // --- 12 x 16 x 16, fault-tolerant mode.
    fill(12, 16, 16);
    setup_job(12, 16, 16, 1'b1, 1'b0);
    rd0 = u_mem.reads; wr0 = u_mem.writes; en_cycles = 0;
    run(ok, cyc_ft); en_ft = en_cycles;
    check(ok, "12x16x16 FT completes");
    check_z(12, 16, "12x16x16 FT");
    // Memory sees 12 Y + 12 X + 2 * 16 W reads (two tiles) and 12 Z writes.
    check(u_mem.reads - rd0 == 12 + 12 + 2 * 16, $sformatf("FT reads %0d", u_mem.reads - rd0));
    check(u_mem.writes - wr0 == 12, $sformatf("FT writes %0d", u_mem.writes - wr0));
    n_ft++;
    $display("12x16x16 FT: %0d cycles, %0d array cycles", cyc_ft, en_ft);

    // --- same, performance mode.
    for (int i = 0; i < 12 * 16; i++) u_mem.mem[(ZA >> 1) + i] = 16'hdead;
    setup_job(12, 16, 16, 1'b0, 1'b0);
    rd0 = u_mem.reads; wr0 = u_mem.writes; en_cycles = 0;
    run(ok, cyc_pf); en_pf = en_cycles;
    check(ok, "12x16x16 perf completes");
    check_z(12, 16, "12x16x16 perf");
    check(u_mem.reads - rd0 == 12 + 12 + 16, $sformatf("perf reads %0d", u_mem.reads - rd0));
    check(u_mem.writes - wr0 == 12, $sformatf("perf writes %0d", u_mem.writes - wr0));
    // Array cycles per tile: N*(P+1) + D = 64 + 16; FT needs two tiles.
    check(en_pf == 80, $sformatf("perf array cycles %0d", en_pf));
    check(en_ft == 2 * en_pf, $sformatf("FT array cycles %0d vs 2 x %0d", en_ft, en_pf));
    n_perf++;
    $display("12x16x16 perf: %0d cycles, %0d array cycles", cyc_pf, en_pf);

    // --- 24 x 32 x 32 in both modes (several tiles, two chunks of N).
    fill(24, 32, 32);
    setup_job(24, 32, 32, 1'b1, 1'b0);
    run(ok, cyc_ft);
    check(ok, "24x32x32 FT completes"); check_z(24, 32, "24x32x32 FT"); n_ft++;
    for (int i = 0; i < 24 * 32; i++) u_mem.mem[(ZA >> 1) + i] = 16'hdead;
    setup_job(24, 32, 32, 1'b0, 1'b0);
    run(ok, cyc_pf);
    check(ok, "24x32x32 perf completes"); check_z(24, 32, "24x32x32 perf"); n_perf++;

    // --- corrected single-bit memory error.
    fill(12, 16, 16);
    setup_job(12, 16, 16, 1'b1, 1'b0);
    u_mem.inj_addr = WA + 32'd32; u_mem.inj_mask = '0; u_mem.inj_mask[77] = 1'b1;
    run(ok, cyc_ft);
    check(ok, "single-bit error corrected, job completes");
    check_z(12, 16, "SEC");
    reg_read(REG_ECCCNT, v);
    check(v == 1, $sformatf("ECC corrected count %0d", v));
    reg_write(REG_ECCCNT, 0);

    // --- register file parity error.
    setup_job(12, 16, 16, 1'b1, 1'b1);
    expect_fault(F_RF_PAR, 12, 16, "rf parity");
    setup_job(12, 16, 16, 1'b1, 1'b0);
    retry(12, 16, "rf parity");

    // --- double-bit memory error.
    u_mem.inj_addr = XA + 32'd64; u_mem.inj_mask = '0; u_mem.inj_mask[3] = 1'b1; u_mem.inj_mask[20] = 1'b1;
    expect_fault(F_ECC, 12, 16, "ECC double");
    retry(12, 16, "ECC double");

    // --- corrupted result in one CE row (odd row, FT mode): Z' != Z.
    fork
      begin
        wait (dut.s_zcap[0]);
        force dut.z_eng[3] = 16'h1234;
        repeat (3) @(posedge clk);
        release dut.z_eng[3];
      end
      expect_fault(F_ZCHK, 12, 16, "Z check");
    join
    retry(12, 16, "Z check");

    // --- corrupted weight parity on the broadcast.
    fork
      begin
        wait (dut.s_en[0] && dut.s_cvalid[0][1]);
        force dut.w1 = ~dut.w1;
        @(posedge clk);
        release dut.w1;
      end
      expect_fault(F_WPAR, 12, 16, "W parity");
    join
    retry(12, 16, "W parity");

    // --- scheduler replica disagrees.
    fork
      begin
        wait (dut.s_en[1]);
        force dut.s_en[1] = 1'b0;
        @(posedge clk);
        release dut.s_en[1];
      end
      expect_fault(F_SCHED, 12, 16, "scheduler");
    join
    retry(12, 16, "scheduler");

    // --- streamer copy disagrees (address).
    fork
      begin
        wait (dut.s1_req);
        force dut.u_stream1.req_cnt_q = 16'd5;
        @(posedge clk);
        release dut.u_stream1.req_cnt_q;
      end
      expect_fault(F_STREAM, 12, 16, "streamer");
    join
    retry(12, 16, "streamer");

    // Mechanism coverage.
    $display("stalls=%0d merged_reads=%0d dropped_writes=%0d ft=%0d perf=%0d irq2=%0d sec=%0d aborts=%0d retries=%0d",
             n_stall, n_local_rd, n_drop_wr, n_ft, n_perf, n_irq2, n_sec, n_abort, n_retry);
    check(n_stall > 0, "array stall happened");
    check(n_local_rd > 0, "duplicated reads merged");
    check(n_drop_wr > 0, "duplicated writes filtered");
    check(n_ft > 0 && n_perf > 0, "both modes used");
    check(n_irq2 == 6, $sformatf("two-cycle interrupts %0d", n_irq2));
    check(n_sec == 1, "ECC correction happened");
    check(n_abort == 6 && n_retry == 6, "aborts and retries");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
