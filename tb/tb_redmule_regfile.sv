// tb_redmule_regfile: shadow writes and read-back, copy to the active context
// only on load, trigger and clear pulses, status reads.
module tb_redmule_regfile;
  import redmule_pkg::*;
  logic clk = 0, rst_n = 1, req = 0, we = 0, busy = 0, load = 0, trig, fclr, eclr;
  logic [4:0] addr = 0;
  logic [31:0] wdata = 0, rdata, ecc_cnt = 32'd7;
  logic [NFAULT-1:0] fst = 9'h1a5;
  logic [NCFG-1:0][31:0] cfg;
  logic [31:0] model [NCFG];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_regfile dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .we_i(we), .addr_i(addr),
    .wdata_i(wdata), .rdata_o(rdata), .busy_i(busy), .fault_status_i(fst), .ecc_cnt_i(ecc_cnt),
    .load_i(load), .trigger_o(trig), .fault_clr_o(fclr), .ecc_clr_o(eclr), .cfg_o(cfg));

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int i = 0; i < NCFG; i++) begin
      model[i] = $urandom;
      @(negedge clk); req = 1; we = 1; addr = 5'(i); wdata = model[i];
      #1 check(!trig && !fclr && !eclr, "no pulses on config write");
    end
    @(negedge clk); req = 0; we = 0;
    for (int i = 0; i < NCFG; i++) check(cfg[i] == 0, "active context unchanged before load");
    for (int i = 0; i < NCFG; i++) begin
      @(negedge clk); req = 1; addr = 5'(i); #1 check(rdata == model[i], "read back shadow");
    end
    @(negedge clk); req = 0; load = 1; @(negedge clk); load = 0;
    for (int i = 0; i < NCFG; i++) check(cfg[i] == model[i], "active after load");
    // A new shadow write leaves the active context alone.
    @(negedge clk); req = 1; we = 1; addr = 0; wdata = ~model[0];
    @(negedge clk); req = 0; we = 0;
    check(cfg[0] == model[0], "active context isolated");
    @(negedge clk); req = 1; we = 1; addr = 5'(REG_TRIGGER); #1 check(trig, "trigger");
    addr = 5'(REG_FAULT); #1 check(fclr && !trig, "fault clear");
    addr = 5'(REG_ECCCNT); #1 check(eclr, "ecc clear");
    we = 0; addr = 5'(REG_FAULT); #1 check(rdata == 32'(fst), "fault status read");
    addr = 5'(REG_ECCCNT); #1 check(rdata == ecc_cnt, "ecc count read");
    busy = 1; addr = 5'(REG_STATUS); #1 check(rdata == 1, "busy read");
    @(negedge clk); req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
