// tb_redmule_fault_unit: a fault while active aborts in the same cycle, sets
// the sticky status bits and raises the interrupt for exactly two cycles;
// faults while inactive are ignored; clear resets the status; corrected ECC
// errors are counted and cleared.
module tb_redmule_fault_unit;
  import redmule_pkg::*;
  logic clk = 0, rst_n = 1, active = 0, clr = 0, sec = 0, eclr = 0, abort, irq;
  logic [NFAULT-1:0] f = '0, st;
  logic [31:0] cnt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  redmule_fault_unit dut (.clk_i(clk), .rst_ni(rst_n), .active_i(active), .fault_i(f),
    .clr_i(clr), .sec_i(sec), .ecc_clr_i(eclr), .abort_o(abort), .irq_o(irq), .status_o(st),
    .ecc_cnt_o(cnt));
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int it = 0; it < 30; it++) begin
      automatic logic [NFAULT-1:0] v = NFAULT'(1 << ($urandom % NFAULT));
      @(negedge clk); active = 0; f = v; #1 check(!abort, "inactive fault ignored");
      @(negedge clk); f = 0; check(st == 0 && !irq, "no status when inactive");
      active = 1; f = v; #1 check(abort, "abort");
      @(negedge clk); active = 0; f = 0; check(irq && st == v, "irq cycle 1, status");
      @(negedge clk); check(irq, "irq cycle 2");
      @(negedge clk); check(!irq && st == v, "irq off, status sticky");
      clr = 1; @(negedge clk); clr = 0; check(st == 0, "cleared");
    end
    for (int i = 0; i < 5; i++) begin @(negedge clk); sec = 1; end
    @(negedge clk); sec = 0; check(cnt == 5, "ecc count");
    eclr = 1; @(negedge clk); eclr = 0; check(cnt == 0, "ecc count cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
