// tb_redmule_ctrl: trigger -> load, then start one cycle later, busy until the
// scheduler's done, done pulse; a fault while busy returns to idle with clear;
// a fault while idle does nothing.
module tb_redmule_ctrl;
  logic clk = 0, rst_n = 1, trig = 0, sdone = 0, fault = 0;
  logic load, start, done, clear, busy;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  redmule_ctrl dut (.clk_i(clk), .rst_ni(rst_n), .trigger_i(trig), .sched_done_i(sdone),
    .fault_i(fault), .load_o(load), .start_o(start), .done_o(done), .clear_o(clear), .busy_o(busy));
  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      @(negedge clk); check(!busy, "idle"); fault = 1; #1 check(!clear, "no clear when idle");
      fault = 0; trig = 1; #1 check(load && !start, "load on trigger");
      @(negedge clk); trig = 0; #1 check(busy && start && !load, "start after load");
      @(negedge clk); #1 check(busy && !start, "running");
      repeat ($urandom % 10) begin @(negedge clk); #1 check(busy && !done, "still running"); end
      if (it % 2) begin
        sdone = 1; #1 check(done, "done pulse");
        @(negedge clk); sdone = 0; #1 check(!busy && !done, "back to idle after done");
      end else begin
        fault = 1; #1 check(clear && !done, "clear on fault");
        @(negedge clk); fault = 0; #1 check(!busy, "back to idle after fault");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
