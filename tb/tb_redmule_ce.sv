// tb_redmule_ce: one compute element. Checks that acc_o shows x*w + acc exactly
// P + 1 enabled cycles after the operands were applied, that a stall (en low)
// holds the pipeline, and that a weight whose parity bit disagrees is flagged
// only while the check is enabled.
module tb_redmule_ce;
  import tb_fp16_pkg::*;
  localparam int unsigned P = 3;
  logic clk = 0, rst_n = 1, en = 0, wpar = 0, chk = 0, perr;
  logic [15:0] x = 0, w = 0, acc = 0, out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_ce #(.P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .x_i(x), .w_i(w),
    .w_par_i(wpar), .chk_i(chk), .acc_i(acc), .acc_o(out), .par_err_o(perr));

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic [15:0] expq [$];
  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      en = ($urandom % 4) != 0;
      x = rand_fp16(10, 18); w = rand_fp16(10, 18); acc = rand_fp16(10, 18);
      // Output now equals the result of the op issued P+1 enabled cycles ago.
      if (expq.size() == P + 1) check(out == expq[0], $sformatf("latency/result %h vs %h", out, expq[0]));
      if (en) begin
        expq.push_back(fma_ref(x, w, acc));
        if (expq.size() > P + 1) void'(expq.pop_front());
      end
      // Parity check.
      chk = 1'($urandom); wpar = (^w) ^ 1'($urandom);
      #1 check(perr == (chk && (wpar != ^w)), "parity flag");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
