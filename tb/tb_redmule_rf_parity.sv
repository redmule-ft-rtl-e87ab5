// tb_redmule_rf_parity: random contexts with a correct XOR parity word pass;
// any single flipped bit is flagged.
module tb_redmule_rf_parity;
  import redmule_pkg::*;
  logic [NCFG-1:0][31:0] cfg;
  logic err;
  int checks = 0, failures = 0;
  redmule_rf_parity dut (.cfg_i(cfg), .err_o(err));
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int it = 0; it < 500; it++) begin
      logic [31:0] p;
      p = '0;
      for (int i = 0; i < NCFG - 1; i++) begin cfg[i] = $urandom; p ^= cfg[i]; end
      cfg[NCFG-1] = p;
      #1 checks++; if (err) begin failures++; $display("FAIL clean context flagged"); end
      begin
        automatic int w = $urandom % NCFG;
        automatic int b = $urandom % 32;
        cfg[w][b] = ~cfg[w][b];
      end
      #1 checks++; if (!err) begin failures++; $display("FAIL flip not flagged"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
