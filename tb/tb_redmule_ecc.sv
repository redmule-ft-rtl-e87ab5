// tb_redmule_ecc: encodes random words and checks the code bits against an
// independent syndrome-table formulation, decodes them clean, with one flipped
// bit (corrected, sec) and with two flipped bits in one granule (ded).
module tb_redmule_ecc;
  localparam int unsigned NG = 2;
  logic [NG*32-1:0] wd, rd;
  logic [NG*39-1:0] enc, cw;
  logic rvalid = 1, sec, ded;
  int checks = 0, failures = 0;

  redmule_ecc #(.NG(NG)) dut (.wdata_i(wd), .wdata_o(enc), .rdata_i(cw), .rvalid_i(rvalid),
    .rdata_o(rd), .sec_o(sec), .ded_o(ded));

  // Independent check: every Hamming syndrome of a codeword is zero and the
  // overall parity is even; data bits sit at non-power-of-two positions.
  function automatic bit valid_cw(input logic [38:0] c, input logic [31:0] d);
    logic [5:0] s = '0;
    int k = 0;
    for (int p = 1; p < 39; p++) if (c[p]) s ^= 6'(p);
    for (int p = 3; p < 39; p++) if (!(p inside {4, 8, 16, 32})) begin
      if (c[p] != d[k]) return 0;
      k++;
    end
    return (s == 0) && !(^c);
  endfunction

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      wd = {$urandom, $urandom};
      #1;
      for (int g = 0; g < NG; g++) check(valid_cw(enc[g*39 +: 39], wd[g*32 +: 32]), "codeword");
      cw = enc; #1;
      check(rd == wd && !sec && !ded, "clean decode");
      begin
        automatic int e = $urandom % (NG * 39);
        cw = enc; cw[e] = ~cw[e]; #1;
      end
      check(rd == wd && sec && !ded, "single error corrected");
      begin
        automatic int g = $urandom % NG;
        automatic int a = $urandom % 39;
        automatic int b = (a + 1 + $urandom % 38) % 39;
        cw = enc; cw[g*39 + a] = ~cw[g*39 + a]; cw[g*39 + b] = ~cw[g*39 + b]; #1;
        check(ded, "double error detected");
      end
    end
    rvalid = 0; cw = enc; cw[5] ^= 1'b1; #1;
    check(!sec && !ded, "flags only with rvalid");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
