// tb_redmule_checker: sequences of paired and unpaired requests. Equal write
// pairs pass; a pair whose second word or address differs is held back
// (downstream request low) with err_o; reads and unpaired writes pass unchanged.
module tb_redmule_checker;
  localparam int unsigned DW = 16;
  logic clk = 0, rst_n = 1, clear = 0, dup = 0;
  logic up_req = 0, up_gnt, up_we = 0, dn_req, dn_gnt = 1, dn_we, err;
  logic [31:0] up_addr = 0, dn_addr;
  logic [DW-1:0] up_wdata = 0, dn_wdata;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_checker #(.DW(DW)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .dup_i(dup),
    .up_req_i(up_req), .up_gnt_o(up_gnt), .up_addr_i(up_addr), .up_we_i(up_we),
    .up_wdata_i(up_wdata), .dn_req_o(dn_req), .dn_gnt_i(dn_gnt), .dn_addr_o(dn_addr),
    .dn_we_o(dn_we), .dn_wdata_o(dn_wdata), .err_o(err));

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // One request; returns whether it went downstream and the error flag.
  task automatic send(input bit d, input bit w, input logic [31:0] a, input logic [DW-1:0] v,
                      output bit fwd, output bit e);
    @(negedge clk); dup = d; up_req = 1; up_we = w; up_addr = a; up_wdata = v;
    #1 fwd = dn_req && dn_addr == a && dn_wdata == v && dn_we == w; e = err;
    @(negedge clk); up_req = 0;
  endtask

  initial begin
    bit f, e;
    #1 rst_n = 0; #10 rst_n = 1;
    for (int it = 0; it < 100; it++) begin
      automatic logic [31:0] a = $urandom & 32'hffe0;
      automatic logic [DW-1:0] v = DW'($urandom);
      automatic int kind = $urandom % 4;
      if (kind == 0) begin             // equal write pair
        send(1, 1, a, v, f, e); check(f && !e, "first of pair");
        send(1, 1, a, v, f, e); check(f && !e, "equal second passes");
      end else if (kind == 1) begin    // differing data
        send(1, 1, a, v, f, e); check(f && !e, "first of pair");
        send(1, 1, a, v ^ DW'(1 << ($urandom % DW)), f, e); check(!dn_req || !f, "held back");
        check(e, "mismatch flagged");
        @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      end else if (kind == 2) begin    // read pair
        send(1, 0, a, v, f, e); check(f && !e, "read 1");
        send(1, 0, a, ~v, f, e); check(f && !e, "read 2 not compared");
      end else begin                   // unpaired writes
        send(0, 1, a, v, f, e); check(f && !e, "unpaired");
        send(0, 1, a + 32, ~v, f, e); check(f && !e, "unpaired 2");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
