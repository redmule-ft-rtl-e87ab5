// tb_redmule_dedup: duplicated read pairs reach memory once and both get the
// same word (memory latency of one or three cycles); duplicated write pairs are
// written once (the second word); unpaired traffic passes; a pair with
// different addresses raises err_o.
module tb_redmule_dedup;
  localparam int unsigned DW = 16;
  logic clk = 0, rst_n = 1, clear = 0, dup = 0;
  logic up_req = 0, up_gnt, up_we = 0, up_rvalid, dn_req, dn_gnt, dn_we, dn_rvalid = 0, err;
  logic [31:0] up_addr = 0, dn_addr;
  logic [DW-1:0] up_wdata = 0, up_rdata, dn_wdata, dn_rdata = 0;
  int checks = 0, failures = 0, mem_rd = 0, mem_wr = 0, lat = 1;
  logic [DW-1:0] last_wr;
  always #5 clk = ~clk;

  redmule_dedup #(.DW(DW)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .dup_i(dup),
    .up_req_i(up_req), .up_gnt_o(up_gnt), .up_addr_i(up_addr), .up_we_i(up_we),
    .up_wdata_i(up_wdata), .up_rvalid_o(up_rvalid), .up_rdata_o(up_rdata),
    .dn_req_o(dn_req), .dn_gnt_i(dn_gnt), .dn_addr_o(dn_addr), .dn_we_o(dn_we),
    .dn_wdata_o(dn_wdata), .dn_rvalid_i(dn_rvalid), .dn_rdata_i(dn_rdata), .err_o(err));

  function automatic logic [DW-1:0] val(input logic [31:0] a); return DW'(a * 7 + 3); endfunction

  // Memory with fixed latency lat and random grant.
  always @(negedge clk) dn_gnt <= ($urandom % 3) != 0;
  logic [DW-1:0] pend [$];
  int pend_t [$];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    dn_rvalid <= 1'b0;
    if (pend_t.size() > 0 && pend_t[0] <= cyc) begin
      dn_rvalid <= 1'b1; dn_rdata <= pend[0];
      void'(pend.pop_front()); void'(pend_t.pop_front());
    end
    if (dn_req && dn_gnt) begin
      if (dn_we) begin mem_wr++; last_wr = dn_wdata; end
      else begin mem_rd++; pend.push_back(val(dn_addr)); pend_t.push_back(cyc + lat - 1); end
    end
  end

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Collect read responses.
  logic [DW-1:0] rsp [$];
  always @(posedge clk) if (up_rvalid) rsp.push_back(up_rdata);

  task automatic send(input bit d, input bit w, input logic [31:0] a, input logic [DW-1:0] v);
    @(negedge clk); dup = d; up_req = 1; up_we = w; up_addr = a; up_wdata = v;
    @(posedge clk); while (!up_gnt) @(posedge clk);
    @(negedge clk); up_req = 0;
  endtask

  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      automatic logic [31:0] a = $urandom & 32'hffe0;
      automatic int kind = $urandom % 3;
      automatic int r0 = mem_rd, w0 = mem_wr;
      lat = 1 + 2 * ($urandom % 2);
      rsp.delete();
      if (kind == 0) begin
        send(1, 0, a, 0); send(1, 0, a, 0);
        repeat (6) @(posedge clk);
        check(mem_rd - r0 == 1, "read pair: one memory read");
        check(rsp.size() == 2 && rsp[0] == val(a) && rsp[1] == val(a), "read pair: two equal responses");
      end else if (kind == 1) begin
        send(1, 1, a, 16'h1111); send(1, 1, a, 16'h2222);
        repeat (2) @(posedge clk);
        check(mem_wr - w0 == 1 && last_wr == 16'h2222, "write pair: second written once");
      end else begin
        send(0, 0, a, 0); send(0, 1, a, 16'h3333);
        repeat (6) @(posedge clk);
        check(mem_rd - r0 == 1 && mem_wr - w0 == 1 && rsp.size() == 1 && rsp[0] == val(a), "pass-through");
      end
      check(!err, "no pair error");
    end
    // Pair with different addresses.
    @(negedge clk); dup = 1; up_req = 1; up_we = 1; up_addr = 32'h40;
    @(posedge clk); while (!up_gnt) @(posedge clk);
    @(negedge clk); up_addr = 32'h60; #1 check(err, "address mismatch flagged");
    up_req = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
