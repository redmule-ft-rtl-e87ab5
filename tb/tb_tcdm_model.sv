// tb_tcdm_model: behavioural model of the shared, ECC-protected data memory
// (TCDM) for the testbenches. FP16 element array, word = WE elements. Requests
// are granted with a programmable probability (random back-pressure); read data
// returns one cycle after the grant, SECDED-encoded per 32-bit granule with the
// testbench's own encoder. A one-shot error mask can be XORed onto the next read
// of a chosen word to model upsets in the memory. Writes are decoded and stored.
module tb_tcdm_model #(
  parameter int unsigned WE     = 16,
  parameter int unsigned NELEM  = 32768,
  parameter int unsigned GNT_PCT = 80
) (
  input  logic                  clk_i,
  input  logic                  req_i,
  output logic                  gnt_o,
  input  logic [31:0]           addr_i,
  input  logic                  we_i,
  input  logic [WE*16/32*39-1:0] wdata_i,
  output logic                  rvalid_o,
  output logic [WE*16/32*39-1:0] rdata_o
);
  localparam int unsigned NG = WE * 16 / 32;
  logic [15:0] mem [NELEM];
  int unsigned reads = 0, writes = 0;
  logic [31:0] inj_addr = '1;
  logic [NG*39-1:0] inj_mask = '0;

  function automatic logic [38:0] enc(input logic [31:0] d);
    logic [38:0] c = '0;
    int unsigned k = 0;
    for (int unsigned p = 1; p <= 38; p++)
      if (!(p inside {1, 2, 4, 8, 16, 32})) begin c[p] = d[k]; k++; end
    for (int unsigned b = 0; b < 6; b++)
      for (int unsigned p = 1; p <= 38; p++)
        if (((p >> b) & 1) != 0 && !(p inside {1, 2, 4, 8, 16, 32})) c[1 << b] ^= c[p];
    c[0] = ^c[38:1];
    return c;
  endfunction

  function automatic logic [31:0] dec(input logic [38:0] c);
    logic [31:0] d;
    int unsigned k = 0;
    for (int unsigned p = 1; p <= 38; p++)
      if (!(p inside {1, 2, 4, 8, 16, 32})) begin d[k] = c[p]; k++; end
    return d;
  endfunction

  initial gnt_o = 1'b0;
  always @(negedge clk_i) gnt_o <= ($urandom % 100) < GNT_PCT;

  always @(posedge clk_i) begin
    rvalid_o <= 1'b0;
    if (req_i && gnt_o) begin
      int unsigned base;
      base = addr_i >> 1;
      if (we_i) begin
        writes++;
        for (int unsigned g = 0; g < NG; g++) begin
          logic [31:0] d;
          d = dec(wdata_i[g*39 +: 39]);
          mem[base + 2*g]     <= d[15:0];
          mem[base + 2*g + 1] <= d[31:16];
        end
      end else begin
        reads++;
        rvalid_o <= 1'b1;
        for (int unsigned g = 0; g < NG; g++)
          rdata_o[g*39 +: 39] <= enc({mem[base + 2*g + 1], mem[base + 2*g]}) ^
                                 ((addr_i == inj_addr) ? inj_mask[g*39 +: 39] : 39'd0);
        if (addr_i == inj_addr) inj_addr <= '1;
      end
    end
  end
endmodule
