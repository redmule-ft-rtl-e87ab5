// redmule_ecc: SECDED protection of the memory port.
//
// Every 32-bit granule of a memory word carries 7 check bits: an extended
// Hamming (39,32) code, check bits at positions 1, 2, 4, 8, 16, 32 of the
// codeword and an overall parity bit at position 0. The write path encodes,
// the read path decodes, corrects single-bit errors (sec_o) and flags
// double-bit errors (ded_o, which the accelerator treats as a fault). Both paths
// are combinational. The paper says only that the memory interface is ECC
// protected; the code and the granule size are this design's choices.
module redmule_ecc #(
  parameter int unsigned NG = 8   // 32-bit granules per memory word
) (
  input  logic [NG*32-1:0] wdata_i,
  output logic [NG*39-1:0] wdata_o,
  input  logic [NG*39-1:0] rdata_i,
  input  logic             rvalid_i,
  output logic [NG*32-1:0] rdata_o,
  output logic             sec_o,
  output logic             ded_o
);
  function automatic logic [38:0] encode(input logic [31:0] d);
    logic [38:0] c = '0;
    int unsigned k = 0;
    for (int unsigned p = 1; p < 39; p++) begin
      if ((p & (p - 1)) != 0) begin c[p] = d[k]; k++; end
    end
    for (int unsigned b = 0; b < 6; b++) begin
      logic x = 1'b0;
      for (int unsigned p = 1; p < 39; p++) if (p[b] && ((p & (p - 1)) != 0)) x ^= c[p];
      c[1 << b] = x;
    end
    c[0] = ^c[38:1];
    return c;
  endfunction

  logic [NG-1:0] sec, ded;

  for (genvar g = 0; g < NG; g++) begin : g_grp
    logic [38:0] cw, fixed;
    logic [5:0]  syn;
    logic        par;
    logic [31:0] dec;
    int unsigned k;
    assign wdata_o[g*39 +: 39] = encode(wdata_i[g*32 +: 32]);
    assign cw = rdata_i[g*39 +: 39];
    always_comb begin
      syn = '0;
      for (int unsigned p = 1; p < 39; p++) if (cw[p]) syn ^= 6'(p);
      par   = ^cw;
      fixed = cw;
      sec[g] = 1'b0;
      ded[g] = 1'b0;
      if (par) begin
        sec[g] = 1'b1;                        // single error: flip it
        if (syn != 0 && syn < 39) fixed[syn] = ~cw[syn];
        else if (syn != 0)        ded[g] = 1'b1;   // syndrome outside the word
      end else if (syn != 0) begin
        ded[g] = 1'b1;                        // double error
      end
      dec = '0;
      k   = 0;
      for (int unsigned p = 1; p < 39; p++) begin
        if ((p & (p - 1)) != 0) begin dec[k] = fixed[p]; k++; end
      end
    end
    assign rdata_o[g*32 +: 32] = dec;
  end

  assign sec_o = rvalid_i && (|sec) && !(|ded);
  assign ded_o = rvalid_i && (|ded);

endmodule
