// tb_redmule_x_buffer: writes random row words into both banks and checks
// every read port element against a model, including the row-to-select-set
// assignment (row i uses select set (i + SEL_OFS) % 2).
module tb_redmule_x_buffer;
  localparam int unsigned L = 4, H = 2, P = 1, D = H * (P + 1), EW = 16;
  logic clk = 0, rst_n = 1, wr_en = 0, wr_bank = 0;
  logic [1:0] wr_row = 0;
  logic [D-1:0][EW-1:0] wr_data = '0;
  logic [1:0][H-1:0] rd_bank = '0;
  logic [1:0][H-1:0][1:0] rd_idx = '0;
  logic [L-1:0][H-1:0][EW-1:0] x;
  logic [EW-1:0] model [2][L][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_x_buffer #(.L(L), .H(H), .P(P), .EW(EW), .SEL_OFS(1)) dut (.clk_i(clk), .rst_ni(rst_n),
    .wr_en_i(wr_en), .wr_bank_i(wr_bank), .wr_row_i(wr_row), .wr_data_i(wr_data),
    .rd_bank_i(rd_bank), .rd_idx_i(rd_idx), .x_o(x));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int b = 0; b < 2; b++) for (int r = 0; r < L; r++) for (int e = 0; e < D; e++) model[b][r][e] = '0;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      wr_en = 1'($urandom); wr_bank = 1'($urandom); wr_row = 2'($urandom);
      for (int e = 0; e < D; e++) wr_data[e] = EW'($urandom);
      rd_bank = 4'($urandom); rd_idx = 8'($urandom);
      #1;
      for (int i = 0; i < L; i++) for (int j = 0; j < H; j++) begin
        automatic int s = (i + 1) % 2;
        checks++;
        if (x[i][j] != model[rd_bank[s][j]][i][rd_idx[s][j]]) begin
          failures++; $display("FAIL x[%0d][%0d]", i, j);
        end
      end
      @(posedge clk);
      if (wr_en) for (int e = 0; e < D; e++) model[wr_bank][wr_row][e] = wr_data[e];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
