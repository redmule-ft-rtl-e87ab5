// tb_redmule_w_buffer: writes random W rows into both banks and checks the
// per-column broadcast reads (bank, row, column per column) against a model.
module tb_redmule_w_buffer;
  localparam int unsigned H = 4, P = 3, D = H * (P + 1), EW = 16;
  logic clk = 0, rst_n = 1, wr_en = 0, wr_bank = 0;
  logic [3:0] wr_row = 0;
  logic [D-1:0][EW-1:0] wr_data = '0;
  logic [H-1:0] rd_bank = '0;
  logic [H-1:0][3:0] rd_row = '0, rd_col = '0;
  logic [H-1:0][EW-1:0] w;
  logic [EW-1:0] model [2][D][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_w_buffer #(.H(H), .P(P), .EW(EW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .wr_en_i(wr_en), .wr_bank_i(wr_bank), .wr_row_i(wr_row), .wr_data_i(wr_data),
    .rd_bank_i(rd_bank), .rd_row_i(rd_row), .rd_col_i(rd_col), .w_o(w));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int b = 0; b < 2; b++) for (int r = 0; r < D; r++) for (int e = 0; e < D; e++) model[b][r][e] = '0;
    for (int it = 0; it < 600; it++) begin
      @(negedge clk);
      wr_en = 1'($urandom); wr_bank = 1'($urandom); wr_row = 4'($urandom);
      for (int e = 0; e < D; e++) wr_data[e] = EW'($urandom);
      rd_bank = H'($urandom); rd_row = 16'($urandom); rd_col = 16'($urandom);
      #1;
      for (int j = 0; j < H; j++) begin
        checks++;
        if (w[j] != model[rd_bank[j]][rd_row[j]][rd_col[j]]) begin
          failures++; $display("FAIL w[%0d]", j);
        end
      end
      @(posedge clk);
      if (wr_en) for (int e = 0; e < D; e++) model[wr_bank][wr_row][e] = wr_data[e];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
