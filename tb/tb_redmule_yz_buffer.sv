// tb_redmule_yz_buffer: random Y row writes and Y element reads per select set;
// random Z captures (per row enable, capture flag and index of the row's select
// set) and Z row reads, all against a model.
module tb_redmule_yz_buffer;
  localparam int unsigned L = 4, H = 2, P = 1, D = H * (P + 1), EW = 16;
  logic clk = 0, rst_n = 1, y_wr_en = 0;
  logic [1:0] y_wr_row = 0, z_rd_row = 0;
  logic [D-1:0][EW-1:0] y_wr_data = '0, z_rd_data;
  logic [1:0][1:0] y_idx = '0, z_idx = '0;
  logic [L-1:0][EW-1:0] y, z_in = '0;
  logic [L-1:0] z_en = '0;
  logic [1:0] z_cap = '0;
  logic [EW-1:0] ym [L][D];
  logic [EW-1:0] zm [L][D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_yz_buffer #(.L(L), .H(H), .P(P), .EW(EW), .SEL_OFS(0)) dut (.clk_i(clk), .rst_ni(rst_n),
    .y_wr_en_i(y_wr_en), .y_wr_row_i(y_wr_row), .y_wr_data_i(y_wr_data), .y_idx_i(y_idx), .y_o(y),
    .z_en_i(z_en), .z_cap_i(z_cap), .z_idx_i(z_idx), .z_i(z_in), .z_rd_row_i(z_rd_row),
    .z_rd_data_o(z_rd_data));

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    #1 rst_n = 0; #10 rst_n = 1;
    for (int r = 0; r < L; r++) for (int e = 0; e < D; e++) begin ym[r][e] = '0; zm[r][e] = '0; end
    for (int it = 0; it < 400; it++) begin
      @(negedge clk);
      y_wr_en = 1'($urandom); y_wr_row = 2'($urandom);
      for (int e = 0; e < D; e++) y_wr_data[e] = EW'($urandom);
      y_idx = 4'($urandom); z_idx = 4'($urandom); z_cap = 2'($urandom); z_en = L'($urandom);
      for (int i = 0; i < L; i++) z_in[i] = EW'($urandom);
      z_rd_row = 2'($urandom);
      #1;
      for (int i = 0; i < L; i++) check(y[i] == ym[i][y_idx[i % 2]], $sformatf("y[%0d]", i));
      for (int e = 0; e < D; e++) check(z_rd_data[e] == zm[z_rd_row][e], "z row read");
      @(posedge clk);
      if (y_wr_en) for (int e = 0; e < D; e++) ym[y_wr_row][e] = y_wr_data[e];
      for (int i = 0; i < L; i++) if (z_en[i] && z_cap[i % 2]) zm[i][z_idx[i % 2]] = z_in[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
