// tb_redmule_engine: a 2 x 2 array with P = 1 (ring of D = 4 accumulations)
// driven with the array schedule: element j of each row at time tj = t - 2j
// works on block tj / 4 and column tj % 4, with random stalls. After
// N = 12 elements (3 blocks) the chain outputs are the Z values; they are
// compared with a sequential FMA reference. A parity upset is then injected.
module tb_redmule_engine;
  import tb_fp16_pkg::*;
  localparam int unsigned L = 2, H = 2, P = 1, D = H * (P + 1), N = 12, NB = N / H;
  logic clk = 0, rst_n = 1;
  logic [L-1:0] en, use_y;
  logic [L-1:0][H-1:0] chk;
  logic [L-1:0][H-1:0][15:0] x;
  logic [H-1:0][15:0] w;
  logic [H-1:0] wpar;
  logic [L-1:0][15:0] y, z;
  logic perr;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  redmule_engine #(.L(L), .H(H), .P(P)) dut (.clk_i(clk), .rst_ni(rst_n), .row_en_i(en),
    .row_use_y_i(use_y), .chk_i(chk), .x_i(x), .w_i(w), .w_par_i(wpar), .y_i(y), .z_o(z),
    .par_err_o(perr));

  logic [15:0] X [L][N];
  logic [15:0] W [N][D];
  logic [15:0] Y [L][D];

  task automatic check(input bit ok, input string s);
    checks++; if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t = 0, stalls = 0;
    for (int i = 0; i < L; i++) for (int n = 0; n < N; n++) X[i][n] = rand_fp16(13, 16);
    for (int n = 0; n < N; n++) for (int k = 0; k < D; k++) W[n][k] = rand_fp16(13, 16);
    for (int i = 0; i < L; i++) for (int k = 0; k < D; k++) Y[i][k] = rand_fp16(10, 16);
    en = '0; use_y = '0; chk = '0; x = '0; w = '0; wpar = '0; y = '0;
    #1 rst_n = 0; #10 rst_n = 1;
    while (t < NB * D + D) begin
      @(negedge clk);
      en = (($urandom % 5) != 0) ? '1 : '0;
      if (!en[0]) stalls++;
      for (int i = 0; i < L; i++) begin
        use_y[i] = (t < D);
        y[i] = Y[i][t % D];
        for (int j = 0; j < H; j++) begin
          automatic int tj = t - j * (P + 1);
          automatic int b = (tj >= 0) ? tj / D : 0;
          chk[i][j] = (tj >= 0) && (tj < NB * D);
          x[i][j] = X[i][(b < NB ? b : NB - 1) * H + j];
        end
      end
      for (int j = 0; j < H; j++) begin
        automatic int tj = t - j * (P + 1);
        automatic int b = (tj >= 0) ? tj / D : 0;
        w[j] = W[(b < NB ? b : NB - 1) * H + j][(tj >= 0 ? tj : 0) % D];
        wpar[j] = ^w[j];
      end
      #1 check(!perr, "no parity error on clean weights");
      if (en[0] && t >= NB * D) begin
        for (int i = 0; i < L; i++) begin
          automatic logic [15:0] acc = Y[i][t - NB * D];
          for (int n = 0; n < N; n++) acc = fma_ref(X[i][n], W[n][t - NB * D], acc);
          check(z[i] == acc, $sformatf("Z[%0d][%0d] %h vs %h", i, t - NB * D, z[i], acc));
        end
      end
      if (en[0]) t++;
    end
    check(stalls > 0, "stalls exercised");
    @(negedge clk); chk = '1; wpar[1] = ~wpar[1];
    #1 check(perr, "parity upset detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
