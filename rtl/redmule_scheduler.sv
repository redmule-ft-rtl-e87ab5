// redmule_scheduler: tiling of Z = Y + X * W and cycle control of the array.
//
// The output matrix Z (M x K) is produced in tiles of R rows by D = H * (P + 1)
// columns, where R = L in performance mode and L / 2 in fault-tolerant mode
// (two consecutive CE rows then compute the same Z row). Tiles go along K
// first, then along M. For each tile the scheduler asks the streamer, one job
// at a time, for: the Y rows; then per chunk c of D elements of N the X row
// chunk (bank c % 2 of the X buffer) and the D rows of W belonging to it (bank
// c % 2 of the W buffer); finally, after the array has finished, the Z store.
// In fault-tolerant mode every X, Y and Z job has its DUP flag set and twice the
// row count, so each matrix row is requested twice, once per CE row of the pair.
//
// Array timing: a counter t advances on every enabled cycle (en_o). Column j
// of the array works at time tj = t - j * (P + 1) on block b = tj / D (H
// elements of N) and output column k = tj % D; chunk c = b / (P + 1). The array
// stalls (en_o low) at the start of a chunk that is not loaded yet. For t < D
// element 0 takes Y, for NB*D <= t < NB*D + D (NB blocks in total) the chain
// outputs are the finished Z values and are captured. Loading chunk c + 2 into
// a bank waits until t has passed the point where the last column left chunk c.
//
// The design runs two copies in lockstep; each drives its own streamer and half
// of the rows, and their outputs are compared. Requirements of this design: H
// and P + 1 powers of two, P >= 1, N and K multiples of D, L even.
module redmule_scheduler #(
  parameter int unsigned L  = redmule_pkg::L_DEF,
  parameter int unsigned H  = redmule_pkg::H_DEF,
  parameter int unsigned P  = redmule_pkg::P_DEF,
  localparam int unsigned D  = H * (P + 1),
  localparam int unsigned DL = $clog2(D),
  localparam int unsigned PL = $clog2(P + 1),
  localparam int unsigned CL = $clog2(D * (P + 1))
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      clear_i,
  input  logic                      start_i,
  input  redmule_pkg::cfg_t         cfg_i,
  // streamer jobs
  output logic                      job_valid_o,
  output redmule_pkg::job_t         job_o,
  input  logic                      job_ready_i,
  input  logic                      job_done_i,
  // array control
  output logic                      en_o,
  output logic                      use_y_o,
  output logic [DL-1:0]             y_idx_o,
  output logic                      z_cap_o,
  output logic [DL-1:0]             z_idx_o,
  output logic [H-1:0]              col_valid_o,
  output logic [H-1:0]              col_bank_o,
  output logic [H-1:0][DL-1:0]      col_nloc_o,
  output logic [H-1:0][DL-1:0]      col_k_o,
  // status
  output logic                      stall_o,
  output logic                      busy_o,
  output logic                      done_o
);
  import redmule_pkg::*;

  typedef enum logic [3:0] {J_IDLE, J_Y, J_YW, J_X, J_XW, J_W, J_WW, J_ENG, J_Z, J_ZW} jstate_e;
  jstate_e     js_q;
  logic [31:0] m0_q, k0_q, t_q;
  logic [15:0] loaded_q, jc_q;

  logic [31:0] rows_tile, mrows, nbd, t_end;
  logic [15:0] cnt, nc;
  logic        bank_free, last_k, last_m;
  logic [ADDR_W-1:0] y_off, x_off, w_off;

  always_comb begin
    rows_tile = cfg_i.ft ? 32'(L / 2) : 32'(L);
    mrows     = (cfg_i.m - m0_q < rows_tile) ? cfg_i.m - m0_q : rows_tile;
    cnt       = 16'(cfg_i.ft ? (mrows << 1) : mrows);
    nc        = 16'(cfg_i.n >> DL);
    nbd       = cfg_i.n << PL;              // NB * D = N * (P + 1)
    t_end     = nbd + 32'(D);
    bank_free = (jc_q < 2) || (t_q >= ((32'(jc_q) - 32'd1) << CL) + 32'(D));
    last_k    = (k0_q + 32'(D) >= cfg_i.k);
    last_m    = (m0_q + rows_tile >= cfg_i.m);
    y_off     = (m0_q * cfg_i.k + k0_q) << 1;
    x_off     = (m0_q * cfg_i.n + 32'(jc_q) * 32'(D)) << 1;
    w_off     = (32'(jc_q) * 32'(D) * cfg_i.k + k0_q) << 1;
  end

  // Job descriptor of the current job state.
  always_comb begin
    job_valid_o = 1'b0;
    job_o       = '0;
    job_o.dup   = cfg_i.ft;
    job_o.count = cnt;
    job_o.bank  = jc_q[0];
    unique case (js_q)
      J_Y: begin
        job_valid_o = 1'b1;
        job_o.tgt = TGT_Y; job_o.base = cfg_i.y + y_off; job_o.stride = cfg_i.k << 1;
      end
      J_X: if (jc_q < nc && bank_free) begin
        job_valid_o = 1'b1;
        job_o.tgt = TGT_X; job_o.base = cfg_i.x + x_off; job_o.stride = cfg_i.n << 1;
      end
      J_W: begin
        job_valid_o = 1'b1;
        job_o.tgt = TGT_W; job_o.base = cfg_i.w + w_off; job_o.stride = cfg_i.k << 1;
        job_o.dup = 1'b0;  job_o.count = 16'(D);
      end
      J_Z: begin
        job_valid_o = 1'b1;  job_o.store = 1'b1;
        job_o.tgt = TGT_Z; job_o.base = cfg_i.z + y_off; job_o.stride = cfg_i.k << 1;
      end
      default: ;
    endcase
  end

  // Array enable: run while the chunk under column 0 is loaded, and drain.
  assign en_o    = (js_q != J_IDLE) && (t_q < t_end) &&
                   ((t_q >= nbd) || (32'(t_q >> CL) < 32'(loaded_q)));
  assign stall_o = (js_q != J_IDLE) && (t_q < t_end) && !en_o;
  assign use_y_o = (js_q != J_IDLE) && (t_q < 32'(D));
  assign y_idx_o = t_q[DL-1:0];
  assign z_cap_o = (js_q != J_IDLE) && (t_q >= nbd) && (t_q < t_end);
  assign z_idx_o = t_q[DL-1:0];
  assign busy_o  = (js_q != J_IDLE);

  for (genvar j = 0; j < H; j++) begin : g_col
    logic signed [32:0] tj;
    logic [32:0]        blk;
    assign tj  = $signed({1'b0, t_q}) - 33'(j * (P + 1));
    assign blk = 33'(tj) >> DL;
    assign col_valid_o[j] = (js_q != J_IDLE) && (tj >= 0) && (tj < $signed({1'b0, nbd}));
    assign col_k_o[j]     = tj[DL-1:0];
    assign col_bank_o[j]  = blk[PL];
    assign col_nloc_o[j]  = DL'(blk[PL-1:0] * H + j);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      js_q <= J_IDLE; m0_q <= '0; k0_q <= '0; t_q <= '0; loaded_q <= '0; jc_q <= '0;
      done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      if (clear_i) begin
        js_q <= J_IDLE;
      end else begin
        if (en_o) t_q <= t_q + 32'd1;
        unique case (js_q)
          J_IDLE: if (start_i) begin
            m0_q <= '0; k0_q <= '0; t_q <= '0; loaded_q <= '0; jc_q <= '0;
            if (cfg_i.m == 0 || nc == 0 || cfg_i.k < 32'(D)) done_o <= 1'b1;
            else                                              js_q <= J_Y;
          end
          J_Y:  if (job_ready_i) js_q <= J_YW;
          J_YW: if (job_done_i)  js_q <= J_X;
          J_X:  if (jc_q == nc) js_q <= J_ENG;
                else if (job_valid_o && job_ready_i) js_q <= J_XW;
          J_XW: if (job_done_i)  js_q <= J_W;
          J_W:  if (job_ready_i) js_q <= J_WW;
          J_WW: if (job_done_i) begin
            loaded_q <= jc_q + 16'd1; jc_q <= jc_q + 16'd1; js_q <= J_X;
          end
          J_ENG: if (t_q == t_end) js_q <= J_Z;
          J_Z:  if (job_ready_i) js_q <= J_ZW;
          J_ZW: if (job_done_i) begin
            t_q <= '0; loaded_q <= '0; jc_q <= '0;
            if (last_k) begin
              k0_q <= '0; m0_q <= m0_q + rows_tile;
            end else begin
              k0_q <= k0_q + 32'(D);
            end
            if (last_k && last_m) begin js_q <= J_IDLE; done_o <= 1'b1; end
            else                        js_q <= J_Y;
          end
          default: js_q <= J_IDLE;
        endcase
      end
    end
  end

endmodule
