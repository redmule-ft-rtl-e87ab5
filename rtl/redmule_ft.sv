// redmule_ft: fault-tolerant matrix multiplication engine, Z = Y + X * W (FP16).
//
// Datapath: an L x H array of FMA compute elements (redmule_engine). X and Y
// rows are fed per CE row, W is broadcast per CE column with a parity bit,
// each row accumulates D = H * (P + 1) output columns in its ring. Buffers for
// X, W and Y/Z sit around the array; one streamer moves words between them and
// the shared memory through the ECC unit, the Z'=Z checker and the
// (de)duplicator.
//
// Two run modes, chosen by bit 0 of the MODE register before a job:
// performance mode uses all L rows for different rows of Z; fault-tolerant mode
// lets each pair of consecutive rows compute the same Z row (half the
// throughput), and the checker compares the pair before one copy is written.
//
// Control protection: the control FSM, the scheduler, the register-file parity
// checker, the streamer and the (de)duplicator are duplicated; the copies of
// the streamer, the (de)duplicator and the buffers carry a reduced data width
// (one parity bit per FP16 element, or one ECC granule) and their outputs are
// compared with the primary's every cycle. Even CE rows follow the primary
// scheduler, odd rows the replica. Every checker reports to redmule_fault_unit,
// which records the fault, aborts the job (everything returns to idle) and
// raises irq_o for two cycles. The register file is protected by a host
// computed XOR parity word.
//
// Interfaces: a 32-bit register port (combinational read) for the host; a
// memory port with request/grant handshake, 312-bit words (256 data bits in
// eight SECDED (39,32) granules) and in-order read responses one or more cycles
// after the grant; done_o pulses at the end of a job.
module redmule_ft #(
  parameter int unsigned L  = redmule_pkg::L_DEF,
  parameter int unsigned H  = redmule_pkg::H_DEF,
  parameter int unsigned P  = redmule_pkg::P_DEF,
  localparam int unsigned D  = H * (P + 1),
  localparam int unsigned DL = $clog2(D),
  localparam int unsigned DW = D * 16,
  localparam int unsigned NG = DW / 32,
  localparam int unsigned CW = NG * 39,
  localparam int unsigned RL = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned IW = 16
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // host register port
  input  logic                            reg_req_i,
  input  logic                            reg_we_i,
  input  logic [4:0]                      reg_addr_i,
  input  logic [31:0]                     reg_wdata_i,
  output logic [31:0]                     reg_rdata_o,
  // shared memory port
  output logic                            mem_req_o,
  input  logic                            mem_gnt_i,
  output logic [redmule_pkg::ADDR_W-1:0]  mem_addr_o,
  output logic                            mem_we_o,
  output logic [CW-1:0]                   mem_wdata_o,
  input  logic                            mem_rvalid_i,
  input  logic [CW-1:0]                   mem_rdata_i,
  // events
  output logic                            irq_o,
  output logic                            done_o,
  output logic                            busy_o
);
  import redmule_pkg::*;

  // ---------------------------------------------------------------- register file
  logic [NCFG-1:0][31:0] cfg_w;
  cfg_t                  cfg;
  logic                  trigger, fault_clr, ecc_clr;
  logic [NFAULT-1:0]     fault_vec, fault_status;
  logic [31:0]           ecc_cnt;
  logic [1:0]            rf_err;
  logic                  abort, active;
  logic [1:0]            ctl_load, ctl_start, ctl_done, ctl_clear, ctl_busy, sch_done;

  redmule_regfile u_regfile (
    .clk_i, .rst_ni,
    .req_i(reg_req_i), .we_i(reg_we_i), .addr_i(reg_addr_i), .wdata_i(reg_wdata_i),
    .rdata_o(reg_rdata_o),
    .busy_i(active), .fault_status_i(fault_status), .ecc_cnt_i(ecc_cnt),
    .load_i(ctl_load[0]), .trigger_o(trigger), .fault_clr_o(fault_clr), .ecc_clr_o(ecc_clr),
    .cfg_o(cfg_w)
  );

  assign cfg.x  = cfg_w[REG_X];
  assign cfg.w  = cfg_w[REG_W];
  assign cfg.y  = cfg_w[REG_Y];
  assign cfg.z  = cfg_w[REG_Z];
  assign cfg.m  = cfg_w[REG_M];
  assign cfg.n  = cfg_w[REG_N];
  assign cfg.k  = cfg_w[REG_K];
  assign cfg.ft = cfg_w[REG_MODE][0];

  redmule_rf_parity u_rf_par0 (.cfg_i(cfg_w), .err_o(rf_err[0]));
  redmule_rf_parity u_rf_par1 (.cfg_i(cfg_w), .err_o(rf_err[1]));

  // ---------------------------------------------------------------- control FSMs
  logic       clear;

  for (genvar c = 0; c < 2; c++) begin : g_ctrl
    redmule_ctrl u_ctrl (
      .clk_i, .rst_ni, .trigger_i(trigger), .sched_done_i(sch_done[c]), .fault_i(abort),
      .load_o(ctl_load[c]), .start_o(ctl_start[c]), .done_o(ctl_done[c]),
      .clear_o(ctl_clear[c]), .busy_o(ctl_busy[c])
    );
  end
  assign clear  = |ctl_clear;
  assign active = |ctl_busy;
  assign busy_o = active;
  assign done_o = ctl_done[0];

  // ---------------------------------------------------------------- schedulers
  logic [1:0]                 job_valid, job_ready, job_done, s_en, s_use_y, s_zcap, s_stall, s_busy;
  job_t [1:0]                 job;
  logic [1:0][DL-1:0]         s_yidx, s_zidx;
  logic [1:0][H-1:0]          s_cvalid, s_cbank;
  logic [1:0][H-1:0][DL-1:0]  s_cnloc, s_ck;

  for (genvar c = 0; c < 2; c++) begin : g_sched
    redmule_scheduler #(.L(L), .H(H), .P(P)) u_sched (
      .clk_i, .rst_ni, .clear_i(clear), .start_i(ctl_start[c]), .cfg_i(cfg),
      .job_valid_o(job_valid[c]), .job_o(job[c]), .job_ready_i(job_ready[c]),
      .job_done_i(job_done[c]),
      .en_o(s_en[c]), .use_y_o(s_use_y[c]), .y_idx_o(s_yidx[c]), .z_cap_o(s_zcap[c]),
      .z_idx_o(s_zidx[c]), .col_valid_o(s_cvalid[c]), .col_bank_o(s_cbank[c]),
      .col_nloc_o(s_cnloc[c]), .col_k_o(s_ck[c]),
      .stall_o(s_stall[c]), .busy_o(s_busy[c]), .done_o(sch_done[c])
    );
  end

  // ---------------------------------------------------------------- streamers
  // Primary (full data) and shadow (one parity bit per element).
  logic                    s0_req, s0_we, s0_dup, s1_req, s1_we, s1_dup, mem_gnt_up, mem_rvalid_up;
  logic [ADDR_W-1:0]       s0_addr, s1_addr;
  logic [DW-1:0]           s0_wdata, s0_rdata, s0_wr_data, zrd0;
  logic [D-1:0]            s1_wdata, s1_rdata, s1_wr_data, zrd1;
  logic [1:0]              wr_valid, wr_bank;
  tgt_e [1:0]              wr_tgt;
  logic [1:0][IW-1:0]      wr_idx, rd_idx;

  redmule_streamer #(.DW(DW), .IW(IW)) u_stream0 (
    .clk_i, .rst_ni, .clear_i(clear),
    .job_valid_i(job_valid[0]), .job_i(job[0]), .job_ready_o(job_ready[0]), .done_o(job_done[0]),
    .mem_req_o(s0_req), .mem_gnt_i(mem_gnt_up), .mem_addr_o(s0_addr), .mem_we_o(s0_we), .mem_dup_o(s0_dup),
    .mem_wdata_o(s0_wdata), .mem_rvalid_i(mem_rvalid_up), .mem_rdata_i(s0_rdata),
    .wr_valid_o(wr_valid[0]), .wr_tgt_o(wr_tgt[0]), .wr_bank_o(wr_bank[0]),
    .wr_idx_o(wr_idx[0]), .wr_data_o(s0_wr_data), .rd_idx_o(rd_idx[0]), .rd_data_i(zrd0)
  );

  redmule_streamer #(.DW(D), .IW(IW)) u_stream1 (
    .clk_i, .rst_ni, .clear_i(clear),
    .job_valid_i(job_valid[1]), .job_i(job[1]), .job_ready_o(job_ready[1]), .done_o(job_done[1]),
    .mem_req_o(s1_req), .mem_gnt_i(mem_gnt_up), .mem_addr_o(s1_addr), .mem_we_o(s1_we), .mem_dup_o(s1_dup),
    .mem_wdata_o(s1_wdata), .mem_rvalid_i(mem_rvalid_up), .mem_rdata_i(s1_rdata),
    .wr_valid_o(wr_valid[1]), .wr_tgt_o(wr_tgt[1]), .wr_bank_o(wr_bank[1]),
    .wr_idx_o(wr_idx[1]), .wr_data_o(s1_wr_data), .rd_idx_o(rd_idx[1]), .rd_data_i(zrd1)
  );

  // Element parities, generated separately for the shadow path and the comparisons.
  function automatic logic [D-1:0] par_of(input logic [DW-1:0] d);
    logic [D-1:0] p;
    for (int unsigned e = 0; e < D; e++) p[e] = ^d[e*16 +: 16];
    return p;
  endfunction

  // ---------------------------------------------------------------- memory path
  logic [CW-1:0]     enc_wdata, chk_wdata, up_rdata;
  logic              chk_req, chk_we, chk_err, sec, ded, up_rvalid;
  logic [ADDR_W-1:0] chk_addr;
  logic              dd1_req, dd1_we, dd1_gnt, dd1_rvalid;
  logic [ADDR_W-1:0] dd1_addr;
  logic [38:0]       dd1_wdata, dd1_rdata;
  logic              dd0_err, dd1_err, dd_gnt;

  redmule_ecc #(.NG(NG)) u_ecc (
    .wdata_i(s0_wdata), .wdata_o(enc_wdata),
    .rdata_i(up_rdata), .rvalid_i(up_rvalid), .rdata_o(s0_rdata), .sec_o(sec), .ded_o(ded)
  );
  assign s1_rdata      = par_of(s0_rdata);
  assign mem_rvalid_up = up_rvalid;

  redmule_checker #(.DW(CW)) u_checker (
    .clk_i, .rst_ni, .clear_i(clear), .dup_i(s0_dup),
    .up_req_i(s0_req), .up_gnt_o(mem_gnt_up), .up_addr_i(s0_addr), .up_we_i(s0_we),
    .up_wdata_i(enc_wdata),
    .dn_req_o(chk_req), .dn_gnt_i(dd_gnt), .dn_addr_o(chk_addr), .dn_we_o(chk_we),
    .dn_wdata_o(chk_wdata), .err_o(chk_err)
  );

  redmule_dedup #(.DW(CW)) u_dedup0 (
    .clk_i, .rst_ni, .clear_i(clear), .dup_i(s0_dup),
    .up_req_i(chk_req), .up_gnt_o(dd_gnt), .up_addr_i(chk_addr), .up_we_i(chk_we),
    .up_wdata_i(chk_wdata), .up_rvalid_o(up_rvalid), .up_rdata_o(up_rdata),
    .dn_req_o(mem_req_o), .dn_gnt_i(mem_gnt_i), .dn_addr_o(mem_addr_o), .dn_we_o(mem_we_o),
    .dn_wdata_o(mem_wdata_o), .dn_rvalid_i(mem_rvalid_i), .dn_rdata_i(mem_rdata_i),
    .err_o(dd0_err)
  );

  // Reduced-width copy: first ECC granule only.
  logic [38:0] dd1_up_rdata;
  redmule_dedup #(.DW(39)) u_dedup1 (
    .clk_i, .rst_ni, .clear_i(clear), .dup_i(s0_dup),
    .up_req_i(chk_req), .up_gnt_o(dd1_gnt), .up_addr_i(chk_addr), .up_we_i(chk_we),
    .up_wdata_i(chk_wdata[38:0]), .up_rvalid_o(dd1_rvalid), .up_rdata_o(dd1_up_rdata),
    .dn_req_o(dd1_req), .dn_gnt_i(mem_gnt_i), .dn_addr_o(dd1_addr), .dn_we_o(dd1_we),
    .dn_wdata_o(dd1_wdata), .dn_rvalid_i(mem_rvalid_i), .dn_rdata_i(mem_rdata_i[38:0]),
    .err_o(dd1_err)
  );
  assign dd1_rdata = dd1_up_rdata;

  // ---------------------------------------------------------------- buffers
  logic [L-1:0][H-1:0][15:0] x0;
  logic [L-1:0][H-1:0]       x1;
  logic [H-1:0][15:0]        w0;
  logic [H-1:0]              w1;
  logic [L-1:0][15:0]        y0, z_eng;
  logic [L-1:0]              y1, z_par;
  logic [L-1:0]              row_en, row_en_sh, row_use_y;
  logic [L-1:0][H-1:0]       row_chk;

  for (genvar i = 0; i < L; i++) begin : g_rowctl
    assign row_en[i]    = s_en[i % 2];
    assign row_en_sh[i] = s_en[(i + 1) % 2];
    assign row_use_y[i] = s_use_y[i % 2];
    assign row_chk[i]   = s_cvalid[i % 2];
    assign z_par[i]     = ^z_eng[i];
  end

  redmule_x_buffer #(.L(L), .H(H), .P(P), .EW(16), .SEL_OFS(0)) u_xbuf0 (
    .clk_i, .rst_ni,
    .wr_en_i(wr_valid[0] && wr_tgt[0] == TGT_X), .wr_bank_i(wr_bank[0]),
    .wr_row_i(RL'(wr_idx[0])), .wr_data_i(s0_wr_data),
    .rd_bank_i(s_cbank), .rd_idx_i(s_cnloc), .x_o(x0)
  );
  redmule_x_buffer #(.L(L), .H(H), .P(P), .EW(1), .SEL_OFS(1)) u_xbuf1 (
    .clk_i, .rst_ni,
    .wr_en_i(wr_valid[1] && wr_tgt[1] == TGT_X), .wr_bank_i(wr_bank[1]),
    .wr_row_i(RL'(wr_idx[1])), .wr_data_i(s1_wr_data),
    .rd_bank_i(s_cbank), .rd_idx_i(s_cnloc), .x_o(x1)
  );

  redmule_w_buffer #(.H(H), .P(P), .EW(16)) u_wbuf0 (
    .clk_i, .rst_ni,
    .wr_en_i(wr_valid[0] && wr_tgt[0] == TGT_W), .wr_bank_i(wr_bank[0]),
    .wr_row_i(DL'(wr_idx[0])), .wr_data_i(s0_wr_data),
    .rd_bank_i(s_cbank[0]), .rd_row_i(s_cnloc[0]), .rd_col_i(s_ck[0]), .w_o(w0)
  );
  redmule_w_buffer #(.H(H), .P(P), .EW(1)) u_wbuf1 (
    .clk_i, .rst_ni,
    .wr_en_i(wr_valid[1] && wr_tgt[1] == TGT_W), .wr_bank_i(wr_bank[1]),
    .wr_row_i(DL'(wr_idx[1])), .wr_data_i(s1_wr_data),
    .rd_bank_i(s_cbank[1]), .rd_row_i(s_cnloc[1]), .rd_col_i(s_ck[1]), .w_o(w1)
  );

  redmule_yz_buffer #(.L(L), .H(H), .P(P), .EW(16), .SEL_OFS(0)) u_yzbuf0 (
    .clk_i, .rst_ni,
    .y_wr_en_i(wr_valid[0] && wr_tgt[0] == TGT_Y), .y_wr_row_i(RL'(wr_idx[0])),
    .y_wr_data_i(s0_wr_data), .y_idx_i(s_yidx), .y_o(y0),
    .z_en_i(row_en), .z_cap_i(s_zcap), .z_idx_i(s_zidx), .z_i(z_eng),
    .z_rd_row_i(RL'(rd_idx[0])), .z_rd_data_o(zrd0)
  );
  redmule_yz_buffer #(.L(L), .H(H), .P(P), .EW(1), .SEL_OFS(1)) u_yzbuf1 (
    .clk_i, .rst_ni,
    .y_wr_en_i(wr_valid[1] && wr_tgt[1] == TGT_Y), .y_wr_row_i(RL'(wr_idx[1])),
    .y_wr_data_i(s1_wr_data), .y_idx_i(s_yidx), .y_o(y1),
    .z_en_i(row_en_sh), .z_cap_i(s_zcap), .z_idx_i(s_zidx), .z_i(z_par),
    .z_rd_row_i(RL'(rd_idx[1])), .z_rd_data_o(zrd1)
  );

  // ---------------------------------------------------------------- engine
  logic wpar_err;

  redmule_engine #(.L(L), .H(H), .P(P)) u_engine (
    .clk_i, .rst_ni, .row_en_i(row_en), .row_use_y_i(row_use_y), .chk_i(row_chk),
    .x_i(x0), .w_i(w0), .w_par_i(w1), .y_i(y0), .z_o(z_eng), .par_err_o(wpar_err)
  );

  // ---------------------------------------------------------------- comparisons
  logic buf_err, stream_err, sched_err, ctrl_err, dedup_err;

  always_comb begin
    buf_err = 1'b0;
    for (int unsigned i = 0; i < L; i++) begin
      for (int unsigned j = 0; j < H; j++)
        if (row_en[i] && row_chk[i][j] && ((^x0[i][j]) != x1[i][j])) buf_err = 1'b1;
      if (row_en[i] && row_use_y[i] && ((^y0[i]) != y1[i])) buf_err = 1'b1;
    end
  end

  assign stream_err = (s0_req != s1_req) || (s0_req && ((s0_addr != s1_addr) || (s0_we != s1_we) || (s0_dup != s1_dup) ||
                        (s0_we && (par_of(s0_wdata) != s1_wdata)))) ||
                      (job_ready != {2{job_ready[0]}}) || (job_done != {2{job_done[0]}}) ||
                      (wr_valid[0] != wr_valid[1]) ||
                      (wr_valid[0] && ((wr_tgt[0] != wr_tgt[1]) || (wr_bank[0] != wr_bank[1]) ||
                                       (wr_idx[0] != wr_idx[1])));

  assign sched_err = (job_valid[0] != job_valid[1]) || (job_valid[0] && (job[0] != job[1])) ||
                     (s_en[0] != s_en[1]) || (s_use_y[0] != s_use_y[1]) ||
                     (s_yidx[0] != s_yidx[1]) || (s_zcap[0] != s_zcap[1]) ||
                     (s_zidx[0] != s_zidx[1]) || (s_cvalid[0] != s_cvalid[1]) ||
                     (s_cbank[0] != s_cbank[1]) || (s_cnloc[0] != s_cnloc[1]) ||
                     (s_ck[0] != s_ck[1]) || (s_busy[0] != s_busy[1]) ||
                     (sch_done[0] != sch_done[1]) || (s_stall[0] != s_stall[1]);

  assign ctrl_err = (ctl_load[0] != ctl_load[1]) || (ctl_start[0] != ctl_start[1]) ||
                    (ctl_done[0] != ctl_done[1]) || (ctl_busy[0] != ctl_busy[1]);

  assign dedup_err = dd0_err || dd1_err || (mem_req_o != dd1_req) || (dd_gnt != dd1_gnt) ||
                     (mem_req_o && ((mem_addr_o != dd1_addr) || (mem_we_o != dd1_we) ||
                                    (mem_we_o && (mem_wdata_o[38:0] != dd1_wdata)))) ||
                     (up_rvalid != dd1_rvalid) || (up_rvalid && (up_rdata[38:0] != dd1_rdata));

  always_comb begin
    fault_vec           = '0;
    fault_vec[F_RF_PAR] = |rf_err;
    fault_vec[F_CTRL]   = ctrl_err;
    fault_vec[F_SCHED]  = sched_err;
    fault_vec[F_STREAM] = stream_err;
    fault_vec[F_BUF]    = buf_err;
    fault_vec[F_WPAR]   = wpar_err;
    fault_vec[F_ZCHK]   = chk_err;
    fault_vec[F_ECC]    = ded;
    fault_vec[F_DEDUP]  = dedup_err;
  end

  redmule_fault_unit u_fault (
    .clk_i, .rst_ni, .active_i(active), .fault_i(fault_vec), .clr_i(fault_clr),
    .sec_i(sec), .ecc_clr_i(ecc_clr),
    .abort_o(abort), .irq_o(irq_o), .status_o(fault_status), .ecc_cnt_o(ecc_cnt)
  );

endmodule
