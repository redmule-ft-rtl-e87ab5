// redmule_pkg: types and constants shared by the fault-tolerant matrix engine.
//
// The array geometry defaults (L = 12 rows, H = 4 CEs per row, P = 3 pipeline
// registers per CE, FP16) are the configuration the design is evaluated in.
// Everything else here (register map, job descriptor, fault-status bit order,
// SECDED granule of 32 data bits) is a choice of this implementation.
package redmule_pkg;

  // Array geometry.
  localparam int unsigned L_DEF   = 12;  // rows of compute elements
  localparam int unsigned H_DEF   = 4;   // compute elements per row
  localparam int unsigned P_DEF   = 3;   // pipeline registers per compute element
  localparam int unsigned FPW     = 16;  // FP16 element width

  // Memory side: 32-bit byte addresses, SECDED over 32-bit granules (39,32).
  localparam int unsigned ADDR_W  = 32;
  localparam int unsigned ECC_DW  = 32;
  localparam int unsigned ECC_PW  = 7;
  localparam int unsigned ECC_CW  = ECC_DW + ECC_PW;

  // Streamer job target buffers.
  typedef enum logic [1:0] {TGT_X = 2'd0, TGT_W = 2'd1, TGT_Y = 2'd2, TGT_Z = 2'd3} tgt_e;

  // One streamer job: COUNT word accesses, word i at BASE + row(i) * STRIDE,
  // where row(i) = i, or i / 2 when DUP is set (fault-tolerant row pairs).
  typedef struct packed {
    logic              store;
    tgt_e              tgt;
    logic              bank;
    logic              dup;
    logic [15:0]       count;
    logic [ADDR_W-1:0] base;
    logic [ADDR_W-1:0] stride;
  } job_t;

  // Register file map (word index on the configuration bus).
  localparam int unsigned NCFG       = 9;   // configuration words incl. parity
  localparam int unsigned REG_X      = 0;
  localparam int unsigned REG_W      = 1;
  localparam int unsigned REG_Y      = 2;
  localparam int unsigned REG_Z      = 3;
  localparam int unsigned REG_M      = 4;
  localparam int unsigned REG_N      = 5;
  localparam int unsigned REG_K      = 6;
  localparam int unsigned REG_MODE   = 7;   // bit 0: 1 = fault-tolerant mode
  localparam int unsigned REG_PARITY = 8;   // XOR of words 0..7
  localparam int unsigned REG_TRIGGER = 16; // write: start the job
  localparam int unsigned REG_STATUS  = 17; // read: bit 0 busy
  localparam int unsigned REG_FAULT   = 18; // read: fault status; write: clear
  localparam int unsigned REG_ECCCNT  = 19; // read: corrected ECC errors; write: clear

  // Fault status bits.
  localparam int unsigned NFAULT     = 9;
  localparam int unsigned F_RF_PAR   = 0;  // register file parity
  localparam int unsigned F_CTRL     = 1;  // control FSM copies disagree
  localparam int unsigned F_SCHED    = 2;  // scheduler copies disagree
  localparam int unsigned F_STREAM   = 3;  // streamer copies disagree
  localparam int unsigned F_BUF      = 4;  // buffer copies disagree
  localparam int unsigned F_WPAR     = 5;  // weight parity at a CE
  localparam int unsigned F_ZCHK     = 6;  // redundant Z rows differ
  localparam int unsigned F_ECC      = 7;  // uncorrectable ECC error
  localparam int unsigned F_DEDUP    = 8;  // (de)duplicator copies disagree

  typedef struct packed {
    logic [ADDR_W-1:0] x, w, y, z;
    logic [31:0]       m, n, k;
    logic              ft;
  } cfg_t;

  // One parity bit per FP16 element of a word.
  function automatic logic [31:0] elem_parity(input logic [511:0] d, input int unsigned n);
    logic [31:0] p = '0;
    for (int unsigned e = 0; e < n; e++) p[e] = ^d[e*FPW +: FPW];
    return p;
  endfunction

endpackage
