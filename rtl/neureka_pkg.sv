// neureka_pkg: types and constants shared by the N-EUREKA accelerator, the heterogeneous
// TCDM interconnect and the Neural Memory Subsystem.
//
// The tile geometry (8x8x32 input tile, 6x6 PEs of 32 columns by 9 rows, 256-bit streams,
// 288-bit L1 port) follows the published architecture. The register map, the job struct and the
// layout of normalization parameters are choices of this implementation.
package neureka_pkg;

  // Operating modes of the engine.
  typedef enum logic [1:0] {
    MODE_3X3 = 2'd0,  // 3x3 dense convolution, bit-serial weights
    MODE_1X1 = 2'd1,  // 1x1 dense (pointwise) convolution, bit-parallel weights
    MODE_DW  = 2'd2   // 3x3 depthwise convolution, bit-serial weights
  } nk_mode_e;

  localparam int unsigned NK_COLS       = 32;   // input channels per PE (columns)
  localparam int unsigned NK_ROWS       = 9;    // multipliers per column (3x3 window)
  localparam int unsigned NK_CH3X3      = 28;   // channels used in the 3x3 modes (252 of 256 weight bits)
  localparam int unsigned NK_BEAT_W     = 256;  // streamer beat
  localparam int unsigned NK_L1_W       = 288;  // L1 port (nine 32-bit words)
  localparam int unsigned NK_ACC_W      = 32;
  localparam int unsigned NK_COL_W      = 20;   // column output width
  localparam int unsigned NK_NORM_BYTES = 192;  // 32 scales + 32 shifts + 32x4 bias bytes

  // Register map of the configuration port (32-bit word offsets).
  localparam int unsigned REG_TRIGGER   = 0;
  localparam int unsigned REG_STATUS    = 1;
  localparam int unsigned REG_JOB0      = 4;
  localparam int unsigned N_JOB_REGS    = 16;
  localparam int unsigned REG_MODE      = 4;   // [1:0] mode, [7:4] weight bits, [8] 32-bit output
  localparam int unsigned REG_W_BASE    = 5;   // weight base, in 256-bit lines
  localparam int unsigned REG_IN_BASE   = 6;
  localparam int unsigned REG_IN_D0     = 7;   // input pixel stride (bytes)
  localparam int unsigned REG_IN_D1     = 8;   // input row stride
  localparam int unsigned REG_IN_S_K    = 9;   // input channel-tile stride
  localparam int unsigned REG_IN_S_H    = 10;  // input spatial tile strides
  localparam int unsigned REG_IN_S_W    = 11;
  localparam int unsigned REG_OUT_BASE  = 12;
  localparam int unsigned REG_OUT_D0    = 13;
  localparam int unsigned REG_OUT_D1    = 14;
  localparam int unsigned REG_OUT_S_K   = 15;
  localparam int unsigned REG_OUT_S_H   = 16;
  localparam int unsigned REG_OUT_S_W   = 17;
  localparam int unsigned REG_NORM_BASE = 18;
  localparam int unsigned REG_TILES     = 19;  // {n_kout, n_w, n_h, n_kin}, 8 bits each

  typedef struct packed {
    nk_mode_e    mode;
    logic [3:0]  qw;        // weight bits, 2..8
    logic        out32;     // 1: store raw 32-bit accumulators
    logic [31:0] w_base;
    logic [31:0] in_base;
    logic [31:0] in_d0;
    logic [31:0] in_d1;
    logic [31:0] in_s_k;
    logic [31:0] in_s_h;
    logic [31:0] in_s_w;
    logic [31:0] out_base;
    logic [31:0] out_d0;
    logic [31:0] out_d1;
    logic [31:0] out_s_k;
    logic [31:0] out_s_h;
    logic [31:0] out_s_w;
    logic [31:0] norm_base;
    logic [7:0]  n_kout;
    logic [7:0]  n_w;
    logic [7:0]  n_h;
    logic [7:0]  n_kin;
  } nk_job_t;

  function automatic nk_job_t regs_to_job(input logic [N_JOB_REGS-1:0][31:0] r);
    nk_job_t j;
    j.mode      = nk_mode_e'(r[REG_MODE-REG_JOB0][1:0]);
    j.qw        = r[REG_MODE-REG_JOB0][7:4];
    j.out32     = r[REG_MODE-REG_JOB0][8];
    j.w_base    = r[REG_W_BASE-REG_JOB0];
    j.in_base   = r[REG_IN_BASE-REG_JOB0];
    j.in_d0     = r[REG_IN_D0-REG_JOB0];
    j.in_d1     = r[REG_IN_D1-REG_JOB0];
    j.in_s_k    = r[REG_IN_S_K-REG_JOB0];
    j.in_s_h    = r[REG_IN_S_H-REG_JOB0];
    j.in_s_w    = r[REG_IN_S_W-REG_JOB0];
    j.out_base  = r[REG_OUT_BASE-REG_JOB0];
    j.out_d0    = r[REG_OUT_D0-REG_JOB0];
    j.out_d1    = r[REG_OUT_D1-REG_JOB0];
    j.out_s_k   = r[REG_OUT_S_K-REG_JOB0];
    j.out_s_h   = r[REG_OUT_S_H-REG_JOB0];
    j.out_s_w   = r[REG_OUT_S_W-REG_JOB0];
    j.norm_base = r[REG_NORM_BASE-REG_JOB0];
    j.n_kin     = r[REG_TILES-REG_JOB0][7:0];
    j.n_h       = r[REG_TILES-REG_JOB0][15:8];
    j.n_w       = r[REG_TILES-REG_JOB0][23:16];
    j.n_kout    = r[REG_TILES-REG_JOB0][31:24];
    return j;
  endfunction

  // Neural Memory Subsystem address map on its 64-bit cluster port (byte addresses).
  localparam logic [31:0] NMEM_MRAM_BASE = 32'h0000_0000;  // 4 MiB MRAM
  localparam logic [31:0] NMEM_SRAM_BASE = 32'h0040_0000;  // 4 MiB tile SRAM
  localparam logic [31:0] NMEM_CFG_BASE  = 32'h0100_0000;  // configuration registers

endpackage
