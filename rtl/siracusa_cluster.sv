// siracusa_cluster: the accelerator side of the heterogeneous cluster.
//
// The cluster couples the N-EUREKA convolution accelerator to two memories:
//   * the shared L1 TCDM: N_BANKS (16) word-interleaved 32-bit banks (16 KiB each, 256 KiB in
//     total). The RISC-V cores, the cluster DMA and the external port reach it through the
//     logarithmic branch (tcdm_log_xbar, per-bank round-robin); N-EUREKA reaches it through the
//     shallow branch (tcdm_shallow_xbar, one 288-bit access to nine contiguous banks). The conflict
//     manager (tcdm_conflict_manager) arbitrates each bank between the two branches with a
//     programmable priority and a starvation bound.
//   * the Neural Memory Subsystem (MRAM weight memory and SRAM tile memory, 4 MiB each), whose
//     wide read port streams weights straight into N-EUREKA's PEs with a fixed 9-cycle latency.
// The processors, the DMA, the peripheral interconnect and the AXI cluster interconnect are not
// part of this module: the TCDM master ports of the logarithmic branch (index 0-7 cores, 8 DMA,
// 9 external port), N-EUREKA's configuration port, the Neural Memory Subsystem's 64-bit cluster
// port, the conflict-manager settings and the interrupt lines are top-level ports.
// Everything runs on one clock; the MRAM runs on an isochronous clock enable at half rate.
//
// The structure follows the published cluster block diagram; the port protocols are this
// design's choices (see the submodules).
module siracusa_cluster
  import neureka_pkg::*;
#(
  parameter int unsigned PE_DIM     = 6,
  parameter int unsigned N_LOG_MST  = 10,
  parameter int unsigned N_BANKS    = 16,
  parameter int unsigned BANK_WORDS = 4096,
  parameter int unsigned CUT_WORDS  = 65536
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  // logarithmic-branch TCDM masters
  input  logic [N_LOG_MST-1:0]              tcdm_req_i,
  input  logic [N_LOG_MST-1:0][31:0]        tcdm_addr_i,
  input  logic [N_LOG_MST-1:0]              tcdm_we_i,
  input  logic [N_LOG_MST-1:0][3:0]         tcdm_be_i,
  input  logic [N_LOG_MST-1:0][31:0]        tcdm_wdata_i,
  output logic [N_LOG_MST-1:0]              tcdm_gnt_o,
  output logic [N_LOG_MST-1:0]              tcdm_rvalid_o,
  output logic [N_LOG_MST-1:0][31:0]        tcdm_rdata_o,
  // N-EUREKA configuration (peripheral interconnect)
  input  logic                              ne_cfg_req_i,
  input  logic                              ne_cfg_we_i,
  input  logic [7:0]                        ne_cfg_addr_i,
  input  logic [31:0]                       ne_cfg_wdata_i,
  output logic                              ne_cfg_gnt_o,
  output logic                              ne_cfg_rvalid_o,
  output logic [31:0]                       ne_cfg_rdata_o,
  // Neural Memory Subsystem cluster port (64 bit)
  input  logic                              nmem_req_i,
  input  logic                              nmem_we_i,
  input  logic [31:0]                       nmem_addr_i,
  input  logic [63:0]                       nmem_wdata_i,
  output logic                              nmem_gnt_o,
  output logic                              nmem_rvalid_o,
  output logic [63:0]                       nmem_rdata_o,
  // conflict manager settings
  input  logic                              cm_prio_shallow_i,
  input  logic [7:0]                        cm_max_stall_i,
  // events and interrupts
  output logic                              ne_busy_o,
  output logic                              ne_evt_done_o,
  output logic                              irq_page_miss_o,
  output logic                              irq_page_switch_o
);
  localparam int unsigned ROW_W = $clog2(BANK_WORDS);

  // ------------------------------------------------------------ N-EUREKA
  logic         l1_req, l1_we, l1_gnt, l1_rvalid;
  logic [31:0]  l1_addr;
  logic [35:0]  l1_be;
  logic [287:0] l1_wdata, l1_rdata;
  logic         w_valid, w_ready, w_rvalid;
  logic [31:0]  w_addr;
  logic [255:0] w_rdata;

  neureka #(.PE_DIM(PE_DIM)) i_neureka (
    .clk_i, .rst_ni,
    .cfg_req_i(ne_cfg_req_i), .cfg_we_i(ne_cfg_we_i), .cfg_addr_i(ne_cfg_addr_i),
    .cfg_wdata_i(ne_cfg_wdata_i), .cfg_gnt_o(ne_cfg_gnt_o), .cfg_rvalid_o(ne_cfg_rvalid_o),
    .cfg_rdata_o(ne_cfg_rdata_o),
    .l1_req_o(l1_req), .l1_we_o(l1_we), .l1_addr_o(l1_addr), .l1_be_o(l1_be), .l1_wdata_o(l1_wdata),
    .l1_gnt_i(l1_gnt), .l1_rvalid_i(l1_rvalid), .l1_rdata_i(l1_rdata),
    .w_req_valid_o(w_valid), .w_req_addr_o(w_addr), .w_req_ready_i(w_ready),
    .w_resp_valid_i(w_rvalid), .w_resp_data_i(w_rdata),
    .busy_o(ne_busy_o), .evt_done_o(ne_evt_done_o)
  );

  // ------------------------------------------------------------ Neural Memory Subsystem
  neural_mem_subsystem #(.CUT_WORDS(CUT_WORDS)) i_nmem (
    .clk_i, .rst_ni,
    .ne_valid_i(w_valid), .ne_line_i(w_addr), .ne_ready_o(w_ready),
    .ne_rvalid_o(w_rvalid), .ne_rdata_o(w_rdata),
    .bus_req_i(nmem_req_i), .bus_we_i(nmem_we_i), .bus_addr_i(nmem_addr_i), .bus_wdata_i(nmem_wdata_i),
    .bus_gnt_o(nmem_gnt_o), .bus_rvalid_o(nmem_rvalid_o), .bus_rdata_o(nmem_rdata_o),
    .irq_page_miss_o, .irq_page_switch_o
  );

  // ------------------------------------------------------------ heterogeneous interconnect
  logic [N_BANKS-1:0]             lb_req, lb_we, lb_gnt, sb_req;
  logic [N_BANKS-1:0][ROW_W-1:0]  lb_addr, sb_addr, bk_addr;
  logic [N_BANKS-1:0][3:0]        lb_be, sb_be, bk_be;
  logic [N_BANKS-1:0][31:0]       lb_wdata, sb_wdata, bk_wdata, bk_rdata;
  logic [N_BANKS-1:0]             bk_req, bk_we;
  logic                           sb_we, cm_conflict;

  tcdm_log_xbar #(.N_MST(N_LOG_MST), .N_BANKS(N_BANKS), .ROW_W(ROW_W)) i_log (
    .clk_i, .rst_ni,
    .req_i(tcdm_req_i), .addr_i(tcdm_addr_i), .we_i(tcdm_we_i), .be_i(tcdm_be_i), .wdata_i(tcdm_wdata_i),
    .gnt_o(tcdm_gnt_o), .rvalid_o(tcdm_rvalid_o), .rdata_o(tcdm_rdata_o),
    .bank_req_o(lb_req), .bank_addr_o(lb_addr), .bank_we_o(lb_we), .bank_be_o(lb_be),
    .bank_wdata_o(lb_wdata), .bank_gnt_i(lb_gnt), .bank_rdata_i(bk_rdata)
  );

  tcdm_shallow_xbar #(.N_BANKS(N_BANKS), .N_WORDS(9), .ROW_W(ROW_W)) i_shallow (
    .clk_i, .rst_ni,
    .req_i(l1_req), .we_i(l1_we), .addr_i(l1_addr), .be_i(l1_be), .wdata_i(l1_wdata),
    .gnt_i(l1_gnt), .rvalid_o(l1_rvalid), .rdata_o(l1_rdata),
    .bank_req_o(sb_req), .bank_addr_o(sb_addr), .bank_we_o(sb_we), .bank_be_o(sb_be),
    .bank_wdata_o(sb_wdata), .bank_rdata_i(bk_rdata)
  );

  tcdm_conflict_manager #(.N_BANKS(N_BANKS), .ROW_W(ROW_W)) i_cm (
    .clk_i, .rst_ni, .prio_shallow_i(cm_prio_shallow_i), .max_stall_i(cm_max_stall_i),
    .log_req_i(lb_req), .log_addr_i(lb_addr), .log_we_i(lb_we), .log_be_i(lb_be),
    .log_wdata_i(lb_wdata), .log_gnt_o(lb_gnt),
    .sh_req_i(sb_req), .sh_addr_i(sb_addr), .sh_we_i(sb_we), .sh_be_i(sb_be), .sh_wdata_i(sb_wdata),
    .sh_gnt_o(l1_gnt),
    .bank_req_o(bk_req), .bank_addr_o(bk_addr), .bank_we_o(bk_we), .bank_be_o(bk_be),
    .bank_wdata_o(bk_wdata), .conflict_o(cm_conflict)
  );

  // ------------------------------------------------------------ L1 TCDM banks
  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS), .DW(32)) i_bank (
      .clk_i, .req_i(bk_req[b]), .we_i(bk_we[b]), .addr_i(bk_addr[b]), .be_i(bk_be[b]),
      .wdata_i(bk_wdata[b]), .rdata_o(bk_rdata[b])
    );
  end
endmodule
