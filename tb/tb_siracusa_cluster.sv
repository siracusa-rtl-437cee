// tb_siracusa_cluster: end-to-end test of the cluster at reduced size (PE_DIM 2, 1024-word
// MRAM cuts, so one weight page is 2048 lines); the stimulus and checks are in tb_cluster_body.svh.
// The TCDM, interconnect, conflict manager and memory timing are the same as at full size.
// A cycle watchdog ends the run with a failure if the sequence does not complete.
module tb_siracusa_cluster;
  localparam int PE = 2;
  localparam int PAGE_LINES = 2048;

`include "tb_cluster_body.svh"

  siracusa_cluster #(.PE_DIM(2), .CUT_WORDS(1024)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .tcdm_req_i(tcdm_req), .tcdm_addr_i(tcdm_addr), .tcdm_we_i(tcdm_we), .tcdm_be_i(tcdm_be),
    .tcdm_wdata_i(tcdm_wdata), .tcdm_gnt_o(tcdm_gnt), .tcdm_rvalid_o(tcdm_rvalid), .tcdm_rdata_o(tcdm_rdata),
    .ne_cfg_req_i(ne_cfg_req), .ne_cfg_we_i(ne_cfg_we), .ne_cfg_addr_i(ne_cfg_addr), .ne_cfg_wdata_i(ne_cfg_wdata),
    .ne_cfg_gnt_o(ne_cfg_gnt), .ne_cfg_rvalid_o(ne_cfg_rvalid), .ne_cfg_rdata_o(ne_cfg_rdata),
    .nmem_req_i(nmem_req), .nmem_we_i(nmem_we), .nmem_addr_i(nmem_addr), .nmem_wdata_i(nmem_wdata),
    .nmem_gnt_o(nmem_gnt), .nmem_rvalid_o(nmem_rvalid), .nmem_rdata_o(nmem_rdata),
    .cm_prio_shallow_i(cm_prio_shallow), .cm_max_stall_i(cm_max_stall),
    .ne_busy_o(ne_busy), .ne_evt_done_o(ne_evt_done),
    .irq_page_miss_o(irq_page_miss), .irq_page_switch_o(irq_page_switch)
  );

  initial begin
    repeat (150000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
