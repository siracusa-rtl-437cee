// neural_mem_subsystem: the Neural Memory Subsystem of the cluster.
//
// It couples a non-volatile MRAM weight memory (mram_weight_mem) and an SRAM tile memory
// (tile_sram), 4 MiB each by default, to two ports:
//   * a read-only 256-bit port for N-EUREKA's weight streamer: valid/ready requests carrying a
//     line address, responses exactly LATENCY (9) cycles later, in order, one line per cycle.
//     Requests pass through the page manager (nmem_page_manager), which routes them to the MRAM
//     or to the tile SRAM, or stalls them and raises irq_page_miss_o. The tile SRAM's one-cycle
//     read is padded to the same latency so that responses of both memories stay in order.
//   * a 64-bit cluster port (byte address, request/grant, one access outstanding, rvalid for
//     reads and writes): 0x000000-0x3FFFFF MRAM, 0x400000-0x7FFFFF tile SRAM (64-bit words),
//     0x1000000 + {0x0 PAGE_EN, 0x8 MRAM_PAGE, 0x10 SRAM_PAGE} configuration registers.
// N-EUREKA has priority over the cluster port at both memories.
//
// The two memories, the wide contention-free accelerator port with 9-cycle latency, the shared
// 64-bit cluster port and the page registers exposed through configuration are as published; the
// address map, the simplified cluster-port protocol (in place of AXI through a clock-domain
// crossing) and the arbitration policy are this design's choices.
module neural_mem_subsystem
  import neureka_pkg::*;
#(
  parameter int unsigned CUT_WORDS = 65536,
  parameter int unsigned LATENCY   = 9,
  localparam int unsigned PAGE_BITS = $clog2(CUT_WORDS) + 1
) (
  input  logic         clk_i,
  input  logic         rst_ni,
  // N-EUREKA weight port
  input  logic         ne_valid_i,
  input  logic [31:0]  ne_line_i,
  output logic         ne_ready_o,
  output logic         ne_rvalid_o,
  output logic [255:0] ne_rdata_o,
  // cluster port
  input  logic         bus_req_i,
  input  logic         bus_we_i,
  input  logic [31:0]  bus_addr_i,
  input  logic [63:0]  bus_wdata_i,
  output logic         bus_gnt_o,
  output logic         bus_rvalid_o,
  output logic [63:0]  bus_rdata_o,
  // interrupts toward the fabric controller
  output logic         irq_page_miss_o,
  output logic         irq_page_switch_o
);
  // ------------------------------------------------------------ configuration registers
  logic       page_en_q;
  logic [7:0] mram_page_q, sram_page_q;

  // ------------------------------------------------------------ page manager
  logic m_valid, s_valid, m_ready;
  logic [PAGE_BITS-1:0] offset;

  nmem_page_manager #(.PAGE_BITS(PAGE_BITS), .IDX_W(8)) i_pm (
    .clk_i, .rst_ni, .page_en_i(page_en_q), .mram_page_i(mram_page_q), .sram_page_i(sram_page_q),
    .valid_i(ne_valid_i), .line_i(ne_line_i), .ready_o(ne_ready_o),
    .mram_valid_o(m_valid), .sram_valid_o(s_valid), .offset_o(offset),
    .mram_ready_i(m_ready), .sram_ready_i(1'b1),
    .page_miss_o(irq_page_miss_o), .page_switch_o(irq_page_switch_o)
  );

  // ------------------------------------------------------------ cluster port decode
  logic is_mram, is_sram, is_cfg, pend_q, bus_go;
  logic m_bus_req, s_bus_req, m_bus_gnt, s_bus_gnt, m_bus_rvalid, s_bus_rvalid, cfg_rvalid_q;
  logic [63:0] m_bus_rdata, s_bus_rdata, cfg_rdata_q;
  logic [PAGE_BITS+1:0] bus_word;

  assign is_cfg   = bus_addr_i >= NMEM_CFG_BASE;
  assign is_sram  = !is_cfg && bus_addr_i >= NMEM_SRAM_BASE;
  assign is_mram  = !is_cfg && !is_sram;
  assign bus_word = bus_addr_i[PAGE_BITS+4:3];
  assign bus_go   = bus_req_i && !pend_q;
  assign m_bus_req = bus_go && is_mram;
  assign s_bus_req = bus_go && is_sram;
  assign bus_gnt_o = (bus_go && is_cfg) || m_bus_gnt || s_bus_gnt;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_q       <= 1'b0;
      page_en_q    <= 1'b0;
      mram_page_q  <= 8'd0;
      sram_page_q  <= 8'd1;
      cfg_rvalid_q <= 1'b0;
      cfg_rdata_q  <= '0;
    end else begin
      cfg_rvalid_q <= bus_go && is_cfg;
      if (bus_gnt_o) pend_q <= 1'b1;
      if (bus_rvalid_o) pend_q <= 1'b0;
      if (bus_go && is_cfg) begin
        if (bus_we_i) begin
          unique case (bus_addr_i[4:3])
            2'd0:    page_en_q   <= bus_wdata_i[0];
            2'd1:    mram_page_q <= bus_wdata_i[7:0];
            default: sram_page_q <= bus_wdata_i[7:0];
          endcase
        end
        unique case (bus_addr_i[4:3])
          2'd0:    cfg_rdata_q <= 64'(page_en_q);
          2'd1:    cfg_rdata_q <= 64'(mram_page_q);
          default: cfg_rdata_q <= 64'(sram_page_q);
        endcase
      end
    end
  end

  // ------------------------------------------------------------ memories
  logic         m_rvalid;
  logic [255:0] m_rdata, s_rdata;
  logic         mram_ce;

  mram_weight_mem #(.CUT_WORDS(CUT_WORDS), .LATENCY(LATENCY)) i_mram (
    .clk_i, .rst_ni,
    .ne_valid_i(m_valid), .ne_line_i(offset), .ne_ready_o(m_ready),
    .ne_rvalid_o(m_rvalid), .ne_rdata_o(m_rdata),
    .bus_req_i(m_bus_req), .bus_we_i(bus_we_i), .bus_word_i(bus_word), .bus_wdata_i(bus_wdata_i),
    .bus_gnt_o(m_bus_gnt), .bus_rvalid_o(m_bus_rvalid), .bus_rdata_o(m_bus_rdata),
    .mram_ce_o(mram_ce)
  );

  tile_sram #(.BANK_WORDS(2 * CUT_WORDS)) i_sram (
    .clk_i, .rst_ni,
    .ne_req_i(s_valid), .ne_line_i(offset), .ne_rdata_o(s_rdata),
    .bus_req_i(s_bus_req), .bus_we_i(bus_we_i), .bus_word_i(bus_word), .bus_wdata_i(bus_wdata_i),
    .bus_gnt_o(s_bus_gnt), .bus_rvalid_o(s_bus_rvalid), .bus_rdata_o(s_bus_rdata)
  );

  // tile SRAM responses padded to the MRAM latency
  logic [LATENCY-1:0]          s_dl_q;
  logic [LATENCY-2:0][255:0]   s_data_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s_dl_q   <= '0;
      s_data_q <= '0;
    end else begin
      s_dl_q      <= {s_dl_q[LATENCY-2:0], s_valid};
      s_data_q[0] <= s_rdata;
      for (int unsigned k = 1; k < LATENCY - 1; k++) s_data_q[k] <= s_data_q[k-1];
    end
  end

  assign ne_rvalid_o = m_rvalid || s_dl_q[LATENCY-1];
  assign ne_rdata_o  = s_dl_q[LATENCY-1] ? s_data_q[LATENCY-2] : m_rdata;

  assign bus_rvalid_o = m_bus_rvalid || s_bus_rvalid || cfg_rvalid_q;
  assign bus_rdata_o  = m_bus_rvalid ? m_bus_rdata : s_bus_rvalid ? s_bus_rdata : cfg_rdata_q;

  // the two memories never answer N-EUREKA in the same cycle
  assert property (@(posedge clk_i) disable iff (!rst_ni) !(m_rvalid && s_dl_q[LATENCY-1]));
endmodule
