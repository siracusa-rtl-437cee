// mram_weight_mem: the 4 MiB MRAM weight memory of the Neural Memory Subsystem.
//
// Eight 512 KiB MRAM cuts (four banks of two cuts) form two halves of four cuts each. A 256-bit
// weight line is one 64-bit word of each of the four cuts of a half; even lines live in the left
// half, odd lines in the right half. The cuts run on a clock enable at 1/CLK_DIV of the cluster
// clock (isochronous), so every MRAM cycle both halves start one read in parallel: a stream of
// consecutive lines is served at one 256-bit line per cluster cycle although each cut delivers a
// word only every MRAM cycle and needs three MRAM cycles of latency.
//
// N-EUREKA port (valid/ready): a request for line ne_line_i is taken into the slot of its half
// (two requests per MRAM cycle, one per half: the clock-domain-crossing stage). At the next
// enabled edge the slot, or a request arriving in that very cycle, is launched into the four
// cuts of the half. Results are written into a 16-entry reorder buffer under a sequence tag; a
// delay line releases every response exactly LATENCY cluster cycles after its request was taken
// (ne_rvalid_o/ne_rdata_o), in request order. The port stalls (ne_ready_o low) only when a
// second request for the same half arrives within one MRAM cycle.
//
// Cluster port (64-bit word address, one access at a time): reads and writes use the slots when
// N-EUREKA does not request; bus_rvalid_o acknowledges a write at launch and returns read data
// after the cut latency.
//
// Cut count and size, two parallel halves at half the clock, 256 bits per cycle and the 9-cycle
// access latency are as published. Slot handling, the reorder buffer that pads the latency to
// exactly LATENCY cycles and the cluster-port protocol are this design's choices. LATENCY must
// cover the worst case of 2*CLK_DIV + CLK_DIV*CUT_LAT - 1 cycles (9 for the defaults).
module mram_weight_mem #(
  parameter int unsigned CUT_WORDS = 65536,
  parameter int unsigned CLK_DIV   = 2,
  parameter int unsigned CUT_LAT   = 3,
  parameter int unsigned LATENCY   = 9,
  localparam int unsigned ROW_W    = $clog2(CUT_WORDS),
  localparam int unsigned LINE_W   = ROW_W + 1
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // N-EUREKA weight port
  input  logic              ne_valid_i,
  input  logic [LINE_W-1:0] ne_line_i,
  output logic              ne_ready_o,
  output logic              ne_rvalid_o,
  output logic [255:0]      ne_rdata_o,
  // cluster port, 64-bit words
  input  logic              bus_req_i,
  input  logic              bus_we_i,
  input  logic [LINE_W+1:0] bus_word_i,
  input  logic [63:0]       bus_wdata_i,
  output logic              bus_gnt_o,
  output logic              bus_rvalid_o,
  output logic [63:0]       bus_rdata_o,
  // MRAM clock enable, for observation
  output logic              mram_ce_o
);
  typedef struct packed {
    logic             vld;
    logic             ne;
    logic             we;
    logic [1:0]       cut;
    logic [ROW_W-1:0] row;
    logic [3:0]       tag;
    logic [63:0]      wdata;
  } slot_t;

  typedef struct packed {
    logic       ne;
    logic       bus;
    logic [1:0] cut;
    logic [3:0] tag;
  } tag_t;

  // ------------------------------------------------------------ divided clock enable
  logic [$clog2(CLK_DIV+1)-1:0] div_q;
  logic ce, ce_prev_q;
  assign ce        = (32'(div_q) == CLK_DIV - 1);
  assign mram_ce_o = ce;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      div_q     <= '0;
      ce_prev_q <= 1'b0;
    end else begin
      div_q     <= ce ? '0 : div_q + 1;
      ce_prev_q <= ce;
    end
  end

  // ------------------------------------------------------------ request acceptance
  slot_t [1:0] slot_q, incoming, launch;
  logic        ne_side, bus_side, bus_busy_q, bus_take;
  logic [3:0]  wr_tag_q, rd_tag_q;

  assign ne_side    = ne_line_i[0];
  assign bus_side   = bus_word_i[2];
  assign ne_ready_o = !slot_q[ne_side].vld || ce;
  assign bus_take   = bus_req_i && !ne_valid_i && !bus_busy_q && (!slot_q[bus_side].vld || ce);
  assign bus_gnt_o  = bus_take;

  always_comb begin
    for (int unsigned s = 0; s < 2; s++) begin
      incoming[s] = '0;
      if (ne_valid_i && ne_ready_o && 32'(ne_side) == s) begin
        incoming[s].vld = 1'b1;
        incoming[s].ne  = 1'b1;
        incoming[s].row = ne_line_i[LINE_W-1:1];
        incoming[s].tag = wr_tag_q;
      end else if (bus_take && 32'(bus_side) == s) begin
        incoming[s].vld   = 1'b1;
        incoming[s].we    = bus_we_i;
        incoming[s].cut   = bus_word_i[1:0];
        incoming[s].row   = bus_word_i[LINE_W+1:3];
        incoming[s].wdata = bus_wdata_i;
      end
      launch[s] = slot_q[s].vld ? slot_q[s] : incoming[s];
    end
  end

  // ------------------------------------------------------------ cuts and tag pipelines
  logic [1:0][3:0][63:0] cut_rdata;
  logic [1:0][3:0]       cut_rvalid;
  tag_t [1:0][CUT_LAT-1:0] tag_q;

  for (genvar s = 0; s < 2; s++) begin : g_side
    for (genvar c = 0; c < 4; c++) begin : g_cut
      mram_cut #(.WORDS(CUT_WORDS), .DW(64), .LAT(CUT_LAT)) i_cut (
        .clk_i, .rst_ni, .ce_i(ce),
        .req_i(launch[s].vld && (launch[s].ne || launch[s].cut == 2'(c))),
        .we_i(launch[s].we), .addr_i(launch[s].row), .wdata_i(launch[s].wdata),
        .rvalid_o(cut_rvalid[s][c]), .rdata_o(cut_rdata[s][c])
      );
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      slot_q   <= '0;
      tag_q    <= '0;
      wr_tag_q <= '0;
    end else begin
      if (ne_valid_i && ne_ready_o) wr_tag_q <= wr_tag_q + 1;
      for (int unsigned s = 0; s < 2; s++) begin
        if (ce) begin
          slot_q[s] <= slot_q[s].vld ? incoming[s] : '0;
          tag_q[s][0].ne  <= launch[s].vld && launch[s].ne;
          tag_q[s][0].bus <= launch[s].vld && !launch[s].ne && !launch[s].we;
          tag_q[s][0].cut <= launch[s].cut;
          tag_q[s][0].tag <= launch[s].tag;
          for (int unsigned k = 1; k < CUT_LAT; k++) tag_q[s][k] <= tag_q[s][k-1];
        end else if (incoming[s].vld) begin
          slot_q[s] <= incoming[s];
        end
      end
    end
  end

  // ------------------------------------------------------------ reorder buffer and fixed latency
  logic [15:0][255:0] rob_q;
  logic [15:0]        rob_vld_q;
  logic [LATENCY-1:0] dl_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rob_q     <= '0;
      rob_vld_q <= '0;
      dl_q      <= '0;
      rd_tag_q  <= '0;
    end else begin
      dl_q <= {dl_q[LATENCY-2:0], ne_valid_i && ne_ready_o};
      for (int unsigned s = 0; s < 2; s++) begin
        if (ce_prev_q && tag_q[s][CUT_LAT-1].ne) begin
          rob_q[tag_q[s][CUT_LAT-1].tag]     <= cut_rdata[s];
          rob_vld_q[tag_q[s][CUT_LAT-1].tag] <= 1'b1;
        end
      end
      if (dl_q[LATENCY-1]) begin
        rob_vld_q[rd_tag_q] <= 1'b0;
        rd_tag_q            <= rd_tag_q + 1;
      end
    end
  end

  assign ne_rvalid_o = dl_q[LATENCY-1];
  assign ne_rdata_o  = rob_q[rd_tag_q];

  // ------------------------------------------------------------ cluster port responses
  logic bus_wack_q;
  logic [1:0] bus_rd_hit;

  always_comb
    for (int unsigned s = 0; s < 2; s++)
      bus_rd_hit[s] = ce_prev_q && tag_q[s][CUT_LAT-1].bus;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bus_busy_q <= 1'b0;
      bus_wack_q <= 1'b0;
    end else begin
      bus_wack_q <= 1'b0;
      if (bus_take) bus_busy_q <= 1'b1;
      for (int unsigned s = 0; s < 2; s++)
        if (ce && launch[s].vld && !launch[s].ne && launch[s].we) bus_wack_q <= 1'b1;
      if (bus_wack_q || |bus_rd_hit) bus_busy_q <= 1'b0;
    end
  end

  assign bus_rvalid_o = bus_wack_q || |bus_rd_hit;
  assign bus_rdata_o  = bus_rd_hit[1] ? cut_rdata[1][tag_q[1][CUT_LAT-1].cut]
                                      : cut_rdata[0][tag_q[0][CUT_LAT-1].cut];

  // every released response must have arrived in the reorder buffer
  assert property (@(posedge clk_i) disable iff (!rst_ni) ne_rvalid_o |-> rob_vld_q[rd_tag_q]);
endmodule
