// nmem_page_manager: page handling of the Neural Memory Subsystem's virtual memory mode.
//
// N-EUREKA addresses its weights in 256-bit lines. The bits above the lowest PAGE_BITS form a
// page index; a page is 4 MiB, the size of either physical memory. Two live page index registers
// (mram_page_i, sram_page_i) say which virtual pages currently sit in the MRAM and in the tile
// SRAM. A request whose page index matches one of them is forwarded to that memory with its page
// offset. A request that matches neither is stalled (ready_o low) and page_miss_o is raised
// until software has loaded the page and updated an index register; the request then proceeds
// unchanged. page_switch_o pulses when an accepted request hits the other physical page than the
// request before it, the point at which software may start swapping the page just left.
// With paging disabled, page 0 is the MRAM and page 1 the tile SRAM.
// Combinational routing; the last hit page is a register.
//
// Comparing the address prefix with two live page index registers, the stall and the page-miss
// and page-switch interrupts are as published; the page-switch condition is this design's choice.
module nmem_page_manager #(
  parameter int unsigned PAGE_BITS = 17,
  parameter int unsigned IDX_W     = 8
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 page_en_i,
  input  logic [IDX_W-1:0]     mram_page_i,
  input  logic [IDX_W-1:0]     sram_page_i,
  input  logic                 valid_i,
  input  logic [31:0]          line_i,
  output logic                 ready_o,
  output logic                 mram_valid_o,
  output logic                 sram_valid_o,
  output logic [PAGE_BITS-1:0] offset_o,
  input  logic                 mram_ready_i,
  input  logic                 sram_ready_i,
  output logic                 page_miss_o,
  output logic                 page_switch_o
);
  logic [IDX_W-1:0] idx, mp, sp;
  logic             hit_m, hit_s, last_sram_q, seen_q;

  assign idx      = IDX_W'(line_i >> PAGE_BITS);
  assign mp       = page_en_i ? mram_page_i : IDX_W'(0);
  assign sp       = page_en_i ? sram_page_i : IDX_W'(1);
  assign hit_m    = (idx == mp);
  assign hit_s    = !hit_m && (idx == sp);
  assign offset_o = line_i[PAGE_BITS-1:0];

  assign mram_valid_o = valid_i && hit_m;
  assign sram_valid_o = valid_i && hit_s;
  assign ready_o      = (hit_m && mram_ready_i) || (hit_s && sram_ready_i);
  assign page_miss_o  = valid_i && !hit_m && !hit_s;
  assign page_switch_o = valid_i && ready_o && seen_q && (hit_s != last_sram_q);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      last_sram_q <= 1'b0;
      seen_q      <= 1'b0;
    end else if (valid_i && ready_o) begin
      last_sram_q <= hit_s;
      seen_q      <= 1'b1;
    end
  end
endmodule
