// tb_cluster_body.svh: stimulus, reference checks and mechanism counters shared by the two
// cluster testbenches (reduced and full size). The including module defines PE (PE_DIM of the
// DUT), PAGE_LINES (weight lines per 4 MiB page of the DUT) and instantiates the DUT as "dut".
//
// Flow:
//   1. four convolution jobs are generated (nk_tb_pkg); their input tensors and normalization
//      parameters are written into L1 through logarithmic-branch master 9 and their weights into
//      the MRAM / tile SRAM through the 64-bit Neural Memory Subsystem port. Job 1's weights
//      straddle the MRAM/SRAM page boundary; job 4's weights live in page 2, which is not mapped.
//   2. masters 0..8 (cores and DMA) start random write/read-back traffic on their own L1 areas.
//   3. jobs 1-3 are submitted back to back with the conflict manager preferring N-EUREKA
//      (max_stall 4); job 3's configuration waits while both contexts are occupied.
//   4. the conflict manager is switched to prefer the cores (max_stall 3), paging is enabled and
//      job 4 is submitted; its first weight access misses, the page-miss interrupt handler maps
//      page 2 onto the tile SRAM and the stalled stream resumes.
//   5. all outputs are read back through master 9 and compared with the reference; the cores
//      compare every read with their own write history.
// Counted mechanisms (each must occur at least once, else a failure is counted): the three
// convolution modes, 32-bit output, job queueing, prefetch overlapped with execution, a
// shallow-branch stall, bank conflicts won by each branch, the starvation bound overriding the
// priority, weight-port back-pressure, page miss and page switch. Timing: every weight response
// must arrive exactly 9 cycles after its request was accepted.

  import neureka_pkg::*;
  import nk_tb_pkg::*;

  localparam int NM = 10;
  localparam int LAT = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NM-1:0]        tcdm_req, tcdm_we, tcdm_gnt, tcdm_rvalid;
  logic [NM-1:0][31:0]  tcdm_addr, tcdm_wdata, tcdm_rdata;
  logic [NM-1:0][3:0]   tcdm_be;
  logic         ne_cfg_req = 0, ne_cfg_we = 0, ne_cfg_gnt, ne_cfg_rvalid;
  logic [7:0]   ne_cfg_addr = 0;
  logic [31:0]  ne_cfg_wdata = 0, ne_cfg_rdata;
  logic         nmem_req = 0, nmem_we = 0, nmem_gnt, nmem_rvalid;
  logic [31:0]  nmem_addr = 0;
  logic [63:0]  nmem_wdata = 0, nmem_rdata;
  logic         cm_prio_shallow = 1;
  logic [7:0]   cm_max_stall = 8'd4;
  logic         ne_busy, ne_evt_done, irq_page_miss, irq_page_switch;

  // per-master drivers
  logic        m_req [NM];
  logic        m_we [NM];
  logic [31:0] m_addr [NM];
  logic [31:0] m_wdata [NM];
  logic [3:0]  m_be [NM];
  always_comb
    for (int m = 0; m < NM; m++) begin
      tcdm_req[m] = m_req[m]; tcdm_we[m] = m_we[m]; tcdm_addr[m] = m_addr[m];
      tcdm_wdata[m] = m_wdata[m]; tcdm_be[m] = m_be[m];
    end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ------------------------------------------------------------ mechanism counters
  int n_queue_hold = 0, n_prefetch_overlap = 0, n_sh_stall = 0, n_conf_sh_win = 0, n_conf_log_win = 0;
  int n_starve_override = 0, n_w_backpressure = 0, n_page_miss = 0, n_page_switch = 0, n_done = 0;
  int n_lat_err = 0, n_lat_ok = 0;
  int acc_time [$];
  int cyc = 0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (ne_cfg_req && ne_cfg_we && !ne_cfg_gnt) n_queue_hold++;
    if (dut.l1_req && dut.w_rvalid) n_prefetch_overlap++;
    if (dut.l1_req && !dut.l1_gnt) n_sh_stall++;
    if (dut.i_cm.conflict_o && dut.i_cm.sh_wins) n_conf_sh_win++;
    if (dut.i_cm.conflict_o && !dut.i_cm.sh_wins) n_conf_log_win++;
    if (dut.i_cm.conflict_o && (dut.i_cm.sh_wins != cm_prio_shallow)) n_starve_override++;
    if (dut.w_valid && !dut.w_ready) n_w_backpressure++;
    if (irq_page_miss) n_page_miss++;
    if (irq_page_switch) n_page_switch++;
    if (ne_evt_done) n_done++;
    if (dut.w_valid && dut.w_ready) acc_time.push_back(cyc);
    if (dut.w_rvalid && rst_n) begin
      if (acc_time.size() == 0) begin
        n_lat_err++;
        $display("INFO response without request at cycle %0d", cyc);
      end
      else begin
        int t;
        t = acc_time.pop_front();
        if (cyc - t != LAT) begin
          n_lat_err++;
          $display("INFO latency %0d at cycle %0d", cyc - t, cyc);
        end else n_lat_ok++;
      end
    end
  end

  // ------------------------------------------------------------ master 9: loader / checker port
  task automatic l1_access(bit we, int addr, logic [31:0] wdata, logic [3:0] be, output logic [31:0] rdata);
    @(negedge clk);
    m_req[9] = 1; m_we[9] = we; m_addr[9] = 32'(addr); m_wdata[9] = wdata; m_be[9] = be;
    @(posedge clk);
    while (!tcdm_gnt[9]) @(posedge clk);
    @(negedge clk);
    m_req[9] = 0;
    @(posedge clk);
    while (!tcdm_rvalid[9]) @(posedge clk);
    rdata = tcdm_rdata[9];
  endtask

  task automatic nmem_access(bit we, int addr, logic [63:0] wdata, output logic [63:0] rdata);
    @(negedge clk);
    nmem_req = 1; nmem_we = we; nmem_addr = 32'(addr); nmem_wdata = wdata;
    @(posedge clk);
    while (!nmem_gnt) @(posedge clk);
    @(negedge clk);
    nmem_req = 0;
    @(posedge clk);
    while (!nmem_rvalid) @(posedge clk);
    rdata = nmem_rdata;
  endtask

  task automatic ne_cfg_write(int idx, logic [31:0] v);
    @(negedge clk);
    ne_cfg_req = 1; ne_cfg_we = 1; ne_cfg_addr = 8'(idx); ne_cfg_wdata = v;
    @(posedge clk);
    while (!ne_cfg_gnt) @(posedge clk);
    @(negedge clk);
    ne_cfg_req = 0; ne_cfg_we = 0;
  endtask

  // ------------------------------------------------------------ cores and DMA: random traffic
  bit core_run = 0;
  bit [NM-1:0] core_idle = '1;
  int core_ops = 0;
  for (genvar m = 0; m < 9; m++) begin : g_core
    initial begin
      logic [31:0] model [int];
      m_req[m] = 0; m_we[m] = 0; m_addr[m] = 0; m_wdata[m] = 0; m_be[m] = 0;
      wait (core_run);
      core_idle[m] = 0;
      while (core_run) begin
        int a;
        bit we;
        a = 'h20000 + m * 'h1000 + 4 * $urandom_range(0, 1023);
        we = !model.exists(a) || ($urandom_range(0, 1) == 1);
        @(negedge clk);
        m_req[m] = 1; m_we[m] = we; m_addr[m] = 32'(a); m_wdata[m] = $urandom; m_be[m] = 4'hf;
        @(posedge clk);
        while (!tcdm_gnt[m]) @(posedge clk);
        if (we) model[a] = m_wdata[m];
        @(negedge clk);
        m_req[m] = 0;
        @(posedge clk);
        if (!we) check(tcdm_rvalid[m] && tcdm_rdata[m] == model[a],
                       $sformatf("core %0d read @%h got %h exp %h", m, a, tcdm_rdata[m], model[a]));
        core_ops++;
        repeat ($urandom_range(0, 2)) @(posedge clk);
      end
      core_idle[m] = 1;
    end
  end
  initial begin
    m_req[9] = 0; m_we[9] = 0; m_addr[9] = 0; m_wdata[9] = 0; m_be[9] = 0;
  end

  // ------------------------------------------------------------ page-miss interrupt handler
  bit paging_phase = 0;
  int isr_runs = 0;
  initial begin
    forever begin
      logic [63:0] rd;
      @(posedge clk);
      if (irq_page_miss && paging_phase && isr_runs == 0) begin
        isr_runs++;
        nmem_access(1, NMEM_CFG_BASE + 'h10, 64'd2, rd);  // map page 2 onto the tile SRAM
      end
    end
  end

  // ------------------------------------------------------------ main sequence
  byte unsigned img [int];
  byte unsigned expect_all [int];
  job_cfg_t jobs [4];
  bit [3:0] job_mode_seen = '0;

  task automatic gen(int idx, int mode, int qw, int out32, int nkin, int nkout, int nh, int nw,
                     int in_base, int out_base, int norm_base, int w_base, int phys_sram_off);
    jobs[idx] = make_job(mode, qw, out32, nkin, nkout, nh, nw, PE, in_base, out_base, norm_base, w_base);
    foreach (l1[a]) img[a] = l1[a];
    foreach (exp_out[a]) expect_all[a] = exp_out[a];
    // weights: front door, 4 x 64-bit per line
    foreach (wl[ln]) begin
      int page, off, base;
      logic [63:0] rd;
      page = ln / PAGE_LINES;
      off  = ln % PAGE_LINES;
      if (phys_sram_off >= 0) base = NMEM_SRAM_BASE + 32 * (phys_sram_off + ln - w_base);
      else if (page == 0)     base = NMEM_MRAM_BASE + 32 * off;
      else                    base = NMEM_SRAM_BASE + 32 * off;
      for (int q = 0; q < 4; q++) nmem_access(1, base + 8 * q, wl[ln][64*q +: 64], rd);
    end
  endtask

  task automatic submit(int idx);
    for (int r = REG_JOB0; r < REG_JOB0 + N_JOB_REGS; r++) ne_cfg_write(r, reg_value(jobs[idx], r));
    ne_cfg_write(REG_TRIGGER, 32'd1);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    gen(0, 0, 4, 0, 2, 1, 1, 2, 'h0000, 'h8000, 'hF000, PAGE_LINES - 100, -1);
    gen(1, 1, 8, 1, 2, 2, 1, 1, 'h2000, 'hA000, 'hF400, 0, -1);
    gen(2, 2, 2, 0, 1, 2, 2, 1, 'h4000, 'hD000, 'hF800, 300, -1);
    gen(3, 0, 2, 0, 1, 1, 1, 1, 'h6000, 'hE000, 'hFC00, 2 * PAGE_LINES + 400, 400);
    // L1 image through master 9, one 32-bit word per access
    begin
      bit [31:0] words [int];
      foreach (img[a]) words[a & ~3] = 1;
      foreach (words[w]) begin
        logic [31:0] d, rd;
        logic [3:0]  be;
        d = '0; be = '0;
        for (int b = 0; b < 4; b++)
          if (img.exists(w + b)) begin d[8*b +: 8] = img[w + b]; be[b] = 1'b1; end
        l1_access(1, w, d, be, rd);
      end
    end
    core_run = 1;
    for (int i = 0; i < 3; i++) submit(i);
    while (n_done < 3) @(posedge clk);
    // phase 2: cores preferred, paging on, job 4 from an unmapped page
    @(negedge clk);
    cm_prio_shallow = 0;
    cm_max_stall = 8'd3;
    begin
      logic [63:0] rd;
      nmem_access(1, NMEM_CFG_BASE, 64'd1, rd);
      nmem_access(0, NMEM_CFG_BASE + 'h10, 64'd0, rd);
      check(rd == 64'd1, "page register read back");
    end
    paging_phase = 1;
    submit(3);
    while (n_done < 4) @(posedge clk);
    core_run = 0;
    wait (&core_idle);
    repeat (4) @(posedge clk);
    foreach (expect_all[a]) begin
      logic [31:0] rd;
      l1_access(0, a & ~3, 32'd0, 4'h0, rd);
      check(rd[8 * (a % 4) +: 8] == expect_all[a],
            $sformatf("output byte @%h got %h exp %h", a, rd[8 * (a % 4) +: 8], expect_all[a]));
    end
    check(n_lat_err == 0 && n_lat_ok > 0, $sformatf("weight latency: %0d responses at 9 cycles, %0d wrong", n_lat_ok, n_lat_err));
    check(jobs[0].mode == 0 && jobs[1].mode == 1 && jobs[2].mode == 2 && jobs[1].out32 == 1 && n_done == 4,
          "3x3, 1x1, depthwise and 32-bit output jobs completed");
    check(n_queue_hold > 0,       "mechanism: job queued while both contexts busy");
    check(n_prefetch_overlap > 0, "mechanism: prefetch overlapped with weight streaming");
    check(n_sh_stall > 0,         "mechanism: shallow-branch stall");
    check(n_conf_sh_win > 0,      "mechanism: bank conflict won by N-EUREKA");
    check(n_conf_log_win > 0,     "mechanism: bank conflict won by the cores");
    check(n_starve_override > 0,  "mechanism: starvation bound overrode the priority");
    check(n_w_backpressure > 0,   "mechanism: weight-port back-pressure");
    check(n_page_miss > 0 && isr_runs == 1, "mechanism: page miss stall and interrupt");
    check(n_page_switch > 0,      "mechanism: page switch");
    check(core_ops > 100,         "core traffic ran");
    $display("INFO queue_hold=%0d prefetch_overlap=%0d sh_stall=%0d conf_sh=%0d conf_log=%0d starve=%0d wbp=%0d miss=%0d switch=%0d lat_ok=%0d core_ops=%0d cycles=%0d",
             n_queue_hold, n_prefetch_overlap, n_sh_stall, n_conf_sh_win, n_conf_log_win, n_starve_override,
             n_w_backpressure, n_page_miss, n_page_switch, n_lat_ok, core_ops, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
