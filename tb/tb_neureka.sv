// tb_neureka: self-checking test of the N-EUREKA accelerator with behavioural memories.
//
// The accelerator (PE_DIM reduced to 2 to keep the run short; the datapath per PE is full size)
// is connected to
//   * a byte-addressed L1 model with a 288-bit port that grants requests at random (about 80 %)
//     and returns read data one cycle after the grant, and
//   * a weight memory model with valid/ready handshake, random back-pressure and a fixed
//     9-cycle response latency, like the Neural Memory Subsystem.
// Four jobs (3x3 dense 8-bit out, 1x1 dense 32-bit out, depthwise 8-bit out, 3x3 dense with
// 8-bit weights and 32-bit out) are generated by nk_tb_pkg and submitted back to back, so the
// second context queues a job and later configuration writes are held off. Every output byte is
// compared with the reference. Timing checks: every weight word is fetched exactly once per spatial tile, and the
// longest run of back-to-back weight responses reaches the words of one tile (one word per cycle
// once streaming).
module tb_neureka;
  import neureka_pkg::*;
  import nk_tb_pkg::*;

  localparam int PE = 2;
  localparam int WLAT = 9;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         cfg_req = 0, cfg_we = 0, cfg_gnt, cfg_rvalid;
  logic [7:0]   cfg_addr = 0;
  logic [31:0]  cfg_wdata = 0, cfg_rdata;
  logic         l1_req, l1_we, l1_gnt, l1_rvalid;
  logic [31:0]  l1_addr;
  logic [35:0]  l1_be;
  logic [287:0] l1_wdata, l1_rdata;
  logic         w_valid, w_ready, w_rvalid;
  logic [31:0]  w_addr;
  logic [255:0] w_rdata;
  logic         busy, evt_done;

  neureka #(.PE_DIM(PE)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_we_i(cfg_we), .cfg_addr_i(cfg_addr), .cfg_wdata_i(cfg_wdata),
    .cfg_gnt_o(cfg_gnt), .cfg_rvalid_o(cfg_rvalid), .cfg_rdata_o(cfg_rdata),
    .l1_req_o(l1_req), .l1_we_o(l1_we), .l1_addr_o(l1_addr), .l1_be_o(l1_be), .l1_wdata_o(l1_wdata),
    .l1_gnt_i(l1_gnt), .l1_rvalid_i(l1_rvalid), .l1_rdata_i(l1_rdata),
    .w_req_valid_o(w_valid), .w_req_addr_o(w_addr), .w_req_ready_i(w_ready),
    .w_resp_valid_i(w_rvalid), .w_resp_data_i(w_rdata),
    .busy_o(busy), .evt_done_o(evt_done)
  );

  int checks = 0, failures = 0;
  byte unsigned l1mem [int];
  logic [255:0] wmem [int];
  byte unsigned expect_all [int];
  int wfetch [int];
  int n_lines_total = 0, done_cnt = 0, held_off = 0, l1_stalls = 0, run = 0, max_run = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // L1 model
  always_ff @(posedge clk) begin
    l1_rvalid <= 1'b0;
    if (l1_req && l1_gnt) begin
      if (l1_we) begin
        for (int b = 0; b < 36; b++) if (l1_be[b]) l1mem[int'(l1_addr) + b] = l1_wdata[b*8 +: 8];
      end else begin
        for (int b = 0; b < 36; b++)
          l1_rdata[b*8 +: 8] <= l1mem.exists(int'(l1_addr) + b) ? l1mem[int'(l1_addr) + b] : 8'h00;
        l1_rvalid <= 1'b1;
      end
    end
  end
  always_ff @(negedge clk) begin
    l1_gnt <= ($urandom_range(0, 99) < 80);
    w_ready <= (done_cnt >= 2) || ($urandom_range(0, 99) < 85);
  end
  always_ff @(posedge clk) if (l1_req && !l1_gnt) l1_stalls++;

  // weight memory model: fixed latency
  logic [WLAT-1:0] wv_pipe;
  logic [255:0]    wd_pipe [WLAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wv_pipe <= '0;
    else begin
      wv_pipe <= {wv_pipe[WLAT-2:0], w_valid && w_ready};
      for (int i = WLAT - 1; i > 0; i--) wd_pipe[i] <= wd_pipe[i-1];
      if (w_valid && w_ready) begin
        wd_pipe[0] <= wmem.exists(int'(w_addr)) ? wmem[int'(w_addr)] : '0;
        if (wfetch.exists(int'(w_addr))) wfetch[int'(w_addr)]++;
        else wfetch[int'(w_addr)] = 1;
      end
    end
  end
  assign w_rvalid = wv_pipe[WLAT-1];
  assign w_rdata  = wd_pipe[WLAT-1];
  always_ff @(posedge clk) begin
    if (w_rvalid) begin
      run++;
      if (run > max_run) max_run = run;
    end else run = 0;
    if (evt_done) done_cnt++;
    if (cfg_req && cfg_we && !cfg_gnt) held_off++;
  end

  task automatic cfg_write(int idx, logic [31:0] v);
    @(negedge clk);
    cfg_req = 1; cfg_we = 1; cfg_addr = 8'(idx); cfg_wdata = v;
    @(posedge clk);
    while (!cfg_gnt) @(posedge clk);
    @(negedge clk);
    cfg_req = 0; cfg_we = 0;
  endtask

  task automatic add_job(int mode, int qw, int out32, int nkin, int nkout, int nh, int nw,
                         int in_base, int out_base, int norm_base, int w_base);
    job_cfg_t j;
    j = make_job(mode, qw, out32, nkin, nkout, nh, nw, PE, in_base, out_base, norm_base, w_base);
    foreach (l1[a]) l1mem[a] = l1[a];
    foreach (wl[a]) wmem[a] = wl[a];
    foreach (exp_out[a]) expect_all[a] = exp_out[a];
    n_lines_total += j.n_lines * nh * nw;
    for (int r = REG_JOB0; r < REG_JOB0 + N_JOB_REGS; r++) cfg_write(r, reg_value(j, r));
    cfg_write(REG_TRIGGER, 32'd1);
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    add_job(0, 3, 0, 2, 1, 1, 2, 'h0000, 'h4000, 'h3000, 0);
    add_job(1, 8, 1, 2, 2, 1, 1, 'h1000, 'h5000, 'h3400, 256);
    add_job(2, 2, 0, 1, 2, 2, 1, 'h2000, 'h6000, 'h3800, 512);
    add_job(0, 8, 1, 1, 2, 1, 1, 'h7000, 'h8000, 'h3c00, 1024);
    while (done_cnt < 4) @(posedge clk);
    repeat (5) @(posedge clk);
    check(!busy, "accelerator idle after the last job");
    foreach (expect_all[a]) begin
      byte unsigned got;
      got = l1mem.exists(a) ? l1mem[a] : 8'hxx;
      check(got === expect_all[a], $sformatf("output byte @%h got %h exp %h", a, got, expect_all[a]));
    end
    begin
      int tot = 0;
      foreach (wfetch[a]) tot += wfetch[a];
      check(tot == n_lines_total, $sformatf("weight words fetched %0d expected %0d", tot, n_lines_total));
    end
    check(held_off > 0, "configuration writes held off while both contexts were full");
    check(l1_stalls > 0, "L1 stalls occurred");
    check(max_run >= 32, $sformatf("longest back-to-back weight stream %0d", max_run));
    $display("INFO held_off=%0d l1_stalls=%0d max_run=%0d", held_off, l1_stalls, max_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
