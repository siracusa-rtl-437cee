// tb_tcdm_log_xbar: self-checking test of the logarithmic L1 branch (10 masters, 16 banks).
//
// The crossbar is connected to sixteen behavioural banks whose grant is withheld at random (as
// the conflict manager does when N-EUREKA wins). Every master runs random writes and reads on its
// own word-interleaved area and checks each read against its write history; rvalid must follow
// the grant by one cycle. Fairness: with all masters hammering one bank every master is granted,
// and no master waits for more than N_MST grants of that bank (round robin).
module tb_tcdm_log_xbar;
  localparam int NM = 10, NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NM-1:0] req, we, gnt, rvalid;
  logic [NM-1:0][31:0] addr, wdata, rdata;
  logic [NM-1:0][3:0] be;
  logic [NB-1:0] bank_req, bank_we, bank_gnt;
  logic [NB-1:0][11:0] bank_addr;
  logic [NB-1:0][3:0] bank_be;
  logic [NB-1:0][31:0] bank_wdata, bank_rdata;
  logic [31:0] banks [NB][4096];
  int checks = 0, failures = 0;
  bit hammer = 0;
  int wait_max = 0;

  tcdm_log_xbar dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .addr_i(addr), .we_i(we), .be_i(be),
    .wdata_i(wdata), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata), .bank_req_o(bank_req),
    .bank_addr_o(bank_addr), .bank_we_o(bank_we), .bank_be_o(bank_be), .bank_wdata_o(bank_wdata),
    .bank_gnt_i(bank_gnt), .bank_rdata_i(bank_rdata));

  logic [NB-1:0] gmask;
  always_ff @(negedge clk) gmask <= hammer ? '1 : NB'($urandom) | NB'($urandom);
  assign bank_gnt = bank_req & gmask;
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (bank_req[b] && bank_gnt[b]) begin
        if (bank_we[b]) begin
          for (int y = 0; y < 4; y++) if (bank_be[b][y]) banks[b][bank_addr[b]][8*y +: 8] <= bank_wdata[b][8*y +: 8];
        end else bank_rdata[b] <= banks[b][bank_addr[b]];
      end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  logic        m_req [NM];
  logic        m_we [NM];
  logic [31:0] m_addr [NM];
  logic [31:0] m_wdata [NM];
  always_comb for (int m = 0; m < NM; m++) begin
    req[m] = m_req[m]; we[m] = m_we[m]; addr[m] = m_addr[m]; wdata[m] = m_wdata[m]; be[m] = 4'hf;
  end

  int done_m = 0;
  for (genvar m = 0; m < NM; m++) begin : g_m
    initial begin
      logic [31:0] model [int];
      m_req[m] = 0; m_we[m] = 0; m_addr[m] = 0; m_wdata[m] = 0;
      wait (rst_n);
      for (int i = 0; i < 400; i++) begin
        int a, w;
        a = 4 * (m * 256 + $urandom_range(0, 63));
        @(negedge clk);
        m_we[m] = !model.exists(a) || $urandom_range(0, 1); m_addr[m] = 32'(a); m_wdata[m] = $urandom; m_req[m] = 1;
        @(posedge clk);
        while (!gnt[m]) @(posedge clk);
        if (m_we[m]) model[a] = m_wdata[m];
        @(negedge clk);
        m_req[m] = 0;
        check(rvalid[m], "rvalid one cycle after the grant");
        if (!m_we[m]) check(rdata[m] == model[a], $sformatf("master %0d read %h", m, a));
      end
      done_m++;
      // all masters on bank 5
      wait (hammer);
      for (int i = 0; i < 30; i++) begin
        int w;
        @(negedge clk);
        m_we[m] = 1; m_addr[m] = 32'(4 * (5 + 16 * (m + 1))); m_req[m] = 1;
        w = 0;
        @(posedge clk);
        while (!gnt[m]) begin w++; @(posedge clk); end
        if (w > wait_max) wait_max = w;
        @(negedge clk);
        m_req[m] = 0;
      end
      done_m++;
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (done_m == NM);
    hammer = 1;
    wait (done_m == 2 * NM);
    check(wait_max <= 2 * NM, $sformatf("round-robin wait bound (max %0d cycles)", wait_max));
    $display("INFO max wait %0d", wait_max);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
