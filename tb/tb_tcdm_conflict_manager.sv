// tb_tcdm_conflict_manager: self-checking test of the branch arbitration in front of the banks.
//
// Random request patterns of both branches are applied with both priority settings and several
// starvation bounds. A reference model in the testbench tracks the consecutive lost conflicts and
// predicts the winner; the testbench checks both grants, that the shallow grant is all-or-nothing,
// that every bank port carries the winner's signals, and that the preferred branch never holds
// the other off for more than max_stall consecutive conflicts.
module tb_tcdm_conflict_manager;
  localparam int NB = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic prio = 1;
  logic [7:0] max_stall = 4;
  logic [NB-1:0] log_req = 0, log_we = 0, log_gnt, sh_req = 0, bank_req, bank_we;
  logic [NB-1:0][11:0] log_addr, sh_addr, bank_addr;
  logic [NB-1:0][3:0] log_be, sh_be, bank_be;
  logic [NB-1:0][31:0] log_wdata, sh_wdata, bank_wdata;
  logic sh_we = 0, sh_gnt, conflict;
  int checks = 0, failures = 0, lost = 0, max_lost = 0, n_conf = 0, n_override = 0;

  tcdm_conflict_manager dut (.clk_i(clk), .rst_ni(rst_n), .prio_shallow_i(prio), .max_stall_i(max_stall),
    .log_req_i(log_req), .log_addr_i(log_addr), .log_we_i(log_we), .log_be_i(log_be), .log_wdata_i(log_wdata),
    .log_gnt_o(log_gnt), .sh_req_i(sh_req), .sh_addr_i(sh_addr), .sh_we_i(sh_we), .sh_be_i(sh_be),
    .sh_wdata_i(sh_wdata), .sh_gnt_o(sh_gnt), .bank_req_o(bank_req), .bank_addr_o(bank_addr),
    .bank_we_o(bank_we), .bank_be_o(bank_be), .bank_wdata_o(bank_wdata), .conflict_o(conflict));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      prio = phase[0];
      max_stall = 8'(2 + phase);
      for (int i = 0; i < 2000; i++) begin
        bit exp_sh;
        int b0;
        @(negedge clk);
        b0 = $urandom_range(0, NB - 1);
        sh_req = '0;
        if ($urandom_range(0, 3) != 0) for (int w = 0; w < 9; w++) sh_req[(b0 + w) % NB] = 1'b1;
        log_req = NB'($urandom) & NB'($urandom);
        for (int b = 0; b < NB; b++) begin
          log_addr[b] = 12'($urandom); sh_addr[b] = 12'($urandom);
          log_be[b] = 4'($urandom); sh_be[b] = 4'($urandom);
          log_wdata[b] = $urandom; sh_wdata[b] = $urandom;
        end
        log_we = NB'($urandom); sh_we = $urandom_range(0, 1);
        #1;
        if ((log_req & sh_req) == '0) exp_sh = |sh_req;
        else if (lost >= max_stall) exp_sh = !prio;
        else exp_sh = prio;
        check(sh_gnt == exp_sh, $sformatf("phase %0d cycle %0d shallow grant", phase, i));
        check(log_gnt == (exp_sh ? (log_req & ~sh_req) : log_req), "logarithmic grants");
        for (int b = 0; b < NB; b++) begin
          if (exp_sh && sh_req[b])
            check(bank_req[b] && bank_addr[b] == sh_addr[b] && bank_we[b] == sh_we &&
                  bank_be[b] == sh_be[b] && bank_wdata[b] == sh_wdata[b], $sformatf("phase %0d cycle %0d bank %0d carries shallow access", phase, i, b));
          else
            check(bank_req[b] == log_req[b] && (!log_req[b] || (bank_addr[b] == log_addr[b] &&
                  bank_we[b] == log_we[b] && bank_wdata[b] == log_wdata[b])), "bank carries core access");
        end
        if ((log_req & sh_req) != '0) begin
          n_conf++;
          if (exp_sh != prio) n_override++;
          if (exp_sh == prio) lost++;
          else lost = 0;
          if (lost > max_lost) max_lost = lost;
          check(lost <= max_stall, "starvation bound");
        end
      end
    end
    check(n_conf > 0 && n_override > 0, "conflicts and overrides occurred");
    $display("INFO conflicts=%0d overrides=%0d", n_conf, n_override);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
