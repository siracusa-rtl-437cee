// tb_nk_regfile: self-checking test of N-EUREKA's dual-context job register file.
//
// Programs a job into context 0 and triggers it, programs and triggers a second job (context 1),
// then checks that a third write is held off (cfg_gnt_o low) while both contexts hold jobs, that
// job_o presents the first job's fields (decoded from the register values), that job_done_i
// releases it and the second job follows, and that STATUS reports busy and the queue depth.
// Register reads return what was written into the context being programmed.
module tb_nk_regfile;
  import neureka_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, we = 0, gnt, rvalid, job_valid, job_done = 0, busy = 0;
  logic [7:0] addr = 0;
  logic [31:0] wdata = 0, rdata;
  nk_job_t job;
  logic [N_JOB_REGS-1:0][31:0] regs [2];
  int checks = 0, failures = 0;

  nk_regfile dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_we_i(we), .cfg_addr_i(addr),
    .cfg_wdata_i(wdata), .cfg_gnt_o(gnt), .cfg_rvalid_o(rvalid), .cfg_rdata_o(rdata),
    .job_valid_o(job_valid), .job_o(job), .job_done_i(job_done), .busy_i(busy));

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic wr(int a, logic [31:0] d);
    @(negedge clk); req = 1; we = 1; addr = 8'(a); wdata = d;
    @(posedge clk); while (!gnt) @(posedge clk);
    @(negedge clk); req = 0; we = 0;
  endtask

  task automatic rd(int a, output logic [31:0] d);
    @(negedge clk); req = 1; we = 0; addr = 8'(a);
    @(posedge clk); while (!gnt) @(posedge clk);
    @(negedge clk); req = 0;
    check(rvalid, "read data one cycle after the grant");
    d = rdata;
  endtask

  task automatic check_job(int c);
    nk_job_t e;
    e = regs_to_job(regs[c]);
    check(job_valid && job == e, $sformatf("job of context %0d presented", c));
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    repeat (3) @(negedge clk);
    rst_n = 1;
    check(!job_valid, "no job after reset");
    for (int c = 0; c < 2; c++) begin
      for (int r = 0; r < N_JOB_REGS; r++) begin
        regs[c][r] = $urandom;
        wr(REG_JOB0 + r, regs[c][r]);
      end
      for (int r = 0; r < N_JOB_REGS; r += 5) begin
        rd(REG_JOB0 + r, d);
        check(d == regs[c][r], "register read back");
      end
      wr(REG_TRIGGER, 1);
    end
    busy = 1;
    check_job(0);
    rd(REG_STATUS, d);
    check(d[0] == 1'b1 && d[3:2] == 2'd2, $sformatf("status busy with two queued jobs: %h", d));
    // third write is held off
    @(negedge clk); req = 1; we = 1; addr = 8'(REG_JOB0); wdata = 32'hdead;
    for (int i = 0; i < 5; i++) begin #1 check(!gnt, "write held off while both contexts are full"); @(negedge clk); end
    req = 0; we = 0;
    job_done = 1;
    @(negedge clk); job_done = 0;
    check_job(1);
    wr(REG_JOB0, 32'h1234);
    check(job_valid && job == regs_to_job(regs[1]), "queued job unchanged by writes to the free context");
    job_done = 1;
    @(negedge clk); job_done = 0; busy = 0;
    check(!job_valid, "no job after both completed");
    rd(REG_STATUS, d);
    check(d[3:0] == 4'd0, "status idle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
