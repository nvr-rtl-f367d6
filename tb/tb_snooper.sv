// tb_snooper -- self-checking test of the snooper probes.
//
// Checks that committed branches (and only branches) become branch events one cycle
// later with the captured PC and operands, that ROB load executions become load
// events, that a change in any port's sparse registers raises exactly that port's
// update strobe one cycle later with the new value, that unchanged registers raise
// nothing, and that the idle flag is delayed by one cycle.
module tb_snooper;
  import nvr_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cpu_commit_valid = 0, cpu_commit_is_branch = 0;
  branch_evt_t cpu_commit = '0;
  logic npu_load_exec_valid = 0;
  load_evt_t npu_load_exec = '0;
  sparse_reg_t [N-1:0] sparse_regs = '0;
  logic sparse_idle = 0;
  logic br_evt_valid, ld_evt_valid, sp_idle;
  branch_evt_t br_evt;
  load_evt_t ld_evt;
  logic [N-1:0] sp_upd_valid;
  sparse_reg_t [N-1:0] sp_regs;

  snooper #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    @(posedge clk); #1;
    check(sp_upd_valid == '0, "no updates while registers are stable");
    for (int t = 0; t < 400; t++) begin
      bit cv, cb, lv, idl;
      branch_evt_t bev;
      load_evt_t lev;
      logic [N-1:0] chg;
      sparse_reg_t [N-1:0] nregs;
      cv = $urandom_range(0, 1); cb = $urandom_range(0, 1); lv = $urandom_range(0, 1);
      idl = $urandom_range(0, 1);
      chg = '0;
      nregs = sparse_regs;
      bev = {$urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom(), $urandom()};
      lev = {$urandom(), $urandom(), $urandom(), $urandom()};
      for (int p = 0; p < N; p++)
        if ($urandom_range(0, 7) == 0) begin
          nregs[p].idx_start = nregs[p].idx_start + 10'd1;
          chg[p] = 1'b1;
        end
      cpu_commit_valid = cv; cpu_commit_is_branch = cb; cpu_commit = bev;
      npu_load_exec_valid = lv; npu_load_exec = lev;
      sparse_regs = nregs; sparse_idle = idl;
      @(posedge clk); #1;
      cpu_commit_valid = 0; npu_load_exec_valid = 0;
      check(br_evt_valid == (cv && cb), "branch event only for committed branches");
      if (cv && cb) check(br_evt == bev, "branch event payload");
      check(ld_evt_valid == lv, "load event");
      if (lv) check(ld_evt == lev, "load event payload");
      check(sp_upd_valid == chg, $sformatf("update strobes %h vs %h", sp_upd_valid, chg));
      check(sp_regs == nregs, "sparse registers captured");
      check(sp_idle == idl, "idle delayed by one cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
