// tb_loop_bound_detector -- self-checking test of the Sparse Structure Table.
//
// Normal mode: a `bge r1, r2` branch of an inner loop (PC A, bound 10) and an outer
// loop (PC B, bound 4) are committed repeatedly.  The query answers bound - counter
// of the most recently hit normal loop, and only once its boundary confidence is
// non-zero (the bound has been seen twice).  A changed bound resets the confidence.
// Sparse mode: port 3 gets IdxPtr start/end = 5/37; the query for port 3 answers 32
// independently of the normal loops; moving IdxPtr start to 40 (past the end) gives 0.
// Allocation: 16 distinct branch PCs fill the table without disturbing the sparse entry.
module tb_loop_bound_detector;
  import nvr_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic br_valid = 0;
  branch_evt_t br = '0;
  logic [N-1:0] sp_upd_valid = '0;
  sparse_reg_t [N-1:0] sp_regs = '0;
  logic [3:0] q_port = 0;
  logic [15:0] q_remaining;
  logic q_sparse;

  loop_bound_detector #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic branch(longint pc, longint r1, longint r2);
    br_valid = 1; br.pc = pc_t'(pc); br.rs1 = r1; br.rs2 = r2;
    @(posedge clk); #1; br_valid = 0;
  endtask

  task automatic sparse(int p, int s, int e);
    sp_upd_valid = '0; sp_upd_valid[p] = 1'b1;
    sp_regs[p].ss_start = 48'h8000; sp_regs[p].idx_start = 10'(s); sp_regs[p].idx_end = 10'(e);
    @(posedge clk); #1; sp_upd_valid = '0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam longint PCA = 48'h8000_1024, PCB = 48'h8000_2024;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    q_port = 0; #1;
    check(q_remaining == 0 && !q_sparse, "empty table answers 0");
    branch(PCA, 0, 10);
    q_port = 0; #1;
    check(q_remaining == 0, "bound seen once: no confidence yet");
    branch(PCA, 1, 10);
    #1 check(q_remaining == 9, $sformatf("inner loop remaining 9, got %0d", q_remaining));
    for (int i = 2; i < 8; i++) branch(PCA, i, 10);
    #1 check(q_remaining == 3, $sformatf("inner loop remaining 3, got %0d", q_remaining));
    check(dut.sst[0].incr == 1 && dut.sst[0].pc == PCA, "increment learned, entry 0 = inner loop");
    check(dut.sst[0].lconf == 3, "level confidence saturates");
    // outer loop gets the next entry
    branch(PCB, 1, 4);
    branch(PCB, 2, 4);
    #1 check(q_remaining == 2, $sformatf("outer loop remaining 2, got %0d", q_remaining));
    check(dut.sst[1].pc == PCB, "outer loop in entry 1");
    // bound change resets confidence
    branch(PCB, 2, 6);
    #1 check(q_remaining == 0, "changed bound: no confidence");
    branch(PCB, 3, 6);
    #1 check(q_remaining == 3, $sformatf("new bound remaining 3, got %0d", q_remaining));
    // counter past the bound
    branch(PCA, 12, 10);
    #1 check(q_remaining == 0, "counter past bound gives 0");
    // sparse mode on port 3
    sparse(3, 5, 37);
    q_port = 3; #1;
    check(q_sparse, "port 3 in sparse mode");
    check(q_remaining == 32, $sformatf("sparse remaining 32, got %0d", q_remaining));
    branch(PCB, 4, 6);
    q_port = 3; #1;
    check(q_remaining == 32, "sparse entry not affected by normal loops");
    sparse(3, 30, 37);
    #1 check(q_remaining == 7, $sformatf("sparse remaining 7, got %0d", q_remaining));
    check(dut.sst[3].bconf == 1, "same sparse bound raises confidence");
    sparse(3, 40, 37);
    #1 check(q_remaining == 0, "sparse index past end gives 0");
    // fill the table with new loops; entry 3 stays sparse
    for (int i = 0; i < 20; i++) branch(48'h9000_0000 + 4 * i, 0, 100 + i);
    check(dut.sst[3].sparse && dut.sst[3].bound == 37, "sparse entry kept during allocation");
    q_port = 7; #1;
    branch(48'h9000_0000 + 4 * 19, 1, 119);
    #1 check(q_remaining == 118, $sformatf("re-hit of a new loop: remaining 118, got %0d", q_remaining));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
