// tb_nvr_top -- end-to-end test of NVR at its default size (N = 16, 16 KiB NSB).
//
// The testbench plays the CPU, the NPU and the L2:
//   * memory: a CSR sparse matrix W whose 32-bit column indices start at WBASE, a
//     dense IA matrix of 64-byte rows at IABASE, and a dense array at DBASE.  The L2
//     returns whole lines after a random 20..50-cycle latency, in order, with random
//     request back-pressure.
//   * sparse phase (parallel port 0): for every row the sparse unit's port-0
//     registers hold {IA start, IdxPtr start = current element, IdxPtr end = row end};
//     for every element j the NPU executes a W load (snooped from its ROB, stride 4),
//     then issues demand loads of W[j] and of the IA row it selects; the sparse unit
//     is busy for a short burst per element (sometimes while the load executes) and
//     idle while the array computes.  A CPU
//     branch closes each row.  Column indices repeat now and then so that several
//     lanes of one prefetch hit the same line.
//   * dense phase (port 2, no sparse registers): a CPU loop `i < DBOUND` with a
//     stride-8 NPU load per iteration; the loop bound comes from the CPU branch.
// Checked:
//   * every NPU demand load returns the memory's data; an NSB hit answers exactly one
//     cycle after the request was accepted;
//   * every L2 request is legal: W lines only up to the current row's last element
//     (the loop bound stops over-prefetching), IA lines only for column indices of
//     rows reached so far, dense lines only below the loop bound;
//   * runahead covers the IA loads: at least half of the sparse-phase IA demand loads
//     hit in the NSB or join a refill already in flight;
//   * the dense loop is prefetched ahead of the demand stream;
//   * every mechanism happens at least once: runahead entry, skip, wait for sparse
//     idle, abort, bound clip, VIGU duplicate merge, PIE drop, NSB hit, miss, MSHR
//     coalescing, prefetch drop and stall.  A mechanism that never happens is a
//     failure.
module tb_nvr_top;
  import nvr_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                cpu_commit_valid = 0, cpu_commit_is_branch = 0;
  branch_evt_t         cpu_commit = '0;
  logic                npu_load_exec_valid = 0;
  load_evt_t           npu_load_exec = '0;
  sparse_reg_t [15:0]  sparse_regs = '0;
  logic                sparse_idle = 1, sparse_chain_sel = 0;
  logic                runahead_req;
  logic                npu_req_valid = 0, npu_req_ready;
  addr_t               npu_req_addr = '0;
  logic [3:0]          npu_req_id = '0;
  logic                npu_resp_valid;
  logic [3:0]          npu_resp_id;
  logic [63:0]         npu_resp_data;
  logic                l2_req_valid, l2_req_ready = 1;
  addr_t               l2_req_line;
  logic [2:0]          l2_req_tag;
  logic                l2_resp_valid = 0, l2_resp_ready;
  logic [2:0]          l2_resp_tag = '0;
  logic [511:0]        l2_resp_data = '0;
  logic                in_runahead;
  nvr_events_t         events;

  nvr_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------------ memory
  localparam longint WBASE  = 64'h10_0000;
  localparam longint IABASE = 64'h80_0000;
  localparam longint DBASE  = 64'h40_0000;
  localparam int     NROWS  = 20;
  localparam int     NNZ_MAX = 1000;
  localparam int     DBOUND = 160;
  localparam int     NCOL   = 192;

  int col [NNZ_MAX + 64];
  int rowptr [NROWS + 1];

  function automatic logic [31:0] mem32(longint a);
    if (a >= WBASE && a < WBASE + 4 * (NNZ_MAX + 64)) return 32'(col[(a - WBASE) / 4]);
    return 32'(a) ^ 32'h9e3779b9;
  endfunction
  function automatic logic [63:0] mem64(longint a);
    return {mem32(a + 4), mem32(a)};
  endfunction
  function automatic logic [511:0] line_data(longint line);
    logic [511:0] d;
    for (int w = 0; w < 8; w++) d[w*64 +: 64] = mem64(line * 64 + w * 8);
    return d;
  endfunction

  // ------------------------------------------------------------------ legality state
  longint w_limit_line;              // last W line the current row may touch
  bit     ia_allowed [NCOL];         // IA rows selected by elements reached so far
  longint d_demand_line;             // dense line the NPU is loading now
  int     n_l2_w, n_l2_ia, n_l2_d, n_d_ahead;

  // ------------------------------------------------------------------ L2 model
  typedef struct { int tag; longint line; longint due; } l2e_t;
  l2e_t   l2q [$];
  longint cyc = 0;
  always @(posedge clk) begin
    l2e_t e;
    longint ln;
    cyc++;
    if (rst_n && l2_req_valid && l2_req_ready) begin
      ln = longint'(l2_req_line);
      e.tag  = int'(l2_req_tag);
      e.line = ln;
      e.due  = cyc + $urandom_range(20, 50);
      if (l2q.size() != 0 && e.due <= l2q[l2q.size() - 1].due) e.due = l2q[l2q.size() - 1].due + 1;
      l2q.push_back(e);
      if (ln >= WBASE / 64 && ln < (WBASE + 4 * NNZ_MAX) / 64) begin
        n_l2_w++;
        check(ln <= w_limit_line, $sformatf("W line %h beyond the loop bound (limit %h)", ln, w_limit_line));
      end else if (ln >= IABASE / 64 && ln < IABASE / 64 + NCOL) begin
        n_l2_ia++;
        check(ia_allowed[ln - IABASE / 64], $sformatf("IA row %0d not selected by any element so far", ln - IABASE / 64));
      end else if (ln >= DBASE / 64 && ln < (DBASE + 8 * DBOUND + 63) / 64) begin
        n_l2_d++;
        if (ln > d_demand_line) n_d_ahead++;
      end else begin
        check(0, $sformatf("L2 request for unexpected line %h", ln));
      end
    end
    if (l2_resp_valid && l2_resp_ready) void'(l2q.pop_front());
    #2;
    l2_req_ready = $urandom_range(0, 7) != 0;
    if (l2q.size() != 0 && l2q[0].due <= cyc) begin
      l2_resp_valid = 1;
      l2_resp_tag   = 3'(l2q[0].tag);
      l2_resp_data  = line_data(l2q[0].line);
    end else begin
      l2_resp_valid = 0;
    end
  end

  // ------------------------------------------------------------------ event counters
  int c_enter, c_skip, c_wait, c_abort, c_clip, c_dup, c_drop, c_hit, c_miss, c_coal, c_pfdrop, c_stall;
  int c_runahead_cycles;
  always @(posedge clk) if (rst_n) begin
    c_enter  += int'(events.ra_enter);
    c_skip   += int'(events.ra_skip);
    c_wait   += int'(events.ra_wait_idle);
    c_abort  += int'(events.ra_abort);
    c_clip   += int'(events.ra_clip);
    c_dup    += int'(events.vigu_dup);
    c_drop   += int'(events.pie_drop);
    c_hit    += int'(events.nsb_hit);
    c_miss   += int'(events.nsb_miss);
    c_coal   += int'(events.nsb_coalesce);
    c_pfdrop += int'(events.nsb_pf_drop);
    c_stall  += int'(events.nsb_stall);
    c_runahead_cycles += int'(in_runahead);
    if (in_runahead) check(runahead_req, "runahead only while requested from the sparse unit");
  end

  // ------------------------------------------------------------------ NPU / CPU helpers
  logic [3:0] next_id = 0;
  int n_loads, n_hit_lat_ok;

  // one demand load; returns the data and whether it hit (or coalesced) in the NSB
  task automatic npu_load(input longint a, output logic [63:0] d, output bit fast);
    time    t_acc;
    logic [3:0] id;
    bit     was_hit, was_coal;
    @(negedge clk);
    id = next_id; next_id++;
    npu_req_valid = 1; npu_req_addr = addr_t'(a & ~longint'(7)); npu_req_id = id;
    #1;
    while (!npu_req_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    t_acc    = $time;
    was_hit  = events.nsb_hit;
    was_coal = events.nsb_coalesce;
    #1 npu_req_valid = 0;
    @(negedge clk);
    while (!(npu_resp_valid && npu_resp_id == id)) @(negedge clk);
    d = npu_resp_data;
    n_loads++;
    if (was_hit) begin
      // accepted at a rising edge; the registered response is valid in the next cycle,
      // seen at the falling edge that follows
      check(($time - t_acc) == 5, $sformatf("NSB hit answered after %0d time units, expected one cycle", $time - t_acc));
      if ($time - t_acc == 5) n_hit_lat_ok++;
    end
    check(d == mem64(a & ~longint'(7)), $sformatf("load %h returned %h, expected %h", a, d, mem64(a & ~longint'(7))));
    fast = was_hit || was_coal;
  endtask

  task automatic load_exec(input int port, input longint a, input longint pc);
    @(negedge clk);
    npu_load_exec_valid = 1;
    npu_load_exec.pc    = pc_t'(pc);
    npu_load_exec.port  = 4'(port);
    npu_load_exec.addr  = addr_t'(a);
    npu_load_exec.vsize = 4'd6;
    @(negedge clk);
    npu_load_exec_valid = 0;
  endtask

  task automatic cpu_branch(input longint pc, input int rs1, input int rs2);
    @(negedge clk);
    cpu_commit_valid = 1; cpu_commit_is_branch = 1;
    cpu_commit.pc = pc_t'(pc); cpu_commit.rs1 = 64'(rs1); cpu_commit.rs2 = 64'(rs2);
    @(negedge clk);
    // an unrelated non-branch commit must be ignored
    cpu_commit_is_branch = 0; cpu_commit.pc = pc_t'(pc + 4); cpu_commit.rs2 = 64'(rs2 + 7);
    @(negedge clk);
    cpu_commit_valid = 0;
  endtask

  // ------------------------------------------------------------------ watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------ stimulus
  int ia_loads, ia_fast, d_ahead_before;
  initial begin
    logic [63:0] d;
    bit          fast;
    int          c, j;
    // matrix
    rowptr[0] = 0;
    for (int r = 0; r < NROWS; r++) rowptr[r + 1] = rowptr[r] + $urandom_range(8, 44);
    for (int k = 0; k < NNZ_MAX + 64; k++) begin
      c = $urandom_range(0, NCOL - 1);
      if (k > 0 && $urandom_range(0, 5) == 0) c = col[k - 1] ^ 1;  // same IA line neighbourhood
      if (k > 0 && $urandom_range(0, 7) == 0) c = col[k - 1];      // repeated column
      col[k] = c;
    end
    for (int k = 0; k < NCOL; k++) ia_allowed[k] = 0;
    w_limit_line = 0; d_demand_line = DBASE / 64;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // ---------------- sparse phase
    for (int r = 0; r < NROWS; r++) begin
      w_limit_line = (WBASE + 4 * (rowptr[r + 1] - 1)) / 64;
      for (int k = rowptr[r]; k < rowptr[r + 1]; k++) ia_allowed[col[k]] = 1;
      for (j = rowptr[r]; j < rowptr[r + 1]; j++) begin
        @(negedge clk);
        sparse_regs[0].ss_start  = addr_t'(IABASE);
        sparse_regs[0].idx_start = 10'(j);
        sparse_regs[0].idx_end   = 10'(rowptr[r + 1]);
        // now and then the sparse unit is still busy when the load executes
        if ($urandom_range(0, 3) == 0) sparse_idle = 0;
        load_exec(0, WBASE + 4 * j, 64'h2000);
        repeat ($urandom_range(0, 3)) @(negedge clk);
        sparse_idle = 1;
        npu_load(WBASE + 4 * j, d, fast);
        check(d[(j % 2) * 32 +: 32] == 32'(col[j]), $sformatf("W[%0d]", j));
        npu_load(IABASE + 64 * longint'(col[j]) + 8 * (j % 8), d, fast);
        if (r >= 2) begin ia_loads++; ia_fast += int'(fast); end
        // the sparse unit handles the index, then the array computes
        @(negedge clk); sparse_idle = 0;
        repeat ($urandom_range(1, 3)) @(negedge clk);
        sparse_idle = 1;
        repeat ($urandom_range(2, 14)) @(negedge clk);
      end
      cpu_branch(64'h1000, r + 1, NROWS);
    end
    $display("sparse phase: IA loads %0d, hit or in flight %0d; L2 lines W %0d IA %0d",
             ia_loads, ia_fast, n_l2_w, n_l2_ia);
    check(ia_fast * 2 >= ia_loads, $sformatf("runahead covers at least half of the IA loads (%0d of %0d)", ia_fast, ia_loads));

    // ---------------- dense phase: loop bound from the CPU branch
    sparse_regs[0] = '0;
    d_ahead_before = n_d_ahead;
    for (int i = 0; i < DBOUND; i++) begin
      d_demand_line = (DBASE + 8 * i) / 64;
      cpu_branch(64'h3000, i, DBOUND);
      load_exec(2, DBASE + 8 * i, 64'h3010);
      npu_load(DBASE + 8 * i, d, fast);
      repeat ($urandom_range(0, 6)) @(negedge clk);
    end
    $display("dense phase: L2 lines %0d, ahead of the demand %0d", n_l2_d, n_d_ahead - d_ahead_before);
    check(n_d_ahead - d_ahead_before > 0, "dense loop prefetched ahead of the demand stream");

    repeat (200) @(negedge clk);
    check(l2q.size() == 0, "all L2 refills returned");
    check(n_hit_lat_ok > 0, "NSB hits observed with one-cycle latency");

    $display("events: enter %0d skip %0d wait_idle %0d abort %0d clip %0d vigu_dup %0d pie_drop %0d",
             c_enter, c_skip, c_wait, c_abort, c_clip, c_dup, c_drop);
    $display("        nsb hit %0d miss %0d coalesce %0d pf_drop %0d stall %0d; runahead cycles %0d; loads %0d",
             c_hit, c_miss, c_coal, c_pfdrop, c_stall, c_runahead_cycles, n_loads);
    check(c_enter  > 0, "runahead entered");
    check(c_skip   > 0, "load event skipped");
    check(c_wait   > 0, "runahead waited for the sparse unit");
    check(c_abort  > 0, "runahead aborted");
    check(c_clip   > 0, "micro-instruction clipped by the loop bound");
    check(c_dup    > 0, "VIGU merged duplicate lines");
    check(c_drop   > 0, "PIE dropped a chain without a pattern entry");
    check(c_hit    > 0, "NSB hit");
    check(c_miss   > 0, "NSB miss");
    check(c_coal   > 0, "MSHR coalescing");
    check(c_pfdrop > 0, "prefetch dropped with MSHRs full");
    check(c_stall  > 0, "NSB stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
