// tb_nvr_workloads -- NVR on the sparse access shapes of the evaluated workload classes.
//
// The same harness as the end-to-end test (the testbench plays CPU, NPU and an L2 with
// 20..50 cycles of latency), here with the small 4 KiB NSB and three phases, one per
// data format of the dense operand IA: INT8, FP16 and INT32 rows of 16 elements, i.e.
// IA rows of 16, 32 and 64 bytes (vector size 4, 5, 6).  Each phase uses its own W
// and IA regions and its own index shape:
//   * graph (GCN/GAT-like): power-law row lengths, column indices spread uniformly;
//   * top-k (DS/H2O-like): fixed 32 selected positions per row, sorted ascending;
//   * clustered (MK/SCN-like): neighbour indices close to the row's own index.
// Sizes are this testbench's own; the point is the access shape, not a full model.
// Checked per phase: all NPU data correct, no W prefetch beyond the row's bound, no
// IA line that no element of a row reached so far selects, and at least half of the
// IA demand loads hit in the NSB or join a refill in flight.
module tb_nvr_workloads;
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

  nvr_top #(.NSB_BYTES(4096)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------------ memory
  localparam int     NROWS  = 16;
  localparam int     NNZ_MAX = 1000;
  localparam int     NCOL   = 512;
  longint WBASE, IABASE;            // this phase's regions
  int     VS;                       // this phase's vector size (log2 IA row bytes)

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
  int     n_l2_w, n_l2_ia;

  // an IA line is legal if any IA row it holds was selected
  function automatic bit ia_line_ok(longint ln);
    longint first, last;
    first = (ln * 64 - IABASE) >> VS;
    last  = (ln * 64 + 63 - IABASE) >> VS;
    for (longint r = first; r <= last; r++) if (r < NCOL && ia_allowed[r]) return 1;
    return 0;
  endfunction

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
      end else if (ln >= IABASE / 64 && ln < (IABASE + (longint'(NCOL) << VS)) / 64) begin
        n_l2_ia++;
        check(ia_line_ok(ln), $sformatf("IA line %h holds no row selected so far", ln));
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
    npu_load_exec.vsize = 4'(VS);
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
  int ia_loads, ia_fast;
  initial begin
    logic [63:0] d;
    bit          fast;
    int          c, j, len;
    string       shape;
    WBASE = 64'h10_0000; IABASE = 64'h80_0000; VS = 6;
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    for (int ph = 0; ph < 3; ph++) begin
      // quiet the previous phase before switching regions
      repeat (300) @(negedge clk);
      check(l2q.size() == 0, "previous phase drained");
      WBASE  = 64'h10_0000 + 64'h1_0000 * ph;
      IABASE = 64'h80_0000 + 64'h10_0000 * ph;
      VS     = 4 + ph;                       // INT8, FP16, INT32 rows of 16 elements
      for (int k = 0; k < NCOL; k++) ia_allowed[k] = 0;
      w_limit_line = 0;
      rowptr[0] = 0;
      for (int r = 0; r < NROWS; r++) begin
        case (ph)
          0: len = ($urandom_range(0, 3) == 0) ? $urandom_range(30, 60) : $urandom_range(2, 12);
          1: len = 32;
          default: len = $urandom_range(16, 40);
        endcase
        rowptr[r + 1] = rowptr[r] + len;
        for (int k = rowptr[r]; k < rowptr[r + 1]; k++) begin
          case (ph)
            0: c = $urandom_range(0, NCOL - 1);
            1: c = (k == rowptr[r]) ? $urandom_range(0, 15) : col[k - 1] + $urandom_range(1, 15);
            default: c = (r * 24 + $urandom_range(0, 40)) % NCOL;
          endcase
          col[k] = c % NCOL;
        end
      end
      shape = (ph == 0) ? "graph/INT8" : (ph == 1) ? "top-k/FP16" : "clustered/INT32";
      ia_loads = 0; ia_fast = 0;
      for (int r = 0; r < NROWS; r++) begin
        w_limit_line = (WBASE + 4 * (rowptr[r + 1] - 1)) / 64;
        for (int k = rowptr[r]; k < rowptr[r + 1]; k++) ia_allowed[col[k]] = 1;
        for (j = rowptr[r]; j < rowptr[r + 1]; j++) begin
          @(negedge clk);
          sparse_regs[0].ss_start  = addr_t'(IABASE);
          sparse_regs[0].idx_start = 10'(j);
          sparse_regs[0].idx_end   = 10'(rowptr[r + 1]);
          load_exec(0, WBASE + 4 * j, 64'h2000);
          npu_load(WBASE + 4 * j, d, fast);
          check(d[(j % 2) * 32 +: 32] == 32'(col[j]), $sformatf("%s W[%0d]", shape, j));
          npu_load(IABASE + (longint'(col[j]) << VS) + 8 * (j % (1 << (VS - 3))), d, fast);
          if (r >= 2) begin ia_loads++; ia_fast += int'(fast); end
          @(negedge clk); sparse_idle = 0;
          repeat ($urandom_range(1, 3)) @(negedge clk);
          sparse_idle = 1;
          repeat ($urandom_range(2, 14)) @(negedge clk);
        end
        cpu_branch(64'h1000, r + 1, NROWS);
      end
      $display("%s: %0d elements, IA loads %0d, hit or in flight %0d", shape, rowptr[NROWS], ia_loads, ia_fast);
      check(ia_fast * 2 >= ia_loads, $sformatf("%s: runahead covers at least half of the IA loads", shape));
      check(c_enter > 0, "runahead entered");
    end
    repeat (300) @(negedge clk);
    check(l2q.size() == 0, "all L2 refills returned");
    $display("nsb hit %0d miss %0d coalesce %0d pf_drop %0d stall %0d; runahead cycles %0d; loads %0d",
             c_hit, c_miss, c_coal, c_pfdrop, c_stall, c_runahead_cycles, n_loads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
