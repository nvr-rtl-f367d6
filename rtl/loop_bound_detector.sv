// loop_bound_detector -- Sparse Structure Table (SST) with dual-mode loop bounds.
//
// What it does: keeps one SST entry per loop it has seen and answers "how many more
// iterations are left" so that runahead prefetches stop at the loop bound.
// Two kinds of entries exist:
//   * sparse mode: entry p belongs to parallel port p of the sparse unit.  Its
//     iteration counter and bound come straight from the sparse unit's IdxPtr start
//     and IdxPtr end registers (e.g. rowptr[i] and rowptr[i+1] of a CSR row), written
//     whenever the snooper reports that the port's registers changed.
//   * normal mode: learned from committed CPU branches such as `bge r1, r2, end`.
//     The branch PC is looked up associatively among normal entries.  On a hit the
//     loop variable (rs1) becomes the iteration counter, the difference to the
//     previous rs1 becomes the increment, and rs2 is compared with the stored bound:
//     equal raises the 4-bit boundary confidence, different replaces the bound and
//     clears it.  The 2-bit level confidence counts repeated hits of the same loop.
//     On a miss a normal entry is allocated: the first entry that is neither valid
//     nor sparse, else round-robin among the non-sparse entries.  Entry IDs thus
//     grow in the order loops are first seen; inner loops, which branch first, get
//     the lowest IDs.
// Query (combinational): for port q_port, if entry q_port is in sparse mode the
// answer is bound - counter; otherwise the most recently hit normal entry is used if
// its boundary confidence is non-zero, answering bound - counter (0 when the counter
// has passed the bound, or when nothing is known).
// Timing: updates on the clock edge after the event, query combinational.
// Paper vs. own choices: the SST, one entry per parallel port, the dual sparse/normal
// mode, learning bounds from branch operands and sparse-unit registers, and the field
// widths (48-bit PC, 16-bit counter, increment and bound, 4-bit boundary and 2-bit
// level confidence, N = 16) follow the paper.  The allocation policy, the confidence
// update rules and the fallback from sparse to the last normal loop are this design's.
// The query reads only the mode, bound, counter and confidence of the selected entry.
module loop_bound_detector
  import nvr_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // normal loops: snooped CPU branches
  input  logic                       br_valid,
  input  branch_evt_t                br,
  // sparse loops: snooped sparse-unit registers, one strobe per port
  input  logic [N-1:0]               sp_upd_valid,
  input  sparse_reg_t [N-1:0]        sp_regs,
  // query
  input  logic [$clog2(N)-1:0]       q_port,
  output logic [CNT_W-1:0]           q_remaining,
  output logic                       q_sparse
);

  localparam int IW = $clog2(N);

  typedef struct packed {
    logic             valid;
    pc_t              pc;
    logic [CNT_W-1:0] iter;
    logic             sparse;
    logic [CNT_W-1:0] incr;
    logic [CNT_W-1:0] bound;
    logic [3:0]       bconf;
    logic [1:0]       lconf;
  } sst_entry_t;

  sst_entry_t [N-1:0] sst;
  logic [IW-1:0]      rr_ptr;
  logic [IW-1:0]      last_norm;
  logic               last_norm_vld;

  // associative lookup among normal entries
  logic          hit;
  logic [IW-1:0] hit_idx;
  logic          free_found;
  logic [IW-1:0] free_idx;
  logic [IW-1:0] alloc_idx;
  logic          alloc_ok;
  always_comb begin
    hit        = 1'b0;
    hit_idx    = '0;
    free_found = 1'b0;
    free_idx   = '0;
    for (int e = N - 1; e >= 0; e--) begin
      if (sst[e].valid && !sst[e].sparse && sst[e].pc == br.pc) begin
        hit     = 1'b1;
        hit_idx = IW'(e);
      end
      if (!sst[e].valid && !sst[e].sparse) begin
        free_found = 1'b1;
        free_idx   = IW'(e);
      end
    end
    alloc_idx = free_found ? free_idx : rr_ptr;
    alloc_ok  = free_found || !sst[rr_ptr].sparse;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sst           <= '0;
      rr_ptr        <= '0;
      last_norm     <= '0;
      last_norm_vld <= 1'b0;
    end else begin
      if (br_valid) begin
        if (hit) begin
          sst[hit_idx].iter <= CNT_W'(br.rs1);
          sst[hit_idx].incr <= CNT_W'(br.rs1) - sst[hit_idx].iter;
          if (CNT_W'(br.rs2) == sst[hit_idx].bound) begin
            if (sst[hit_idx].bconf != 4'hF) sst[hit_idx].bconf <= sst[hit_idx].bconf + 4'd1;
          end else begin
            sst[hit_idx].bound <= CNT_W'(br.rs2);
            sst[hit_idx].bconf <= '0;
          end
          if (sst[hit_idx].lconf != 2'd3) sst[hit_idx].lconf <= sst[hit_idx].lconf + 2'd1;
          last_norm     <= hit_idx;
          last_norm_vld <= 1'b1;
        end else if (alloc_ok) begin
          sst[alloc_idx] <= '{valid: 1'b1, pc: br.pc, iter: CNT_W'(br.rs1), sparse: 1'b0,
                              incr: '0, bound: CNT_W'(br.rs2), bconf: '0, lconf: '0};
          last_norm     <= alloc_idx;
          last_norm_vld <= 1'b1;
          if (!free_found) rr_ptr <= rr_ptr + 1'b1;
        end else begin
          rr_ptr <= rr_ptr + 1'b1;
        end
      end
      // sparse updates win over a normal allocation in the same cycle
      for (int p = 0; p < N; p++) begin
        if (sp_upd_valid[p]) begin
          sst[p].valid  <= 1'b1;
          sst[p].sparse <= 1'b1;
          sst[p].pc     <= '0;
          sst[p].iter   <= CNT_W'(sp_regs[p].idx_start);
          sst[p].incr   <= CNT_W'(1);
          sst[p].bound  <= CNT_W'(sp_regs[p].idx_end);
          sst[p].lconf  <= '0;
          if (sst[p].sparse && sst[p].bound == CNT_W'(sp_regs[p].idx_end)) begin
            if (sst[p].bconf != 4'hF) sst[p].bconf <= sst[p].bconf + 4'd1;
          end else begin
            sst[p].bconf <= '0;
          end
          if (last_norm_vld && last_norm == IW'(p)) last_norm_vld <= 1'b0;
        end
      end
    end
  end

  // query
  sst_entry_t qe;
  always_comb begin
    q_sparse    = sst[q_port].valid && sst[q_port].sparse;
    qe          = q_sparse ? sst[q_port] : sst[last_norm];
    q_remaining = '0;
    if (q_sparse || (last_norm_vld && qe.valid && !qe.sparse && qe.bconf != 0))
      q_remaining = (qe.bound > qe.iter) ? qe.bound - qe.iter : '0;
  end

endmodule
