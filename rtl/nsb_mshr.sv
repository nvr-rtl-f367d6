// nsb_mshr -- miss status holding register (MSHR) file of the non-blocking speculative buffer.
//
// What it does: remembers every cache line the NSB has missed on and not yet received,
// so that the buffer keeps serving hits while misses are outstanding, and merges
// later requests for a line that is already on its way (coalescing) instead of asking
// the L2 for it again.
// How: N_MSHR entries, each holding valid, the line address, an `issued` flag and up
// to N_TGT targets.  A target is a demand request waiting for data: its request tag
// and the 64-bit word offset inside the line.  Prefetches allocate an entry with no
// target, and a prefetch that hits an entry adds nothing.
//   * lookup (combinational): lk_line is compared with all valid entries -> lk_hit,
//     lk_idx and whether that entry's target list is full; `full` says no entry is free.
//   * alloc: writes the lowest free entry (alloc_idx) with an optional first target.
//   * add:   appends a target to entry add_idx.
//   * issue: the lowest valid, not yet issued entry is offered to the L2 (iss_*); the
//     entry index is the request tag.
//   * fill:  when the L2 returns tag t, the entry's line and target list are presented
//     (combinational) and the entry is freed on the same clock edge.
// Timing: all updates on the clock edge; lookup, issue selection and fill read-out
// combinational.
// Paper vs. own choices: an MSHR file that tracks outstanding misses and coalesces
// requests to the same line follows the paper.  The number of entries (8) and targets
// per entry (4) and the lowest-index selection are this design's; the paper gives none.
// rst_n also disables the assertions, besides resetting the flops.
module nsb_mshr
  import nvr_pkg::*;
#(
  parameter int N_MSHR = 8,
  parameter int N_TGT  = 4,
  parameter int OFF_W  = LINE_OFF - 3
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // lookup
  input  addr_t                            lk_line,
  output logic                             lk_hit,
  output logic [$clog2(N_MSHR)-1:0]        lk_idx,
  output logic                             lk_tgt_full,
  output logic                             full,
  // allocate
  input  logic                             alloc_valid,
  input  addr_t                            alloc_line,
  input  logic                             alloc_tgt,
  input  logic [TAG_W-1:0]                 alloc_id,
  input  logic [OFF_W-1:0]                 alloc_off,
  output logic [$clog2(N_MSHR)-1:0]        alloc_idx,
  // add a target
  input  logic                             add_valid,
  input  logic [$clog2(N_MSHR)-1:0]        add_idx,
  input  logic [TAG_W-1:0]                 add_id,
  input  logic [OFF_W-1:0]                 add_off,
  // issue to L2
  output logic                             iss_valid,
  input  logic                             iss_ready,
  output addr_t                            iss_line,
  output logic [$clog2(N_MSHR)-1:0]        iss_tag,
  // fill from L2
  input  logic                             fill_valid,
  input  logic [$clog2(N_MSHR)-1:0]        fill_tag,
  output addr_t                            fill_line,
  output logic [N_TGT-1:0]                 fill_tgt_valid,
  output logic [N_TGT-1:0][TAG_W-1:0]      fill_tgt_id,
  output logic [N_TGT-1:0][OFF_W-1:0]      fill_tgt_off,
  output logic [$clog2(N_MSHR+1)-1:0]      occupancy
);

  localparam int MW = $clog2(N_MSHR);

  typedef struct packed {
    logic                         valid;
    logic                         issued;
    addr_t                        line;
    logic [N_TGT-1:0]             tv;
    logic [N_TGT-1:0][TAG_W-1:0]  tid;
    logic [N_TGT-1:0][OFF_W-1:0]  toff;
  } mshr_t;

  mshr_t [N_MSHR-1:0] m;

  always_comb begin
    lk_hit      = 1'b0;
    lk_idx      = '0;
    full        = 1'b1;
    alloc_idx   = '0;
    iss_valid   = 1'b0;
    iss_tag     = '0;
    occupancy   = '0;
    for (int e = N_MSHR - 1; e >= 0; e--) begin
      if (m[e].valid && m[e].line == lk_line) begin
        lk_hit = 1'b1;
        lk_idx = MW'(e);
      end
      if (!m[e].valid) begin
        full      = 1'b0;
        alloc_idx = MW'(e);
      end
      if (m[e].valid && !m[e].issued) begin
        iss_valid = 1'b1;
        iss_tag   = MW'(e);
      end
    end
    for (int e = 0; e < N_MSHR; e++) occupancy += $clog2(N_MSHR+1)'(m[e].valid);
    lk_tgt_full    = &m[lk_idx].tv;
    iss_line       = m[iss_tag].line;
    fill_line      = m[fill_tag].line;
    fill_tgt_valid = m[fill_tag].tv;
    fill_tgt_id    = m[fill_tag].tid;
    fill_tgt_off   = m[fill_tag].toff;
  end

  // first free target slot of the entry being added to
  logic [$clog2(N_TGT)-1:0] add_slot;
  always_comb begin
    add_slot = '0;
    for (int t = N_TGT - 1; t >= 0; t--)
      if (!m[add_idx].tv[t]) add_slot = $clog2(N_TGT)'(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m <= '0;
    end else begin
      if (iss_valid && iss_ready) m[iss_tag].issued <= 1'b1;
      if (fill_valid) m[fill_tag] <= '0;
      if (alloc_valid) begin
        m[alloc_idx]         <= '0;
        m[alloc_idx].valid   <= 1'b1;
        m[alloc_idx].line    <= alloc_line;
        m[alloc_idx].tv[0]   <= alloc_tgt;
        m[alloc_idx].tid[0]  <= alloc_id;
        m[alloc_idx].toff[0] <= alloc_off;
      end
      if (add_valid) begin
        m[add_idx].tv[add_slot]   <= 1'b1;
        m[add_idx].tid[add_slot]  <= add_id;
        m[add_idx].toff[add_slot] <= add_off;
      end
    end
  end

  a_no_alloc_when_full: assert property (@(posedge clk) disable iff (!rst_n) alloc_valid |-> !full);
  a_fill_valid_entry:   assert property (@(posedge clk) disable iff (!rst_n)
                                         fill_valid |-> m[fill_tag].valid && m[fill_tag].issued);
  a_add_has_room:       assert property (@(posedge clk) disable iff (!rst_n)
                                         add_valid |-> m[add_idx].valid && !(&m[add_idx].tv));

endmodule
