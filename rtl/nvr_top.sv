// nvr_top -- NPU Vector Runahead (NVR) with its non-blocking speculative buffer (NSB).
//
// What it does: sits beside an NPU and its host CPU, watches them without interfering,
// and while the NPU's sparse unit is idle it runs ahead of the NPU's sparse load
// stream: it predicts the next W (index) addresses, loads those W values, turns each
// into the address of the IA row it selects, and prefetches those rows into the NSB,
// where the NPU's real loads then find them.
// Structure (data flow):
//   snooper  -> stride_detector (trains on NPU load addresses)
//            -> loop_bound_detector (CPU branches, sparse-unit IdxPtr registers)
//            -> sparse_chain_detector (sparse-unit IA start / IdxPtr registers,
//               vector size of NPU loads)
//            -> nvr_controller (trigger: NPU load executing; sparse-unit idle)
//   nvr_controller -> vmig (micro-instructions) -> nvr_vload_seq -> nsb
//   nsb <-> L2 (line refills);  NPU demand loads -> nsb (priority over NVR).
// Ports: the CPU commit probe, the NPU ROB load probe, the sparse unit's registers,
// idle flag and runahead request, the NPU's demand-load port into the NSB and the
// NSB's L2 refill port.  These are where the CPU, the NPU (its reservation station,
// ROB, sparse unit, load path) and the L2 connect; none of them is part of this RTL.
// Request tags into the NSB: {0, npu_req_id} for the NPU, {1, lane} for NVR.
// sparse_chain_sel selects which half of the indirect pattern table the sparse unit's
// registers are written to (0 for the first operand's chains).
// Timing: snooped events reach the detectors one cycle late; the NSB answers a hit one
// cycle after the request.
// Left unconnected on purpose: the stride detector's last PC, the loop bound
// detector's mode flag, the chain detector's vectorised length and LPI, and the
// sequencer's busy flag are table state the paper lists; this top derives the run
// length from the loop bound detector and keeps them only as block outputs.  rst_n is
// both the asynchronous reset and the disable condition of the blocks' assertions.
// Paper vs. own choices: the set of units and the way they feed each other follow the
// paper's overview.  The sequencer between the VMIG and the NSB, the NPU-first
// arbitration and the tag layout are this design's own.
module nvr_top
  import nvr_pkg::*;
#(
  parameter int N          = 16,
  parameter int NSB_BYTES  = 16384,
  parameter int NSB_WAYS   = 16,
  parameter int NSB_MSHR   = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // CPU probe
  input  logic                          cpu_commit_valid,
  input  logic                          cpu_commit_is_branch,
  input  branch_evt_t                   cpu_commit,
  // NPU ROB probe
  input  logic                          npu_load_exec_valid,
  input  load_evt_t                     npu_load_exec,
  // NPU sparse unit
  input  sparse_reg_t [N-1:0]           sparse_regs,
  input  logic                          sparse_idle,
  input  logic                          sparse_chain_sel,
  output logic                          runahead_req,
  // NPU demand loads
  input  logic                          npu_req_valid,
  output logic                          npu_req_ready,
  input  addr_t                         npu_req_addr,
  input  logic [TAG_W-2:0]              npu_req_id,
  output logic                          npu_resp_valid,
  output logic [TAG_W-2:0]              npu_resp_id,
  output logic [WORD_W-1:0]             npu_resp_data,
  // L2 refill port
  output logic                          l2_req_valid,
  input  logic                          l2_req_ready,
  output addr_t                         l2_req_line,
  output logic [$clog2(NSB_MSHR)-1:0]   l2_req_tag,
  input  logic                          l2_resp_valid,
  output logic                          l2_resp_ready,
  input  logic [$clog2(NSB_MSHR)-1:0]   l2_resp_tag,
  input  logic [LINE_BYTES*8-1:0]       l2_resp_data,
  // status
  output logic                          in_runahead,
  output nvr_events_t                   events
);

  localparam int PW = $clog2(N);

  // ---------------- snooper ----------------
  logic                br_evt_valid, ld_evt_valid, sp_idle;
  branch_evt_t         br_evt;
  load_evt_t           ld_evt;
  logic [N-1:0]        sp_upd_valid;
  sparse_reg_t [N-1:0] sp_regs;

  snooper #(.N(N)) u_snooper (
    .clk, .rst_n,
    .cpu_commit_valid, .cpu_commit_is_branch, .cpu_commit,
    .npu_load_exec_valid, .npu_load_exec,
    .sparse_regs, .sparse_idle,
    .br_evt_valid, .br_evt, .ld_evt_valid, .ld_evt,
    .sp_upd_valid, .sp_regs, .sp_idle
  );

  // ---------------- stride detector ----------------
  logic [PW-1:0]              q_port;
  logic                       sd_pred_valid, sd_adv_valid;
  addr_t                      sd_pred_addr;
  logic signed [STRIDE_W-1:0] sd_pred_stride;
  logic [CNT_W-1:0]           sd_pred_ahead;
  logic [4:0]                 sd_adv_count;
  pc_t                        sd_last_pc;

  stride_detector #(.N(N)) u_sd (
    .clk, .rst_n,
    .train_valid(ld_evt_valid), .train_port(PW'(ld_evt.port)), .train_pc(ld_evt.pc),
    .train_addr(ld_evt.addr),
    .adv_valid(sd_adv_valid), .adv_port(q_port), .adv_count(sd_adv_count),
    .q_port, .pred_valid(sd_pred_valid), .pred_addr(sd_pred_addr),
    .pred_stride(sd_pred_stride), .pred_ahead(sd_pred_ahead), .last_pc(sd_last_pc)
  );

  // ---------------- loop bound detector ----------------
  logic [CNT_W-1:0] lbd_remaining;
  logic             lbd_sparse;

  loop_bound_detector #(.N(N)) u_lbd (
    .clk, .rst_n,
    .br_valid(br_evt_valid), .br(br_evt),
    .sp_upd_valid, .sp_regs,
    .q_port, .q_remaining(lbd_remaining), .q_sparse(lbd_sparse)
  );

  // ---------------- sparse chain detector ----------------
  logic [$clog2(2*N)-1:0]  c_entry;
  logic [N-1:0][REG_W-1:0] c_w;
  logic [N-1:0]            c_mask;
  logic                    c_fire, c_valid;
  addr_t [N-1:0]           c_addr;
  logic [IDX_W-1:0]        c_len, c_lpi;

  sparse_chain_detector #(.N(N)) u_scd (
    .clk, .rst_n,
    .sp_upd_valid, .sp_regs, .cfg_bank(sparse_chain_sel),
    .vs_valid(ld_evt_valid), .vs_entry($clog2(2*N)'(ld_evt.port)), .vs_value(ld_evt.vsize),
    .c_entry, .c_w, .c_mask, .c_fire, .c_addr, .c_valid, .c_len, .c_lpi
  );

  // ---------------- controller ----------------
  logic        mi_valid, mi_ready;
  micro_inst_t mi;
  logic        ev_enter, ev_wait_idle, ev_abort, ev_clip, ev_skip;

  nvr_controller #(.N(N)) u_ctrl (
    .clk, .rst_n,
    .ld_evt_valid, .ld_evt,
    .sparse_idle(sp_idle), .runahead_req,
    .q_port, .sd_pred_valid, .sd_pred_addr, .sd_pred_stride, .sd_pred_ahead,
    .sd_adv_valid, .sd_adv_count,
    .lbd_remaining,
    .mi_valid, .mi_ready, .mi,
    .in_runahead, .ev_enter, .ev_wait_idle, .ev_abort, .ev_clip, .ev_skip
  );

  // ---------------- VMIG ----------------
  logic                    wl_valid, wl_ready, vrf_valid, vrf_ready, pf_valid, pf_ready;
  addr_t [N-1:0]           wl_addr, pf_line;
  logic [N-1:0]            wl_mask, pf_mask;
  logic [N-1:0][REG_W-1:0] vrf_data;
  logic                    dup_masked, chain_drop;

  vmig #(.N(N)) u_vmig (
    .clk, .rst_n,
    .mi_valid, .mi_ready, .mi,
    .wl_valid, .wl_ready, .wl_addr, .wl_mask,
    .vrf_valid, .vrf_ready, .vrf_data,
    .c_entry, .c_w, .c_mask, .c_fire, .c_addr, .c_valid,
    .pf_valid, .pf_ready, .pf_line, .pf_mask,
    .dup_masked, .chain_drop
  );

  // ---------------- load sequencer ----------------
  logic             sq_req_valid, sq_req_ready, sq_req_pf, sq_busy;
  addr_t            sq_req_addr;
  logic [TAG_W-1:0] sq_req_id;

  logic             nsb_req_valid, nsb_req_ready, nsb_req_pf;
  addr_t            nsb_req_addr;
  logic [TAG_W-1:0] nsb_req_id;
  logic             nsb_resp_valid;
  logic [TAG_W-1:0] nsb_resp_id;
  logic [WORD_W-1:0] nsb_resp_data;

  nvr_vload_seq #(.N(N)) u_seq (
    .clk, .rst_n,
    .wl_valid, .wl_ready, .wl_addr, .wl_mask,
    .vrf_valid, .vrf_ready, .vrf_data,
    .pf_valid, .pf_ready, .pf_line, .pf_mask,
    .req_valid(sq_req_valid), .req_ready(sq_req_ready), .req_addr(sq_req_addr),
    .req_pf(sq_req_pf), .req_id(sq_req_id),
    .resp_valid(nsb_resp_valid), .resp_id(nsb_resp_id), .resp_data(nsb_resp_data),
    .busy(sq_busy)
  );

  // NPU demand loads first, NVR in the remaining cycles
  always_comb begin
    nsb_req_valid = npu_req_valid || sq_req_valid;
    nsb_req_addr  = npu_req_valid ? npu_req_addr : sq_req_addr;
    nsb_req_pf    = npu_req_valid ? 1'b0 : sq_req_pf;
    nsb_req_id    = npu_req_valid ? {1'b0, npu_req_id} : sq_req_id;
    npu_req_ready = nsb_req_ready;
    sq_req_ready  = nsb_req_ready && !npu_req_valid;
  end

  // ---------------- NSB ----------------
  logic ev_hit, ev_miss, ev_coalesce, ev_pf_drop, ev_stall;

  nsb #(.SIZE_BYTES(NSB_BYTES), .WAYS(NSB_WAYS), .N_MSHR(NSB_MSHR)) u_nsb (
    .clk, .rst_n,
    .req_valid(nsb_req_valid), .req_ready(nsb_req_ready), .req_addr(nsb_req_addr),
    .req_pf(nsb_req_pf), .req_id(nsb_req_id),
    .resp_valid(nsb_resp_valid), .resp_id(nsb_resp_id), .resp_data(nsb_resp_data),
    .l2_req_valid, .l2_req_ready, .l2_req_line, .l2_req_tag,
    .l2_resp_valid, .l2_resp_ready, .l2_resp_tag, .l2_resp_data,
    .ev_hit, .ev_miss, .ev_coalesce, .ev_pf_drop, .ev_stall
  );

  always_comb begin
    events              = '0;
    events.ra_enter     = ev_enter;
    events.ra_skip      = ev_skip;
    events.ra_wait_idle = ev_wait_idle;
    events.ra_abort     = ev_abort;
    events.ra_clip      = ev_clip;
    events.vigu_dup     = dup_masked;
    events.pie_drop     = chain_drop;
    events.nsb_hit      = ev_hit;
    events.nsb_miss     = ev_miss;
    events.nsb_coalesce = ev_coalesce;
    events.nsb_pf_drop  = ev_pf_drop;
    events.nsb_stall    = ev_stall;
  end

  assign npu_resp_valid = nsb_resp_valid && !nsb_resp_id[TAG_W-1];
  assign npu_resp_id    = nsb_resp_id[TAG_W-2:0];
  assign npu_resp_data  = nsb_resp_data;

endmodule
