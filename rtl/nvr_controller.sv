// nvr_controller -- decides when NVR runs ahead and lowers the run into micro-instructions.
//
// What it does: when the snooper reports that an NPU load instruction has started
// executing (on parallel port p), NVR runs ahead on that port: it asks the NPU's sparse
// unit for speculative execution, waits until the sparse unit is idle, and then issues
// micro-instructions to the VMIG, each covering up to N W elements, from the stride
// detector's predicted address onwards, until the loop bound is reached.  The loop
// bound detector counts the elements left from the one being loaded now; the stride
// detector says how many of them its prefetch pointer already covers, so a run
// prefetches remaining - ahead - 1 elements and never passes the bound.
// How (states are this design's):
//   IDLE    -- waits for a load event; enters RA_REQ if the stride detector has a
//              confident prediction for the port and elements are left to prefetch
//              before the bound, otherwise stays (counted as `skip`).
//   RA_REQ  -- raises runahead_req to the sparse unit and waits for sparse_idle
//              (waiting cycles counted as `wait_idle`).  The count of elements to
//              prefetch is captured when entering RUN.
//   RUN     -- while sparse_idle holds, offers micro-instruction {port, w_base =
//              predicted address, stride, count = min(N, remaining)} to the VMIG.  On
//              acceptance it advances the stride detector's prefetch pointer by count
//              and lowers remaining by count.  A micro-instruction with count < N is a
//              bound clip.  When remaining reaches 0 the run ends (IDLE).  If the sparse
//              unit becomes busy (the NPU needs it again) the run is abandoned (IDLE,
//              counted as `abort`).
// A new load event during a run is ignored; the next one after the run restarts it.
// Interface: one-cycle event inputs; valid/ready toward the VMIG; runahead_req is a
// level held in RA_REQ and RUN.
// Timing: one micro-instruction per cycle while the VMIG accepts.
// Paper vs. own choices: the trigger (load execution in the ROB), waiting for sparse
// unit idle periods, requesting speculative execution from the sparse unit and using
// loop bounds to stop over-prefetching follow the paper.  The FSM, the abort rule and
// the one-run-at-a-time policy are this design's.
// Only the port of a load event is used here; its address trains the stride detector.
// rst_n also disables the assertion, besides resetting the flops.
module nvr_controller
  import nvr_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // trigger
  input  logic                       ld_evt_valid,
  input  load_evt_t                  ld_evt,
  // sparse unit
  input  logic                       sparse_idle,
  output logic                       runahead_req,
  // stride detector
  output logic [$clog2(N)-1:0]       q_port,
  input  logic                       sd_pred_valid,
  input  addr_t                      sd_pred_addr,
  input  logic signed [STRIDE_W-1:0] sd_pred_stride,
  input  logic [CNT_W-1:0]           sd_pred_ahead,
  output logic                       sd_adv_valid,
  output logic [4:0]                 sd_adv_count,
  // loop bound detector
  input  logic [CNT_W-1:0]           lbd_remaining,
  // VMIG
  output logic                       mi_valid,
  input  logic                       mi_ready,
  output micro_inst_t                mi,
  // status
  output logic                       in_runahead,
  output logic                       ev_enter,
  output logic                       ev_wait_idle,
  output logic                       ev_abort,
  output logic                       ev_clip,
  output logic                       ev_skip
);

  typedef enum logic [1:0] {IDLE, RA_REQ, RUN} state_e;

  state_e               state;
  logic [$clog2(N)-1:0] port_q;
  logic [CNT_W-1:0]     remaining;
  logic [4:0]           cnt;

  // the port looked up in SD/LBD: the event's port in IDLE, the run's port otherwise
  assign q_port = (state == IDLE) ? $clog2(N)'(ld_evt.port) : port_q;

  assign cnt = (remaining >= CNT_W'(N)) ? 5'(N) : 5'(remaining);

  // elements still to prefetch: the loop bound counts from the element being loaded
  // now; the prefetch pointer already covers `ahead` elements beyond it
  logic [CNT_W-1:0] todo;
  assign todo = (lbd_remaining > sd_pred_ahead + 1'b1) ? lbd_remaining - sd_pred_ahead - 1'b1 : '0;

  always_comb begin
    mi          = '0;
    mi.port     = 4'(port_q);
    mi.w_base   = sd_pred_addr;
    mi.stride   = sd_pred_stride;
    mi.count    = cnt;
    mi_valid    = (state == RUN) && sparse_idle && (remaining != 0) && sd_pred_valid;
    sd_adv_valid = mi_valid && mi_ready;
    sd_adv_count = cnt;
    runahead_req = (state != IDLE);
    in_runahead  = (state == RUN);
  end

  assign ev_enter     = (state == IDLE) && ld_evt_valid && sd_pred_valid && (todo != 0);
  assign ev_skip      = (state == IDLE) && ld_evt_valid && !ev_enter;
  assign ev_wait_idle = (state == RA_REQ) && !sparse_idle;
  assign ev_abort     = (state == RUN) && !sparse_idle && (remaining != 0);
  assign ev_clip      = mi_valid && mi_ready && (cnt != 5'(N));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= IDLE;
      port_q    <= '0;
      remaining <= '0;
    end else begin
      unique case (state)
        IDLE: if (ev_enter) begin
          state  <= RA_REQ;
          port_q <= $clog2(N)'(ld_evt.port);
        end
        RA_REQ: if (sparse_idle) begin
          state     <= RUN;
          remaining <= todo;
        end
        RUN: begin
          if (!sparse_idle) begin
            state <= IDLE;
          end else if (remaining == 0 || !sd_pred_valid) begin
            state <= IDLE;
          end else if (mi_ready) begin
            remaining <= remaining - CNT_W'(cnt);
            if (remaining == CNT_W'(cnt)) state <= IDLE;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_mi_count: assert property (@(posedge clk) disable iff (!rst_n)
                               mi_valid |-> (mi.count != 0 && mi.count <= 5'(N)));

endmodule
