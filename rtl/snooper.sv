// snooper -- read-only probes on the CPU, the NPU ROB and the NPU sparse unit.
//
// What it does: watches three kinds of architectural state and turns them into
// one-cycle events for the rest of NVR, without ever driving anything back into the
// CPU or NPU:
//   1. committed CPU branch instructions (PC and the two compared register values),
//      used by the loop bound detector to learn normal loop bounds;
//   2. load instructions executing in the NPU ROB (PC, parallel port, element
//      address, vector size), used as the runahead trigger and to train the stride
//      detector;
//   3. the sparse unit's per-port registers (IA start address, IdxPtr start, IdxPtr
//      end), forwarded as an update event for a port whenever its value changes.
// How: every probe is registered once (one cycle of latency).  The sparse registers
// are held in a shadow copy; a port's update strobe fires in the cycle after its
// registers differ from the shadow copy.  The shadow copy resets to zero, so a port
// whose registers stay all-zero (not used by the sparse unit) never produces an update
// and is never configured downstream.  The sparse-unit idle flag is registered too.
// Timing: all outputs are valid one clock after the probed signal.
// Paper vs. own choices: the three probed signal classes and the stored widths
// (48-bit PCs, 68 bits of sparse structure per port) follow the paper.  The paper
// stores one 64-bit CPU register; this block keeps both compared operands of the
// branch (the loop variable and the bound), since the loop bound detector needs the
// loop variable to learn the increment.  Change detection on the sparse registers is
// this design's own choice.
module snooper
  import nvr_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  // CPU commit probe
  input  logic                cpu_commit_valid,
  input  logic                cpu_commit_is_branch,
  input  branch_evt_t         cpu_commit,
  // NPU ROB probe: a load instruction starts executing
  input  logic                npu_load_exec_valid,
  input  load_evt_t           npu_load_exec,
  // NPU sparse unit register probe
  input  sparse_reg_t [N-1:0] sparse_regs,
  input  logic                sparse_idle,
  // events
  output logic                br_evt_valid,
  output branch_evt_t         br_evt,
  output logic                ld_evt_valid,
  output load_evt_t           ld_evt,
  output logic [N-1:0]        sp_upd_valid,
  output sparse_reg_t [N-1:0] sp_regs,
  output logic                sp_idle
);

  sparse_reg_t [N-1:0] shadow;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      br_evt_valid <= 1'b0;
      br_evt       <= '0;
      ld_evt_valid <= 1'b0;
      ld_evt       <= '0;
      sp_upd_valid <= '0;
      shadow       <= '0;
      sp_idle      <= 1'b0;
    end else begin
      br_evt_valid <= cpu_commit_valid && cpu_commit_is_branch;
      if (cpu_commit_valid && cpu_commit_is_branch) br_evt <= cpu_commit;
      ld_evt_valid <= npu_load_exec_valid;
      if (npu_load_exec_valid) ld_evt <= npu_load_exec;
      for (int p = 0; p < N; p++)
        sp_upd_valid[p] <= (sparse_regs[p] != shadow[p]);
      shadow     <= sparse_regs;
      sp_idle    <= sparse_idle;
    end
  end

  assign sp_regs = shadow;

endmodule
