// vmig -- Vectorisation Micro-Instruction Generator.
//
// What it does: turns one lowered micro-instruction (a run of up to N consecutive W
// elements) into two vector memory operations that use the NPU's own vector load path:
//   1. a vector load of the W elements, whose returned values land in a vector
//      register (the VRF image held here), and
//   2. one vector prefetch of the IA lines those W values point to.
// How, as a three-stage pipeline with a wait slot for the W data:
//   * IRU (Instruction Reconstruction Unit): lane k of the micro-instruction gets
//     address w_base + k * stride; lanes k >= count are masked off.  This is the W
//     vector load request (wl_*).  After the request is accepted, the micro-op waits
//     in the W slot for the load data.
//   * PIE (Parallel Inference Engine): when the W data arrive (vrf_*) they are
//     written to the VRF register; in the next cycle all N lanes run their dependency
//     chain in parallel through the sparse chain detector's compute port
//     (IA = ss_start + (W << vsize)).  A chain whose IPT entry is not valid is
//     dropped.
//   * VIGU (Vector Instruction Generation Unit): converts the N IA addresses to
//     cache-line addresses, masks every lane whose line already appears in a lower
//     lane (so each line is requested once), and holds the result as one vector
//     prefetch operation (pf_*).
// Interface: valid/ready handshakes on mi_*, wl_*, vrf_* and pf_*.  Each stage holds
// one operation; a new micro-instruction can enter the IRU while the previous one is
// in the W slot, PIE or VIGU.  W loads return in order.
// Timing: IRU request one cycle after mi is accepted; PIE one cycle after the W data;
// VIGU output one cycle after PIE, so an IA prefetch leaves 2 cycles after its W data.
// Paper vs. own choices: the IRU/PIE/VIGU split, N = 16 parallel chains and the use of
// the NPU's vector load path follow the paper.  The handshakes, the line-duplicate
// masking as the VIGU's "memory access optimisation" and dropping chains with no IPT
// entry are this design's own choices.
// rst_n also disables the assertions, besides resetting the flops.
module vmig
  import nvr_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // micro-instruction from the controller
  input  logic                     mi_valid,
  output logic                     mi_ready,
  input  micro_inst_t              mi,
  // W vector load request
  output logic                     wl_valid,
  input  logic                     wl_ready,
  output addr_t [N-1:0]            wl_addr,
  output logic [N-1:0]             wl_mask,
  // W data returning into the VRF
  input  logic                     vrf_valid,
  output logic                     vrf_ready,
  input  logic [N-1:0][REG_W-1:0]  vrf_data,
  // sparse chain detector compute port
  output logic [$clog2(2*N)-1:0]   c_entry,
  output logic [N-1:0][REG_W-1:0]  c_w,
  output logic [N-1:0]             c_mask,
  output logic                     c_fire,
  input  addr_t [N-1:0]            c_addr,
  input  logic                     c_valid,
  // vectorised prefetch out
  output logic                     pf_valid,
  input  logic                     pf_ready,
  output addr_t [N-1:0]            pf_line,
  output logic [N-1:0]             pf_mask,
  // activity, for performance counting
  output logic                     dup_masked,   // VIGU removed at least one lane
  output logic                     chain_drop    // PIE dropped a chain (no IPT entry)
);

  // ---------------- IRU ----------------
  logic        s1_valid;
  micro_inst_t s1;
  logic        s2_valid;       // W slot
  logic [3:0]  s2_port;
  logic [N-1:0] s2_mask;
  logic        s3_valid;       // PIE
  logic [3:0]  s3_port;
  logic [N-1:0] s3_mask;
  logic [N-1:0][REG_W-1:0] vrf_q;
  logic        s4_valid;       // VIGU

  logic s1_go, s3_go, s4_free;

  always_comb begin
    for (int k = 0; k < N; k++) begin
      wl_addr[k] = s1.w_base + addr_t'($signed(s1.stride) * k);
      wl_mask[k] = (5'(k) < s1.count);
    end
  end
  assign wl_valid = s1_valid && !s2_valid;
  assign s1_go    = wl_valid && wl_ready;
  assign mi_ready = !s1_valid || s1_go;

  // ---------------- W slot / VRF ----------------
  assign vrf_ready = s2_valid && (!s3_valid || s3_go);

  // ---------------- PIE ----------------
  assign c_entry = $clog2(2*N)'(s3_port);
  assign c_w     = vrf_q;
  assign c_mask  = s3_mask;
  assign s4_free = !s4_valid || pf_ready;
  assign s3_go   = s3_valid && (s4_free || !c_valid);
  assign c_fire  = s3_valid && s4_free && c_valid;
  assign chain_drop = s3_valid && !c_valid;

  // ---------------- VIGU ----------------
  addr_t [N-1:0] line_n;
  logic  [N-1:0] mask_n;
  always_comb begin
    for (int k = 0; k < N; k++) begin
      line_n[k] = c_addr[k] >> LINE_OFF;
      mask_n[k] = s3_mask[k];
      for (int j = 0; j < k; j++)
        if (s3_mask[j] && (c_addr[j] >> LINE_OFF) == (c_addr[k] >> LINE_OFF)) mask_n[k] = 1'b0;
    end
  end
  assign dup_masked = c_fire && (mask_n != s3_mask);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1       <= '0;
      s2_valid <= 1'b0;
      s2_port  <= '0;
      s2_mask  <= '0;
      s3_valid <= 1'b0;
      s3_port  <= '0;
      s3_mask  <= '0;
      vrf_q    <= '0;
      s4_valid <= 1'b0;
      pf_line  <= '0;
      pf_mask  <= '0;
    end else begin
      // IRU
      if (mi_valid && mi_ready) begin
        s1_valid <= 1'b1;
        s1       <= mi;
      end else if (s1_go) begin
        s1_valid <= 1'b0;
      end
      // W slot
      if (s1_go) begin
        s2_valid <= 1'b1;
        s2_port  <= s1.port;
        s2_mask  <= wl_mask;
      end else if (vrf_valid && vrf_ready) begin
        s2_valid <= 1'b0;
      end
      // PIE
      if (vrf_valid && vrf_ready) begin
        s3_valid <= 1'b1;
        s3_port  <= s2_port;
        s3_mask  <= s2_mask;
        for (int k = 0; k < N; k++) vrf_q[k] <= s2_mask[k] ? vrf_data[k] : '0;
      end else if (s3_go) begin
        s3_valid <= 1'b0;
      end
      // VIGU
      if (c_fire) begin
        s4_valid <= 1'b1;
        pf_line  <= line_n;
        pf_mask  <= mask_n;
      end else if (pf_ready) begin
        s4_valid <= 1'b0;
      end
    end
  end

  assign pf_valid = s4_valid;

  // W loads and prefetches only leave with at least one enabled lane
  a_wl_nonempty: assert property (@(posedge clk) disable iff (!rst_n) wl_valid |-> |wl_mask);
  a_pf_stable:   assert property (@(posedge clk) disable iff (!rst_n)
                                  pf_valid && !pf_ready |=> pf_valid && $stable(pf_line));

endmodule
