// nvr_vload_seq -- issues NVR's vector loads and vector prefetches lane by lane.
//
// What it does: NVR does not have its own load unit; its vector operations go down
// the NPU's load path into the NSB one element per cycle.  This sequencer takes
//   * a W vector load (N element addresses + lane mask) from the VMIG, sends one
//     demand request per enabled lane, gathers the returned words, extracts each
//     32-bit W element and hands the complete vector back to the VMIG as VRF data;
//   * a vector prefetch (N line addresses + lane mask) and sends one prefetch request
//     per enabled lane.
// How: one W load and one prefetch can be in progress at once; the W load's lanes go
// first because the next prefetch depends on them.  Requests carry tag {1, lane};
// responses with the top tag bit set are NVR's and are matched by lane.  The source
// arbitration against the NPU's own loads is outside this block (NPU first).
// Interface: valid/ready in from the VMIG (wl_*, pf_*), valid/ready out to the VMIG
// (vrf_*), valid/ready request to the NSB, response without back-pressure.
// Timing: one request per cycle when granted; VRF data valid the cycle after the last
// lane's response.
// Own choices: W elements are 32-bit (CSR column indices), zero-extended into the
// 64-bit VRF lane; lanes are issued in ascending order.
module nvr_vload_seq
  import nvr_pkg::*;
#(
  parameter int N = 16
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // W vector loads
  input  logic                     wl_valid,
  output logic                     wl_ready,
  input  addr_t [N-1:0]            wl_addr,
  input  logic [N-1:0]             wl_mask,
  output logic                     vrf_valid,
  input  logic                     vrf_ready,
  output logic [N-1:0][REG_W-1:0]  vrf_data,
  // vector prefetches
  input  logic                     pf_valid,
  output logic                     pf_ready,
  input  addr_t [N-1:0]            pf_line,
  input  logic [N-1:0]             pf_mask,
  // requests toward the NSB
  output logic                     req_valid,
  input  logic                     req_ready,
  output addr_t                    req_addr,
  output logic                     req_pf,
  output logic [TAG_W-1:0]         req_id,
  input  logic                     resp_valid,
  input  logic [TAG_W-1:0]         resp_id,
  input  logic [WORD_W-1:0]        resp_data,
  output logic                     busy
);

  localparam int LW = $clog2(N);

  // W engine
  logic                    w_busy;
  addr_t [N-1:0]           w_addr;
  logic [N-1:0]            w_pend;   // lanes not yet requested
  logic [N-1:0]            w_wait;   // lanes not yet answered
  logic [N-1:0][REG_W-1:0] w_data;
  // prefetch engine
  logic                    p_busy;
  addr_t [N-1:0]           p_line;
  logic [N-1:0]            p_pend;

  logic [LW-1:0] w_sel, p_sel;
  always_comb begin
    w_sel = '0;
    p_sel = '0;
    for (int k = N - 1; k >= 0; k--) begin
      if (w_pend[k]) w_sel = LW'(k);
      if (p_pend[k]) p_sel = LW'(k);
    end
  end

  logic use_w;
  always_comb begin
    use_w     = w_busy && (w_pend != '0);
    req_valid = use_w || (p_busy && (p_pend != '0));
    req_pf    = !use_w;
    req_addr  = use_w ? {w_addr[w_sel][ADDR_W-1:3], 3'b000} : (p_line[p_sel] << LINE_OFF);
    req_id    = {1'b1, (TAG_W-1)'(use_w ? w_sel : p_sel)};
  end

  assign wl_ready  = !w_busy;
  assign pf_ready  = !p_busy;
  assign vrf_valid = w_busy && (w_pend == '0) && (w_wait == '0);
  assign vrf_data  = w_data;
  assign busy      = w_busy || p_busy;

  logic resp_mine;
  logic [LW-1:0] resp_lane;
  assign resp_mine = resp_valid && resp_id[TAG_W-1];
  assign resp_lane = LW'(resp_id);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_busy <= 1'b0;
      w_addr <= '0;
      w_pend <= '0;
      w_wait <= '0;
      w_data <= '0;
      p_busy <= 1'b0;
      p_line <= '0;
      p_pend <= '0;
    end else begin
      if (wl_valid && wl_ready) begin
        w_busy <= 1'b1;
        w_addr <= wl_addr;
        w_pend <= wl_mask;
        w_wait <= wl_mask;
        w_data <= '0;
      end else if (vrf_valid && vrf_ready) begin
        w_busy <= 1'b0;
      end
      if (pf_valid && pf_ready && pf_mask != '0) begin
        p_busy <= 1'b1;
        p_line <= pf_line;
        p_pend <= pf_mask;
      end else if (p_busy && p_pend == '0) begin
        p_busy <= 1'b0;
      end
      if (req_valid && req_ready) begin
        if (use_w) w_pend[w_sel] <= 1'b0;
        else       p_pend[p_sel] <= 1'b0;
      end
      if (resp_mine && w_wait[resp_lane]) begin
        w_wait[resp_lane] <= 1'b0;
        w_data[resp_lane] <= REG_W'(w_addr[resp_lane][2] ? resp_data[63:32] : resp_data[31:0]);
      end
    end
  end

endmodule
