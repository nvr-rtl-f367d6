// sparse_chain_detector -- Indirect Pattern Table (IPT) and indirect address unit.
//
// What it does: records, per indirect chain, where the indirectly accessed structure
// (IA) starts and how one index step maps to bytes, and turns W index values into IA
// addresses for N lanes at once:
//        IA_address = IA_ss_start + (W << stride)
// where W is the index value read from W (e.g. a CSR col_indices entry) and stride is
// the per-entry vector-size field (log2 of the bytes between consecutive IA rows).
// How: the IPT has ENTRIES = 2 x N entries.  Entry p (p < N) is written from the
// sparse unit's port-p registers when they change: valid, ss start (the IA start
// address) and ss offset = IdxPtr end - IdxPtr start, the vectorised length of the
// row (the subtractor of the unit).  The vector-size field of an entry is written
// from the vector size of a snooped NPU load on that port.  Entries N..2N-1 are a
// second bank of chains written through the same port with cfg_bank = 1 (used for the
// second operand in two-sides sparsity).  The compute port is combinational: for
// entry c_entry and lane values c_w it returns N addresses and the entry's vectorised
// length.  When c_fire is asserted, the W value of the highest enabled lane is stored
// as the entry's Last Prefetch Indirect (LPI).
// Timing: table writes on the next clock edge; compute combinational.
// Paper vs. own choices: the formula, the fields and widths (valid, 48-bit ss start,
// 10-bit ss offset, 10-bit LPI, 4-bit vector size, 2 x 16 entries) follow the paper.
// Using only the low 10 bits of W as index (the width of LPI), how the second bank is
// addressed and where the vector size comes from are this design's choices.
module sparse_chain_detector
  import nvr_pkg::*;
#(
  parameter int N       = 16,
  parameter int ENTRIES = 2 * N
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration from the snooper
  input  logic [N-1:0]                  sp_upd_valid,
  input  sparse_reg_t [N-1:0]           sp_regs,
  input  logic                          cfg_bank,       // which half of the IPT sp_upd writes
  input  logic                          vs_valid,
  input  logic [$clog2(ENTRIES)-1:0]    vs_entry,
  input  logic [VSIZE_W-1:0]            vs_value,
  // compute port (used by the VMIG parallel inference engine)
  input  logic [$clog2(ENTRIES)-1:0]    c_entry,
  input  logic [N-1:0][REG_W-1:0]       c_w,
  input  logic [N-1:0]                  c_mask,
  input  logic                          c_fire,
  output addr_t [N-1:0]                 c_addr,
  output logic                          c_valid,
  output logic [IDX_W-1:0]              c_len,
  output logic [IDX_W-1:0]              c_lpi
);

  localparam int EW = $clog2(ENTRIES);

  typedef struct packed {
    logic               valid;
    addr_t              ss_start;
    logic [IDX_W-1:0]   ss_offset;
    logic [IDX_W-1:0]   lpi;
    logic [VSIZE_W-1:0] vsize;
  } ipt_entry_t;

  ipt_entry_t [ENTRIES-1:0] ipt;

  // index of the highest enabled lane, for the LPI update
  logic [$clog2(N)-1:0] top_lane;
  always_comb begin
    top_lane = '0;
    for (int k = 0; k < N; k++)
      if (c_mask[k]) top_lane = $clog2(N)'(k);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ipt <= '0;
    end else begin
      for (int p = 0; p < N; p++) begin
        if (sp_upd_valid[p]) begin
          ipt[EW'((int'(cfg_bank) * N + p) % ENTRIES)].valid     <= 1'b1;
          ipt[EW'((int'(cfg_bank) * N + p) % ENTRIES)].ss_start  <= sp_regs[p].ss_start;
          ipt[EW'((int'(cfg_bank) * N + p) % ENTRIES)].ss_offset <= sp_regs[p].idx_end - sp_regs[p].idx_start;
        end
      end
      if (vs_valid) ipt[vs_entry].vsize <= vs_value;
      if (c_fire && |c_mask) ipt[c_entry].lpi <= c_w[top_lane][IDX_W-1:0];
    end
  end

  always_comb begin
    for (int k = 0; k < N; k++)
      c_addr[k] = ipt[c_entry].ss_start
                + (addr_t'(c_w[k][IDX_W-1:0]) << ipt[c_entry].vsize);
    c_valid = ipt[c_entry].valid;
    c_len   = ipt[c_entry].ss_offset;
    c_lpi   = ipt[c_entry].lpi;
  end

endmodule
