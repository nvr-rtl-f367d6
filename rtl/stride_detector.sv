// stride_detector -- reference-prediction table that predicts the next W[i] addresses.
//
// What it does: one entry per parallel load port tracks the address stream of the
// NPU's W loads (the CSR col_indices / values stream).  Each entry keeps the previous
// address, the last observed stride, a 2-bit saturating confidence counter and the
// last address already prefetched.  Once the confidence reaches CONF_TH the entry
// predicts: the next address to prefetch is last_prefetch + stride.
// How:
//   * train (a snooped NPU load on port p, address a): on a new entry the address is
//     recorded with zero confidence.  Otherwise d = a - prev; if d equals the stored
//     stride the confidence counts up, else it counts down and, once at zero, the
//     stride is replaced by d (if d fits in 8 signed bits).  prev becomes a.  If the
//     demand stream has overtaken the prefetch pointer, the pointer is pulled up to a.
//   * advance (the controller issued `adv_count` elements for port p): the prefetch
//     pointer moves by adv_count * stride and the entry's `ahead` count (how many
//     elements the pointer leads the demand stream) grows by adv_count.  Each demand
//     access behind the pointer consumes one; a demand access at or past the pointer
//     pulls the pointer up to it and clears `ahead`.  An advance and a train of the
//     same entry in one cycle are both applied.
//   * predict (combinational read of port q_port): valid, next address, stride and
//     the `ahead` count, which the controller subtracts from the loop bound.
// Timing: table updates take effect on the next clock edge; the prediction is
// combinational from the registered table.
// Paper vs. own choices: entry fields and widths (48-bit previous and last-prefetch
// addresses, 8-bit stride, 2-bit confidence, N = 16 entries, one 48-bit PC register)
// follow the paper's storage table.  The 16-bit `ahead` count is this design's
// addition, so that a new run starts where the last one stopped.  The update rule of
// the confidence counter, the threshold of 2 and indexing entries by load port are
// this design's choices.
module stride_detector
  import nvr_pkg::*;
#(
  parameter int N       = 16,
  parameter int CONF_TH = 2
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // training from snooped NPU loads
  input  logic                        train_valid,
  input  logic [$clog2(N)-1:0]        train_port,
  input  pc_t                         train_pc,
  input  addr_t                       train_addr,
  // prefetch pointer advance from the controller
  input  logic                        adv_valid,
  input  logic [$clog2(N)-1:0]        adv_port,
  input  logic [4:0]                  adv_count,
  // prediction
  input  logic [$clog2(N)-1:0]        q_port,
  output logic                        pred_valid,
  output addr_t                       pred_addr,
  output logic signed [STRIDE_W-1:0]  pred_stride,
  output logic [CNT_W-1:0]            pred_ahead,
  output pc_t                         last_pc
);

  typedef struct packed {
    logic                       valid;
    addr_t                      prev;
    logic signed [STRIDE_W-1:0] stride;
    logic [1:0]                 conf;
    addr_t                      last_pf;
    logic [CNT_W-1:0]           ahead;   // elements the prefetch pointer leads the demand
  } sd_entry_t;

  sd_entry_t [N-1:0] tbl;

  // training arithmetic for the addressed entry
  sd_entry_t te;
  addr_t     diff;
  logic      diff_fits;
  always_comb begin
    te        = tbl[train_port];
    diff      = train_addr - te.prev;
    diff_fits = ($signed(diff) >= -(2 ** (STRIDE_W - 1))) && ($signed(diff) < 2 ** (STRIDE_W - 1));
  end

  // advance of the prefetch pointer, combined with a train of the same entry
  addr_t adv_delta;
  assign adv_delta = addr_t'($signed(tbl[adv_port].stride) * $signed({1'b0, adv_count}));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tbl     <= '0;
      last_pc <= '0;
    end else begin
      if (adv_valid && !(train_valid && train_port == adv_port)) begin
        tbl[adv_port].last_pf <= tbl[adv_port].last_pf + adv_delta;
        tbl[adv_port].ahead   <= tbl[adv_port].ahead + CNT_W'(adv_count);
      end
      if (train_valid) begin
        last_pc <= train_pc;
        if (!te.valid) begin
          tbl[train_port] <= '{valid: 1'b1, prev: train_addr, stride: '0, conf: 2'd0,
                               last_pf: train_addr, ahead: '0};
        end else begin
          tbl[train_port].prev <= train_addr;
          if (diff_fits && STRIDE_W'(diff) == te.stride) begin
            if (te.conf != 2'd3) tbl[train_port].conf <= te.conf + 2'd1;
          end else if (te.conf != 2'd0) begin
            tbl[train_port].conf <= te.conf - 2'd1;
          end else if (diff_fits) begin
            tbl[train_port].stride <= STRIDE_W'(diff);
          end
          // the demand stream consumes one prefetched element, or overtakes the
          // prefetch pointer and pulls it up
          if ((te.stride >= 0 && train_addr >= te.last_pf) ||
              (te.stride <  0 && train_addr <= te.last_pf)) begin
            tbl[train_port].last_pf <= train_addr;
            tbl[train_port].ahead   <= '0;
          end else begin
            tbl[train_port].last_pf <= te.last_pf
                                     + ((adv_valid && adv_port == train_port) ? adv_delta : '0);
            tbl[train_port].ahead   <= ((te.ahead != 0) ? te.ahead - 1'b1 : te.ahead)
                                     + ((adv_valid && adv_port == train_port) ? CNT_W'(adv_count) : '0);
          end
        end
      end
    end
  end

  always_comb begin
    pred_valid  = tbl[q_port].valid && (tbl[q_port].conf >= 2'(CONF_TH)) && (tbl[q_port].stride != 0);
    pred_stride = tbl[q_port].stride;
    pred_addr   = tbl[q_port].last_pf + addr_t'($signed(tbl[q_port].stride));
    pred_ahead  = tbl[q_port].ahead;
  end

endmodule
