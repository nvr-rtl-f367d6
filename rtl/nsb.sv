// nsb -- Non-blocking Speculative Buffer: a small set-associative cache inside the NPU.
//
// What it does: keeps the scattered lines that sparse workloads touch (the indirectly
// accessed IA rows and the W index stream) close to the NPU.  NVR's prefetches fill
// it ahead of time; the NPU's own loads then hit in it instead of going to the L2.
// Misses do not block: an MSHR file (nsb_mshr) tracks outstanding lines, coalesces
// requests to the same line, and later hits keep being served.
// Organisation: SIZE_BYTES = 16 KiB of 64-byte lines, WAYS = 16 ways (so 16 sets),
// tags and valid bits in flip-flops, data in a line-wide memory array, round-robin
// replacement per set.
// Request port (req_*): one 64-bit aligned address per cycle with a tag.  req_pf marks
// a prefetch, which never gets a response; a prefetch that misses while all MSHRs are
// busy, or whose line is already outstanding, is dropped.  A demand load that hits
// returns its 64-bit word one cycle later on resp_*.  A demand miss allocates an MSHR
// (or joins the one already tracking its line) and is answered when the line arrives.
// req_ready is low in the cycle a line is filled, while the responses waiting for a
// filled line are being returned (one per cycle), and when a demand miss finds no
// MSHR or no free target slot.
// L2 port: l2_req_* asks for a line (tag = MSHR index); l2_resp_* returns the whole
// line with that tag.  A line is accepted only when the previous fill's waiting
// responses have all been returned.
// resp_* has no back-pressure: the receiver must take one response per cycle.
// Paper vs. own choices: an in-NPU cache of 16 KiB, high associativity, non-blocking
// operation with an MSHR file that coalesces same-line requests follow the paper.  The
// line size, 16 ways (the paper says only "high-way"), 8 MSHRs, 4 targets each,
// round-robin replacement, the drop rule for prefetches and a single (unbanked) data
// array are this design's choices; the paper's figure draws several banks but gives
// neither their number nor how addresses map to them.
// The MSHR file's allocation index and occupancy outputs are not needed here.  rst_n
// also disables the assertion, besides resetting the flops.
module nsb
  import nvr_pkg::*;
#(
  parameter int SIZE_BYTES = 16384,
  parameter int WAYS       = 16,
  parameter int N_MSHR     = 8,
  parameter int N_TGT      = 4
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // requests from the NPU load path and from NVR
  input  logic                         req_valid,
  output logic                         req_ready,
  input  addr_t                        req_addr,
  input  logic                         req_pf,
  input  logic [TAG_W-1:0]             req_id,
  // responses to demand loads
  output logic                         resp_valid,
  output logic [TAG_W-1:0]             resp_id,
  output logic [WORD_W-1:0]            resp_data,
  // L2 side
  output logic                         l2_req_valid,
  input  logic                         l2_req_ready,
  output addr_t                        l2_req_line,
  output logic [$clog2(N_MSHR)-1:0]    l2_req_tag,
  input  logic                         l2_resp_valid,
  output logic                         l2_resp_ready,
  input  logic [$clog2(N_MSHR)-1:0]    l2_resp_tag,
  input  logic [LINE_BYTES*8-1:0]      l2_resp_data,
  // activity
  output logic                         ev_hit,
  output logic                         ev_miss,
  output logic                         ev_coalesce,
  output logic                         ev_pf_drop,
  output logic                         ev_stall
);

  localparam int LINES = SIZE_BYTES / LINE_BYTES;
  localparam int SETS  = LINES / WAYS;
  localparam int SW    = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int WW    = $clog2(WAYS);
  localparam int OFF_W = LINE_OFF - 3;
  localparam int TAGB  = ADDR_W - LINE_OFF - $clog2(SETS);
  localparam int MW    = $clog2(N_MSHR);

  // ---------------- arrays ----------------
  logic [TAGB-1:0]          tag_q  [SETS][WAYS];
  logic [WAYS-1:0]          vld_q  [SETS];
  logic [WW-1:0]            rr_q   [SETS];
  logic [LINE_BYTES*8-1:0]  data_mem [LINES];

  // ---------------- request decode ----------------
  addr_t            rq_line;
  logic [SW-1:0]    rq_set;
  logic [TAGB-1:0]  rq_tag;
  logic [OFF_W-1:0] rq_off;
  logic             tag_hit;
  logic [WW-1:0]    hit_way;

  assign rq_line = req_addr >> LINE_OFF;
  assign rq_set  = SW'(rq_line);
  assign rq_tag  = TAGB'(rq_line >> $clog2(SETS));
  assign rq_off  = req_addr[LINE_OFF-1:3];

  always_comb begin
    tag_hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (vld_q[rq_set][w] && tag_q[rq_set][w] == rq_tag) begin
        tag_hit = 1'b1;
        hit_way = WW'(w);
      end
  end

  // ---------------- MSHR file ----------------
  logic                        lk_hit, lk_tgt_full, m_full;
  logic [MW-1:0]               lk_idx, alloc_idx;
  logic                        alloc_valid, add_valid;
  addr_t                       fill_line;
  logic [N_TGT-1:0]            fill_tv;
  logic [N_TGT-1:0][TAG_W-1:0] fill_tid;
  logic [N_TGT-1:0][OFF_W-1:0] fill_toff;
  logic                        fill_fire;
  logic [$clog2(N_MSHR+1)-1:0] occupancy;

  // drain buffer: the last filled line and the requests waiting for it
  logic [LINE_BYTES*8-1:0]     drn_data;
  logic [N_TGT-1:0]            drn_tv;
  logic [N_TGT-1:0][TAG_W-1:0] drn_tid;
  logic [N_TGT-1:0][OFF_W-1:0] drn_toff;

  assign l2_resp_ready = (drn_tv == '0);
  assign fill_fire     = l2_resp_valid && l2_resp_ready;

  // ---------------- request acceptance ----------------
  logic demand_blocked;
  always_comb begin
    demand_blocked = !req_pf && !tag_hit &&
                     (lk_hit ? lk_tgt_full : m_full);
    req_ready   = !fill_fire && (drn_tv == '0) && !demand_blocked;
    alloc_valid = req_valid && req_ready && !tag_hit && !lk_hit && !m_full;
    add_valid   = req_valid && req_ready && !tag_hit && lk_hit && !req_pf;
    ev_hit      = req_valid && req_ready && tag_hit;
    ev_miss     = alloc_valid;
    ev_coalesce = req_valid && req_ready && !tag_hit && lk_hit;
    ev_pf_drop  = req_valid && req_ready && req_pf && !tag_hit && !lk_hit && m_full;
    ev_stall    = req_valid && !req_ready;
  end

  nsb_mshr #(.N_MSHR(N_MSHR), .N_TGT(N_TGT), .OFF_W(OFF_W)) u_mshr (
    .clk, .rst_n,
    .lk_line(rq_line), .lk_hit, .lk_idx, .lk_tgt_full, .full(m_full),
    .alloc_valid, .alloc_line(rq_line), .alloc_tgt(!req_pf), .alloc_id(req_id),
    .alloc_off(rq_off), .alloc_idx,
    .add_valid, .add_idx(lk_idx), .add_id(req_id), .add_off(rq_off),
    .iss_valid(l2_req_valid), .iss_ready(l2_req_ready), .iss_line(l2_req_line),
    .iss_tag(l2_req_tag),
    .fill_valid(fill_fire), .fill_tag(l2_resp_tag), .fill_line,
    .fill_tgt_valid(fill_tv), .fill_tgt_id(fill_tid), .fill_tgt_off(fill_toff),
    .occupancy
  );

  // ---------------- fill ----------------
  logic [SW-1:0]   fl_set;
  logic [TAGB-1:0] fl_tag;
  logic [WW-1:0]   fl_way;
  assign fl_set = SW'(fill_line);
  assign fl_tag = TAGB'(fill_line >> $clog2(SETS));
  assign fl_way = rr_q[fl_set];

  // first pending drain target
  logic                 drn_any;
  logic [$clog2(N_TGT)-1:0] drn_sel;
  always_comb begin
    drn_any = |drn_tv;
    drn_sel = '0;
    for (int t = N_TGT - 1; t >= 0; t--)
      if (drn_tv[t]) drn_sel = $clog2(N_TGT)'(t);
  end

  logic [LINE_BYTES*8-1:0] hit_line;
  assign hit_line = data_mem[{rq_set, hit_way}];

  always_ff @(posedge clk) begin
    if (fill_fire) data_mem[{fl_set, fl_way}] <= l2_resp_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        vld_q[s] <= '0;
        rr_q[s]  <= '0;
        for (int w = 0; w < WAYS; w++) tag_q[s][w] <= '0;
      end
      drn_data   <= '0;
      drn_tv     <= '0;
      drn_tid    <= '0;
      drn_toff   <= '0;
      resp_valid <= 1'b0;
      resp_id    <= '0;
      resp_data  <= '0;
    end else begin
      resp_valid <= 1'b0;
      if (fill_fire) begin
        tag_q[fl_set][fl_way] <= fl_tag;
        vld_q[fl_set][fl_way] <= 1'b1;
        rr_q[fl_set]          <= fl_way + 1'b1;
        drn_data <= l2_resp_data;
        drn_tv   <= fill_tv;
        drn_tid  <= fill_tid;
        drn_toff <= fill_toff;
      end else if (drn_any) begin
        resp_valid       <= 1'b1;
        resp_id          <= drn_tid[drn_sel];
        resp_data        <= drn_data[drn_toff[drn_sel]*WORD_W +: WORD_W];
        drn_tv[drn_sel]  <= 1'b0;
      end
      if (ev_hit && !req_pf) begin
        resp_valid <= 1'b1;
        resp_id    <= req_id;
        resp_data  <= hit_line[rq_off*WORD_W +: WORD_W];
      end
    end
  end

  a_one_resp_source: assert property (@(posedge clk) disable iff (!rst_n) !(ev_hit && drn_any));

endmodule
