// nvr_pkg -- types and widths shared by the NPU vector-runahead (NVR) blocks.
//
// The widths follow the storage budget of the design: 48-bit program counters and
// addresses, 64-bit CPU registers and vector-register lanes, 10-bit sparse indices
// (IdxPtr start/end, last prefetched index), 8-bit strides, 16-bit loop counters and a
// 4-bit vector-size field.  The event structs are the bundles the snooper hands to the
// detectors; the micro-instruction and vector-request structs are what the controller,
// the micro-instruction generator and the load sequencer exchange.  The NSB request
// tag layout (source bit + lane) is this design's own choice.
package nvr_pkg;

  localparam int ADDR_W   = 48;  // physical address / PC width
  localparam int PC_W     = 48;
  localparam int REG_W    = 64;  // CPU register, VRF lane
  localparam int IDX_W    = 10;  // sparse index (IdxPtr, LPI, ss offset)
  localparam int STRIDE_W = 8;   // stride detector stride
  localparam int CNT_W    = 16;  // loop counter / bound / increment
  localparam int VSIZE_W  = 4;   // vector size field (log2 of IA row bytes)
  localparam int LINE_BYTES = 64;
  localparam int LINE_OFF   = $clog2(LINE_BYTES);
  localparam int WORD_W     = 64; // NSB response word
  localparam int TAG_W      = 5;  // NSB request tag: {source, lane}

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [PC_W-1:0]   pc_t;

  // CPU branch commit seen by the snooper (RISC-V B-type: bge rs1, rs2, target)
  typedef struct packed {
    pc_t              pc;
    logic [REG_W-1:0] rs1;
    logic [REG_W-1:0] rs2;
  } branch_evt_t;

  // NPU load instruction executing in the ROB
  typedef struct packed {
    pc_t                pc;
    logic [3:0]         port;   // parallel load port (entry ID); sized for N <= 16
    addr_t              addr;   // address of the element being loaded
    logic [VSIZE_W-1:0] vsize;  // log2 of the IA row size in bytes
  } load_evt_t;

  // One lane of the sparse unit's registers: IA start address, IdxPtr start/end
  typedef struct packed {
    addr_t            ss_start;
    logic [IDX_W-1:0] idx_start;
    logic [IDX_W-1:0] idx_end;
  } sparse_reg_t;

  // Micro-instruction lowered by the controller for the VMIG
  typedef struct packed {
    logic [3:0]                 port;
    addr_t                      w_base;   // address of the first W element
    logic signed [STRIDE_W-1:0] stride;   // bytes between W elements
    logic [4:0]                 count;    // number of valid lanes (1..16)
  } micro_inst_t;

  // One-cycle activity strobes brought out of nvr_top for performance counting
  typedef struct packed {
    logic ra_enter;      // a runahead run was started
    logic ra_skip;       // a load event found no confident prediction / no bound
    logic ra_wait_idle;  // runahead requested, sparse unit still busy
    logic ra_abort;      // run abandoned because the sparse unit became busy
    logic ra_clip;       // micro-instruction shortened by the loop bound
    logic vigu_dup;      // VIGU merged lanes that hit the same line
    logic pie_drop;      // PIE dropped a chain with no IPT entry
    logic nsb_hit;
    logic nsb_miss;
    logic nsb_coalesce;  // request joined an outstanding MSHR
    logic nsb_pf_drop;   // prefetch dropped, MSHRs full
    logic nsb_stall;     // request held off by the NSB
  } nvr_events_t;

  typedef enum logic {VOP_LOAD_W = 1'b0, VOP_PREFETCH = 1'b1} vop_e;

endpackage
