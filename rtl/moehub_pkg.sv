// moehub_pkg: widths, constants and packed types shared by the MoE-Hub blocks.
//
// The hub moves data at 128-byte line granularity (the largest NVLink write
// packet) and links carry 16-byte flits with a single header flit. Stores
// enter the hub as 32-byte sectors, so a line holds four sectors and the
// write-buffer validity mask has one bit per sector. A row-sparse store
// (st.rowsp) names its destination logically by {MallocID, RowID, RowOffset}
// instead of by address; MallocID carries the target GPU in its upper bits and
// a region number in its lower bits.
//
// The 128-byte line and 16-byte flit follow the paper. Every other width
// (address, MallocID, RowID, RowOffset, LocalRowID, sector size) and the bit
// packing of the st.rowsp destination register are this design's choices.
package moehub_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned ADDR_W       = 48;   // device byte address
  localparam int unsigned LINE_BYTES   = 128;  // merged packet payload
  localparam int unsigned LINE_SHIFT   = 7;    // log2(LINE_BYTES)
  localparam int unsigned SECTOR_BYTES = 32;   // one store transaction
  localparam int unsigned SECTOR_SHIFT = 5;
  localparam int unsigned SECTORS      = LINE_BYTES / SECTOR_BYTES;  // 4
  localparam int unsigned SECTOR_W     = SECTOR_BYTES * 8;           // 256
  localparam int unsigned LINE_W       = LINE_BYTES * 8;             // 1024
  localparam int unsigned FLIT_W       = 128;  // 16-byte flit

  localparam int unsigned GPU_W      = 4;      // up to 16 GPUs
  localparam int unsigned REGION_W   = 4;
  localparam int unsigned MALLOCID_W = GPU_W + REGION_W;  // {gpu, region}
  localparam int unsigned ROWID_W    = 20;
  localparam int unsigned ROWOFF_W   = 16;     // byte offset inside a row
  localparam int unsigned ROWLINE_W  = ROWOFF_W - LINE_SHIFT;  // line inside a row
  localparam int unsigned LROW_W     = 16;     // LocalRowID
  localparam int unsigned LINEADDR_W = ADDR_W - LINE_SHIFT;
  localparam int unsigned EPOCH_W    = 4;      // region generation

  typedef logic [MALLOCID_W-1:0] mid_t;
  typedef logic [ROWID_W-1:0]    rowid_t;
  typedef logic [LROW_W-1:0]     lrow_t;
  typedef logic [GPU_W-1:0]      gpu_t;
  typedef logic [ADDR_W-1:0]     addr_t;
  typedef logic [EPOCH_W-1:0]    epoch_t;
  typedef logic [FLIT_W-1:0]     flit_t;

  // GPU id carried in the upper bits of a MallocID.
  function automatic gpu_t mid_gpu(mid_t m);
    return m[MALLOCID_W-1 -: GPU_W];
  endfunction

  // ------------------------------------------- st.rowsp destination register
  // [63:56] MallocID, [55:36] RowID, [15:0] RowOffset, other bits reserved.
  localparam int unsigned DREG_MID_LSB   = 56;
  localparam int unsigned DREG_ROWID_LSB = 36;

  // Coalesced store transaction leaving the SM towards the hub.
  typedef struct packed {
    logic                rowsp;     // st.rowsp (else conventional remote st.)
    logic                nop;       // .nop suffix: off the critical path
    logic [63:0]         dreg;      // st.rowsp destination register
    addr_t               addr;      // st.: byte address (32-byte aligned)
    gpu_t                tlb_gpu;   // st.: peer GPU resolved by the L1 TLB
    logic [SECTOR_W-1:0] data;
  } sm_store_t;

  // One sector request inside the hub, with its destination resolved.
  typedef struct packed {
    logic                rowsp;
    logic                nop;
    gpu_t                dst;
    addr_t               addr;      // st. only
    mid_t                mid;       // st.rowsp only
    rowid_t              rowid;
    logic [ROWOFF_W-1:0] rowoff;    // byte offset, sector aligned
    logic [SECTOR_W-1:0] data;
  } hub_req_t;

  // A merged 128-byte line: RPM output, link packet, AAU input.
  typedef struct packed {
    logic                 rowsp;
    logic                 nop;
    gpu_t                 dst;
    gpu_t                 src;
    logic [SECTORS-1:0]   mask;
    logic [LINEADDR_W-1:0] line_addr;  // st.
    mid_t                 mid;         // st.rowsp
    rowid_t               rowid;
    logic [ROWLINE_W-1:0] rowline;
    logic [LINE_W-1:0]    data;
  } line_pkt_t;

  // Header flit: the line packet without its data, zero padded.
  localparam int unsigned HDR_BITS = $bits(line_pkt_t) - LINE_W;

  // Write towards the local XBAR / memory.
  typedef struct packed {
    addr_t              addr;   // line aligned
    logic [SECTORS-1:0] mask;
    logic [LINE_W-1:0]  data;
  } mem_wr_t;

  // Spilled RAT mapping in device memory, keyed by {MallocID, RowID}.
  typedef struct packed {
    logic   valid;
    epoch_t epoch;
    lrow_t  lrow;
  } spill_rec_t;

  // Allocation Pointer Table entry.
  typedef struct packed {
    addr_t  base;
    addr_t  range;     // bytes in the region
    addr_t  rowsize;   // bytes per row, a multiple of LINE_BYTES
    lrow_t  rowptr;    // next free LocalRowID
    epoch_t epoch;
  } apt_entry_t;

  localparam int unsigned RAT_KEY_W = MALLOCID_W + ROWID_W;

  // One-cycle event pulses of the hub, for counters and debug.
  typedef struct packed {
    logic sm_drop;       // malformed store dropped by rowsp_decode
    logic rpm_merge;     // sector merged into an existing line
    logic rpm_timeout;   // partial line released by the timer bypass
    logic rpm_stall;     // request held: partition full
    logic aau_hit;       // RAT hit, write issued
    logic aau_alloc;     // new LocalRowID allocated
    logic aau_restore;   // evicted mapping restored from the spill area
    logic aau_evict;     // mapping spilled from the RAT
    logic aau_overflow;  // write beyond the region dropped
    logic aau_unreg;     // packet for an unregistered MallocID dropped
    logic apt_full;      // region command found no free APT entry
    logic bypass;        // conventional store written without the AAU
  } hub_ev_t;

endpackage
