// bc_pkg - constants and types shared by the Bicameral Cache and its memory
// controller.
//
// The sector is the unit of every transfer: 64 bytes, which is also the width
// of the cache-to-memory link (512 bits), the length of a Scalar Cache line and
// one sixteenth of a Vector Cache line. Physical addresses are 32 bits wide,
// enough for the 4 GB main memory. They are split Row-Bank-Column, with one
// DRAM column holding one sector:
//
//   [31:17] row (32768)   [16:14] bank (8)   [13:6] column (256)   [5:0] byte
//
// The sector size, bus width, 4 GB capacity, row/bank/column counts and the
// Row-Bank-Column order follow the paper. That one column holds one sector is
// derived from those numbers (2^32 / (32768 * 8 * 256) = 64 B).
package bc_pkg;

  localparam int unsigned ADDR_W       = 32;
  localparam int unsigned SECTOR_BYTES = 64;
  localparam int unsigned SECTOR_W     = SECTOR_BYTES * 8;   // 512-bit bus
  localparam int unsigned OFF_W        = $clog2(SECTOR_BYTES);
  localparam int unsigned SADDR_W      = ADDR_W - OFF_W;     // sector address

  typedef logic [SECTOR_W-1:0]     sector_t;
  typedef logic [SECTOR_BYTES-1:0] be_t;
  typedef logic [ADDR_W-1:0]       addr_t;

  // One memory reference from the core. A reference addresses one sector;
  // be selects the bytes a write changes. vec tells vector references
  // (native cache: Vector Cache) from scalar ones (native: Scalar Cache).
  typedef struct packed {
    addr_t   addr;
    logic    vec;
    logic    we;
    be_t     be;
    sector_t wdata;
  } core_req_t;

  // Request on the cache-to-memory link: a demand read, a prefetch read made
  // inside the memory controller, or the write-back of one dirty sector.
  typedef struct packed {
    addr_t   addr;
    logic    we;
    logic    vec;   // issued on behalf of the Vector Cache
    logic    pf;    // prefetch (generated by the memory controller)
    sector_t data;
  } mem_req_t;

  // Read data returned by the memory controller.
  typedef struct packed {
    addr_t   addr;
    logic    pf;
    sector_t data;
  } mem_rsp_t;

  // One-cycle event strobes of the cache controller, for counting.
  typedef struct packed {
    logic sc_hit;          // native hit in the Scalar Cache
    logic vc_hit;          // native hit in the Vector Cache
    logic scalar_xhit;     // scalar reference found in the Vector Cache
    logic vector_xhit;     // vector reference found in the SC: sector migrated
    logic sc_wb_restore;   // line taken back from the SC write buffer
    logic vc_wb_restore;   // WB-flagged VC line turned back into a regular line
    logic double_miss;     // native and cross lookups missed: demand read
    logic sc_evict_wb;     // dirty SC victim moved into the SC write buffer
    logic vc_flag_wb;      // dirty VC victim flagged as write-buffer line
    logic sc_forced;       // SC write buffer full: compulsory emptying
    logic vc_forced;       // VC write buffer full: compulsory emptying
    logic sc_eager;        // eager emptying started in the SC write buffer
    logic vc_eager;        // eager emptying started in the VC write buffer
    logic pf_fill;         // prefetched sector written into a VC line
    logic pf_drop;         // prefetched sector discarded
  } bc_events_t;

  // Event strobes of the memory controller.
  typedef struct packed {
    logic row_hit;         // access to the open row: CAS only
    logic row_empty;       // no row open: RAS + CAS
    logic row_conflict;    // another row open: PRE + RAS + CAS (row opening)
    logic pf_issue;        // prefetch read scheduled on an idle bank
  } mc_events_t;

  // Byte-merge of a write into a sector.
  function automatic sector_t merge_bytes(sector_t old_d, sector_t new_d, be_t be);
    sector_t r;
    for (int i = 0; i < SECTOR_BYTES; i++)
      r[i*8 +: 8] = be[i] ? new_d[i*8 +: 8] : old_d[i*8 +: 8];
    return r;
  endfunction

endpackage
