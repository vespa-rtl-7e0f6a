// vespa_pkg: constants and types shared by the VESPA L1 data cache.
//
// The default geometry is the paper's main configuration: a 32 kB L1 data
// cache with 64-byte lines and 64 sets, whose 8 ways are split into two
// banks of 4 ways (16 kB each), for x86 with 4 kB base pages and 2 MB / 1 GB
// superpages. Virtual address bits: 5..0 byte offset, 11..6 set index,
// 12 bank index (13..12 with four banks), 20..0 the 2 MB page offset and
// 29..0 the 1 GB page offset. The address widths (48-bit VA, 40-bit PA) are
// this design's choice; the paper names none.
package vespa_pkg;

  localparam int unsigned VA_W       = 48;
  localparam int unsigned PA_W       = 40;
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;   // 512
  localparam int unsigned OFF_W      = 6;                // byte offset in a line
  localparam int unsigned SETS       = 64;
  localparam int unsigned SET_W      = 6;                // VA[11:6]
  localparam int unsigned WORD_W     = 64;               // data returned to the core
  localparam int unsigned WORD_BYTES = WORD_W / 8;

  // Page sizes: offset widths of the three x86 page sizes.
  localparam int unsigned OFF4K = 12;
  localparam int unsigned OFF2M = 21;
  localparam int unsigned OFF1G = 30;

  localparam int unsigned VPN4K_W = VA_W - OFF4K;  // 36
  localparam int unsigned VPN2M_W = VA_W - OFF2M;  // 27
  localparam int unsigned VPN1G_W = VA_W - OFF1G;  // 18
  localparam int unsigned PPN4K_W = PA_W - OFF4K;  // 28
  localparam int unsigned PPN2M_W = PA_W - OFF2M;  // 19
  localparam int unsigned PPN1G_W = PA_W - OFF1G;  // 10

  // Cache tag: the physical address above the 4 kB page offset (bank bits
  // included), i.e. the 4 kB physical page number.
  localparam int unsigned TAG_W = PPN4K_W;

  typedef logic [VA_W-1:0]   va_t;
  typedef logic [PA_W-1:0]   pa_t;
  typedef logic [TAG_W-1:0]  tag_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [WORD_W-1:0] word_t;

  typedef enum logic [1:0] {
    PG_4K = 2'd0,
    PG_2M = 2'd1,
    PG_1G = 2'd2
  } page_size_e;

  typedef enum logic {
    OP_LOAD  = 1'b0,
    OP_STORE = 1'b1
  } core_op_e;

  // Coherence lookups arriving from the L2 / directory.
  typedef enum logic [1:0] {
    COH_READ  = 2'd0,   // remote load: return the line, keep it
    COH_INV   = 2'd1,   // remote store / invalidate: return the line, drop it
    COH_WB    = 2'd2    // writeback request: return the line, mark it clean
  } coh_op_e;

  typedef struct packed {
    core_op_e              op;
    logic                  phys;     // TLB-bypassing access: va holds a physical address
    va_t                   va;
    word_t                 wdata;
    logic [WORD_BYTES-1:0] be;
  } core_req_t;

  typedef struct packed {
    word_t       rdata;
    logic        l1_hit;     // found in the L1 without a refill
    logic        superpage;  // translated by the 2 MB or 1 GB TLB (or bypass)
    logic [3:0]  banks_read; // number of banks read for the lookup
  } core_resp_t;

  typedef struct packed {
    page_size_e            size;
    logic [PPN4K_W-1:0]    ppn;   // right-aligned page number of that size
  } ptw_resp_t;

  typedef struct packed {
    coh_op_e op;
    pa_t     pa;
  } coh_req_t;

  typedef struct packed {
    logic  hit;
    logic  dirty;
    line_t line;
  } coh_resp_t;

  // invlpg: invalidate the translation of va in all L1 TLBs; with sweep set,
  // also evict from the L1 every line of the 4 kB physical page ppn.
  typedef struct packed {
    va_t                va;
    logic               sweep;
    logic [PPN4K_W-1:0] ppn;
  } inv_req_t;

endpackage
