// garibaldi_pkg: address widths, the LLC access record and the event record
// shared by the Garibaldi blocks.
//
// Addresses follow the evaluated machine: 44-bit physical addresses, 64-byte
// lines and 4 KB pages, so a line address is 38 bits, a physical page number
// 32 bits and the line offset inside a page 6 bits. The virtual address width
// (48 bits, x86-64 four-level paging) is this design's choice; the paper only
// says x86-64 with a four-level page table.
package garibaldi_pkg;

  localparam int unsigned PA_W      = 44;              // physical address bits
  localparam int unsigned VA_W      = 48;              // virtual address (PC) bits
  localparam int unsigned LINE_OFF  = 6;               // 64 B lines
  localparam int unsigned PAGE_OFF  = 12;              // 4 KB pages
  localparam int unsigned LINE_W    = PA_W - LINE_OFF; // 38-bit line address
  localparam int unsigned PPN_W     = PA_W - PAGE_OFF; // 32-bit page frame number
  localparam int unsigned VPN_W     = VA_W - PAGE_OFF; // 36-bit virtual page number
  localparam int unsigned PFO_W     = PAGE_OFF - LINE_OFF; // 6-bit line-in-page offset
  localparam int unsigned PCL_W     = VA_W - LINE_OFF; // 42-bit 64 B aligned PC
  localparam int unsigned CORE_W    = 8;               // up to 256 requesters

  typedef logic [PA_W-1:0]   pa_t;
  typedef logic [VA_W-1:0]   va_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [PPN_W-1:0]  ppn_t;
  typedef logic [VPN_W-1:0]  vpn_t;
  typedef logic [PFO_W-1:0]  pfo_t;
  typedef logic [CORE_W-1:0] core_t;

  // One LLC access as the tag/metadata probe hands it to the Garibaldi module:
  // requester, instruction indicator (passed down from L2), PC of the access
  // (for data: the PC of the triggering instruction), physical address, and
  // the outcome of the probe.
  typedef struct packed {
    core_t  core;
    logic   is_inst;
    logic   is_prefetch;
    logic   is_hit;
    va_t    pc;
    pa_t    pa;
  } llc_access_t;

  // Single-cycle pulses reporting which mechanism acted.
  typedef struct packed {
    logic ht_alloc;       // helper table allocated a new PC page
    logic ht_miss;        // data access whose PC page was not in the helper table
    logic pt_alloc;       // pair table entry allocated (empty or replaced)
    logic pt_replace;     // ... and a valid entry was overwritten
    logic pt_update;      // existing entry updated (miss cost +/-)
    logic pt_preserve;    // colliding entry preserved (aged cost > threshold)
    logic pt_record;      // a DL_PA field was written with a new data line
    logic pt_field_hit;   // a DL_PA field matched the data line
    logic pf_issue;       // pair-wise prefetch issued
    logic qbs_query;      // replacement unit queried the pair table
    logic qbs_protect;    // ... and the instruction line was protected
    logic thr_inc;        // threshold raised at a period end
    logic thr_dec;        // threshold lowered at a period end
    logic period_end;     // colour advanced
  } gar_events_t;

endpackage
