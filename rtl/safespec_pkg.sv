// safespec_pkg: widths, types and helpers shared by the SafeSpec cache/TLB path.
//
// Address widths, page size and line size are fixed here. The 64-byte line follows
// the cache configuration the design is sized for (32 KB, 8-way, 64 B lines, 4-cycle
// hit); the 48-bit virtual / 40-bit physical split and 4 KB pages are this design's
// own choice. Instructions are identified by their reorder-buffer (ROB) index; the
// age of an instruction is its distance from the ROB head, which is how every
// structure decides "older/younger" and which entries a squash removes.
package safespec_pkg;

  localparam int unsigned VADDR_W    = 48;
  localparam int unsigned PADDR_W    = 40;
  localparam int unsigned PAGE_OFF_W = 12;
  localparam int unsigned LINE_OFF_W = 6;                        // 64-byte lines
  localparam int unsigned LINE_W     = 8 << LINE_OFF_W;           // 512 bits
  localparam int unsigned VPN_W      = VADDR_W - PAGE_OFF_W;      // 36
  localparam int unsigned PPN_W      = PADDR_W - PAGE_OFF_W;      // 28
  localparam int unsigned LADDR_W    = PADDR_W - LINE_OFF_W;      // 34: line address

  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [VPN_W-1:0]   vpn_t;

  // Translation held in a TLB or shadow TLB entry (padded to whole bytes).
  typedef struct packed {
    logic [2:0]       rsvd;
    logic             user;   // page accessible from user mode
    logic [PPN_W-1:0] ppn;
  } pte_t;

  // Where a response's line came from.
  typedef enum logic [1:0] {
    SRC_L1     = 2'd0,   // committed cache hit
    SRC_SHADOW = 2'd1,   // hit on a visible shadow entry
    SRC_FILL   = 2'd2,   // miss, line fetched and placed in the shadow cache
    SRC_FAULT  = 2'd3    // translation not present; no access made
  } src_e;

  // Distance of ROB slot idx from the ROB head, in a ROB of n entries.
  function automatic int unsigned rob_age(int unsigned idx, int unsigned head, int unsigned n);
    return (idx >= head) ? (idx - head) : (idx + n - head);
  endfunction

endpackage
