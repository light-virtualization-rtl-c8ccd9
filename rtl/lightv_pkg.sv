// lightv_pkg: constants and channel types shared by the LightV module.
//
// LightV sits on the coherence bus of a CPU cluster as a coherent master. When
// the CPU's MMU misses on a page-table entry (PTE), the interconnect snoops
// LightV; LightV may claim the line, fetch it from DRAM itself, rewrite the
// PTE of a page it virtualizes, and hand the rewritten line back.
//
// Address format (follows the paper): AArch64, 4 KB granule, 39-bit VA with
// the fourth translation level folded, so three 9-bit indices
// VA[38:30], VA[29:21], VA[20:12] and a 12-bit page offset VA[11:0].
//
// Own choices, not given by the paper: a 40-bit physical address, 64-byte
// cache lines (eight 64-bit PTEs per line), a 128-bit ACE/AXI data bus (four
// beats per line), the AArch64 VMSAv8-64 descriptor layout (bits [1:0] = 2'b11
// for table and page descriptors, output address in bits [47:12], lower
// attributes [11:2], upper attributes [63:52]), and the watermark layout
// described at wm_pfn below.
package lightv_pkg;

  // ---- Virtual address and page tables ----------------------------------
  localparam int unsigned VA_W       = 39;  // VA[38:0]
  localparam int unsigned PAGE_SHIFT = 12;  // 4 KB pages
  localparam int unsigned IDX_W      = 9;   // 512 entries per table
  localparam int unsigned LEVELS     = 3;   // Index 0, 1, 2
  localparam int unsigned VPN_W      = VA_W - PAGE_SHIFT;  // 27

  // ---- Physical address, lines, PTEs -------------------------------------
  localparam int unsigned PA_W       = 40;
  localparam int unsigned PFN_W      = PA_W - PAGE_SHIFT;  // 28
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_SHIFT = 6;
  localparam int unsigned LINE_W     = LINE_BYTES * 8;     // 512
  localparam int unsigned PTE_W      = 64;
  localparam int unsigned PTES_PER_LINE = LINE_BYTES / (PTE_W / 8);  // 8
  localparam int unsigned SLOT_W     = 3;
  localparam int unsigned DATA_W     = 128;
  localparam int unsigned BEATS      = LINE_W / DATA_W;    // 4
  localparam int unsigned BEAT_W     = 2;
  localparam int unsigned LADDR_W    = PA_W - LINE_SHIFT;  // line address width

  // ---- Watermark ----------------------------------------------------------
  // A watermark PFN is an address that is not real memory. Its low WM_LOW
  // bits carry a target number and the translation step (level) of the table
  // it stands for; the bits above must equal the configured watermark base.
  // When several targets share a table, the watermark names the lowest
  // numbered enabled one of them (the table's "owner").
  localparam int unsigned LVL_W      = 2;
  localparam int unsigned TID_W      = 8;   // up to 256 target pages
  localparam int unsigned WM_LOW     = TID_W + LVL_W;  // 10

  // Watermark PFN of the level-lvl table owned by target tid.
  function automatic logic [PA_W-PAGE_SHIFT-1:0] wm_pfn(
      logic [PA_W-PAGE_SHIFT-1:0] base, logic [TID_W-1:0] tid, logic [LVL_W-1:0] lvl);
    return {base[PA_W-PAGE_SHIFT-1:WM_LOW], tid, lvl};
  endfunction

  typedef logic [VPN_W-1:0]   vpn_t;
  typedef logic [PFN_W-1:0]   pfn_t;
  typedef logic [PA_W-1:0]    pa_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [IDX_W-1:0]   idx_t;
  typedef logic [LVL_W-1:0]   lvl_t;
  typedef logic [PTE_W-1:0]   pte_t;
  typedef logic [LINE_W-1:0]  line_t;

  // 9-bit table index of a VPN at a level (level 0 = VA[38:30]).
  function automatic idx_t vpn_idx(vpn_t vpn, lvl_t lvl);
    case (lvl)
      2'd0:    return vpn[26:18];
      2'd1:    return vpn[17:9];
      default: return vpn[8:0];
    endcase
  endfunction

  // Descriptor fields (VMSAv8-64, 4 KB granule, PA limited to PA_W bits).
  function automatic pfn_t pte_pfn(pte_t pte);
    return pte[PA_W-1:PAGE_SHIFT];
  endfunction

  function automatic pte_t pte_set_pfn(pte_t pte, pfn_t pfn);
    pte_t r;
    r = pte;
    r[PA_W-1:PAGE_SHIFT] = pfn;
    return r;
  endfunction

  // ---- ACE snoop channels (AC, CR, CD) ------------------------------------
  typedef struct packed {
    pa_t        addr;    // ACADDR
    logic [3:0] snoop;   // ACSNOOP
    logic [2:0] prot;    // ACPROT
  } ac_t;

  typedef struct packed {
    logic was_unique;     // CRRESP[4]
    logic is_shared;      // CRRESP[3]
    logic pass_dirty;     // CRRESP[2]
    logic error;          // CRRESP[1]
    logic data_transfer;  // CRRESP[0]
  } crresp_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;  // CDDATA
    logic              last;  // CDLAST
  } cd_t;

  // ACSNOOP encodings of the read snoops the module may answer with data.
  localparam logic [3:0] SNP_READ_ONCE        = 4'b0000;
  localparam logic [3:0] SNP_READ_SHARED      = 4'b0001;
  localparam logic [3:0] SNP_READ_CLEAN       = 4'b0010;
  localparam logic [3:0] SNP_READ_NOT_SH_DIRTY = 4'b0011;
  localparam logic [3:0] SNP_CLEAN_INVALID    = 4'b1001;
  localparam logic [3:0] SNP_MAKE_INVALID     = 4'b1101;

  function automatic logic is_read_snoop(logic [3:0] s);
    return s[3:2] == 2'b00;
  endfunction

  // ---- AXI read channels (AR, R) ------------------------------------------
  typedef struct packed {
    pa_t        addr;   // ARADDR
    logic [7:0] len;    // ARLEN
    logic [2:0] size;   // ARSIZE
    logic [1:0] burst;  // ARBURST
    logic [3:0] cache;  // ARCACHE
    logic [2:0] prot;   // ARPROT
  } ar_t;

  typedef struct packed {
    logic [DATA_W-1:0] data;  // RDATA
    logic [1:0]        resp;  // RRESP
    logic              last;  // RLAST
  } r_t;

  localparam logic [1:0] AXI_BURST_INCR = 2'b01;
  localparam logic [1:0] AXI_RESP_OKAY  = 2'b00;

  // ---- Result of the path check ----------------------------------------------
  typedef struct packed {
    logic   match;     // the line is a PTE line of interest (step 4a)
    lvl_t   lvl;       // translation step of the table the line belongs to
    laddr_t real_line; // line address to fetch from DRAM
    logic [PTES_PER_LINE-1:0]            slot_hit;  // entries on a target's path
    logic [PTES_PER_LINE-1:0][TID_W-1:0] slot_tid;  // target of each such entry
  } chk_t;

  // Do two VPNs share the table used at level lvl (same indices above it)?
  function automatic logic same_table(vpn_t a, vpn_t b, lvl_t lvl);
    case (lvl)
      2'd0:    return 1'b1;
      2'd1:    return a[26:18] == b[26:18];
      default: return a[26:9] == b[26:9];
    endcase
  endfunction

endpackage
