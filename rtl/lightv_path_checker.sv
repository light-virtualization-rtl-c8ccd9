// lightv_path_checker: decides whether a snooped line belongs to the
// translation path of a target page (steps 3, 4a and 4b of the LightV flow).
//
// Following the paper, right after activation the check is made against the
// configured PGD address plus the offsets of the targets' first indices, and
// later against the page tables met on the way down, which are recognised
// through the watermarks LightV itself put into the entries it served. The
// context cache that resolves a watermark back into a real table address
// lives inside this block, as in the paper.
//
// Check, for a read snoop of line address L while enabled (own choice of
// detail; the paper gives only the principle):
//   * PGD hit: L is the PGD line holding the index-0 entry of at least one
//     enabled target. The line is fetched from L itself, at level 0.
//   * Watermark hit: the page of L has the watermark base in its upper bits,
//     its low bits name (owner target o, level) with o enabled, and the context
//     cache holds the real table PFN for them. The line is fetched from the
//     same line of the real table. Every line of such a table is claimed.
// In both cases slot_hit marks each entry of the line that lies on the path
// of an enabled target using that table (for a watermark: a target with the
// same upper indices as o), and slot_tid names that target, the lowest
// numbered if several share the entry. Anything else is "no match".
//
// Interface and timing: chk is combinational from snp_line/snp_type and the
// configuration; the context-cache write ports are written on the clock edge.
module lightv_path_checker
  import lightv_pkg::*;
#(
  parameter int unsigned NUM_TARGETS = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // configuration
  input  logic             enable,
  input  pfn_t             pgd_pfn,
  input  pfn_t             wm_base,
  input  vpn_t             tgt_vpn [NUM_TARGETS],
  input  logic             tgt_en  [NUM_TARGETS],
  // snoop under test
  input  laddr_t           snp_line,
  input  logic [3:0]       snp_type,
  output chk_t             chk,
  // context-cache maintenance
  input  logic             ctx_clear,
  input  logic             ctx_wr_en  [NUM_TARGETS],
  input  lvl_t             ctx_wr_lvl,
  input  pfn_t             ctx_wr_pfn [NUM_TARGETS]
);

  localparam int unsigned LIP_W = PAGE_SHIFT - LINE_SHIFT;  // line-in-page bits

  pfn_t             snp_pfn;
  logic [LIP_W-1:0] snp_lip;
  logic [TID_W-1:0] wm_tid;
  lvl_t             wm_lvl;
  logic             wm_region;
  logic             ctx_hit;
  pfn_t             ctx_pfn;

  assign snp_pfn   = snp_line[LADDR_W-1:LIP_W];
  assign snp_lip   = snp_line[LIP_W-1:0];
  assign wm_region = snp_pfn[PFN_W-1:WM_LOW] == wm_base[PFN_W-1:WM_LOW];
  assign wm_tid    = snp_pfn[WM_LOW-1:LVL_W];
  assign wm_lvl    = snp_pfn[LVL_W-1:0];

  lightv_ctx_cache #(.NUM_TARGETS(NUM_TARGETS)) u_ctx (
    .clk, .rst_n,
    .clear  (ctx_clear),
    .wr_en  (ctx_wr_en),
    .wr_lvl (ctx_wr_lvl),
    .wr_pfn (ctx_wr_pfn),
    .rd_tid (wm_tid),
    .rd_lvl (wm_lvl),
    .rd_hit (ctx_hit),
    .rd_pfn (ctx_pfn)
  );

  always_comb begin
    idx_t idx;
    vpn_t owner_vpn;
    logic wm_ok, pgd_page;
    idx       = '0;
    owner_vpn = '0;
    wm_ok     = 1'b0;
    chk       = '0;
    for (int t = 0; t < NUM_TARGETS; t++)
      if (32'(wm_tid) == t && tgt_en[t]) begin
        wm_ok     = 1'b1;
        owner_vpn = tgt_vpn[t];
      end
    wm_ok    = wm_ok && wm_region && ctx_hit;
    pgd_page = snp_pfn == pgd_pfn;
    if (enable && is_read_snoop(snp_type)) begin
      if (wm_ok) begin
        // A table reached through a watermark (steps 2 and later of the walk).
        chk.match     = 1'b1;
        chk.lvl       = wm_lvl;
        chk.real_line = {ctx_pfn, snp_lip};
        for (int t = NUM_TARGETS - 1; t >= 0; t--) begin
          idx = vpn_idx(tgt_vpn[t], wm_lvl);
          if (tgt_en[t] && same_table(tgt_vpn[t], owner_vpn, wm_lvl) &&
              snp_lip == idx[IDX_W-1:SLOT_W]) begin
            chk.slot_hit[idx[SLOT_W-1:0]] = 1'b1;
            chk.slot_tid[idx[SLOT_W-1:0]] = TID_W'(t);
          end
        end
      end else if (pgd_page) begin
        // The PGD (first step of the walk).
        chk.lvl       = 2'd0;
        chk.real_line = snp_line;
        for (int t = NUM_TARGETS - 1; t >= 0; t--) begin
          idx = vpn_idx(tgt_vpn[t], 2'd0);
          if (tgt_en[t] && snp_lip == idx[IDX_W-1:SLOT_W]) begin
            chk.match = 1'b1;
            chk.slot_hit[idx[SLOT_W-1:0]] = 1'b1;
            chk.slot_tid[idx[SLOT_W-1:0]] = TID_W'(t);
          end
        end
      end
    end
    if (!chk.match) chk = '0;
  end

endmodule
