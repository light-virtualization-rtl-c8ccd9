// lightv_pte_manip: the PTE manipulator of LightV (steps 9a and 10a).
//
// Takes a cache line of page-table entries that LightV fetched from DRAM for a
// claimed snoop and rewrites each entry the path checker marked as lying on a
// target page's translation path; the other entries of the line pass
// unchanged.
//   * Table levels (level < LEVELS-1): the entry's next-table address is
//     replaced by a watermark naming (owner, level+1), as the paper proposes
//     to keep the walk observable when the CPU caches entries. The owner is
//     the lowest numbered enabled target that uses that next table (same
//     indices down to this level); this is exactly the target the path
//     checker names for the entry (slot_tid), since it names the lowest one.
//     The real next-table PFN read from DRAM is written to the context cache
//     under that owner.
//   * Last level: the entry is replaced by a page descriptor built from the
//     target's destination PFN and attribute template (bits [63:52] and
//     [11:2] of the template, bits [1:0] = 2'b11), the paper's "new
//     destination PAs and desired mapping attributes provided by the
//     end-user".
// Own choice: an entry is rewritten only if it is valid in memory (bits
// [1:0] = 2'b11); the paper assumes the target mappings are pre-populated, and
// an invalid one is served as it is so the CPU faults as it would without
// LightV.
//
// Interface and timing: purely combinational. line_out follows line_in, chk
// and the configuration; ctx_wr_en is line_valid gated by the conditions
// above, so the context cache is written on the edge that ends the line_valid
// cycle. Entries in different slots belong to different next tables, so no
// two slots write the same context entry.
module lightv_pte_manip
  import lightv_pkg::*;
#(
  parameter int unsigned NUM_TARGETS = 1
) (
  input  logic  line_valid,
  input  line_t line_in,
  input  chk_t  chk,
  input  pfn_t  wm_base,
  input  pfn_t  tgt_pfn  [NUM_TARGETS],
  input  pte_t  tgt_attr [NUM_TARGETS],
  output line_t line_out,
  output logic  rewritten,
  output logic  ctx_wr_en  [NUM_TARGETS],
  output lvl_t  ctx_wr_lvl,
  output pfn_t  ctx_wr_pfn [NUM_TARGETS]
);

  logic leaf;
  lvl_t next_lvl;

  assign leaf       = 32'(chk.lvl) == LEVELS - 1;
  assign next_lvl   = chk.lvl + 2'd1;
  assign ctx_wr_lvl = next_lvl;

  always_comb begin
    pte_t pte_in, pte_new, attr;
    pfn_t dest_pfn;
    line_out  = line_in;
    rewritten = 1'b0;
    for (int t = 0; t < NUM_TARGETS; t++) begin
      ctx_wr_en[t]  = 1'b0;
      ctx_wr_pfn[t] = '0;
    end
    for (int s = 0; s < PTES_PER_LINE; s++) begin
      pte_in   = line_in[s*PTE_W +: PTE_W];
      dest_pfn = '0;
      attr     = '0;
      for (int t = 0; t < NUM_TARGETS; t++)
        if (32'(chk.slot_tid[s]) == t) begin
          dest_pfn = tgt_pfn[t];
          attr     = tgt_attr[t];
        end
      if (leaf) begin
        pte_new        = '0;
        pte_new[63:52] = attr[63:52];
        pte_new[11:2]  = attr[11:2];
        pte_new[1:0]   = 2'b11;
        pte_new        = pte_set_pfn(pte_new, dest_pfn);
      end else begin
        pte_new = pte_set_pfn(pte_in, wm_pfn(wm_base, chk.slot_tid[s], next_lvl));
      end
      if (chk.match && chk.slot_hit[s] && pte_in[1:0] == 2'b11) begin
        rewritten = 1'b1;
        line_out[s*PTE_W +: PTE_W] = pte_new;
        for (int t = 0; t < NUM_TARGETS; t++)
          if (32'(chk.slot_tid[s]) == t && line_valid && !leaf) begin
            ctx_wr_en[t]  = 1'b1;
            ctx_wr_pfn[t] = pte_pfn(pte_in);
          end
      end
    end
  end

endmodule
