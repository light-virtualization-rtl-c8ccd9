// lightv_ctx_cache: context cache of the LightV path checker.
//
// When LightV serves a page-table entry to the MMU it replaces the pointer to
// the next-level table with a watermark, an address that is not real memory
// but names a target page and the translation step. The real table address
// that was replaced is kept here, so that a later snoop of the watermarked
// table can be turned back into a DRAM read of the real table, even if the
// CPU has meanwhile cached the watermarked entry and skips the earlier steps.
// The paper names this store and its purpose; its organisation is this
// design's own: one entry per (target, level 1..LEVELS-1), holding a valid bit
// and the real page frame number (PFN) of that table. A table shared by
// several targets is stored under its owner, the lowest numbered of them.
//
// Interface and timing: one write port per target (wr_en[t], wr_pfn[t]) with
// a common level wr_lvl, written on the clock edge, so one fetched line can
// record the tables of several targets at once; one combinational read port
// (rd_tid, rd_lvl -> rd_hit, rd_pfn). Level 0 is never stored (the PGD is
// configured), so a lookup with rd_lvl 0, rd_lvl >= LEVELS or
// rd_tid >= NUM_TARGETS misses. clear drops all entries on the next edge and
// wins over a write in the same cycle.
module lightv_ctx_cache
  import lightv_pkg::*;
#(
  parameter int unsigned NUM_TARGETS = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             wr_en  [NUM_TARGETS],
  input  lvl_t             wr_lvl,
  input  pfn_t             wr_pfn [NUM_TARGETS],
  input  logic [TID_W-1:0] rd_tid,
  input  lvl_t             rd_lvl,
  output logic             rd_hit,
  output pfn_t             rd_pfn
);

  logic valid [NUM_TARGETS][LEVELS];
  pfn_t pfn   [NUM_TARGETS][LEVELS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < NUM_TARGETS; t++)
        for (int l = 0; l < LEVELS; l++) begin
          valid[t][l] <= 1'b0;
          pfn[t][l]   <= '0;
        end
    end else if (clear) begin
      for (int t = 0; t < NUM_TARGETS; t++)
        for (int l = 0; l < LEVELS; l++)
          valid[t][l] <= 1'b0;
    end else begin
      for (int t = 0; t < NUM_TARGETS; t++)
        for (int l = 1; l < LEVELS; l++)
          if (wr_en[t] && 32'(wr_lvl) == l) begin
            valid[t][l] <= 1'b1;
            pfn[t][l]   <= wr_pfn[t];
          end
    end
  end

  always_comb begin
    rd_hit = 1'b0;
    rd_pfn = '0;
    for (int t = 0; t < NUM_TARGETS; t++)
      for (int l = 1; l < LEVELS; l++)
        if (32'(rd_tid) == t && 32'(rd_lvl) == l) begin
          rd_hit = valid[t][l];
          rd_pfn = pfn[t][l];
        end
  end

endmodule
