// tb_lightv_top: end-to-end test of the LightV module at its default size.
//
// The testbench plays the CPU side: a three-level AArch64 page-table walker
// (the MMU) with an optional PTE cache, and the coherent interconnect, which
// snoops LightV on every PTE line the walker misses and, when LightV declines,
// reads the line from DRAM itself. DRAM is tb_axi_mem, shared by the
// interconnect model and LightV's AXI read port, with random stalls; the
// interconnect also stalls CR and CD at random.
//
// Page tables are built in DRAM for a target page and for two neighbours:
// one in another PGD line, one in the same PGD line as the target. The test
// walks them with LightV off, passive (on, no targets) and active, with and
// without cached PTEs, and checks the resulting physical addresses and
// descriptors against values computed here, every served line against the
// DRAM line with the expected entry replaced, and the response latency of a
// declined and of a claimed snoop. Each mechanism (declined snoop, claimed
// snoop, entry rewrite, watermark lookup, walk resumed from cached
// watermarked entries, claimed line whose walked entry is left alone, non-read snoop
// declined, passive mode, context dropped on reconfiguration) is counted and
// a failure is counted for any that never happened.
module tb_lightv_top;
  import lightv_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        cfg_we = 1'b0;
  logic [7:0]  cfg_addr = '0;
  logic [63:0] cfg_wdata = '0;
  logic [63:0] cfg_rdata;
  logic        ac_valid = 1'b0, ac_ready;
  ac_t         ac = '0;
  logic        cr_valid, cr_ready = 1'b0;
  crresp_t     cr;
  logic        cd_valid, cd_ready = 1'b0;
  cd_t         cd;
  logic        ar_valid, ar_ready, r_valid, r_ready;
  ar_t         ar;
  r_t          r;
  logic        evt_hit, evt_miss, evt_rewrite;

  lightv_top dut (.*);

  tb_axi_mem #(.STALL(1'b1)) u_mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r
  );

  // ---- constants of the scenario --------------------------------------
  localparam pa_t PGD      = 40'h00_8000_0000;
  localparam pa_t PUD_T    = 40'h00_8000_1000;  // tables of the target
  localparam pa_t PMD_T    = 40'h00_8000_2000;
  localparam pa_t PUD_O    = 40'h00_8000_3000;  // tables of the neighbours
  localparam pa_t PMD_O    = 40'h00_8000_4000;
  localparam pa_t PAGE_T   = 40'h00_9000_0000;  // original page of target
  localparam pa_t PAGE_O   = 40'h00_A000_0000;
  localparam pa_t PAGE_N   = 40'h00_A000_5000;
  localparam pa_t DEST     = 40'h00_C123_4000;  // where LightV sends the target
  localparam pa_t WM_BASE  = 40'h80_0000_0000;  // watermark region (no memory)
  localparam logic [63:0] ATTR = 64'h0060_0000_0000_0F44;  // UXN/PXN, AF, SH, AttrIdx
  localparam logic [63:0] PG_ATTR_ORIG = 64'h0000_0000_0000_0743;

  localparam logic [38:0] VA_T = 39'h12_3456_7ABC;  // target
  localparam logic [38:0] VA_O = 39'h40_0000_1234;  // other PGD line
  localparam logic [38:0] VA_N = {9'(VA_T[38:30] ^ 9'd1), 30'h0020_0040};  // same PGD line

  // ---- mechanism counters -------------------------------------------------
  int n_miss = 0, n_hit = 0, n_rewrite = 0, n_wm = 0, n_cached_walk = 0;
  int n_claim_no_rewrite = 0, n_nonread = 0, n_passive = 0, n_ctx_drop = 0;

  always @(posedge clk) if (rst_n) begin
    if (evt_hit)     n_hit++;
    if (evt_miss)    n_miss++;
    if (evt_rewrite) n_rewrite++;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  function automatic logic [8:0] idx_of(logic [38:0] va, int lvl);
    return va[30 - 9*lvl +: 9];
  endfunction

  function automatic logic [63:0] table_desc(pa_t next);
    return {24'h0, next[39:12], 12'h003};
  endfunction

  task automatic cfg_write(logic [7:0] a, logic [63:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  // ---- interconnect + MMU model -------------------------------------------
  logic [63:0] pte_cache [pa_t];
  logic [63:0] last_served [LEVELS];
  bit          last_claimed [LEVELS];
  int          cr_wait;           // cycles from AC accepted to CR seen

  // What LightV should serve for the entry at real address ra.
  bit  exp_active = 1'b0;
  pa_t exp_dest;
  localparam pa_t WM1 = {WM_BASE[39:22], 8'd0, 2'd1, 12'h000};
  localparam pa_t WM2 = {WM_BASE[39:22], 8'd0, 2'd2, 12'h000};

  function automatic pa_t real_of(pa_t a);
    if (a[39:12] == WM1[39:12]) return PUD_T | pa_t'(a[11:0]);
    if (a[39:12] == WM2[39:12]) return PMD_T | pa_t'(a[11:0]);
    return a;
  endfunction

  function automatic logic [63:0] expected_entry(pa_t ra);
    logic [63:0] v;
    v = u_mem.rd64(ra);
    if (exp_active) begin
      if (ra == PGD + pa_t'(8*idx_of(VA_T, 0)))   v[39:12] = WM1[39:12];
      if (ra == PUD_T + pa_t'(8*idx_of(VA_T, 1))) v[39:12] = WM2[39:12];
      if (ra == PMD_T + pa_t'(8*idx_of(VA_T, 2)))
        v = (ATTR & 64'hFFF0_0000_0000_0FFC) | 64'(exp_dest) | 64'h3;
    end
    return v;
  endfunction

  // One snoop of the line holding PTE address a; returns the PTE and whether
  // LightV served it. A served line is checked entry by entry.
  task automatic snoop_pte(input pa_t a, input logic [3:0] kind, output logic [63:0] pte,
                           output bit claimed);
    pa_t line_a;
    logic [LINE_W-1:0] got;
    int c;
    line_a = {a[PA_W-1:6], 6'b0};
    @(negedge clk);
    ac_valid = 1'b1; ac.addr = line_a; ac.snoop = kind; ac.prot = 3'b010;
    do @(posedge clk); while (!ac_ready);
    @(negedge clk);
    ac_valid = 1'b0;
    c = 1;
    while (!cr_valid) begin @(negedge clk); c++; end
    cr_wait = c;
    repeat ($urandom_range(2)) @(negedge clk);
    cr_ready = 1'b1;
    claimed = cr.data_transfer;
    check(cr.error == 0 && cr.pass_dirty == 0, "CRRESP flags");
    @(posedge clk);
    @(negedge clk);
    cr_ready = 1'b0;
    if (claimed) begin
      for (int b = 0; b < BEATS; b++) begin
        while (!cd_valid) @(negedge clk);
        repeat ($urandom_range(1)) @(negedge clk);
        cd_ready = 1'b1;
        got[b*DATA_W +: DATA_W] = cd.data;
        check(cd.last == (b == BEATS - 1), "CDLAST position");
        @(posedge clk);
        @(negedge clk);
        cd_ready = 1'b0;
      end
      pte = got[a[5:3]*64 +: 64];
      // every entry of the line is DRAM's (of the real table behind a
      // watermark), except the target's, which carries its expected rewrite
      for (int s = 0; s < PTES_PER_LINE; s++)
        check(got[s*64 +: 64] == expected_entry(real_of(line_a) + pa_t'(8*s)),
              $sformatf("served line %h entry %0d", line_a, s));
    end else begin
      // the interconnect reads DRAM itself
      repeat (3) @(negedge clk);
      pte = u_mem.rd64(a);
    end
  endtask

  // Full walk of va. Returns the leaf descriptor and the physical address.
  // use_cache: PTEs served earlier are taken from pte_cache without a snoop.
  task automatic walk(input logic [38:0] va, input bit use_cache, input logic [3:0] kind,
                      output logic [63:0] leaf, output pa_t pa, output int snoops);
    pa_t tbl, a;
    logic [63:0] pte;
    bit claimed;
    tbl = PGD;
    snoops = 0;
    for (int l = 0; l < LEVELS; l++) begin
      a = tbl + pa_t'({idx_of(va, l), 3'b000});
      if (use_cache && pte_cache.exists(a)) begin
        pte = pte_cache[a];
        claimed = 1'b0;
      end else begin
        snoop_pte(a, kind, pte, claimed);
        snoops++;
        if (use_cache) pte_cache[a] = pte;
      end
      last_served[l]  = pte;
      last_claimed[l] = claimed;
      tbl = {pte[39:12], 12'h000};
    end
    leaf = pte;
    pa   = {pte[39:12], va[11:0]};
  endtask

  // ---- scenario -----------------------------------------------------------
  logic [63:0] leaf;
  pa_t pa;
  int  sn;
  int  hit0, miss0, rw0;

  initial begin
    // Page tables (pre-populated, as the design assumes).
    u_mem.wr64(PGD   + 8*idx_of(VA_T, 0), table_desc(PUD_T));
    u_mem.wr64(PUD_T + 8*idx_of(VA_T, 1), table_desc(PMD_T));
    u_mem.wr64(PMD_T + 8*idx_of(VA_T, 2), PAGE_T | PG_ATTR_ORIG);
    u_mem.wr64(PGD   + 8*idx_of(VA_O, 0), table_desc(PUD_O));
    u_mem.wr64(PUD_O + 8*idx_of(VA_O, 1), table_desc(PMD_O));
    u_mem.wr64(PMD_O + 8*idx_of(VA_O, 2), PAGE_O | PG_ATTR_ORIG);
    u_mem.wr64(PGD   + 8*idx_of(VA_N, 0), table_desc(PUD_O));
    u_mem.wr64(PUD_O + 8*idx_of(VA_N, 1), table_desc(PMD_O));
    u_mem.wr64(PMD_O + 8*idx_of(VA_N, 2), PAGE_N | PG_ATTR_ORIG);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // 1. LightV off: plain walks, every snoop declined.
    walk(VA_T, 0, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (PAGE_T | VA_T[11:0]), "off: target walks to its original page");
    check(!last_claimed[0] && !last_claimed[1] && !last_claimed[2], "off: nothing claimed");
    check(cr_wait == 2, $sformatf("declined snoop answered 2 cycles after accept (got %0d)", cr_wait));

    // 2. Passive: enabled, no target.
    cfg_write(8'd1, 64'(PGD));
    cfg_write(8'd2, 64'(WM_BASE));
    cfg_write(8'd0, 64'd1);
    check(cfg_rdata == 64'd1, "CTRL reads back");
    miss0 = n_miss;
    walk(VA_T, 0, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (PAGE_T | VA_T[11:0]), "passive: target walks to its original page");
    if (n_miss - miss0 == 3 && !last_claimed[0]) n_passive++;

    // 3. Active: one target page.
    cfg_write(8'd4, 64'(VA_T));
    cfg_write(8'd5, 64'(DEST));
    cfg_write(8'd6, ATTR);
    cfg_write(8'd7, 64'd1);
    exp_active = 1'b1; exp_dest = DEST;
    hit0 = n_hit; rw0 = n_rewrite;
    walk(VA_T, 0, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (DEST | VA_T[11:0]), $sformatf("active: target goes to destination (pa=%h)", pa));
    check(leaf == ((ATTR & 64'hFFF0_0000_0000_0FFC) | 64'(DEST) | 64'h3), "active: leaf descriptor");
    check(last_claimed[0] && last_claimed[1] && last_claimed[2], "active: all three levels claimed");
    check(cr_wait == 2, "claimed snoop answered 2 cycles after accept");
    check(last_served[0][39:12] == {WM_BASE[39:22], 8'd0, 2'd1}, "level-0 entry carries the level-1 watermark");
    check(last_served[1][39:12] == {WM_BASE[39:22], 8'd0, 2'd2}, "level-1 entry carries the level-2 watermark");
    check(last_served[0][11:0] == 12'h003 && last_served[1][63:40] == 0, "table entry attributes kept");
    check(n_hit - hit0 == 3 && n_rewrite - rw0 == 3, "three claims and three rewrites");
    if (last_claimed[1] && last_claimed[2]) n_wm += 2;
    check(u_mem.rd64(PMD_T + 8*idx_of(VA_T, 2)) == (PAGE_T | PG_ATTR_ORIG), "DRAM page tables untouched");

    // 4. A VA in another PGD line: not touched.
    hit0 = n_hit;
    walk(VA_O, 0, SNP_READ_ONCE, leaf, pa, sn);
    check(pa == (PAGE_O | VA_O[11:0]), "other VA walks to its own page");
    check(n_hit == hit0, "other VA: no claim");

    // 5. A VA sharing the target's PGD line: line claimed, its entry untouched.
    rw0 = n_rewrite;
    walk(VA_N, 0, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (PAGE_N | VA_N[11:0]), "neighbour VA walks to its own page");
    check(last_claimed[0] && !last_claimed[1], "neighbour: PGD line claimed, rest declined");
    check(last_served[0] == table_desc(PUD_O), "neighbour: its PGD entry served unaltered");
    if (last_claimed[0] && last_served[0] == table_desc(PUD_O)) n_claim_no_rewrite++;

    // 6. The CPU caches the entries it is served: the next walk starts from
    //    the cached watermarked entries and snoops only the last level.
    walk(VA_T, 1, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (DEST | VA_T[11:0]), "caching walk reaches destination");
    pte_cache.delete({WM_BASE[39:22], 8'd0, 2'd2, 12'h000} + pa_t'(8*idx_of(VA_T, 2)));
    hit0 = n_hit;
    walk(VA_T, 1, SNP_READ_SHARED, leaf, pa, sn);
    check(sn == 1, $sformatf("cached walk snoops one level (got %0d)", sn));
    check(pa == (DEST | VA_T[11:0]), "cached walk reaches destination through the watermark");
    if (sn == 1 && n_hit == hit0 + 1 && pa == (DEST | VA_T[11:0])) n_cached_walk++;
    pte_cache.delete();

    // 7. Cache-maintenance snoop on the PGD line is declined.
    begin
      logic [63:0] p; bit cl;
      snoop_pte(PGD + 8*idx_of(VA_T, 0), SNP_CLEAN_INVALID, p, cl);
      check(!cl, "CleanInvalid snoop declined");
      if (!cl) n_nonread++;
    end

    // 8. New destination: writing a register drops the context, so the old
    //    watermark (level 2) is declined until the walk passes the PGD again.
    cfg_write(8'd5, 64'(PAGE_N));
    exp_dest = PAGE_N;
    begin
      logic [63:0] p; bit cl;
      snoop_pte({WM_BASE[39:22], 8'd0, 2'd2, 12'h000} + pa_t'(8*idx_of(VA_T, 2)), SNP_READ_SHARED, p, cl);
      check(!cl, "stale watermark declined after reconfiguration");
      if (!cl) n_ctx_drop++;
    end
    walk(VA_T, 0, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (PAGE_N | VA_T[11:0]), "new destination takes effect");

    // 9. Switch off again: back to the original mapping.
    cfg_write(8'd0, 64'd0);
    exp_active = 1'b0;
    walk(VA_T, 0, SNP_READ_SHARED, leaf, pa, sn);
    check(pa == (PAGE_T | VA_T[11:0]), "off again: original page");

    // Mechanism coverage.
    $display("mechanisms: miss=%0d hit=%0d rewrite=%0d watermark=%0d cached_walk=%0d claim_no_rewrite=%0d nonread=%0d passive=%0d ctx_drop=%0d",
             n_miss, n_hit, n_rewrite, n_wm, n_cached_walk, n_claim_no_rewrite, n_nonread, n_passive, n_ctx_drop);
    check(n_miss > 0, "mechanism: declined snoop");
    check(n_hit > 0, "mechanism: claimed snoop");
    check(n_rewrite > 0, "mechanism: entry rewrite");
    check(n_wm > 0, "mechanism: watermark lookup");
    check(n_cached_walk > 0, "mechanism: walk from cached watermarked entries");
    check(n_claim_no_rewrite > 0, "mechanism: claimed line without rewrite");
    check(n_nonread > 0, "mechanism: non-read snoop declined");
    check(n_passive > 0, "mechanism: passive mode");
    check(n_ctx_drop > 0, "mechanism: context dropped");
    check(u_mem.ar_count > 0, "DRAM reads issued");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
