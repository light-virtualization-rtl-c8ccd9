// tb_lightv_multi: end-to-end test of LightV with several target pages that
// share page tables.
//
// The testbench plays the MMU (three-level walker with an optional PTE cache),
// the coherent interconnect and DRAM (tb_axi_mem with random stalls), as in
// tb_lightv_top, but with four targets chosen at random around one base
// virtual page: target 1 in the same last-level line as target 0, target 2
// under the same level-1 table but another level-2 table, target 3 in the same
// PGD line but another PGD entry. Untargeted neighbour pages live in the same
// tables. Page tables are built in DRAM for all of them.
//
// The expected result is worked out here from the configuration alone: an
// entry on the path of an enabled target is served with the watermark of the
// lowest numbered enabled target that shares the next table (its "owner"),
// and a target's leaf with its destination; everything else as in DRAM. Every
// served line is compared entry by entry with that, and every walk's physical
// address with the target's destination or the page's own frame. Counted
// mechanisms: several entries rewritten in one line, a walk through a table
// watermarked under another target, walks resumed from cached watermarked
// entries, and ownership passing to the next target when the owner is
// disabled. The configuration is this testbench's own choice.
module tb_lightv_multi;
  import lightv_pkg::*;

  localparam int unsigned NT = 4;
  localparam int unsigned NN = 4;   // neighbour pages

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

  lightv_top #(.NUM_TARGETS(NT)) dut (.*);

  tb_axi_mem #(.STALL(1'b1)) u_mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r
  );

  localparam pa_t PGD     = 40'h00_8000_0000;
  localparam pa_t WM_BASE = 40'h80_0000_0000;
  localparam logic [63:0] ATTR = 64'h0060_0000_0000_0F44;
  localparam logic [63:0] PG_ATTR_ORIG = 64'h0000_0000_0000_0743;

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

  // ---- page tables in DRAM ---------------------------------------------
  pa_t next_tbl = 40'h00_8000_1000;
  pa_t tbl_of [logic [38:0]];   // key: VA with the bits below the table's index cleared

  function automatic pa_t key(logic [38:0] va, int lvl);  // table reached after lvl
    return pa_t'(va >> (30 - 9*lvl));
  endfunction

  // real table at level lvl (1 or 2) on the path of va
  function automatic pa_t real_table(logic [38:0] va, int lvl);
    return tbl_of[39'(key(va, lvl - 1)) | (39'(lvl) << 36)];
  endfunction

  task automatic map_page(logic [38:0] va, pa_t page);
    pa_t t, k;
    t = PGD;
    for (int l = 0; l < LEVELS - 1; l++) begin
      k = key(va, l) | (pa_t'(l + 1) << 36);
      if (!tbl_of.exists(39'(k))) begin
        tbl_of[39'(k)] = next_tbl;
        next_tbl += 40'h1000;
        u_mem.wr64(t + 8*idx_of(va, l), table_desc(tbl_of[39'(k)]));
      end
      t = tbl_of[39'(k)];
    end
    u_mem.wr64(t + 8*idx_of(va, 2), page | PG_ATTR_ORIG);
  endtask

  // ---- configuration seen by the reference ------------------------------
  logic [38:0] tva  [NT];
  pa_t         tdst [NT];
  pa_t         torg [NT];
  bit          ten  [NT];
  bit          active = 1'b0;
  logic [38:0] nva  [NN];
  pa_t         norg [NN];

  // lowest enabled target sharing target t's table below level l
  function automatic int owner_of(int t, int l);
    for (int u = 0; u < NT; u++)
      if (ten[u] && key(tva[u], l) == key(tva[t], l)) return u;
    return -1;
  endfunction

  function automatic pa_t wm_page(int owner, int lvl);
    return {WM_BASE[39:22], 8'(owner), 2'(lvl), 12'h000};
  endfunction

  // real address behind a snooped address (watermark pages resolved)
  function automatic pa_t real_of(pa_t a);
    if (a[39:22] == WM_BASE[39:22] && a[13:12] != 0)
      return real_table(tva[a[21:14]], a[13:12]) | pa_t'(a[11:0]);
    return a;
  endfunction

  function automatic logic [63:0] expected_entry(pa_t ra);
    logic [63:0] v;
    pa_t tb;
    v = u_mem.rd64(ra);
    if (!active) return v;
    for (int t = 0; t < NT; t++) if (ten[t]) begin
      if (ra == PGD + pa_t'(8*idx_of(tva[t], 0)))
        v[39:12] = wm_page(owner_of(t, 0), 1) >> 12;
      tb = real_table(tva[t], 1);
      if (ra == tb + pa_t'(8*idx_of(tva[t], 1)))
        v[39:12] = wm_page(owner_of(t, 1), 2) >> 12;
      tb = real_table(tva[t], 2);
      if (ra == tb + pa_t'(8*idx_of(tva[t], 2)))
        v = (ATTR & 64'hFFF0_0000_0000_0FFC) | 64'(tdst[t]) | 64'h3;
    end
    return v;
  endfunction

  // ---- interconnect + MMU model -------------------------------------------
  logic [63:0] pte_cache [pa_t];
  logic [63:0] last_served [LEVELS];
  bit          last_claimed [LEVELS];
  int n_multi_line = 0, n_foreign_wm = 0, n_cached_walk = 0, n_handover = 0;
  int n_hit = 0, n_miss = 0, n_rewrite = 0;

  always @(posedge clk) if (rst_n) begin
    if (evt_hit)     n_hit++;
    if (evt_miss)    n_miss++;
    if (evt_rewrite) n_rewrite++;
  end

  task automatic snoop_pte(input pa_t a, output logic [63:0] pte, output bit claimed);
    pa_t line_a;
    logic [LINE_W-1:0] got;
    logic [63:0] dram;
    int changed;
    line_a = {a[PA_W-1:6], 6'b0};
    @(negedge clk);
    ac_valid = 1'b1; ac.addr = line_a; ac.snoop = SNP_READ_SHARED; ac.prot = 3'b010;
    do @(posedge clk); while (!ac_ready);
    @(negedge clk);
    ac_valid = 1'b0;
    while (!cr_valid) @(negedge clk);
    repeat ($urandom_range(2)) @(negedge clk);
    cr_ready = 1'b1;
    claimed = cr.data_transfer;
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
      changed = 0;
      for (int s = 0; s < PTES_PER_LINE; s++) begin
        dram = u_mem.rd64(real_of(line_a) + pa_t'(8*s));
        check(got[s*64 +: 64] == expected_entry(real_of(line_a) + pa_t'(8*s)),
              $sformatf("served line %h entry %0d: got %h", line_a, s, got[s*64 +: 64]));
        if (got[s*64 +: 64] != dram) changed++;
      end
      if (changed > 1) n_multi_line++;
    end else begin
      repeat (3) @(negedge clk);
      pte = u_mem.rd64(a);
    end
  endtask

  task automatic walk(input logic [38:0] va, input bit use_cache, output pa_t pa,
                      output int snoops);
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
        snoop_pte(a, pte, claimed);
        snoops++;
        if (use_cache) pte_cache[a] = pte;
      end
      last_served[l]  = pte;
      last_claimed[l] = claimed;
      tbl = {pte[39:12], 12'h000};
    end
    pa = {pte[39:12], va[11:0]};
  endtask

  // expected physical address of va
  function automatic pa_t expected_pa(logic [38:0] va, pa_t orig);
    for (int t = 0; t < NT; t++)
      if (active && ten[t] && tva[t][38:12] == va[38:12]) return tdst[t] | pa_t'(va[11:0]);
    return orig | pa_t'(va[11:0]);
  endfunction

  // walk every target and neighbour page in random order
  task automatic walk_all(input bit use_cache, input string phase);
    int order [NT + NN];
    pa_t pa;
    int sn, o;
    for (int i = 0; i < NT + NN; i++) order[i] = i;
    order.shuffle();
    for (int i = 0; i < NT + NN; i++) begin
      if (order[i] < NT) begin
        walk(tva[order[i]], use_cache, pa, sn);
        check(pa == expected_pa(tva[order[i]], torg[order[i]]),
              $sformatf("%s: target %0d pa=%h", phase, order[i], pa));
        // walk through a table whose watermark names another target
        if (active && ten[order[i]] && sn == 3) begin
          o = owner_of(order[i], 1);
          if (o != order[i] && last_served[1][39:12] == wm_page(o, 2) >> 12 && last_claimed[2])
            n_foreign_wm++;
        end
        if (active && ten[order[i]] && use_cache && sn < 3 && pa == expected_pa(tva[order[i]], torg[order[i]]))
          n_cached_walk++;
      end else begin
        walk(nva[order[i] - NT], use_cache, pa, sn);
        check(pa == expected_pa(nva[order[i] - NT], norg[order[i] - NT]),
              $sformatf("%s: neighbour %0d pa=%h", phase, order[i] - NT, pa));
      end
    end
  endtask

  logic [38:0] base;
  pa_t pa;
  int  sn;

  initial begin
    // Targets around a random base page, with at least 4 free low bits.
    base = {9'($urandom_range(8, 500)), 9'($urandom_range(8, 500)), 9'($urandom_range(8, 247)), 12'h000};
    tva[0] = base;
    tva[1] = {base[38:15], 3'(base[14:12] + 3'd1 + 3'($urandom_range(5))), 12'h000};   // same leaf line
    tva[2] = base;                                                                     // same level-1 table
    tva[2][29:21] = 9'(base[29:21] ^ 9'($urandom_range(1, 511)));
    tva[3] = {base[38:30], 30'h0};
    tva[3][32:30] = 3'(base[32:30] + 3'd1);                                            // same PGD line
    tva[3][29:12] = base[29:12];
    nva[0] = {base[38:21], 9'(base[20:12] + 9'd8), 12'h000};                           // same level-2 table
    nva[1] = {base[38:30], 9'(base[29:21] + 9'd1), 9'h0, 12'h000};                     // same level-1 table
    nva[2] = {9'(base[38:30] ^ 9'h100), base[29:12], 12'h000};                         // elsewhere
    nva[3] = {base[38:15], 3'(base[14:12] + 3'd7), 12'h000};                           // same leaf line
    if (nva[3][38:12] == tva[1][38:12]) nva[3][14:12] = 3'(nva[3][14:12] + 3'd1);
    if (nva[3][38:12] == tva[0][38:12]) nva[3][14:12] = 3'(nva[3][14:12] + 3'd1);
    for (int t = 0; t < NT; t++) begin
      torg[t] = 40'h00_9000_0000 + pa_t'(t) * 40'h1000;
      tdst[t] = 40'h00_C000_0000 + pa_t'(t) * 40'h0010_1000;
      ten[t]  = 1'b1;
      map_page(tva[t], torg[t]);
    end
    for (int n = 0; n < NN; n++) begin
      norg[n] = 40'h00_A000_0000 + pa_t'(n) * 40'h1000;
      map_page(nva[n], norg[n]);
    end

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    // Configure all four targets and enable.
    cfg_write(8'd1, 64'(PGD));
    cfg_write(8'd2, 64'(WM_BASE));
    for (int t = 0; t < NT; t++) begin
      cfg_write(8'(4 + 4*t), 64'(tva[t]));
      cfg_write(8'(5 + 4*t), 64'(tdst[t]));
      cfg_write(8'(6 + 4*t), ATTR);
      cfg_write(8'(7 + 4*t), 64'd1);
    end
    cfg_write(8'd0, 64'd1);
    active = 1'b1;

    // 1. Plain walks, twice, then walks with the CPU caching entries.
    walk_all(0, "active");
    walk_all(0, "active again");
    walk_all(1, "caching");
    walk_all(1, "cached");
    pte_cache.delete();

    // 2. Disable target 0: its tables pass to the next target sharing them.
    cfg_write(8'd7, 64'd0);
    ten[0] = 1'b0;
    walk(tva[1], 0, pa, sn);
    check(pa == expected_pa(tva[1], torg[1]), "after disabling target 0: target 1 still redirected");
    if (last_served[0][39:12] == wm_page(1, 1) >> 12 && pa == tdst[1] + pa_t'(0)) n_handover++;
    walk(tva[0], 0, pa, sn);
    check(pa == (torg[0] | pa_t'(tva[0][11:0])), "disabled target 0 walks to its own page");
    walk_all(0, "target 0 off");
    walk_all(1, "target 0 off, caching");
    walk_all(1, "target 0 off, cached");
    pte_cache.delete();

    // 3. Off: every page back to its own frame.
    cfg_write(8'd0, 64'd0);
    active = 1'b0;
    walk_all(0, "off");

    $display("mechanisms: hit=%0d miss=%0d rewrite=%0d multi_entry_line=%0d foreign_watermark=%0d cached_walk=%0d handover=%0d",
             n_hit, n_miss, n_rewrite, n_multi_line, n_foreign_wm, n_cached_walk, n_handover);
    check(n_hit > 0 && n_miss > 0 && n_rewrite > 0, "mechanism: claim, decline, rewrite");
    check(n_multi_line > 0, "mechanism: several entries rewritten in one line");
    check(n_foreign_wm > 0, "mechanism: walk through a table owned by another target");
    check(n_cached_walk > 0, "mechanism: walk resumed from cached watermarked entries");
    check(n_handover > 0, "mechanism: ownership passed on when the owner is disabled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
