// tb_lightv_histogram: page-walk traffic of an RGB-histogram run, with LightV
// passive and then virtualizing the single hot page.
//
// The process modelled has an input image of about 55.6 MB (13575 pages of
// 4 KB, taken as 55.6e6 bytes), 16 code pages and one hot page holding the
// histogram. Only the translation traffic is simulated: the testbench builds
// the process's three-level page tables in a behavioural DRAM and walks every
// image page once (a cold TLB miss each), with a walk of a code page and of
// the hot page after every 64 image pages, as TLB misses of warmer pages. The
// CPU side (MMU walker and interconnect) is modelled as in tb_lightv_top.
//
// Phase 1, passive: LightV enabled with no target. Every walk must end at the
//   page's own frame and every snoop must be declined.
// Phase 2, active: the hot page is the target. The hot page must translate to
//   the destination frame, everything else to its own frame; only the three
//   snoops of each hot-page walk may be claimed.
// Phase 3, active with PTE caching on the CPU side: the walker keeps the
//   entries it was served; the hot page's leaf line is evicted before each
//   hot walk, so each later hot walk needs one snoop, resolved through the
//   watermark held in the walker's cached entries.
// The testbench reports the snoop counts and the cycles from snoop issue to
// the end of the answer, and checks that the declined and claimed answers
// take a constant time when the interconnect never stalls.
module tb_lightv_histogram;
  import lightv_pkg::*;

  localparam int IMG_PAGES  = 13575;
  localparam int CODE_PAGES = 16;
  localparam int BURST      = 64;

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

  tb_axi_mem #(.STALL(1'b0)) u_mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar, .r_valid, .r_ready, .r
  );

  localparam pa_t PGD     = 40'h00_8000_0000;
  localparam pa_t PUD_I   = 40'h00_8000_1000;
  localparam pa_t PMD_I0  = 40'h00_8001_0000;  // image PMDs, one per 2 MB
  localparam pa_t PUD_C   = 40'h00_8000_2000;
  localparam pa_t PMD_C   = 40'h00_8000_3000;
  localparam pa_t PUD_H   = 40'h00_8000_4000;
  localparam pa_t PMD_H   = 40'h00_8000_5000;
  localparam pa_t FR_IMG  = 40'h01_0000_0000;
  localparam pa_t FR_CODE = 40'h00_9000_0000;
  localparam pa_t FR_HOT  = 40'h00_A000_0000;
  localparam pa_t DEST    = 40'h00_C000_0000;
  localparam pa_t WM_BASE = 40'h80_0000_0000;
  localparam logic [63:0] PG_ATTR = 64'h0000_0000_0000_0743;

  localparam logic [38:0] VA_IMG  = 39'h20_0000_0000;
  localparam logic [38:0] VA_CODE = 39'h00_0040_0000;
  localparam logic [38:0] VA_HOT  = 39'h7F_FFFF_F000;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
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

  // ---- CPU side model ---------------------------------------------------
  logic [63:0] pte_cache [pa_t];
  int n_snoops = 0, n_claimed = 0;
  int lat_decl_min = 1 << 30, lat_decl_max = 0, lat_clm_min = 1 << 30, lat_clm_max = 0;
  longint lat_decl_sum = 0, lat_clm_sum = 0;

  task automatic snoop_pte(input pa_t a, output logic [63:0] pte, output bit claimed);
    logic [LINE_W-1:0] got;
    int c;
    @(negedge clk);
    ac_valid = 1'b1; ac.addr = {a[PA_W-1:6], 6'b0}; ac.snoop = SNP_READ_SHARED;
    c = 0;
    do begin @(posedge clk); c++; end while (!ac_ready);
    @(negedge clk);
    ac_valid = 1'b0;
    cr_ready = 1'b1;
    while (!cr_valid) begin @(negedge clk); c++; end
    claimed = cr.data_transfer;
    @(posedge clk); c++;
    @(negedge clk);
    cr_ready = 1'b0;
    n_snoops++;
    if (claimed) begin
      n_claimed++;
      cd_ready = 1'b1;
      for (int b = 0; b < BEATS; b++) begin
        while (!cd_valid) begin @(negedge clk); c++; end
        got[b*DATA_W +: DATA_W] = cd.data;
        @(posedge clk); c++;
        @(negedge clk);
      end
      cd_ready = 1'b0;
      pte = got[a[5:3]*64 +: 64];
      lat_clm_sum += c;
      if (c < lat_clm_min) lat_clm_min = c;
      if (c > lat_clm_max) lat_clm_max = c;
    end else begin
      pte = u_mem.rd64(a);
      lat_decl_sum += c;
      if (c < lat_decl_min) lat_decl_min = c;
      if (c > lat_decl_max) lat_decl_max = c;
    end
  endtask

  task automatic walk(input logic [38:0] va, input bit use_cache, output pa_t pa, output int snoops);
    pa_t tbl, a;
    logic [63:0] pte;
    bit claimed;
    tbl = PGD;
    snoops = 0;
    for (int l = 0; l < LEVELS; l++) begin
      a = tbl + pa_t'({idx_of(va, l), 3'b000});
      if (use_cache && pte_cache.exists(a)) pte = pte_cache[a];
      else begin
        snoop_pte(a, pte, claimed);
        snoops++;
        if (use_cache) pte_cache[a] = pte;
      end
      tbl = {pte[39:12], 12'h000};
    end
    pa = {pte[39:12], va[11:0]};
  endtask

  // Walk the whole access sequence once; 'active' selects the expected frame
  // of the hot page.
  int hot_walks, hot_snoops;
  task automatic run_phase(bit active, bit use_cache);
    pa_t pa, exp;
    logic [38:0] va;
    int sn;
    hot_walks = 0; hot_snoops = 0;
    for (int i = 0; i < IMG_PAGES; i++) begin
      va = VA_IMG + 39'(i) * 39'h1000;
      walk(va, use_cache, pa, sn);
      check(pa == FR_IMG + pa_t'(i) * 40'h1000, $sformatf("image page %0d", i));
      if (i % BURST == BURST - 1) begin
        va = VA_CODE + 39'((i / BURST) % CODE_PAGES) * 39'h1000 + 39'h10;
        walk(va, use_cache, pa, sn);
        check(pa == FR_CODE + pa_t'((i / BURST) % CODE_PAGES) * 40'h1000 + 40'h10, "code page");
        if (use_cache) pte_cache.delete(
          {WM_BASE[39:22], 8'd0, 2'd2, 12'h000} + pa_t'(8 * idx_of(VA_HOT, 2)));
        walk(VA_HOT + 39'h80, use_cache, pa, sn);
        exp = (active ? DEST : FR_HOT) + 40'h80;
        check(pa == exp, $sformatf("hot page -> %h (expected %h)", pa, exp));
        hot_walks++;
        hot_snoops += sn;
      end
    end
  endtask

  int c0, s0;

  initial begin
    // page tables
    u_mem.wr64(PGD + 8*idx_of(VA_IMG, 0), table_desc(PUD_I));
    for (int k = 0; k <= (IMG_PAGES - 1) / 512; k++)
      u_mem.wr64(PUD_I + pa_t'(8 * (idx_of(VA_IMG, 1) + k)), table_desc(PMD_I0 + pa_t'(k) * 40'h1000));
    for (int i = 0; i < IMG_PAGES; i++)
      u_mem.wr64(PMD_I0 + pa_t'(8 * i), (FR_IMG + pa_t'(i) * 40'h1000) | PG_ATTR);
    u_mem.wr64(PGD + 8*idx_of(VA_CODE, 0), table_desc(PUD_C));
    u_mem.wr64(PUD_C + 8*idx_of(VA_CODE, 1), table_desc(PMD_C));
    for (int i = 0; i < CODE_PAGES; i++)
      u_mem.wr64(PMD_C + pa_t'(8 * (idx_of(VA_CODE, 2) + i)), (FR_CODE + pa_t'(i) * 40'h1000) | PG_ATTR);
    u_mem.wr64(PGD + 8*idx_of(VA_HOT, 0), table_desc(PUD_H));
    u_mem.wr64(PUD_H + 8*idx_of(VA_HOT, 1), table_desc(PMD_H));
    u_mem.wr64(PMD_H + 8*idx_of(VA_HOT, 2), FR_HOT | PG_ATTR);

    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    cfg_write(8'd1, 64'(PGD));
    cfg_write(8'd2, 64'(WM_BASE));
    cfg_write(8'd0, 64'd1);

    // Phase 1: passive
    run_phase(1'b0, 1'b0);
    $display("passive: %0d snoops, %0d claimed", n_snoops, n_claimed);
    check(n_claimed == 0, "passive: nothing claimed");
    check(n_snoops == 3 * (IMG_PAGES + 2 * hot_walks), "passive: three snoops per walk");

    // Phase 2: active, hot page virtualized
    cfg_write(8'd4, 64'(VA_HOT));
    cfg_write(8'd5, 64'(DEST));
    cfg_write(8'd6, PG_ATTR);
    cfg_write(8'd7, 64'd1);
    c0 = n_claimed; s0 = n_snoops;
    run_phase(1'b1, 1'b0);
    $display("active: %0d snoops, %0d claimed, %0d hot walks", n_snoops - s0, n_claimed - c0, hot_walks);
    check(n_claimed - c0 == 3 * hot_walks, "active: only the hot page's snoops claimed");

    // Phase 3: active, CPU caches page-table entries
    c0 = n_claimed; s0 = n_snoops;
    run_phase(1'b1, 1'b1);
    $display("active+cache: %0d snoops, %0d claimed, hot walks %0d with %0d snoops",
             n_snoops - s0, n_claimed - c0, hot_walks, hot_snoops);
    check(hot_snoops == hot_walks + 2, "cached: one snoop per hot walk after the first");
    check(n_claimed - c0 == hot_snoops, "cached: every hot snoop claimed");

    $display("answer cycles: declined %0d..%0d (avg %0.2f), claimed %0d..%0d (avg %0.2f)",
             lat_decl_min, lat_decl_max, real'(lat_decl_sum) / (n_snoops - n_claimed),
             lat_clm_min, lat_clm_max, real'(lat_clm_sum) / n_claimed);
    check(lat_decl_min == lat_decl_max, "declined answers take constant time");
    check(lat_clm_min == lat_clm_max, "claimed answers take constant time");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
