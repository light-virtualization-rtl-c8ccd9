// tb_lightv_path_checker: self-checking test of the path checker.
//
// Two targets, random configuration (targets sometimes sharing upper indices
// or a whole line of entries), random context-cache writes and clears, and
// random snoops drawn from: lines of the PGD (the targets' own and others),
// lines of watermark pages (valid and invalid owner/level fields), random
// addresses, and non-read snoop types. The expected answer is worked out here
// from entry addresses (table base + 8 x index) and from index comparisons
// rather than from bit fields, and compared with every output field.
module tb_lightv_path_checker;
  import lightv_pkg::*;

  localparam int unsigned NT = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic             enable = 1'b0;
  pfn_t             pgd_pfn = '0, wm_base = '0;
  vpn_t             tgt_vpn [NT];
  logic             tgt_en  [NT];
  laddr_t           snp_line = '0;
  logic [3:0]       snp_type = '0;
  chk_t             chk;
  logic             ctx_clear = 1'b0;
  logic             ctx_wr_en  [NT] = '{default: 1'b0};
  lvl_t             ctx_wr_lvl = '0;
  pfn_t             ctx_wr_pfn [NT] = '{default: '0};

  lightv_path_checker #(.NUM_TARGETS(NT)) dut (.*);

  bit   ref_v [NT][LEVELS];
  pfn_t ref_p [NT][LEVELS];

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  function automatic int unsigned index_of(vpn_t vpn, int lvl);
    return (vpn >> (9 * (2 - lvl))) % 512;
  endfunction

  // Reference check.
  function automatic chk_t expect_chk(pa_t a, logic [3:0] kind);
    chk_t e;
    pa_t  line_a, entry, tbase;
    int unsigned wt, wl;
    bit same;
    e = '0;
    line_a = a & ~pa_t'(63);
    if (!enable || kind > 4'd3) return e;
    // watermark pages: owner wt, table level wl
    if ((a >> 22) == ({wm_base, 12'h000} >> 22)) begin
      wt = (a >> 14) % 256;
      wl = (a >> 12) % 4;
      if (wt < NT && wl >= 1 && wl < LEVELS && ref_v[wt][wl] && tgt_en[wt]) begin
        tbase = {ref_p[wt][wl], 12'h000};
        entry = a - (a & ~pa_t'(4095));  // offset in page
        e.match = 1; e.lvl = lvl_t'(wl);
        e.real_line = laddr_t'((tbase + (entry & ~pa_t'(63))) >> 6);
        for (int t = NT - 1; t >= 0; t--) begin
          same = 1;
          for (int k = 0; k < wl; k++)
            if (index_of(tgt_vpn[t], k) != index_of(tgt_vpn[wt], k)) same = 0;
          if (tgt_en[t] && same && (entry >> 6) == index_of(tgt_vpn[t], wl) / 8) begin
            e.slot_hit[index_of(tgt_vpn[t], wl) % 8] = 1;
            e.slot_tid[index_of(tgt_vpn[t], wl) % 8] = TID_W'(t);
          end
        end
        return e;
      end
    end
    // PGD lines, lowest target wins a shared entry
    for (int t = NT - 1; t >= 0; t--) begin
      entry = {pgd_pfn, 12'h000} + pa_t'(8 * index_of(tgt_vpn[t], 0));
      if (tgt_en[t] && (entry & ~pa_t'(63)) == line_a) begin
        e.match = 1; e.lvl = 0;
        e.real_line = laddr_t'(line_a >> 6);
        e.slot_hit[index_of(tgt_vpn[t], 0) % 8] = 1;
        e.slot_tid[index_of(tgt_vpn[t], 0) % 8] = TID_W'(t);
      end
    end
    return e;
  endfunction

  pa_t a;
  chk_t e;
  int n_pgd = 0, n_wm = 0, n_wm_pte = 0, n_none = 0, n_multi = 0;

  initial begin
    foreach (ref_v[t, l]) ref_v[t][l] = 0;
    for (int t = 0; t < NT; t++) begin tgt_vpn[t] = '0; tgt_en[t] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (it % 100 == 0) begin
        enable  = it < 1000 || it >= 1100;
        pgd_pfn = pfn_t'({$urandom, $urandom});
        wm_base = pfn_t'({$urandom, 10'd0});
        // targets share no, one or two upper indices, or a whole line
        for (int t = 0; t < NT; t++) begin
          tgt_vpn[t] = vpn_t'($urandom);
          if (t > 0)
            case ($urandom_range(4))
              1: tgt_vpn[t] = {tgt_vpn[0][26:18], tgt_vpn[t][17:0]};
              2: tgt_vpn[t] = {tgt_vpn[0][26:9], tgt_vpn[t][8:0]};
              3: tgt_vpn[t] = {tgt_vpn[0][26:3], tgt_vpn[t][2:0]};
              4: tgt_vpn[t] = {tgt_vpn[0][26:21], tgt_vpn[t][20:18], tgt_vpn[0][17:0]};
              default: ;
            endcase
          tgt_en[t]  = $urandom_range(4) != 0;
        end
      end
      // random context maintenance, applied on the next edge
      ctx_clear  = $urandom_range(200) == 0;
      ctx_wr_lvl = lvl_t'($urandom_range(3));
      for (int t = 0; t < NT; t++) begin
        ctx_wr_en[t]  = $urandom_range(3) == 0;
        ctx_wr_pfn[t] = pfn_t'({$urandom, $urandom});
      end
      // random snoop
      case ($urandom_range(3))
        0: begin  // PGD line of a target or a neighbour line
          a = {pgd_pfn, 12'h000} + pa_t'(8 * index_of(tgt_vpn[$urandom_range(NT-1)], 0));
          if ($urandom_range(1)) a = a ^ pa_t'(64 << $urandom_range(5));
        end
        1, 2: begin  // watermark page line
          a = {wm_base[PFN_W-1:WM_LOW], TID_W'($urandom_range(NT)), lvl_t'($urandom_range(3)), 12'h000};
          if ($urandom_range(1)) a = a + pa_t'(8 * index_of(tgt_vpn[a[21:14] % NT], a[13:12] % 3));
          else a = a + pa_t'($urandom_range(4095));
        end
        default: a = pa_t'({$urandom, $urandom});
      endcase
      snp_line = a[PA_W-1:LINE_SHIFT];
      snp_type = $urandom_range(7) == 0 ? 4'($urandom) : 4'($urandom_range(3));
      #1;
      e = expect_chk(a, snp_type);
      check(chk == e, $sformatf("check of %h: got %p expected %p", a, chk, e));
      if (e.match && e.lvl == 0) n_pgd++;
      if (e.match && e.lvl != 0) n_wm++;
      if (e.match && e.lvl != 0 && e.slot_hit != 0) n_wm_pte++;
      if (e.match && $countones(e.slot_hit) > 1) n_multi++;
      if (!e.match) n_none++;
      @(posedge clk);
      if (ctx_clear) foreach (ref_v[t, l]) ref_v[t][l] = 0;
      else if (ctx_wr_lvl >= 1 && ctx_wr_lvl < LEVELS) begin
        for (int t = 0; t < NT; t++)
          if (ctx_wr_en[t]) begin
            ref_v[t][ctx_wr_lvl] = 1;
            ref_p[t][ctx_wr_lvl] = ctx_wr_pfn[t];
          end
      end
    end
    $display("cases: pgd=%0d watermark=%0d watermark_with_entry=%0d several_entries=%0d none=%0d",
             n_pgd, n_wm, n_wm_pte, n_multi, n_none);
    check(n_pgd > 50 && n_wm > 50 && n_wm_pte > 20 && n_multi > 10 && n_none > 50,
          "all cases exercised");
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
