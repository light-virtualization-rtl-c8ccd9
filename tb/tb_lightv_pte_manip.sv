// tb_lightv_pte_manip: self-checking test of the PTE manipulator.
//
// Three targets whose virtual pages often share upper indices. Random lines
// of descriptors (valid and invalid) with random path-check results at every
// level, marking the entries of some enabled targets; the expected line is
// built here entry by entry: a marked entry of a claimed line becomes a table
// descriptor pointing to the watermark of (owner, level+1), the owner being
// the lowest numbered enabled target with the same indices down to this
// level, or, at the last level, the page descriptor made of the marked
// target's destination and attribute template; all other entries and all
// invalid entries stay as read. The context-cache writes (per owner: enable
// and real PFN; common level) are checked too.
module tb_lightv_pte_manip;
  import lightv_pkg::*;

  localparam int unsigned NT = 3;

  int checks = 0, failures = 0;

  logic             line_valid;
  line_t            line_in, line_out, exp_line;
  chk_t             chk;
  pfn_t             wm_base;
  vpn_t             tgt_vpn  [NT];
  logic             tgt_en   [NT];
  pfn_t             tgt_pfn  [NT];
  pte_t             tgt_attr [NT];
  logic             rewritten;
  logic             ctx_wr_en  [NT];
  lvl_t             ctx_wr_lvl;
  pfn_t             ctx_wr_pfn [NT];

  lightv_pte_manip #(.NUM_TARGETS(NT)) dut (
    .line_valid, .line_in, .chk, .wm_base, .tgt_pfn, .tgt_attr,
    .line_out, .rewritten, .ctx_wr_en, .ctx_wr_lvl, .ctx_wr_pfn
  );

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

  // lowest enabled target with the same indices as target t for levels 0..l
  function automatic int unsigned owner_of(int unsigned t, int l);
    bit same;
    for (int u = 0; u < NT; u++) begin
      same = tgt_en[u];
      for (int k = 0; k <= l; k++)
        if (index_of(tgt_vpn[u], k) != index_of(tgt_vpn[t], k)) same = 0;
      if (same) return u;
    end
    return 0;
  endfunction

  logic [63:0] e, orig;
  bit   exp_rw;
  bit   exp_en  [NT];
  pfn_t exp_pfn [NT];
  int   t, o, idx;
  int   n_leaf = 0, n_table = 0, n_invalid = 0, n_pass = 0, n_multi = 0;

  initial begin
    for (int it = 0; it < 3000; it++) begin
      for (int s = 0; s < 8; s++) begin
        e = {$urandom, $urandom};
        if ($urandom_range(4) != 0) e[1:0] = 2'b11;
        line_in[s*64 +: 64] = e;
      end
      wm_base = pfn_t'({$urandom, 10'd0});
      for (int u = 0; u < NT; u++) begin
        tgt_vpn[u]  = vpn_t'($urandom);
        if (u > 0)
          case ($urandom_range(3))
            1: tgt_vpn[u] = {tgt_vpn[u-1][26:18], tgt_vpn[u][17:0]};
            2: tgt_vpn[u] = {tgt_vpn[u-1][26:9], tgt_vpn[u][8:0]};
            3: tgt_vpn[u] = {tgt_vpn[u-1][26:12], tgt_vpn[u][11:9], tgt_vpn[u-1][8:3], tgt_vpn[u][2:0]};
            default: ;
          endcase
        tgt_en[u]   = $urandom_range(4) != 0;
        tgt_pfn[u]  = pfn_t'({$urandom, $urandom});
        tgt_attr[u] = {$urandom, $urandom};
      end
      chk = '0;
      chk.match = $urandom_range(5) != 0;
      chk.lvl   = lvl_t'($urandom_range(LEVELS - 1));
      // mark the entries of some enabled targets; as the path checker does,
      // an entry names the lowest enabled target whose path holds it
      for (int u = NT - 1; u >= 0; u--) begin
        idx = index_of(tgt_vpn[u], chk.lvl) % 8;
        if (tgt_en[u] && $urandom_range(3) != 0) begin
          chk.slot_hit[idx] = 1'b1;
          chk.slot_tid[idx] = TID_W'(owner_of(u, chk.lvl));
        end
      end
      chk.real_line = laddr_t'({$urandom, $urandom});
      line_valid  = $urandom_range(1);
      #1;
      exp_line = line_in;
      exp_rw = 0;
      for (int u = 0; u < NT; u++) begin exp_en[u] = 0; exp_pfn[u] = '0; end
      for (int s = 0; s < 8; s++) begin
        orig = line_in[s*64 +: 64];
        t = chk.slot_tid[s];
        if (chk.match && chk.slot_hit[s] && orig[1:0] == 2'b11) begin
          exp_rw = 1;
          if (chk.lvl == 2) begin
            e = '0;
            e[63:52] = tgt_attr[t][63:52];
            e[39:12] = tgt_pfn[t];
            e[11:2]  = tgt_attr[t][11:2];
            e[1:0]   = 2'b11;
            n_leaf++;
          end else begin
            o = owner_of(t, chk.lvl);
            e = orig;
            // watermark: base bits above, then owner number, then next level
            e[39:12] = (wm_base & ~pfn_t'(1023)) | pfn_t'(o * 4) | pfn_t'(chk.lvl + 1);
            if (line_valid) begin
              exp_en[o]  = 1;
              exp_pfn[o] = orig[39:12];
            end
            n_table++;
          end
          exp_line[s*64 +: 64] = e;
        end else if (chk.match && chk.slot_hit[s]) n_invalid++;
        else n_pass++;
      end
      if (chk.match && $countones(chk.slot_hit) > 1) n_multi++;
      check(line_out == exp_line, $sformatf("line out, lvl %0d slots %b", chk.lvl, chk.slot_hit));
      check(rewritten == exp_rw, "rewritten flag");
      for (int u = 0; u < NT; u++) begin
        check(ctx_wr_en[u] == exp_en[u], $sformatf("context write enable of %0d", u));
        if (exp_en[u]) check(ctx_wr_pfn[u] == exp_pfn[u], "context write PFN");
      end
      check(ctx_wr_lvl == chk.lvl + 1, "context write level");
    end
    $display("cases: leaf=%0d table=%0d invalid=%0d untouched=%0d several=%0d",
             n_leaf, n_table, n_invalid, n_pass, n_multi);
    check(n_leaf > 100 && n_table > 100 && n_invalid > 20 && n_pass > 100 && n_multi > 50,
          "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
