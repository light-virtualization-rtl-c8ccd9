// tb_lightv_ctx_cache: self-checking test of the context cache.
//
// With three targets, performs random writes (any subset of targets at once,
// one common level), lookups and clears and compares every lookup with a
// reference array kept here. Level 0, levels at or above LEVELS and target
// numbers beyond the configuration must always miss; a clear must win over a
// write in the same cycle.
module tb_lightv_ctx_cache;
  import lightv_pkg::*;

  localparam int unsigned NT = 3;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic             clear = 1'b0;
  logic             wr_en  [NT] = '{default: 1'b0};
  pfn_t             wr_pfn [NT] = '{default: '0};
  logic [TID_W-1:0] rd_tid = '0;
  lvl_t             wr_lvl = '0, rd_lvl = '0;
  pfn_t             rd_pfn;
  logic             rd_hit;

  lightv_ctx_cache #(.NUM_TARGETS(NT)) dut (.*);

  bit   ref_v [NT][4];
  pfn_t ref_p [NT][4];

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  int n_hits = 0;

  initial begin
    foreach (ref_v[t, l]) ref_v[t][l] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // lookup (combinational) against the reference
      rd_tid = TID_W'($urandom_range(NT));      // NT itself is out of range
      rd_lvl = lvl_t'($urandom_range(3));
      #1;
      if (rd_tid < NT && rd_lvl != 0 && rd_lvl < LEVELS && ref_v[rd_tid][rd_lvl]) begin
        check(rd_hit && rd_pfn == ref_p[rd_tid][rd_lvl], "lookup hit and PFN");
        n_hits++;
      end else begin
        check(!rd_hit, $sformatf("lookup miss t=%0d l=%0d", rd_tid, rd_lvl));
      end
      // next operation
      clear  = $urandom_range(60) == 0;
      wr_lvl = lvl_t'($urandom_range(3));
      for (int t = 0; t < NT; t++) begin
        wr_en[t]  = $urandom_range(2) == 0;
        wr_pfn[t] = pfn_t'({$urandom, $urandom});
      end
      @(posedge clk);
      if (clear) begin
        foreach (ref_v[t, l]) ref_v[t][l] = 0;
      end else if (wr_lvl != 0 && wr_lvl < LEVELS) begin
        for (int t = 0; t < NT; t++)
          if (wr_en[t]) begin
            ref_v[t][wr_lvl] = 1;
            ref_p[t][wr_lvl] = wr_pfn[t];
          end
      end
    end
    check(n_hits > 100, "enough hits exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
