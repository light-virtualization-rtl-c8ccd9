// tb_lightv_cfg_regs: self-checking test of the configuration registers.
//
// With two targets, writes every register with random values and checks the
// decoded outputs (address fields cut at the page or watermark boundary), the
// read-back port, that unmapped addresses read 0, that ctx_clear pulses for
// exactly one cycle after each write, and that reset clears everything.
module tb_lightv_cfg_regs;
  import lightv_pkg::*;

  localparam int unsigned NT = 2;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        cfg_we = 1'b0;
  logic [7:0]  cfg_addr = '0;
  logic [63:0] cfg_wdata = '0;
  logic [63:0] cfg_rdata;
  logic        enable, ctx_clear;
  pfn_t        pgd_pfn, wm_base;
  vpn_t        tgt_vpn  [NT];
  pfn_t        tgt_pfn  [NT];
  pte_t        tgt_attr [NT];
  logic        tgt_en   [NT];

  lightv_cfg_regs #(.NUM_TARGETS(NT)) dut (.*);

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  task automatic wr(logic [7:0] a, logic [63:0] d);
    @(negedge clk);
    cfg_we = 1'b1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk);
    cfg_we = 1'b0;
    check(ctx_clear == 1'b1, "ctx_clear after write");
    @(negedge clk);
    check(ctx_clear == 1'b0, "ctx_clear lasts one cycle");
  endtask

  function automatic logic [63:0] rnd64();
    return {$urandom, $urandom};
  endfunction

  logic [63:0] v;

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!enable && pgd_pfn == 0 && !tgt_en[0] && !tgt_en[1], "reset values");

    for (int it = 0; it < 20; it++) begin
      v = rnd64();
      wr(8'd0, v);
      check(enable == v[0], "enable");
      cfg_addr = 8'd0; #1 check(cfg_rdata == {63'd0, v[0]}, "CTRL read");

      v = rnd64();
      wr(8'd1, v);
      check(pgd_pfn == v[39:12], "pgd_pfn");
      cfg_addr = 8'd1; #1 check(cfg_rdata == {24'd0, v[39:12], 12'd0}, "PGD read");

      v = rnd64();
      wr(8'd2, v);
      check(wm_base == {v[39:22], 10'd0}, "wm_base keeps only bits above the watermark fields");

      for (int t = 0; t < NT; t++) begin
        v = rnd64();
        wr(8'(4 + 4*t), v);
        check(tgt_vpn[t] == v[38:12], "target VPN");
        cfg_addr = 8'(4 + 4*t); #1 check(cfg_rdata == {25'd0, v[38:12], 12'd0}, "T_VA read");
        v = rnd64();
        wr(8'(5 + 4*t), v);
        check(tgt_pfn[t] == v[39:12], "target PFN");
        v = rnd64();
        wr(8'(6 + 4*t), v);
        check(tgt_attr[t] == v, "target attributes");
        cfg_addr = 8'(6 + 4*t); #1 check(cfg_rdata == v, "T_ATTR read");
        v = rnd64();
        wr(8'(7 + 4*t), v);
        check(tgt_en[t] == v[0], "target enable");
      end
    end
    // a target register write does not disturb the other target
    wr(8'd6, 64'h1111);
    wr(8'd10, 64'h2222);
    check(tgt_attr[0] == 64'h1111 && tgt_attr[1] == 64'h2222, "targets independent");
    cfg_addr = 8'd200; #1 check(cfg_rdata == 0, "unmapped reads 0");
    cfg_addr = 8'd3;   #1 check(cfg_rdata == 0, "reserved reads 0");

    rst_n = 1'b0;
    #1 check(!enable && tgt_attr[1] == 0, "asynchronous reset clears");
    rst_n = 1'b1;

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
