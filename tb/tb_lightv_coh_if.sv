// tb_lightv_coh_if: self-checking test of the coherence interface.
//
// The path checker, the DRAM interface and the PTE manipulator are played by
// the testbench: a snoop "matches" when address bit 20 is set and is a read
// snoop; its real line is the snooped line XOR a constant; a DRAM read
// returns a line made from its address after a random delay, sometimes with
// an error; the "manipulated" line is the inverse of the raw one. Random
// snoops are sent with random CR/CD back-pressure and the test checks the
// CRRESP (DataTransfer only for a match), the CR latency of two cycles after
// AC is accepted, exactly one DRAM request per match and none per miss at the
// checked real line, the four CD beats (manipulated line, or raw line after a
// read error) with CDLAST on the fourth, no CD for a miss, and the event
// strobes.
module tb_lightv_coh_if;
  import lightv_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic    ac_valid = 1'b0, ac_ready;
  ac_t     ac = '0;
  logic    cr_valid, cr_ready = 1'b0;
  crresp_t cr;
  logic    cd_valid, cd_ready = 1'b0;
  cd_t     cd;
  laddr_t  snp_line;
  logic [3:0] snp_type;
  chk_t    chk, chk_q;
  logic    rd_valid, rd_ready = 1'b0;
  laddr_t  rd_line;
  logic    line_valid = 1'b0, line_err = 1'b0;
  line_t   line_in, line_raw;
  logic    evt_hit, evt_miss;

  lightv_coh_if dut (.*);

  localparam laddr_t XOR_K = laddr_t'(34'h2_5A5A_5A5A);

  function automatic line_t raw_of(laddr_t la);
    line_t l;
    for (int s = 0; s < 16; s++) l[s*32 +: 32] = {la[31:0]} ^ (32'h01010101 * s);
    return l;
  endfunction

  // path checker stand-in
  always_comb begin
    chk = '0;
    chk.match = snp_line[20 - LINE_SHIFT] && snp_type[3:2] == 2'b00;
    chk.real_line = snp_line ^ XOR_K;
    chk.slot_hit = 8'h24;
    chk.lvl = 2'd1;
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  // DRAM interface + manipulator stand-in
  int     n_rd = 0;
  laddr_t rd_q;
  bit     err_next;
  initial begin
    forever begin
      @(negedge clk);
      rd_ready = $urandom_range(2) != 0;
      if (rd_valid && rd_ready) begin
        rd_q = rd_line;
        n_rd++;
        err_next = $urandom_range(5) == 0;
        @(negedge clk);
        rd_ready = 1'b0;
        repeat ($urandom_range(6)) @(negedge clk);
        line_raw = raw_of(rd_q);
        line_in  = ~raw_of(rd_q);
        line_err = err_next;
        line_valid = 1'b1;
        @(negedge clk);
        line_valid = 1'b0;
        line_err = 1'b0;
      end
    end
  end

  int n_hit_evt = 0, n_miss_evt = 0;
  always @(posedge clk) if (rst_n) begin
    if (evt_hit) n_hit_evt++;
    if (evt_miss) n_miss_evt++;
    check(!(cd_valid && cr_valid && !cr.data_transfer), "no data with a miss response");
  end

  int n_match = 0, n_miss = 0, n_err = 0;

  task automatic one_snoop();
    pa_t a;
    logic [3:0] kind;
    bit exp_match;
    int c, rd0;
    line_t got, exp;
    a = {$urandom, $urandom};
    a[5:0] = 0;
    kind = $urandom_range(4) == 0 ? 4'($urandom) : SNP_READ_SHARED;
    exp_match = a[20] && kind[3:2] == 2'b00;
    rd0 = n_rd;
    @(negedge clk);
    ac_valid = 1'b1; ac.addr = a; ac.snoop = kind;
    do @(posedge clk); while (!ac_ready);
    @(negedge clk);
    ac_valid = 1'b0;
    c = 1;
    while (!cr_valid) begin @(negedge clk); c++; end
    check(c == 2, $sformatf("CR two cycles after AC accepted (got %0d)", c));
    check(cr.data_transfer == exp_match && cr.error == 0 && cr.is_shared == 0, "CRRESP");
    check(chk_q.match == exp_match && chk_q.real_line == (a[39:6] ^ XOR_K), "latched check");
    repeat ($urandom_range(3)) @(negedge clk);
    check(cr_valid, "CR held until taken");
    cr_ready = 1'b1;
    @(negedge clk);
    cr_ready = 1'b0;
    if (exp_match) begin
      n_match++;
      for (int b = 0; b < BEATS; b++) begin
        c = 0;
        while (!cd_valid) begin @(negedge clk); c++; end
        repeat ($urandom_range(2)) @(negedge clk);
        cd_ready = 1'b1;
        got[b*DATA_W +: DATA_W] = cd.data;
        check(cd.last == (b == BEATS - 1), "CDLAST");
        @(negedge clk);
        cd_ready = 1'b0;
      end
      check(n_rd == rd0 + 1, "one DRAM read per match");
      exp = err_next ? raw_of(a[39:6] ^ XOR_K) : ~raw_of(a[39:6] ^ XOR_K);
      if (err_next) n_err++;
      check(got == exp, "served line");
    end else begin
      n_miss++;
      repeat (4) @(negedge clk);
      check(!cd_valid && n_rd == rd0, "miss: no data, no DRAM read");
    end
  endtask

  initial begin
    line_in = '0; line_raw = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 400; it++) one_snoop();
    check(n_hit_evt == n_match && n_miss_evt == n_miss, "event strobes count snoops");
    check(n_match > 50 && n_miss > 50 && n_err > 5, "all cases exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
