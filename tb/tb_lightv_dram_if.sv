// tb_lightv_dram_if: self-checking test of the DRAM interface.
//
// Two copies of the block, each with its own behavioural AXI memory: one
// memory answers at full speed and is used to check the latency (request
// accepted -> line_valid in 6 cycles: 1 to issue AR, 1 for the AR handshake,
// 4 data beats), the other stalls at random and is used for the data. Every
// line must equal the eight words the memory holds at that line, AR must carry
// the line address, ARLEN = 3, ARSIZE = 16 bytes and INCR, one burst per
// request, and line_err must be set exactly for lines in the memory's error
// region (by beat address, so a line may err on its last beat only).
module tb_lightv_dram_if;
  import lightv_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  localparam pa_t ERR_BASE = 40'hF0_0000_0030;  // last beat of its line errs first

  // fast pair (index 0) and stalling pair (index 1)
  logic   req_valid [2];
  logic   req_ready [2];
  laddr_t req_line  [2];
  logic   line_valid[2];
  line_t  line      [2];
  logic   line_err  [2];
  logic   ar_valid  [2];
  logic   ar_ready  [2];
  ar_t    ar        [2];
  logic   r_valid   [2];
  logic   r_ready   [2];
  r_t     r         [2];

  for (genvar i = 0; i < 2; i++) begin : g
    lightv_dram_if dut (
      .clk, .rst_n,
      .req_valid(req_valid[i]), .req_ready(req_ready[i]), .req_line(req_line[i]),
      .line_valid(line_valid[i]), .line(line[i]), .line_err(line_err[i]),
      .ar_valid(ar_valid[i]), .ar_ready(ar_ready[i]), .ar(ar[i]),
      .r_valid(r_valid[i]), .r_ready(r_ready[i]), .r(r[i])
    );
    tb_axi_mem #(.STALL(i == 1), .ERR_BASE(ERR_BASE)) mem (
      .clk, .rst_n,
      .ar_valid(ar_valid[i]), .ar_ready(ar_ready[i]), .ar(ar[i]),
      .r_valid(r_valid[i]), .r_ready(r_ready[i]), .r(r[i])
    );
  end

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  // AR channel fields, checked at every handshake
  always @(posedge clk) for (int i = 0; i < 2; i++)
    if (rst_n && ar_valid[i] && ar_ready[i])
      check(ar[i].addr == {req_line[i], 6'b0} && ar[i].len == 8'd3 && ar[i].size == 3'd4 &&
            ar[i].burst == 2'b01, "AR fields");

  task automatic fetch(int i, laddr_t la, output int cycles);
    line_t exp;
    pa_t   base;
    int    bursts0;
    base = {la, 6'b0};
    bursts0 = (i == 0) ? g[0].mem.ar_count : g[1].mem.ar_count;
    for (int s = 0; s < 8; s++)
      exp[s*64 +: 64] = (i == 0) ? g[0].mem.rd64(base + pa_t'(8*s)) : g[1].mem.rd64(base + pa_t'(8*s));
    @(negedge clk);
    req_valid[i] = 1'b1; req_line[i] = la;
    while (!req_ready[i]) @(negedge clk);
    @(posedge clk);
    cycles = 0;
    @(negedge clk);
    req_valid[i] = 1'b0;
    do begin @(posedge clk); cycles++; end while (!line_valid[i]);
    check(line[i] == exp, $sformatf("line data at %h", base));
    check(line_err[i] == (base + 48 >= ERR_BASE), "line_err");
    check(((i == 0) ? g[0].mem.ar_count : g[1].mem.ar_count) == bursts0 + 1, "one burst per line");
    @(negedge clk);
    check(!line_valid[i], "line_valid lasts one cycle");
  endtask

  int cyc;
  laddr_t la;

  initial begin
    for (int i = 0; i < 2; i++) begin req_valid[i] = 1'b0; req_line[i] = '0; end
    // a few real words in memory
    for (int s = 0; s < 64; s++) begin
      g[0].mem.wr64(40'h00_1000_0000 + pa_t'(8*s), {$urandom, $urandom});
      g[1].mem.wr64(40'h00_1000_0000 + pa_t'(8*s), {$urandom, $urandom});
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 200; it++) begin
      case ($urandom_range(2))
        0: la = laddr_t'((40'h00_1000_0000 >> 6) + $urandom_range(7));
        1: la = laddr_t'({$urandom, $urandom});
        default: la = laddr_t'((ERR_BASE >> 6) + ($urandom_range(1) ? 0 : $urandom_range(100)));
      endcase
      fetch(0, la, cyc);
      check(cyc == 6, $sformatf("latency without stalls: %0d cycles", cyc));
      fetch(1, la, cyc);
      check(cyc >= 6, "latency with stalls is at least 6 cycles");
    end
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
