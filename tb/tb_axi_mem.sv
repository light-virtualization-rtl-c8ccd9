// tb_axi_mem: behavioural DRAM with an AXI4 read slave port, for testbenches.
//
// Memory is a sparse array of 64-bit words addressed by byte address (bits
// [2:0] ignored). A word never written reads as a pattern made from its own
// address, so a test can predict any word. Bursts are INCR with ARSIZE of the
// 128-bit bus; one burst is served at a time. With STALL set, AR acceptance
// and each R beat are delayed by random 0..3 cycles. RRESP is SLVERR for any
// address at or above ERR_BASE, OKAY otherwise. ar_count counts bursts.
module tb_axi_mem
  import lightv_pkg::*;
#(
  parameter bit  STALL    = 1'b0,
  parameter pa_t ERR_BASE = '1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ar_valid,
  output logic ar_ready,
  input  ar_t  ar,
  output logic r_valid,
  input  logic r_ready,
  output r_t   r
);

  logic [63:0] mem [pa_t];
  int unsigned ar_count = 0;

  function automatic logic [63:0] rd64(pa_t a);
    pa_t w;
    w = {a[PA_W-1:3], 3'b000};
    if (mem.exists(w)) return mem[w];
    return {24'hD0D0D0, w};
  endfunction

  function automatic void wr64(pa_t a, logic [63:0] v);
    mem[{a[PA_W-1:3], 3'b000}] = v;
  endfunction

  pa_t         addr_q;
  int unsigned left;
  logic        busy;
  int unsigned wait_c;

  always_comb begin
    r      = '0;
    r.data = {rd64(addr_q + 8), rd64(addr_q)};
    r.resp = addr_q >= ERR_BASE ? 2'b10 : AXI_RESP_OKAY;
    r.last = left == 1;
  end

  assign ar_ready = !busy && wait_c == 0;
  assign r_valid  = busy && wait_c == 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= 1'b0;
      left   <= 0;
      addr_q <= '0;
      wait_c <= 0;
    end else if (wait_c != 0) begin
      wait_c <= wait_c - 1;
    end else if (!busy) begin
      if (ar_valid) begin
        busy     <= 1'b1;
        addr_q   <= ar.addr;
        left     <= 32'(ar.len) + 1;
        ar_count <= ar_count + 1;
        wait_c   <= STALL ? $urandom_range(3) : 0;
      end else begin
        wait_c <= STALL ? $urandom_range(1) : 0;
      end
    end else if (r_ready) begin
      addr_q <= addr_q + pa_t'(DATA_W / 8);
      left   <= left - 1;
      if (left == 1) busy <= 1'b0;
      wait_c <= STALL ? $urandom_range(3) : 0;
    end
  end

endmodule
