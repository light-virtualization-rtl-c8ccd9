// lightv_dram_if: DRAM interface of LightV (steps 6a, 7a, 8a, 9a).
//
// On a request for a line address it issues one AXI4 INCR read burst of BEATS
// beats of DATA_W bits (a whole 64-byte line), gathers the beats in a line
// buffer and presents the full line for one cycle with line_valid. Only one
// read is outstanding at a time. The paper names the block and its job
// (fetch the requested PTEs' payload from main memory); the AXI channel, the
// one-line burst and the single outstanding read are this design's choices.
//
// Interface and timing:
//   req_valid/req_ready/req_line  request handshake; req_ready is high while
//                                 idle. The AR channel is driven from the
//                                 next cycle and held until ar_ready.
//   line_valid, line, line_err    one-cycle strobe the cycle after RLAST is
//                                 accepted; line_err if any beat's RRESP was
//                                 not OKAY.
// ARCACHE is 4'b0011 (normal, non-cacheable, bufferable) so the read goes to
// memory and does not snoop the CPU caches again; ARPROT is 0.
module lightv_dram_if
  import lightv_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  // line request
  input  logic   req_valid,
  output logic   req_ready,
  input  laddr_t req_line,
  // line result
  output logic   line_valid,
  output line_t  line,
  output logic   line_err,
  // AXI read master
  output logic   ar_valid,
  input  logic   ar_ready,
  output ar_t    ar,
  input  logic   r_valid,
  output logic   r_ready,
  input  r_t     r
);

  typedef enum logic [1:0] {S_IDLE, S_AR, S_R} state_e;
  state_e state;
  laddr_t addr_q;
  logic [BEAT_W-1:0] beat;
  logic err_q;

  assign req_ready = state == S_IDLE;
  assign ar_valid  = state == S_AR;
  assign r_ready   = state == S_R;

  always_comb begin
    ar       = '0;
    ar.addr  = {addr_q, {LINE_SHIFT{1'b0}}};
    ar.len   = 8'(BEATS - 1);
    ar.size  = 3'($clog2(DATA_W / 8));
    ar.burst = AXI_BURST_INCR;
    ar.cache = 4'b0011;
    ar.prot  = 3'b000;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      addr_q     <= '0;
      beat       <= '0;
      err_q      <= 1'b0;
      line       <= '0;
      line_valid <= 1'b0;
      line_err   <= 1'b0;
    end else begin
      line_valid <= 1'b0;
      case (state)
        S_IDLE: if (req_valid) begin
          addr_q <= req_line;
          beat   <= '0;
          err_q  <= 1'b0;
          state  <= S_AR;
        end
        S_AR: if (ar_ready) state <= S_R;
        S_R: if (r_valid) begin
          line[beat*DATA_W +: DATA_W] <= r.data;
          beat <= beat + 1'b1;
          if (r.resp != AXI_RESP_OKAY) err_q <= 1'b1;
          if (r.last || 32'(beat) == BEATS - 1) begin
            line_valid <= 1'b1;
            line_err   <= err_q || r.resp != AXI_RESP_OKAY;
            state      <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // AXI rule: an address, once offered, is held until accepted.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    ar_valid && !ar_ready |=> ar_valid && $stable(ar));

endmodule
