// lightv_coh_if: coherence interface of LightV, an ACE snoop slave
// (steps 2, 3, 5a/5b, 6a, 10a and 11a of the LightV flow).
//
// Each snoop on the AC channel is handed to the path checker. On "no match"
// the snoop is answered on CR with DataTransfer = 0 (the paper's NACK, "miss"),
// and the interconnect then reads the table from DRAM itself. On "match" the
// snoop is answered with DataTransfer = 1 (ACK, "hit": LightV claims to hold
// the line) and, at the same time, the line is requested from the DRAM
// interface. When the line comes back through the PTE manipulator it is sent
// on CD as BEATS beats, CDLAST on the last one. The order ACK first, data
// later, and the DRAM read running while the interconnect waits, follow the
// paper; the rest (one snoop at a time, CRRESP bits other than DataTransfer
// left 0, a line read with an error served unaltered) is this design's choice.
//
// Timing: snoop accepted (ac_ready high only when idle) -> next cycle the
// registered address is checked -> next cycle CR is offered and, on a hit, the
// DRAM request is offered -> data beats follow one per cycle (when cd_ready)
// from the cycle after the line arrives. A miss is answered two cycles after
// the snoop is accepted.
module lightv_coh_if
  import lightv_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  // ACE snoop channels
  input  logic    ac_valid,
  output logic    ac_ready,
  input  ac_t     ac,
  output logic    cr_valid,
  input  logic    cr_ready,
  output crresp_t cr,
  output logic    cd_valid,
  input  logic    cd_ready,
  output cd_t     cd,
  // path checker
  output laddr_t  snp_line,
  output logic [3:0] snp_type,
  input  chk_t    chk,
  output chk_t    chk_q,
  // DRAM interface
  output logic    rd_valid,
  input  logic    rd_ready,
  output laddr_t  rd_line,
  // manipulated line from the PTE manipulator
  input  logic    line_valid,
  input  line_t   line_in,
  input  logic    line_err,
  input  line_t   line_raw,
  // events, one-cycle strobes
  output logic    evt_hit,
  output logic    evt_miss
);

  typedef enum logic [2:0] {S_IDLE, S_CHECK, S_MISS, S_HIT, S_DATA} state_e;
  state_e state;
  ac_t    ac_q;
  logic   cr_done, rd_done, line_done;
  line_t  buf_q;
  logic [BEAT_W-1:0] beat;

  assign ac_ready = state == S_IDLE;
  assign snp_line = ac_q.addr[PA_W-1:LINE_SHIFT];
  assign snp_type = ac_q.snoop;
  assign rd_line  = chk_q.real_line;

  always_comb begin
    cr               = '0;
    cr.data_transfer = state == S_HIT;
    cr_valid         = state == S_MISS || (state == S_HIT && !cr_done);
    rd_valid         = state == S_HIT && !rd_done;
    cd_valid         = state == S_DATA;
    cd.data          = buf_q[beat*DATA_W +: DATA_W];
    cd.last          = 32'(beat) == BEATS - 1;
  end

  assign evt_hit  = state == S_CHECK && chk.match;
  assign evt_miss = state == S_CHECK && !chk.match;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      ac_q      <= '0;
      chk_q     <= '0;
      cr_done   <= 1'b0;
      rd_done   <= 1'b0;
      line_done <= 1'b0;
      buf_q     <= '0;
      beat      <= '0;
    end else begin
      case (state)
        S_IDLE: if (ac_valid) begin
          ac_q  <= ac;
          state <= S_CHECK;
        end
        S_CHECK: begin
          chk_q     <= chk;
          cr_done   <= 1'b0;
          rd_done   <= 1'b0;
          line_done <= 1'b0;
          state     <= chk.match ? S_HIT : S_MISS;
        end
        S_MISS: if (cr_ready) state <= S_IDLE;
        S_HIT: begin
          if (cr_ready) cr_done <= 1'b1;
          if (rd_ready) rd_done <= 1'b1;
          if (line_valid) begin
            buf_q     <= line_err ? line_raw : line_in;
            line_done <= 1'b1;
          end
          if ((cr_done || cr_ready) && (line_done || line_valid)) begin
            beat  <= '0;
            state <= S_DATA;
          end
        end
        S_DATA: if (cd_ready) begin
          beat <= beat + 1'b1;
          if (cd.last) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ACE rules: a response or a data beat, once offered, is held until taken.
  a_cr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cr_valid && !cr_ready |=> cr_valid && $stable(cr));
  a_cd_stable: assert property (@(posedge clk) disable iff (!rst_n)
    cd_valid && !cd_ready |=> cd_valid && $stable(cd));

endmodule
