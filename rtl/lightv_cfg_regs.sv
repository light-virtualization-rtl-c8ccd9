// lightv_cfg_regs: configuration registers of the LightV module.
//
// Software programs here what LightV must know before it is switched on: the
// physical address of the page global directory (PGD) of the address space
// that holds the target pages, and, for each target page, its virtual address,
// the physical page it must be redirected to and the descriptor attributes to
// serve with it. Following the paper, the PGD is known before activation and
// the destination addresses and attributes come from the user. With the
// global enable set but no target enabled the module is "passive": it is
// snooped but claims nothing.
//
// Register map (this design's own choice; 64-bit registers, word address):
//   0        CTRL     bit 0: enable
//   1        PGD      physical address of the PGD (bits [11:0] ignored)
//   2        WM_BASE  watermark region base (bits [WM_LOW+11:0] ignored)
//   4+4t+0   T_VA     virtual address of target t (bits [11:0] ignored)
//   4+4t+1   T_PA     destination physical address of target t
//   4+4t+2   T_ATTR   descriptor template of target t: bits [63:52] and
//                     [11:2] are served as the page's attributes
//   4+4t+3   T_EN     bit 0: target t enabled
// A write takes effect on the next clock edge. Any write pulses ctx_clear for
// one cycle so that translation state built on the old settings is dropped.
// Reads are combinational; unmapped addresses read 0.
module lightv_cfg_regs
  import lightv_pkg::*;
#(
  parameter int unsigned NUM_TARGETS = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // register port
  input  logic        cfg_we,
  input  logic [7:0]  cfg_addr,
  input  logic [63:0] cfg_wdata,
  output logic [63:0] cfg_rdata,
  // configuration
  output logic        enable,
  output pfn_t        pgd_pfn,
  output pfn_t        wm_base,
  output vpn_t        tgt_vpn  [NUM_TARGETS],
  output pfn_t        tgt_pfn  [NUM_TARGETS],
  output pte_t        tgt_attr [NUM_TARGETS],
  output logic        tgt_en   [NUM_TARGETS],
  output logic        ctx_clear
);

  localparam logic [7:0] A_CTRL = 8'd0;
  localparam logic [7:0] A_PGD  = 8'd1;
  localparam logic [7:0] A_WM   = 8'd2;
  localparam int unsigned T_BASE = 4;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enable    <= 1'b0;
      pgd_pfn   <= '0;
      wm_base   <= '0;
      ctx_clear <= 1'b0;
      for (int t = 0; t < NUM_TARGETS; t++) begin
        tgt_vpn[t]  <= '0;
        tgt_pfn[t]  <= '0;
        tgt_attr[t] <= '0;
        tgt_en[t]   <= 1'b0;
      end
    end else begin
      ctx_clear <= cfg_we;
      if (cfg_we) begin
        case (cfg_addr)
          A_CTRL: enable  <= cfg_wdata[0];
          A_PGD:  pgd_pfn <= cfg_wdata[PA_W-1:PAGE_SHIFT];
          A_WM:   wm_base <= {cfg_wdata[PA_W-1:PAGE_SHIFT+WM_LOW], {WM_LOW{1'b0}}};
          default: ;
        endcase
        for (int t = 0; t < NUM_TARGETS; t++) begin
          if (cfg_addr == 8'(T_BASE + 4*t + 0)) tgt_vpn[t]  <= cfg_wdata[VA_W-1:PAGE_SHIFT];
          if (cfg_addr == 8'(T_BASE + 4*t + 1)) tgt_pfn[t]  <= cfg_wdata[PA_W-1:PAGE_SHIFT];
          if (cfg_addr == 8'(T_BASE + 4*t + 2)) tgt_attr[t] <= cfg_wdata;
          if (cfg_addr == 8'(T_BASE + 4*t + 3)) tgt_en[t]   <= cfg_wdata[0];
        end
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    case (cfg_addr)
      A_CTRL: cfg_rdata = 64'(enable);
      A_PGD:  cfg_rdata = 64'({pgd_pfn, 12'h000});
      A_WM:   cfg_rdata = 64'({wm_base, 12'h000});
      default: ;
    endcase
    for (int t = 0; t < NUM_TARGETS; t++) begin
      if (cfg_addr == 8'(T_BASE + 4*t + 0)) cfg_rdata = 64'({tgt_vpn[t], 12'h000});
      if (cfg_addr == 8'(T_BASE + 4*t + 1)) cfg_rdata = 64'({tgt_pfn[t], 12'h000});
      if (cfg_addr == 8'(T_BASE + 4*t + 2)) cfg_rdata = tgt_attr[t];
      if (cfg_addr == 8'(T_BASE + 4*t + 3)) cfg_rdata = 64'(tgt_en[t]);
    end
  end

  initial begin
    assert (NUM_TARGETS >= 1 && T_BASE + 4*NUM_TARGETS <= 256)
      else $fatal(1, "NUM_TARGETS must be 1..63");
  end

endmodule
