// lightv_top: the LightV (Light Virtualization) module.
//
// LightV virtualizes chosen pages of a process without a hypervisor and
// without touching the page tables in memory. It is a coherent master on the
// CPU cluster's snoop-based interconnect. Page-table walks of the CPU's MMU
// that miss in the CPU caches are broadcast as snoops; LightV answers those
// that belong to a target page's translation path as if it owned the line,
// reads the real line from DRAM, rewrites the relevant page-table entry and
// serves the rewritten line. The MMU then translates the target virtual page
// to whatever physical page the user configured. All other snoops are
// declined, so the rest of the address space is walked as usual.
//
// Blocks (after the paper's skeleton figure):
//   lightv_cfg_regs      user configuration (PGD, targets, watermark base)
//   lightv_coh_if        ACE snoop slave: AC in, CR/CD out
//   lightv_path_checker  is this snoop on a target's path? (holds the
//                        context cache, lightv_ctx_cache)
//   lightv_dram_if       AXI4 read master fetching one line
//   lightv_pte_manip     rewrites the targets' entries in the fetched line
//
// Flow of one claimed snoop: AC accepted -> check (1 cycle) -> CR with
// DataTransfer=1 and AXI AR issued -> R beats gathered -> entry rewritten and
// context cache updated -> CD beats. A declined snoop gets CR with
// DataTransfer=0 two cycles after it is accepted.
//
// Ports: clock, active-low asynchronous reset, a register write/read port,
// the ACE snoop channels (AC, CR, CD) facing the interconnect, the AXI read
// channels (AR, R) facing DRAM, and one-cycle event strobes for a claimed
// snoop, a declined snoop and a rewritten entry.
module lightv_top
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
  // ACE snoop channels
  input  logic        ac_valid,
  output logic        ac_ready,
  input  ac_t         ac,
  output logic        cr_valid,
  input  logic        cr_ready,
  output crresp_t     cr,
  output logic        cd_valid,
  input  logic        cd_ready,
  output cd_t         cd,
  // AXI read master to DRAM
  output logic        ar_valid,
  input  logic        ar_ready,
  output ar_t         ar,
  input  logic        r_valid,
  output logic        r_ready,
  input  r_t          r,
  // events
  output logic        evt_hit,
  output logic        evt_miss,
  output logic        evt_rewrite
);

  logic   enable, ctx_clear;
  pfn_t   pgd_pfn, wm_base;
  vpn_t   tgt_vpn  [NUM_TARGETS];
  pfn_t   tgt_pfn  [NUM_TARGETS];
  pte_t   tgt_attr [NUM_TARGETS];
  logic   tgt_en   [NUM_TARGETS];

  laddr_t snp_line;
  logic [3:0] snp_type;
  chk_t   chk, chk_q;

  logic   rd_valid, rd_ready;
  laddr_t rd_line;
  logic   line_valid, line_err, manip_valid, rewritten;
  line_t  line_raw, line_new;

  logic   ctx_wr_en  [NUM_TARGETS];
  lvl_t   ctx_wr_lvl;
  pfn_t   ctx_wr_pfn [NUM_TARGETS];

  lightv_cfg_regs #(.NUM_TARGETS(NUM_TARGETS)) u_regs (
    .clk, .rst_n,
    .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .enable, .pgd_pfn, .wm_base,
    .tgt_vpn, .tgt_pfn, .tgt_attr, .tgt_en,
    .ctx_clear
  );

  lightv_coh_if u_coh (
    .clk, .rst_n,
    .ac_valid, .ac_ready, .ac,
    .cr_valid, .cr_ready, .cr,
    .cd_valid, .cd_ready, .cd,
    .snp_line, .snp_type, .chk, .chk_q,
    .rd_valid, .rd_ready, .rd_line,
    .line_valid, .line_in(line_new), .line_err, .line_raw,
    .evt_hit, .evt_miss
  );

  lightv_path_checker #(.NUM_TARGETS(NUM_TARGETS)) u_chk (
    .clk, .rst_n,
    .enable, .pgd_pfn, .wm_base, .tgt_vpn, .tgt_en,
    .snp_line, .snp_type, .chk,
    .ctx_clear, .ctx_wr_en, .ctx_wr_lvl, .ctx_wr_pfn
  );

  lightv_dram_if u_dram (
    .clk, .rst_n,
    .req_valid(rd_valid), .req_ready(rd_ready), .req_line(rd_line),
    .line_valid, .line(line_raw), .line_err,
    .ar_valid, .ar_ready, .ar,
    .r_valid, .r_ready, .r
  );

  // A line read with an error is served unaltered and leaves no context.
  assign manip_valid = line_valid && !line_err;

  lightv_pte_manip #(.NUM_TARGETS(NUM_TARGETS)) u_manip (
    .line_valid(manip_valid), .line_in(line_raw), .chk(chk_q),
    .wm_base, .tgt_pfn, .tgt_attr,
    .line_out(line_new), .rewritten,
    .ctx_wr_en, .ctx_wr_lvl, .ctx_wr_pfn
  );

  assign evt_rewrite = manip_valid && rewritten;

endmodule
