// Heterogeneous PULP-style compute cluster: cores, a DMA, a hardware
// synchronizer and a RedMulE matrix engine sharing one multi-banked L1
// scratchpad (TCDM) through the Heterogeneous Cluster Interconnect (HCI).
//
// Structure:
//   * TCDM: NB word-interleaved 32-bit banks (16 x 4 KiB = 64 KiB).
//   * HCI, narrow branch: a logarithmic crossbar connecting the NC core data
//     ports and the four DMA ports to the banks, round-robin per bank.
//   * HCI, wide branch: a router that lets the HWPE touch NW neighbouring
//     banks (288 bits) in one cycle.
//   * HCI arbiter: per bank, the wide branch wins unless a narrow request has
//     lost MAX_STALL cycles in a row; then the narrow branch wins once.
//   * RedMulE HWPE: controller (2-context job queue), streamer (3 sources, a
//     sink, multiplexer, FIFO queue) and the 12 x 4 FP16 CE array.
//   * Cluster DMA: 64-bit system port <-> four 32-bit TCDM ports.
//   * Hardware synchronizer: event buffers (EOT from the DMA, EOC from the
//     HWPE, barrier, software event), barrier and mutex.
//   * Peripheral interconnect: core configuration accesses to the HWPE, DMA
//     and synchronizer (address bits [11:10] select the target).
//   * Per core, the Xpulpnn datapath slice: an NN-RF written by the core's
//     load data and a multi-precision dot-product unit.
// The RISC-V cores themselves, their FPUs and the instruction cache
// are not part of this RTL: each core's data port, peripheral port, event
// line and Xpulpnn issue signals are ports of this module, and the DMA's
// system-side port is the cluster's connection to the SoC (L2).
// Addresses on the core data ports are TCDM byte offsets; on the peripheral
// ports they are offsets in the cluster peripheral space.
// Lint notes. The wide grant (router -> arbiter -> router) is reported as a
// combinational loop on the signal level; it is not one at bit level: the
// banks the router uses depend only on the HWPE's request, the arbiter's grant
// on those banks, and the router's grant to the HWPE on the arbiter's grant.
// rst_ni is reported as used both asynchronously and synchronously because the
// handshake assertions inside the blocks are enabled only out of reset; the
// flip-flops themselves all use it as an asynchronous reset.
module pulp_cluster
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned NC        = NCORES,
  parameter int unsigned NB        = NBANKS,
  parameter int unsigned WORDS     = BANK_WORDS,
  parameter int unsigned NW        = HWPE_NW,
  parameter int unsigned RM_M      = 12,
  parameter int unsigned RM_N      = 4,
  parameter int unsigned RM_LAT    = 4,
  parameter int unsigned MAX_STALL = 8
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  // core data ports (load/store units)
  input  tcdm_req_t   [NC-1:0]   core_req_i,
  output tcdm_rsp_t   [NC-1:0]   core_rsp_o,
  // core peripheral ports
  input  periph_req_t [NC-1:0]   core_periph_req_i,
  output periph_rsp_t [NC-1:0]   core_periph_rsp_o,
  output logic        [NC-1:0]   core_evt_o,
  // Xpulpnn datapath control, per core
  input  logic        [NC-1:0]        xnn_load_i,     // this load's data go to the NN-RF
  input  logic        [NC-1:0][2:0]   xnn_load_reg_i,
  input  logic        [NC-1:0][2:0]   xnn_ra_i,
  input  logic        [NC-1:0][2:0]   xnn_rb_i,
  input  logic        [NC-1:0]        xnn_a_from_gp_i, // operand a from the GP-RF (rs1)
  input  logic        [NC-1:0][31:0]  xnn_gp_a_i,
  input  logic        [NC-1:0][31:0]  xnn_acc_i,
  input  dotp_prec_e  [NC-1:0]        xnn_prec_i,
  input  logic        [NC-1:0]        xnn_sign_a_i,
  input  logic        [NC-1:0]        xnn_sign_b_i,
  output logic        [NC-1:0][31:0]  xnn_result_o,
  // system-side port of the DMA (64 bit)
  output logic                   ext_req_o,
  output logic                   ext_we_o,
  output logic [31:0]            ext_addr_o,
  output logic [63:0]            ext_wdata_o,
  output logic [7:0]             ext_be_o,
  input  logic                   ext_gnt_i,
  input  logic                   ext_rvalid_i,
  input  logic [63:0]            ext_rdata_i,
  // observation
  output logic                   hwpe_busy_o,
  output logic                   hwpe_stall_o,
  output logic                   hci_starve_o,
  output logic                   barrier_o
);
  localparam int unsigned NM = NC + DMA_PORTS;
  localparam int unsigned AW = $clog2(WORDS);

  // ---------------- narrow initiators ----------------
  tcdm_req_t [NM-1:0] log_req;
  tcdm_rsp_t [NM-1:0] log_rsp;
  tcdm_req_t [DMA_PORTS-1:0] dma_req;
  tcdm_rsp_t [DMA_PORTS-1:0] dma_rsp;

  always_comb begin
    for (int c = 0; c < NC; c++) log_req[c] = core_req_i[c];
    for (int d = 0; d < DMA_PORTS; d++) log_req[NC + d] = dma_req[d];
    for (int c = 0; c < NC; c++) core_rsp_o[c] = log_rsp[c];
    for (int d = 0; d < DMA_PORTS; d++) dma_rsp[d] = log_rsp[NC + d];
  end

  // ---------------- HCI ----------------
  logic [NB-1:0]          lx_want, lx_avail, lx_req, lx_wen;
  logic [NB-1:0][AW-1:0]  lx_addr, rt_addr, bk_addr;
  logic [NB-1:0][31:0]    lx_wdata, rt_wdata, bk_wdata, bk_rdata;
  logic [NB-1:0][3:0]     lx_be, rt_be, bk_be;
  logic [NB-1:0]          rt_use, rt_wen, bk_req, bk_wen;
  logic                   rt_gnt;

  logic                   hw_req, hw_wen, hw_gnt, hw_rvalid;
  logic [31:0]            hw_addr;
  logic [NW*32-1:0]       hw_wdata, hw_rdata;
  logic [NW*4-1:0]        hw_be;

  hci_log_xbar #(.NM(NM), .NB(NB), .WORDS(WORDS)) i_log_xbar (
    .clk_i, .rst_ni, .mst_req_i(log_req), .mst_rsp_o(log_rsp),
    .bank_avail_i(lx_avail), .bank_want_o(lx_want), .bank_req_o(lx_req), .bank_wen_o(lx_wen),
    .bank_addr_o(lx_addr), .bank_wdata_o(lx_wdata), .bank_be_o(lx_be), .bank_rdata_i(bk_rdata));

  hci_router #(.NB(NB), .NW(NW), .WORDS(WORDS)) i_router (
    .clk_i, .rst_ni, .req_i(hw_req), .wen_i(hw_wen), .addr_i(hw_addr), .wdata_i(hw_wdata),
    .be_i(hw_be), .gnt_o(hw_gnt), .rvalid_o(hw_rvalid), .rdata_o(hw_rdata),
    .gnt_i(rt_gnt), .bank_use_o(rt_use), .bank_wen_o(rt_wen), .bank_addr_o(rt_addr),
    .bank_wdata_o(rt_wdata), .bank_be_o(rt_be), .bank_rdata_i(bk_rdata));

  hci_arbiter #(.NB(NB), .WORDS(WORDS), .MAX_STALL(MAX_STALL)) i_arbiter (
    .clk_i, .rst_ni,
    .log_want_i(lx_want), .log_avail_o(lx_avail), .log_req_i(lx_req), .log_wen_i(lx_wen),
    .log_addr_i(lx_addr), .log_wdata_i(lx_wdata), .log_be_i(lx_be),
    .wide_use_i(rt_use), .wide_gnt_o(rt_gnt), .wide_wen_i(rt_wen), .wide_addr_i(rt_addr),
    .wide_wdata_i(rt_wdata), .wide_be_i(rt_be),
    .bank_req_o(bk_req), .bank_wen_o(bk_wen), .bank_addr_o(bk_addr), .bank_wdata_o(bk_wdata),
    .bank_be_o(bk_be), .starve_evt_o(hci_starve_o));

  // ---------------- TCDM ----------------
  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(WORDS)) i_bank (
      .clk_i, .req_i(bk_req[b]), .wen_i(bk_wen[b]), .addr_i(bk_addr[b]),
      .wdata_i(bk_wdata[b]), .be_i(bk_be[b]), .rdata_o(bk_rdata[b]));
  end

  // ---------------- peripherals ----------------
  periph_req_t [2:0]                 tgt_req;
  periph_rsp_t [2:0]                 tgt_rsp;
  logic        [2:0][$clog2(NC)-1:0] tgt_id;
  logic evt_eot, evt_eoc;

  periph_xbar #(.NC(NC), .NT(3)) i_periph (
    .clk_i, .rst_ni, .core_req_i(core_periph_req_i), .core_rsp_o(core_periph_rsp_o),
    .tgt_req_o(tgt_req), .tgt_id_o(tgt_id), .tgt_rsp_i(tgt_rsp));

  redmule #(.M(RM_M), .N(RM_N), .LAT(RM_LAT), .NW(NW)) i_redmule (
    .clk_i, .rst_ni, .cfg_req_i(tgt_req[PERIPH_HWPE]), .cfg_rsp_o(tgt_rsp[PERIPH_HWPE]),
    .evt_eoc_o(evt_eoc), .busy_o(hwpe_busy_o), .stall_o(hwpe_stall_o),
    .tcdm_req_o(hw_req), .tcdm_wen_o(hw_wen), .tcdm_addr_o(hw_addr), .tcdm_wdata_o(hw_wdata),
    .tcdm_be_o(hw_be), .tcdm_gnt_i(hw_gnt), .tcdm_rvalid_i(hw_rvalid), .tcdm_rdata_i(hw_rdata));

  cluster_dma i_dma (
    .clk_i, .rst_ni, .cfg_req_i(tgt_req[PERIPH_DMA]), .cfg_rsp_o(tgt_rsp[PERIPH_DMA]),
    .evt_eot_o(evt_eot), .tcdm_req_o(dma_req), .tcdm_rsp_i(dma_rsp),
    .ext_req_o, .ext_we_o, .ext_addr_o, .ext_wdata_o, .ext_be_o,
    .ext_gnt_i, .ext_rvalid_i, .ext_rdata_i);

  hw_sync #(.NC(NC)) i_sync (
    .clk_i, .rst_ni, .cfg_req_i(tgt_req[PERIPH_SYNC]), .id_i(tgt_id[PERIPH_SYNC]),
    .cfg_rsp_o(tgt_rsp[PERIPH_SYNC]), .evt_dma_eot_i(evt_eot), .evt_hwpe_eoc_i(evt_eoc),
    .core_evt_o, .barrier_evt_o(barrier_o));

  // ---------------- Xpulpnn slices ----------------
  for (genvar c = 0; c < NC; c++) begin : g_xnn
    logic [31:0] nn_a, nn_b;
    nn_rf #(.NREGS(6)) i_nnrf (
      .clk_i, .rst_ni, .we_i(xnn_load_i[c] && core_rsp_o[c].rvalid),
      .waddr_i(xnn_load_reg_i[c]), .wdata_i(core_rsp_o[c].rdata),
      .raddr_a_i(xnn_ra_i[c]), .raddr_b_i(xnn_rb_i[c]), .rdata_a_o(nn_a), .rdata_b_o(nn_b));
    xpulpnn_dotp i_dotp (
      .op_a_i(xnn_a_from_gp_i[c] ? xnn_gp_a_i[c] : nn_a), .op_b_i(nn_b), .acc_i(xnn_acc_i[c]),
      .prec_i(xnn_prec_i[c]), .sign_a_i(xnn_sign_a_i[c]), .sign_b_i(xnn_sign_b_i[c]),
      .result_o(xnn_result_o[c]));
  end
endmodule
