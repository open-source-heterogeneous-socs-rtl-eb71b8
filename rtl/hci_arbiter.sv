// HCI arbiter: decides, bank by bank, whether the narrow branch (logarithmic
// crossbar: cores and DMA) or the wide branch (router: HWPE) drives each
// TCDM bank in this cycle, and multiplexes the two branches onto the banks.
//
// The wide branch has priority, so the accelerator sees a steady bandwidth.
// To keep cores from starving, a counter counts consecutive cycles in which a
// narrow request lost a bank to the wide branch; when it reaches MAX_STALL,
// the narrow branch wins for one cycle, the wide access is stalled (no grant)
// and the counter restarts. Banks the wide access does not touch stay with the
// narrow branch in every cycle, so cores working elsewhere in the TCDM never wait.
// The paper says the HCI "arbitrates between HWPE and core-side accesses";
// the priority rule and the stall counter are this design's choice.
module hci_arbiter #(
  parameter int unsigned NB        = 16,
  parameter int unsigned WORDS     = 1024,
  parameter int unsigned MAX_STALL = 8
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // narrow branch
  input  logic [NB-1:0]            log_want_i,
  output logic [NB-1:0]            log_avail_o,
  input  logic [NB-1:0]            log_req_i,
  input  logic [NB-1:0]            log_wen_i,
  input  logic [NB-1:0][$clog2(WORDS)-1:0] log_addr_i,
  input  logic [NB-1:0][31:0]      log_wdata_i,
  input  logic [NB-1:0][3:0]       log_be_i,
  // wide branch
  input  logic [NB-1:0]            wide_use_i,
  output logic                     wide_gnt_o,
  input  logic [NB-1:0]            wide_wen_i,
  input  logic [NB-1:0][$clog2(WORDS)-1:0] wide_addr_i,
  input  logic [NB-1:0][31:0]      wide_wdata_i,
  input  logic [NB-1:0][3:0]       wide_be_i,
  // banks
  output logic [NB-1:0]            bank_req_o,
  output logic [NB-1:0]            bank_wen_o,
  output logic [NB-1:0][$clog2(WORDS)-1:0] bank_addr_o,
  output logic [NB-1:0][31:0]      bank_wdata_o,
  output logic [NB-1:0][3:0]       bank_be_o,
  // observation: the narrow branch won a conflict because of the stall limit
  output logic                     starve_evt_o
);
  localparam int unsigned CW = $clog2(MAX_STALL + 1);
  logic [CW-1:0] stall_q;
  logic          conflict, wide_wins;

  assign conflict   = |(log_want_i & wide_use_i);
  assign wide_wins  = (|wide_use_i) && !(conflict && stall_q >= CW'(MAX_STALL));
  assign wide_gnt_o = wide_wins;
  assign log_avail_o = wide_wins ? ~wide_use_i : '1;
  assign starve_evt_o = conflict && !wide_wins;

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      if (wide_wins && wide_use_i[b]) begin
        bank_req_o[b]   = 1'b1;
        bank_wen_o[b]   = wide_wen_i[b];
        bank_addr_o[b]  = wide_addr_i[b];
        bank_wdata_o[b] = wide_wdata_i[b];
        bank_be_o[b]    = wide_be_i[b];
      end else begin
        bank_req_o[b]   = log_req_i[b];
        bank_wen_o[b]   = log_wen_i[b];
        bank_addr_o[b]  = log_addr_i[b];
        bank_wdata_o[b] = log_wdata_i[b];
        bank_be_o[b]    = log_be_i[b];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                 stall_q <= '0;
    else if (conflict && wide_wins) stall_q <= stall_q + 1'b1;
    else                         stall_q <= '0;
  end

  // The narrow branch is never granted a bank the wide branch drives.
  always_ff @(posedge clk_i)
    if (rst_ni) assert ((log_req_i & wide_use_i & {NB{wide_wins}}) == '0)
      else $error("bank driven by both branches");
endmodule
