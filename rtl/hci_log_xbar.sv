// Logarithmic crossbar: the narrow branch of the Heterogeneous Cluster
// Interconnect (HCI).
//
// NM initiators with 32-bit ports (cores and DMA) reach NB word-interleaved
// TCDM banks: byte address bits [1:0] select the byte, the next log2(NB) bits
// the bank and the rest the row inside the bank. Each bank has its own
// round-robin arbiter, so initiators that hit different banks are all served
// in the same cycle and conflicting ones are served fairly in turn. A bank
// that the HCI arbiter has given to the wide (HWPE) branch this cycle is
// masked with bank_avail_i = 0; the crossbar then grants nobody on it.
// Timing: gnt is combinational from req; rvalid/rdata follow one cycle after
// the grant (the bank latency). The paper gives the crossbar's role and its
// fairness; round-robin and word interleaving are this design's choice.
module hci_log_xbar
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned NM    = 12,
  parameter int unsigned NB    = 16,
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  tcdm_req_t [NM-1:0]       mst_req_i,
  output tcdm_rsp_t [NM-1:0]       mst_rsp_o,
  // bank side
  input  logic      [NB-1:0]       bank_avail_i,  // bank not taken by the wide branch
  output logic      [NB-1:0]       bank_want_o,   // some initiator requests the bank
  output logic      [NB-1:0]       bank_req_o,
  output logic      [NB-1:0]       bank_wen_o,
  output logic [NB-1:0][$clog2(WORDS)-1:0] bank_addr_o,
  output logic [NB-1:0][31:0]      bank_wdata_o,
  output logic [NB-1:0][3:0]       bank_be_o,
  input  logic [NB-1:0][31:0]      bank_rdata_i
);
  localparam int unsigned BB = $clog2(NB);
  localparam int unsigned MB = (NM > 1) ? $clog2(NM) : 1;

  logic [NB-1:0][MB-1:0] rr_q;        // per-bank round-robin pointer
  logic [NB-1:0][MB-1:0] win;         // winner per bank
  logic [NB-1:0]         win_valid;
  logic [NM-1:0]         gnt;
  logic [NM-1:0]         rvalid_q;
  logic [NM-1:0][BB-1:0] rbank_q;     // bank that answers each initiator

  function automatic logic [BB-1:0] bank_of(logic [31:0] a);
    return a[2 +: BB];
  endfunction

  always_comb begin
    bank_want_o = '0;
    win         = '0;
    win_valid   = '0;
    gnt         = '0;
    for (int b = 0; b < NB; b++) begin
      for (int k = 0; k < NM; k++) begin
        automatic int unsigned m = (int'(rr_q[b]) + k) % NM;
        if (mst_req_i[m].req && bank_of(mst_req_i[m].addr) == BB'(b)) begin
          bank_want_o[b] = 1'b1;
          if (!win_valid[b]) begin
            win_valid[b] = 1'b1;
            win[b]       = MB'(m);
          end
        end
      end
      if (win_valid[b] && bank_avail_i[b]) gnt[win[b]] = 1'b1;
    end
  end

  always_comb begin
    for (int b = 0; b < NB; b++) begin
      bank_req_o[b]   = win_valid[b] && bank_avail_i[b];
      bank_wen_o[b]   = mst_req_i[win[b]].wen;
      bank_addr_o[b]  = mst_req_i[win[b]].addr[2+BB +: $clog2(WORDS)];
      bank_wdata_o[b] = mst_req_i[win[b]].wdata;
      bank_be_o[b]    = mst_req_i[win[b]].be;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      for (int b = 0; b < NB; b++)
        if (bank_req_o[b]) rr_q[b] <= MB'((int'(win[b]) + 1) % NM);
      rvalid_q <= gnt;
      for (int m = 0; m < NM; m++)
        if (gnt[m]) rbank_q[m] <= bank_of(mst_req_i[m].addr);
    end
  end

  always_comb begin
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    end
  end
endmodule
