// Peripheral interconnect: connects the cores' configuration ports to the
// cluster's memory-mapped targets (HWPE controller, DMA, synchronizer).
//
// Bits [11:10] of a core's peripheral address select the target (0: HWPE,
// 1: DMA, 2: synchronizer); the lower bits are passed on. Each target has a
// round-robin arbiter among the cores that address it, so different cores can
// reach different targets in the same cycle. The winner's index goes with the
// request (tgt_id_o) so that the target can tell cores apart. Targets answer
// exactly one cycle after the grant; the crossbar remembers which core it
// granted and sends rvalid/rdata back to it. An address that selects no target
// (3) is granted and answered with 0.
// The paper shows a "peripheral interconnect" between cores and targets; its
// topology and address map are this design's choice.
module periph_xbar
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned NC = NCORES,
  parameter int unsigned NT = 3
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  periph_req_t [NC-1:0]          core_req_i,
  output periph_rsp_t [NC-1:0]          core_rsp_o,
  output periph_req_t [NT-1:0]          tgt_req_o,
  output logic [NT-1:0][$clog2(NC)-1:0] tgt_id_o,
  input  periph_rsp_t [NT-1:0]          tgt_rsp_i
);
  localparam int unsigned CB = $clog2(NC);
  logic [NT-1:0][CB-1:0] rr_q, win, win_q;
  logic [NT-1:0]         any, any_q;
  logic [NC-1:0]         gnt, bad, bad_q;

  always_comb begin
    win = '0; any = '0; gnt = '0; bad = '0;
    for (int t = 0; t < NT; t++) begin
      for (int k = 0; k < NC; k++) begin
        automatic int unsigned c = (int'(rr_q[t]) + k) % NC;
        if (!any[t] && core_req_i[c].req && 32'(core_req_i[c].addr[11:10]) == t) begin
          any[t] = 1'b1;
          win[t] = CB'(c);
        end
      end
      if (any[t]) gnt[win[t]] = 1'b1;
    end
    for (int c = 0; c < NC; c++)
      if (core_req_i[c].req && 32'(core_req_i[c].addr[11:10]) >= NT) begin
        bad[c] = 1'b1; gnt[c] = 1'b1;
      end
  end

  always_comb begin
    for (int t = 0; t < NT; t++) begin
      tgt_req_o[t]      = core_req_i[win[t]];
      tgt_req_o[t].req  = any[t];
      tgt_req_o[t].addr = {2'b00, core_req_i[win[t]].addr[9:0]};
      tgt_id_o[t]       = win[t];
    end
    for (int c = 0; c < NC; c++) begin
      core_rsp_o[c].gnt    = gnt[c];
      core_rsp_o[c].rvalid = bad_q[c];
      core_rsp_o[c].rdata  = '0;
    end
    for (int t = 0; t < NT; t++)
      if (any_q[t]) begin
        core_rsp_o[win_q[t]].rvalid = tgt_rsp_i[t].rvalid;
        core_rsp_o[win_q[t]].rdata  = tgt_rsp_i[t].rdata;
      end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q <= '0; win_q <= '0; any_q <= '0; bad_q <= '0;
    end else begin
      any_q <= any;
      win_q <= win;
      bad_q <= bad;
      for (int t = 0; t < NT; t++)
        if (any[t]) rr_q[t] <= CB'((int'(win[t]) + 1) % NC);
    end
  end
endmodule
