// Streamer-side multiplexer that lets several sources and sinks share the
// single wide HCI port of an HWPE.
//
// Every cycle a round-robin arbiter picks one of the NS requesting streams and
// forwards its request; the streams' accesses are thus interleaved at the
// granularity of single requests, in whatever order they arrive, rather than
// one stream after the other. The index of each forwarded request is queued in
// an ID FIFO; since responses come back in request order, the head of that
// FIFO tells which stream each rvalid/rdata belongs to. Requests are held back
// when the ID FIFO is full (MAX_OUT requests in flight).
// The paper names an "HCI Out-of-Order Multiplexer"; the request-level
// round-robin and the ID FIFO are this design's choice.
module hci_ooo_mux #(
  parameter int unsigned NS      = 4,
  parameter int unsigned NW      = 9,
  parameter int unsigned MAX_OUT = 8
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        clear_i,
  // stream-side ports
  input  logic [NS-1:0]               in_req_i,
  input  logic [NS-1:0]               in_wen_i,
  input  logic [NS-1:0][31:0]         in_addr_i,
  input  logic [NS-1:0][NW*32-1:0]    in_wdata_i,
  input  logic [NS-1:0][NW*4-1:0]     in_be_i,
  output logic [NS-1:0]               in_gnt_o,
  output logic [NS-1:0]               in_rvalid_o,
  output logic [NW*32-1:0]            in_rdata_o,
  // shared port
  output logic                        out_req_o,
  output logic                        out_wen_o,
  output logic [31:0]                 out_addr_o,
  output logic [NW*32-1:0]            out_wdata_o,
  output logic [NW*4-1:0]             out_be_o,
  input  logic                        out_gnt_i,
  input  logic                        out_rvalid_i,
  input  logic [NW*32-1:0]            out_rdata_i
);
  localparam int unsigned SB = (NS > 1) ? $clog2(NS) : 1;
  logic [SB-1:0] rr_q, sel, head;
  logic          any, id_full, id_empty;
  logic [$clog2(MAX_OUT+1)-1:0] id_cnt;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 0; k < NS; k++) begin
      automatic int unsigned s = (int'(rr_q) + k) % NS;
      if (!any && in_req_i[s]) begin
        any = 1'b1;
        sel = SB'(s);
      end
    end
  end

  assign out_req_o   = any && !id_full;
  assign out_wen_o   = in_wen_i[sel];
  assign out_addr_o  = in_addr_i[sel];
  assign out_wdata_o = in_wdata_i[sel];
  assign out_be_o    = in_be_i[sel];

  always_comb begin
    in_gnt_o = '0;
    in_gnt_o[sel] = out_req_o && out_gnt_i;
    in_rvalid_o = '0;
    in_rvalid_o[head] = out_rvalid_i;
  end
  assign in_rdata_o = out_rdata_i;

  sync_fifo #(.DW(SB), .DEPTH(MAX_OUT)) i_ids (
    .clk_i, .rst_ni, .clear_i, .push_i(out_req_o && out_gnt_i), .data_i(sel),
    .pop_i(out_rvalid_i), .data_o(head), .full_o(id_full), .empty_o(id_empty), .count_o(id_cnt));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                       rr_q <= '0;
    else if (clear_i)                  rr_q <= '0;
    else if (out_req_o && out_gnt_i)   rr_q <= SB'((int'(sel) + 1) % NS);
  end

  always_ff @(posedge clk_i)
    if (rst_ni) assert (!(out_rvalid_i && id_empty)) else $error("response without request");
endmodule
