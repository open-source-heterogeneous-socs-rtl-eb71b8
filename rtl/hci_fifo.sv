// HCI FIFO queue: decouples an HWPE streamer from the HCI router.
//
// Wide requests from the streamer are queued (DEPTH entries) and replayed to
// the router, so a cycle in which the router is busy (the arbiter gave the
// banks to the cores) does not stall the streamer as long as the queue has
// room. The upstream grant is simply "queue not full". Responses come back
// from the router unchanged and in order; this is what makes the streamer's
// sources latency tolerant by design.
// The paper names the block; depth and policy are this design's choice.
module hci_fifo #(
  parameter int unsigned NW    = 9,
  parameter int unsigned DEPTH = 2
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  // from the streamer
  input  logic               in_req_i,
  input  logic               in_wen_i,
  input  logic [31:0]        in_addr_i,
  input  logic [NW*32-1:0]   in_wdata_i,
  input  logic [NW*4-1:0]    in_be_i,
  output logic               in_gnt_o,
  output logic               in_rvalid_o,
  output logic [NW*32-1:0]   in_rdata_o,
  // to the router
  output logic               out_req_o,
  output logic               out_wen_o,
  output logic [31:0]        out_addr_o,
  output logic [NW*32-1:0]   out_wdata_o,
  output logic [NW*4-1:0]    out_be_o,
  input  logic               out_gnt_i,
  input  logic               out_rvalid_i,
  input  logic [NW*32-1:0]   out_rdata_i
);
  localparam int unsigned DW = 1 + 32 + NW*32 + NW*4;
  logic full, empty;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  sync_fifo #(.DW(DW), .DEPTH(DEPTH)) i_q (
    .clk_i, .rst_ni, .clear_i,
    .push_i(in_req_i), .data_i({in_wen_i, in_addr_i, in_wdata_i, in_be_i}),
    .pop_i(out_req_o && out_gnt_i),
    .data_o({out_wen_o, out_addr_o, out_wdata_o, out_be_o}),
    .full_o(full), .empty_o(empty), .count_o(cnt));

  assign in_gnt_o    = !full;
  assign out_req_o   = !empty;
  assign in_rvalid_o = out_rvalid_i;
  assign in_rdata_o  = out_rdata_i;
endmodule
