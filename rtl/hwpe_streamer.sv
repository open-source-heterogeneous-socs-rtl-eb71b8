// HWPE streamer: a small DMA specialised in turning memory into streams for
// the datapath and streams from the datapath back into memory.
//
// It holds NSRC sources (memory -> stream) and one sink (stream -> memory),
// each with its own address generator, all programmed at once by start_i with
// a base address and a loop nest (counts and strides) per stream. The
// out-of-order multiplexer interleaves their wide requests on the single HWPE
// port, and the HCI FIFO queue decouples that port from the router. done_o[s]
// pulses when stream s has finished (sources 0..NSRC-1, then the sink).
// The structure (address generators, sources, sink, multiplexer, FIFO queue)
// follows the paper's streamer figure; that figure draws two sources and one
// sink, this instance has three sources because RedMulE reads A, B and C.
module hwpe_streamer #(
  parameter int unsigned NW     = 9,
  parameter int unsigned NSRC   = 3,
  parameter int unsigned ND     = 4,
  parameter int unsigned SDEPTH = 4,
  parameter int unsigned QDEPTH = 2
) (
  input  logic                          clk_i,
  input  logic                          rst_ni,
  input  logic                          clear_i,
  input  logic                          start_i,
  input  logic [NSRC:0][31:0]           base_i,
  input  logic [NSRC:0][ND-1:0][15:0]   cnt_i,
  input  logic [NSRC:0][ND-1:0][31:0]   stride_i,
  output logic [NSRC:0]                 done_o,
  // source streams
  output logic [NSRC-1:0]               src_valid_o,
  input  logic [NSRC-1:0]               src_ready_i,
  output logic [NSRC-1:0][NW*32-1:0]    src_data_o,
  // sink stream
  input  logic                          snk_valid_i,
  output logic                          snk_ready_o,
  input  logic [NW*32-1:0]              snk_data_i,
  input  logic [NW*4-1:0]               snk_strb_i,
  // wide memory port (to the HCI router)
  output logic                          tcdm_req_o,
  output logic                          tcdm_wen_o,
  output logic [31:0]                   tcdm_addr_o,
  output logic [NW*32-1:0]              tcdm_wdata_o,
  output logic [NW*4-1:0]               tcdm_be_o,
  input  logic                          tcdm_gnt_i,
  input  logic                          tcdm_rvalid_i,
  input  logic [NW*32-1:0]              tcdm_rdata_i
);
  localparam int unsigned NS = NSRC + 1;
  logic [NS-1:0]            m_req, m_wen, m_gnt, m_rvalid;
  logic [NS-1:0][31:0]      m_addr;
  logic [NS-1:0][NW*32-1:0] m_wdata;
  logic [NS-1:0][NW*4-1:0]  m_be;
  logic [NW*32-1:0]         m_rdata;
  // between multiplexer and FIFO queue
  logic q_req, q_wen, q_gnt, q_rvalid;
  logic [31:0] q_addr;
  logic [NW*32-1:0] q_wdata, q_rdata;
  logic [NW*4-1:0] q_be;

  for (genvar s = 0; s < NSRC; s++) begin : g_src
    hwpe_source #(.NW(NW), .ND(ND), .DEPTH(SDEPTH)) i_src (
      .clk_i, .rst_ni, .clear_i, .start_i, .base_i(base_i[s]), .cnt_i(cnt_i[s]),
      .stride_i(stride_i[s]), .done_o(done_o[s]),
      .mem_req_o(m_req[s]), .mem_addr_o(m_addr[s]), .mem_gnt_i(m_gnt[s]),
      .mem_rvalid_i(m_rvalid[s]), .mem_rdata_i(m_rdata),
      .stream_valid_o(src_valid_o[s]), .stream_ready_i(src_ready_i[s]), .stream_data_o(src_data_o[s]));
    assign m_wen[s]   = 1'b0;
    assign m_wdata[s] = '0;
    assign m_be[s]    = '1;
  end

  hwpe_sink #(.NW(NW), .ND(ND)) i_sink (
    .clk_i, .rst_ni, .clear_i, .start_i, .base_i(base_i[NSRC]), .cnt_i(cnt_i[NSRC]),
    .stride_i(stride_i[NSRC]), .done_o(done_o[NSRC]),
    .mem_req_o(m_req[NSRC]), .mem_addr_o(m_addr[NSRC]), .mem_wdata_o(m_wdata[NSRC]),
    .mem_be_o(m_be[NSRC]), .mem_gnt_i(m_gnt[NSRC]), .mem_rvalid_i(m_rvalid[NSRC]),
    .stream_valid_i(snk_valid_i), .stream_ready_o(snk_ready_o),
    .stream_data_i(snk_data_i), .stream_strb_i(snk_strb_i));
  assign m_wen[NSRC] = 1'b1;

  hci_ooo_mux #(.NS(NS), .NW(NW), .MAX_OUT(8)) i_mux (
    .clk_i, .rst_ni, .clear_i,
    .in_req_i(m_req), .in_wen_i(m_wen), .in_addr_i(m_addr), .in_wdata_i(m_wdata), .in_be_i(m_be),
    .in_gnt_o(m_gnt), .in_rvalid_o(m_rvalid), .in_rdata_o(m_rdata),
    .out_req_o(q_req), .out_wen_o(q_wen), .out_addr_o(q_addr), .out_wdata_o(q_wdata),
    .out_be_o(q_be), .out_gnt_i(q_gnt), .out_rvalid_i(q_rvalid), .out_rdata_i(q_rdata));

  hci_fifo #(.NW(NW), .DEPTH(QDEPTH)) i_queue (
    .clk_i, .rst_ni, .clear_i,
    .in_req_i(q_req), .in_wen_i(q_wen), .in_addr_i(q_addr), .in_wdata_i(q_wdata), .in_be_i(q_be),
    .in_gnt_o(q_gnt), .in_rvalid_o(q_rvalid), .in_rdata_o(q_rdata),
    .out_req_o(tcdm_req_o), .out_wen_o(tcdm_wen_o), .out_addr_o(tcdm_addr_o),
    .out_wdata_o(tcdm_wdata_o), .out_be_o(tcdm_be_o), .out_gnt_i(tcdm_gnt_i),
    .out_rvalid_i(tcdm_rvalid_i), .out_rdata_i(tcdm_rdata_i));
endmodule
