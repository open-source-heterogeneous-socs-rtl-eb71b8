// Streamer source: turns a pattern of wide memory reads into a ready/valid
// data stream towards the HWPE datapath.
//
// An address generator (hwpe_addr_gen) produces the read addresses. The source
// issues a read for each one on its wide memory port (req/gnt, data back with
// rvalid some cycles later, in order) as long as the data FIFO has room for
// every read in flight, so no response is ever dropped however long the
// memory takes; this makes the stream latency-tolerant. The FIFO output is the
// stream (stream_valid_o/stream_ready_i). done_o pulses when the last word of
// the pattern has left through the stream.
// The paper gives the source's role (memory to stream, latency tolerant);
// the credit scheme and FIFO depth are this design's choice.
module hwpe_source #(
  parameter int unsigned NW    = 9,
  parameter int unsigned ND    = 4,
  parameter int unsigned DEPTH = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  // configuration
  input  logic                start_i,
  input  logic [31:0]         base_i,
  input  logic [ND-1:0][15:0] cnt_i,
  input  logic [ND-1:0][31:0] stride_i,
  output logic                done_o,
  // memory side
  output logic                mem_req_o,
  output logic [31:0]         mem_addr_o,
  input  logic                mem_gnt_i,
  input  logic                mem_rvalid_i,
  input  logic [NW*32-1:0]    mem_rdata_i,
  // stream side
  output logic                stream_valid_o,
  input  logic                stream_ready_i,
  output logic [NW*32-1:0]    stream_data_o
);
  localparam int unsigned CW = $clog2(DEPTH+1);
  logic ag_valid, ag_last, issue, empty, fifo_full;
  logic [$clog2(DEPTH+1)-1:0] fcount;
  logic [$clog2(DEPTH+1)-1:0] inflight_q;
  logic last_issued_q, pop;

  hwpe_addr_gen #(.ND(ND)) i_ag (
    .clk_i, .rst_ni, .clear_i, .start_i, .base_i, .cnt_i, .stride_i,
    .valid_o(ag_valid), .ready_i(issue), .addr_o(mem_addr_o), .last_o(ag_last));

  // credit check: FIFO entries + reads in flight must stay within DEPTH
  assign mem_req_o = ag_valid && (32'(fcount) + 32'(inflight_q) < DEPTH);
  assign issue     = mem_req_o && mem_gnt_i;
  assign pop       = stream_valid_o && stream_ready_i;

  sync_fifo #(.DW(NW*32), .DEPTH(DEPTH)) i_fifo (
    .clk_i, .rst_ni, .clear_i, .push_i(mem_rvalid_i), .data_i(mem_rdata_i),
    .pop_i(pop), .data_o(stream_data_o), .full_o(fifo_full), .empty_o(empty), .count_o(fcount));

  assign stream_valid_o = !empty;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      inflight_q <= '0; last_issued_q <= 1'b0;
    end else if (clear_i || start_i) begin
      inflight_q <= '0; last_issued_q <= 1'b0;
    end else begin
      inflight_q <= inflight_q + CW'(issue) - CW'(mem_rvalid_i);
      if (issue && ag_last) last_issued_q <= 1'b1;
    end
  end

  assign done_o = pop && last_issued_q && inflight_q == '0 && fcount == 1;

  always_ff @(posedge clk_i)
    if (rst_ni) assert (!(mem_rvalid_i && fifo_full)) else $error("source FIFO overflow");
endmodule
