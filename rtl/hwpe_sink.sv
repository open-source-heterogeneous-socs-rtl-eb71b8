// Streamer sink: writes a ready/valid data stream coming from the HWPE
// datapath into memory along an address pattern.
//
// An address generator produces the addresses; every stream beat is written
// with one wide write (req/gnt) at the next address, using the beat's byte
// strobe. The stream is accepted (stream_ready_o) in the cycle the write is
// granted. done_o pulses when the write of the last beat has been
// acknowledged (rvalid), so the data are in memory when the controller sees it.
// The paper gives the sink's role; the rest is this design's choice.
module hwpe_sink #(
  parameter int unsigned NW = 9,
  parameter int unsigned ND = 4
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                clear_i,
  input  logic                start_i,
  input  logic [31:0]         base_i,
  input  logic [ND-1:0][15:0] cnt_i,
  input  logic [ND-1:0][31:0] stride_i,
  output logic                done_o,
  // memory side
  output logic                mem_req_o,
  output logic [31:0]         mem_addr_o,
  output logic [NW*32-1:0]    mem_wdata_o,
  output logic [NW*4-1:0]     mem_be_o,
  input  logic                mem_gnt_i,
  input  logic                mem_rvalid_i,
  // stream side
  input  logic                stream_valid_i,
  output logic                stream_ready_o,
  input  logic [NW*32-1:0]    stream_data_i,
  input  logic [NW*4-1:0]     stream_strb_i
);
  logic ag_valid, ag_last, issue;
  logic [7:0] inflight_q;
  logic last_issued_q;

  hwpe_addr_gen #(.ND(ND)) i_ag (
    .clk_i, .rst_ni, .clear_i, .start_i, .base_i, .cnt_i, .stride_i,
    .valid_o(ag_valid), .ready_i(issue), .addr_o(mem_addr_o), .last_o(ag_last));

  assign mem_req_o      = ag_valid && stream_valid_i;
  assign mem_wdata_o    = stream_data_i;
  assign mem_be_o       = stream_strb_i;
  assign issue          = mem_req_o && mem_gnt_i;
  assign stream_ready_o = issue;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      inflight_q <= '0; last_issued_q <= 1'b0;
    end else if (clear_i || start_i) begin
      inflight_q <= '0; last_issued_q <= 1'b0;
    end else begin
      inflight_q <= inflight_q + (issue ? 8'd1 : 8'd0) - (mem_rvalid_i ? 8'd1 : 8'd0);
      if (issue && ag_last) last_issued_q <= 1'b1;
      else if (done_o)      last_issued_q <= 1'b0;
    end
  end

  assign done_o = last_issued_q && mem_rvalid_i && inflight_q == 8'd1;
endmodule
