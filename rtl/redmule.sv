// RedMulE hardware processing engine: controller + streamer + M x N FP16
// array, computing the generalized matrix product C += A * B in the TCDM.
//
// Job registers (one set per controller context, offsets 0x40 + 4*index):
//   0 A_ADDR, 1 B_ADDR, 2 C_ADDR  TCDM byte addresses of row-major FP16
//                                  matrices (4-byte aligned)
//   3 M rows of A and C (multiple of the array's M)
//   4 K columns of A / rows of B (multiple of N, even)
//   5 N columns of B and C (multiple of W = N*LAT)
// From these the wrapper derives the four address patterns of the streamer,
// in the order the array consumes them (tile row block r, tile column block
// t, inner chunk c, row inside the chunk):
//   A: addr = A + 2*((r*M + i)*K + c*N)            one beat per (r,t,c,i)
//   B: addr = B + 2*((c*N + j)*Ncols + t*W)        one beat per (r,t,c,j)
//   C in and out: addr = C + 2*((r*M + i)*Ncols + t*W)   per (r,t,i)
// C is read and written at the same place (in-place accumulation). The job
// ends (done to the controller) when the array has produced the last row and
// the sink has had its last write acknowledged.
// The paper gives the controller/streamer/datapath split, the array and the
// 288-bit port; the job register set and tile ordering are this design's.
module redmule
  import pulp_cluster_pkg::*;
#(
  parameter int unsigned M   = 12,
  parameter int unsigned N   = 4,
  parameter int unsigned LAT = 4,
  parameter int unsigned NW  = HWPE_NW
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  periph_req_t       cfg_req_i,
  output periph_rsp_t       cfg_rsp_o,
  output logic              evt_eoc_o,
  output logic              busy_o,
  output logic              stall_o,
  // wide TCDM port
  output logic              tcdm_req_o,
  output logic              tcdm_wen_o,
  output logic [31:0]       tcdm_addr_o,
  output logic [NW*32-1:0]  tcdm_wdata_o,
  output logic [NW*4-1:0]   tcdm_be_o,
  input  logic              tcdm_gnt_i,
  input  logic              tcdm_rvalid_i,
  input  logic [NW*32-1:0]  tcdm_rdata_i
);
  localparam int unsigned W = N * LAT;

  logic [HWPE_JOB_REGS-1:0][31:0] job;
  logic start, clear, done, eng_done, eng_busy, eng_seen_q, snk_seen_q;
  logic [3:0] sdone;
  logic [3:0][31:0]           base;
  logic [3:0][3:0][15:0]      cnt;
  logic [3:0][3:0][31:0]      stride;
  logic [2:0]                 sv, sr;
  logic [2:0][NW*32-1:0]      sd;
  logic                       ov, ordy;
  logic [NW*32-1:0]           od;
  logic [NW*4-1:0]            os;
  logic [15:0] mt, nt, kc;
  logic [31:0] K, NC;

  hwpe_ctrl #(.NREGS(HWPE_JOB_REGS)) i_ctrl (
    .clk_i, .rst_ni, .cfg_req_i, .cfg_rsp_o, .job_o(job), .start_o(start),
    .done_i(done), .clear_o(clear), .evt_eoc_o);

  assign K  = job[JOB_K];
  assign NC = job[JOB_N];
  assign mt = 16'(job[JOB_M] / M);
  assign nt = 16'(job[JOB_N] / W);
  assign kc = 16'(job[JOB_K] / N);

  always_comb begin
    // A: (i, c, t, r)
    base[0]   = job[JOB_A_ADDR];
    cnt[0]    = {mt, nt, kc, 16'(M)};
    stride[0] = {32'(2 * M) * K, 32'd0, 32'(2 * N), 32'd2 * K};
    // B: (j, c, t, r)
    base[1]   = job[JOB_B_ADDR];
    cnt[1]    = {mt, nt, kc, 16'(N)};
    stride[1] = {32'd0, 32'(2 * W), 32'(2 * N) * NC, 32'd2 * NC};
    // C in: (i, t, r)
    base[2]   = job[JOB_C_ADDR];
    cnt[2]    = {16'd1, mt, nt, 16'(M)};
    stride[2] = {32'd0, 32'(2 * M) * NC, 32'(2 * W), 32'd2 * NC};
    // C out: same pattern
    base[3]   = job[JOB_C_ADDR];
    cnt[3]    = cnt[2];
    stride[3] = stride[2];
  end

  hwpe_streamer #(.NW(NW), .NSRC(3), .ND(4)) i_streamer (
    .clk_i, .rst_ni, .clear_i(clear), .start_i(start), .base_i(base), .cnt_i(cnt),
    .stride_i(stride), .done_o(sdone),
    .src_valid_o(sv), .src_ready_i(sr), .src_data_o(sd),
    .snk_valid_i(ov), .snk_ready_o(ordy), .snk_data_i(od), .snk_strb_i(os),
    .tcdm_req_o, .tcdm_wen_o, .tcdm_addr_o, .tcdm_wdata_o, .tcdm_be_o,
    .tcdm_gnt_i, .tcdm_rvalid_i, .tcdm_rdata_i);

  redmule_engine #(.M(M), .N(N), .LAT(LAT), .NW(NW)) i_engine (
    .clk_i, .rst_ni, .clear_i(clear), .start_i(start), .mt_i(mt), .nt_i(nt), .kc_i(kc),
    .busy_o(eng_busy), .done_o(eng_done), .stall_o,
    .a_valid_i(sv[0]), .a_ready_o(sr[0]), .a_data_i(sd[0]),
    .b_valid_i(sv[1]), .b_ready_o(sr[1]), .b_data_i(sd[1]),
    .c_valid_i(sv[2]), .c_ready_o(sr[2]), .c_data_i(sd[2]),
    .o_valid_o(ov), .o_ready_i(ordy), .o_data_o(od), .o_strb_o(os));

  // job completion: engine finished and last write acknowledged (any order)
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      eng_seen_q <= 1'b0; snk_seen_q <= 1'b0;
    end else if (clear || start || done) begin
      eng_seen_q <= 1'b0; snk_seen_q <= 1'b0;
    end else begin
      if (eng_done) eng_seen_q <= 1'b1;
      if (sdone[3]) snk_seen_q <= 1'b1;
    end
  end
  assign done   = (eng_seen_q || eng_done) && (snk_seen_q || sdone[3]);
  assign busy_o = eng_busy || tcdm_req_o;
endmodule
