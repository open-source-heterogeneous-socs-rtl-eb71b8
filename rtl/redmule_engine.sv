// RedMulE datapath: an M x N array of FP16 computing elements (CEs) that
// computes C += A * B tile by tile, fed by the HWPE streamer.
//
// Dataflow (after the paper): CE(i,j) holds one element of A stationary.
// Elements of B are broadcast down the columns: all M CEs of column j use the
// same B element in a cycle. Partial sums of C travel systolically along each
// row: CE(i,j) passes its result to CE(i,j+1), and the last CE of the row
// feeds the first one again for the next group of N columns of A (the
// multiplexer at the row input chooses between that loop-back and the C buffer).
//
// Schedule. A tile is M rows x W output columns, W = N*LAT, so that the W
// partial sums of a row exactly fill the N pipelined CEs of that row
// (each has LAT = 4 stages) and the loop-back arrives just when it is needed.
// The inner dimension K is cut into K/N chunks. Column j works on chunk c,
// output column k at local time u = c*W + k + j*LAT (column j lags column j-1
// by one CE latency); there it computes
//     C[i][k] += A[i][c*N+j] * B[c*N+j][k]
// and latches its new A element (and its row of B) at k = 0. After K/N chunks
// the last column delivers the finished row elements, which are collected in
// the output buffer.
//
// Phases per tile: LOADC reads M beats of C (one row of W FP16 values each)
// into the C buffer; COMPUTE runs (K/N)*W + W cycles if never stalled;
// STOREC sends M beats of the result. Independently, two loaders fill a
// double-buffered A chunk buffer (M beats, N values used per beat) and B chunk
// buffer (N beats, W values used per beat) ahead of the array. If the next
// chunk is not complete when column 0 needs it, the whole array stalls
// (stall_o) for that cycle.
//
// Streams are ready/valid with NW*32-bit beats; element e of a beat is bits
// [16e +: 16]. Tiles are visited row-block-major: for each of mt row blocks,
// for each of nt column blocks. The paper gives the array, its dataflow and
// the CE latency/throughput; tile shape, buffers and phases are this design's
// choice. Only FP16 is supported.
module redmule_engine #(
  parameter int unsigned M   = 12,
  parameter int unsigned N   = 4,
  parameter int unsigned LAT = 4,
  parameter int unsigned NW  = 9
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               clear_i,
  // job
  input  logic               start_i,
  input  logic [15:0]        mt_i,   // row blocks (rows / M)
  input  logic [15:0]        nt_i,   // column blocks (columns / W)
  input  logic [15:0]        kc_i,   // chunks of the inner dimension (K / N)
  output logic               busy_o,
  output logic               done_o,
  output logic               stall_o,
  // A, B and C input streams
  input  logic               a_valid_i,
  output logic               a_ready_o,
  input  logic [NW*32-1:0]   a_data_i,
  input  logic               b_valid_i,
  output logic               b_ready_o,
  input  logic [NW*32-1:0]   b_data_i,
  input  logic               c_valid_i,
  output logic               c_ready_o,
  input  logic [NW*32-1:0]   c_data_i,
  // C output stream
  output logic               o_valid_o,
  input  logic               o_ready_i,
  output logic [NW*32-1:0]   o_data_o,
  output logic [NW*4-1:0]    o_strb_o
);
  localparam int unsigned W  = N * LAT;
  localparam int unsigned KW = $clog2(W);
  localparam int unsigned RW = $clog2(M + 1);

  typedef enum logic [1:0] {IDLE, LOADC, COMPUTE, STOREC} state_e;
  state_e state_q;

  logic [15:0] mt_q, nt_q, kc_q, tile_q, ntiles;
  logic [RW-1:0] row_q;

  // buffers
  logic [1:0][M-1:0][N-1:0][15:0] abuf_q;
  logic [1:0][N-1:0][W-1:0][15:0] bbuf_q;
  logic [M-1:0][W-1:0][15:0]      cbuf_q, obuf_q;
  logic [N-1:0][W-1:0][15:0]      breg_q;
  logic [1:0] a_full_q, b_full_q;
  logic       a_wp_q, b_wp_q, cur_q;
  logic [RW-1:0] a_row_q;
  logic [$clog2(N+1)-1:0] b_row_q;

  // compute counters
  logic [KW-1:0] k0_q;
  logic [15:0]   c0_q;
  logic          en, comp, chunk_ready;
  logic [N-1:0]  latch;
  logic [N-1:0][KW-1:0] kj;

  // array
  logic [M-1:0][N-1:0][15:0] ce_b, ce_c, ce_out;
  logic [M-1:0][N-1:0]       ce_load;

  assign ntiles = 16'(mt_q * nt_q);
  assign busy_o = (state_q != IDLE);
  assign comp   = (state_q == COMPUTE);

  // ---------------- A / B chunk loaders ----------------------------------
  assign a_ready_o = busy_o && !a_full_q[a_wp_q];
  assign b_ready_o = busy_o && !b_full_q[b_wp_q];

  // ---------------- compute control --------------------------------------
  assign chunk_ready = a_full_q[cur_q] && b_full_q[cur_q];
  assign en          = comp && !(k0_q == '0 && c0_q < kc_q && !chunk_ready);
  assign stall_o     = comp && !en;

  always_comb begin
    for (int j = 0; j < N; j++) begin
      automatic logic valid_c;
      if (32'(k0_q) >= j * LAT) begin
        kj[j]   = KW'(32'(k0_q) - j * LAT);
        valid_c = (c0_q < kc_q);
      end else begin
        kj[j]   = KW'(32'(k0_q) + W - j * LAT);
        valid_c = (c0_q >= 16'd1) && (c0_q <= kc_q);
      end
      latch[j] = en && valid_c && (kj[j] == '0);
    end
  end

  always_comb begin
    for (int i = 0; i < M; i++) begin
      for (int j = 0; j < N; j++) begin
        ce_load[i][j] = latch[j];
        ce_b[i][j]    = latch[j] ? bbuf_q[cur_q][j][0] : breg_q[j][kj[j]];
        if (j == 0) ce_c[i][j] = (c0_q == '0) ? cbuf_q[i][k0_q] : ce_out[i][N-1];
        else        ce_c[i][j] = ce_out[i][j-1];
      end
    end
  end

  for (genvar i = 0; i < M; i++) begin : g_row
    for (genvar j = 0; j < N; j++) begin : g_col
      redmule_ce #(.LAT(LAT)) i_ce (
        .clk_i, .rst_ni, .en_i(en), .load_a_i(ce_load[i][j]),
        .a_i(abuf_q[cur_q][i][j]), .b_i(ce_b[i][j]), .c_i(ce_c[i][j]), .c_o(ce_out[i][j]));
    end
  end

  // ---------------- streams ----------------------------------------------
  assign c_ready_o = (state_q == LOADC);
  assign o_valid_o = (state_q == STOREC);
  always_comb begin
    o_data_o = '0;
    o_strb_o = '0;
    for (int k = 0; k < W; k++) begin
      o_data_o[16*k +: 16] = obuf_q[row_q][k];
      o_strb_o[2*k +: 2]   = 2'b11;
    end
  end

  // ---------------- sequencing -------------------------------------------
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE; mt_q <= '0; nt_q <= '0; kc_q <= '0; tile_q <= '0; row_q <= '0;
      a_full_q <= '0; b_full_q <= '0; a_wp_q <= 1'b0; b_wp_q <= 1'b0; cur_q <= 1'b0;
      a_row_q <= '0; b_row_q <= '0; k0_q <= '0; c0_q <= '0; done_o <= 1'b0;
      abuf_q <= '0; bbuf_q <= '0; cbuf_q <= '0; obuf_q <= '0; breg_q <= '0;
    end else if (clear_i) begin
      state_q <= IDLE; a_full_q <= '0; b_full_q <= '0; a_wp_q <= 1'b0; b_wp_q <= 1'b0;
      cur_q <= 1'b0; a_row_q <= '0; b_row_q <= '0; done_o <= 1'b0;
    end else begin
      done_o <= 1'b0;
      // A loader
      if (a_valid_i && a_ready_o) begin
        for (int j = 0; j < N; j++) abuf_q[a_wp_q][a_row_q][j] <= a_data_i[16*j +: 16];
        if (a_row_q == RW'(M - 1)) begin
          a_row_q <= '0; a_full_q[a_wp_q] <= 1'b1; a_wp_q <= ~a_wp_q;
        end else a_row_q <= a_row_q + 1'b1;
      end
      // B loader
      if (b_valid_i && b_ready_o) begin
        for (int k = 0; k < W; k++) bbuf_q[b_wp_q][b_row_q][k] <= b_data_i[16*k +: 16];
        if (32'(b_row_q) == N - 1) begin
          b_row_q <= '0; b_full_q[b_wp_q] <= 1'b1; b_wp_q <= ~b_wp_q;
        end else b_row_q <= b_row_q + 1'b1;
      end
      // per-column B registers and chunk release
      for (int j = 0; j < N; j++)
        if (latch[j]) breg_q[j] <= bbuf_q[cur_q][j];
      if (latch[N-1]) begin
        a_full_q[cur_q] <= 1'b0; b_full_q[cur_q] <= 1'b0; cur_q <= ~cur_q;
      end

      unique case (state_q)
        IDLE: if (start_i) begin
          mt_q <= mt_i; nt_q <= nt_i; kc_q <= kc_i; tile_q <= '0; row_q <= '0;
          state_q <= LOADC;
        end
        LOADC: if (c_valid_i) begin
          for (int k = 0; k < W; k++) cbuf_q[row_q][k] <= c_data_i[16*k +: 16];
          if (row_q == RW'(M - 1)) begin
            row_q <= '0; k0_q <= '0; c0_q <= '0; state_q <= COMPUTE;
          end else row_q <= row_q + 1'b1;
        end
        COMPUTE: if (en) begin
          if (c0_q == kc_q)
            for (int i = 0; i < M; i++) obuf_q[i][k0_q] <= ce_out[i][N-1];
          if (32'(k0_q) == W - 1) begin
            k0_q <= '0;
            if (c0_q == kc_q) state_q <= STOREC;
            else              c0_q <= c0_q + 16'd1;
          end else k0_q <= k0_q + 1'b1;
        end
        STOREC: if (o_ready_i) begin
          if (row_q == RW'(M - 1)) begin
            row_q <= '0;
            if (tile_q + 16'd1 == ntiles) begin
              state_q <= IDLE; done_o <= 1'b1;
            end else begin
              tile_q <= tile_q + 16'd1; state_q <= LOADC;
            end
          end else row_q <= row_q + 1'b1;
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  initial assert (W <= 2 * NW) else $error("a beat must hold W FP16 values");
endmodule
