// Self-checking test of the RedMulE array on its own: a 2x2 array (W = 8)
// computes C += A*B for a 4x6 by 6x16 product (2x2 tiles, 3 chunks).
// Streams are fed from testbench arrays in the order the streamer would use.
// Run 1 feeds every stream at full rate and checks the exact cycle count
// 2*M + (K/N + 1)*W per tile with no stall; run 2 throttles A and B so the
// array must stall, and checks the same results.
`include "fp16_ref.svh"
module tb_redmule_engine;
  localparam int M = 2, N = 2, LAT = 4, NW = 4, W = N * LAT;
  localparam int MT = 2, NT = 2, KC = 3;
  localparam int R = M * MT, K = N * KC, C = W * NT;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n, start, busy, done, stall;
  logic av, ar, bv, br, cv, cr, ov, ordy;
  logic [NW*32-1:0] ad, bd, cd, od; logic [NW*4-1:0] os;
  int checks = 0, failures = 0;
  real A [R][K]; real B [K][C]; real Cm [R][C];
  int ai, bi, ci, oi, cycles, stalls;
  bit throttle;

  redmule_engine #(.M(M), .N(N), .LAT(LAT), .NW(NW)) dut (
    .clk_i(clk), .rst_ni(rst_n), .clear_i(1'b0), .start_i(start),
    .mt_i(16'(MT)), .nt_i(16'(NT)), .kc_i(16'(KC)), .busy_o(busy), .done_o(done), .stall_o(stall),
    .a_valid_i(av), .a_ready_o(ar), .a_data_i(ad), .b_valid_i(bv), .b_ready_o(br), .b_data_i(bd),
    .c_valid_i(cv), .c_ready_o(cr), .c_data_i(cd), .o_valid_o(ov), .o_ready_i(ordy),
    .o_data_o(od), .o_strb_o(os));

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // beat contents in streamer order: A: (r, t, c, i); B: (r, t, c, j); C: (r, t, i)
  function automatic logic [NW*32-1:0] a_beat(int n);
    int i = n % M, c = (n / M) % KC, r = n / (M * KC * NT);
    a_beat = '0;
    for (int j = 0; j < N; j++) a_beat[16*j +: 16] = real_to_fp16(A[r*M+i][c*N+j]);
  endfunction
  function automatic logic [NW*32-1:0] b_beat(int n);
    int j = n % N, c = (n / N) % KC, t = (n / (N * KC)) % NT;
    b_beat = '0;
    for (int k = 0; k < W; k++) b_beat[16*k +: 16] = real_to_fp16(B[c*N+j][t*W+k]);
  endfunction
  function automatic logic [NW*32-1:0] c_beat(int n);
    int i = n % M, t = (n / M) % NT, r = n / (M * NT);
    c_beat = '0;
    for (int k = 0; k < W; k++) c_beat[16*k +: 16] = real_to_fp16(Cm[r*M+i][t*W+k]);
  endfunction

  always_comb begin
    av = (ai < M*KC*NT*MT) && (!throttle || ai % 3 == 0 || cycles % 4 == 0);
    bv = (bi < N*KC*NT*MT) && (!throttle || cycles % 5 == 0);
    cv = ci < M*NT*MT;
    ad = a_beat(ai); bd = b_beat(bi); cd = c_beat(ci);
    ordy = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      cycles <= cycles + 1;
      if (stall) stalls <= stalls + 1;
      if (av && ar) ai <= ai + 1;
      if (bv && br) bi <= bi + 1;
      if (cv && cr) ci <= ci + 1;
      if (ov && ordy) begin
        automatic int i = oi % M, t = (oi / M) % NT, r = oi / (M * NT);
        for (int k = 0; k < W; k++) begin
          automatic real ref_v = Cm[r*M+i][t*W+k];
          for (int kk = 0; kk < K; kk++) ref_v += A[r*M+i][kk] * B[kk][t*W+k];
          checks++;
          if (od[16*k +: 16] !== real_to_fp16(ref_v)) begin
            failures++;
            $display("C[%0d][%0d] = %h expected %h", r*M+i, t*W+k, od[16*k +: 16], real_to_fp16(ref_v));
          end
        end
        oi <= oi + 1;
      end
    end
  end

  task automatic run(bit thr);
    throttle = thr;
    for (int r = 0; r < R; r++) for (int k = 0; k < K; k++) A[r][k] = real'($urandom_range(0, 16)) / 4.0 - 2.0;
    for (int k = 0; k < K; k++) for (int c = 0; c < C; c++) B[k][c] = real'($urandom_range(0, 8)) - 4.0;
    for (int r = 0; r < R; r++) for (int c = 0; c < C; c++) Cm[r][c] = real'($urandom_range(0, 64)) / 8.0;
    rst_n = 0; start = 0; ai = 0; bi = 0; ci = 0; oi = 0; cycles = 0; stalls = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst_n = 1; start = 1;
    @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    checks++;
    if (oi != M * MT * NT) failures++;
    if (!thr) begin
      checks++;
      if (cycles != MT * NT * (2 * M + (KC + 1) * W) + 1 || stalls != 0) begin
        failures++; $display("cycles %0d stalls %0d expected %0d", cycles, stalls, MT*NT*(2*M+(KC+1)*W)+1);
      end
    end else begin
      checks++;
      if (stalls == 0) begin failures++; $display("throttled run never stalled"); end
    end
  endtask

  initial begin
    run(0);
    run(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
