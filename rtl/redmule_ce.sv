// RedMulE computing element (CE): one pipelined FP16 fused multiply-add.
//
// Each CE keeps one element of A stationary and computes c_out = a * b + c_in
// with a latency of LAT cycles and a throughput of one operation per cycle,
// as the paper describes (4 cycles, 1 op/cycle). The FMA is computed in the
// issue cycle (fp16_fma) and then travels through LAT pipeline registers, so
// c_o shows the result of the operation issued LAT enabled cycles earlier.
// load_a_i replaces the stationary A value; the operation issued in the same
// cycle already uses the new value. en_i = 0 freezes the whole CE (array stall).
// The paper gives the stationary A, broadcast B, systolic C and the
// latency/throughput; FP16 only (no BFloat16/FP8) is this design's limitation.
module redmule_ce #(
  parameter int unsigned LAT = 4
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        load_a_i,
  input  logic [15:0] a_i,
  input  logic [15:0] b_i,
  input  logic [15:0] c_i,
  output logic [15:0] c_o
);
  logic [15:0] a_q, a_eff, r;
  logic [LAT-1:0][15:0] pipe_q;

  assign a_eff = load_a_i ? a_i : a_q;

  fp16_fma i_fma (.a_i(a_eff), .b_i(b_i), .c_i(c_i), .r_o(r));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      a_q    <= '0;
      pipe_q <= '0;
    end else if (en_i) begin
      if (load_a_i) a_q <= a_i;
      pipe_q[0] <= r;
      for (int s = 1; s < LAT; s++) pipe_q[s] <= pipe_q[s-1];
    end
  end

  assign c_o = pipe_q[LAT-1];
endmodule
