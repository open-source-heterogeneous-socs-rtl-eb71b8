// Xpulpnn multi-precision dot-product unit (the execute-stage unit of a core
// with the Xpulpnn extension).
//
// It computes  r = acc + sum_k a_k * b_k  over the SIMD lanes of two 32-bit
// operands, in one of four precisions: 16 lanes of 2 bits, 8 of 4 bits, 4 of
// 8 bits or 2 of 16 bits. A "slicer and router" stage cuts both operands into
// lanes and sign- or zero-extends each lane (sign_a_i, sign_b_i choose signed
// or unsigned operands, as in the unsigned and signed dot-product
// instructions); one multiplier bank per precision forms the products, and an
// adder tree sums them with the accumulator. The result is combinational
// (single-cycle execute stage); the 32-bit sum wraps around.
// The four lane formats and the slicer / multipliers / adder tree structure
// are the paper's (figure of the Xpulpnn datapath); operand signedness
// controls and the wrap-around are this design's reading.
module xpulpnn_dotp
  import pulp_cluster_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] acc_i,
  input  dotp_prec_e  prec_i,
  input  logic        sign_a_i,
  input  logic        sign_b_i,
  output logic [31:0] result_o
);
  // lanes extended to 17 bits so that signed and unsigned share one multiplier
  function automatic logic signed [16:0] lane(logic [31:0] v, int unsigned w, int unsigned k, logic s);
    logic [15:0] raw = 16'(v >> (w * k)) & 16'((32'd1 << w) - 1);
    logic        msb = raw[w-1];
    logic [16:0] ext = {1'b0, raw};
    if (s && msb) ext = ext | ~17'((32'd1 << w) - 1);
    return signed'(ext);
  endfunction

  logic signed [31:0] sum2, sum4, sum8, sum16;

  always_comb begin
    sum2 = '0; sum4 = '0; sum8 = '0; sum16 = '0;
    for (int unsigned k = 0; k < 16; k++)
      sum2 += 32'(lane(op_a_i, 2, k, sign_a_i) * lane(op_b_i, 2, k, sign_b_i));
    for (int unsigned k = 0; k < 8; k++)
      sum4 += 32'(lane(op_a_i, 4, k, sign_a_i) * lane(op_b_i, 4, k, sign_b_i));
    for (int unsigned k = 0; k < 4; k++)
      sum8 += 32'(lane(op_a_i, 8, k, sign_a_i) * lane(op_b_i, 8, k, sign_b_i));
    for (int unsigned k = 0; k < 2; k++)
      sum16 += 32'(lane(op_a_i, 16, k, sign_a_i) * lane(op_b_i, 16, k, sign_b_i));
    unique case (prec_i)
      DOTP_2B:  result_o = acc_i + 32'(sum2);
      DOTP_4B:  result_o = acc_i + 32'(sum4);
      DOTP_8B:  result_o = acc_i + 32'(sum8);
      default:  result_o = acc_i + 32'(sum16);
    endcase
  end
endmodule
