// NN-RF: the small special-purpose register file of an Xpulpnn core.
//
// It is written by the load-store unit (the data of a load go straight in,
// without passing through the general-purpose register file) and read by the
// dot-product unit through two read ports, one per operand. Keeping weights
// and activations here lets a tight loop reuse them across several
// dot-products without spending general-purpose registers or extra loads.
// Reads are combinational; a write takes effect at the clock edge, and a read
// of the register being written in the same cycle returns the new value
// (bypass), so a dot-product can use a loaded value in the cycle it arrives.
// NREGS = 6 (four weight and two activation registers) is this design's
// choice: the paper's code example names w1..w4 and x1.
module nn_rf #(
  parameter int unsigned NREGS = 6
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     we_i,
  input  logic [$clog2(NREGS)-1:0] waddr_i,
  input  logic [31:0]              wdata_i,
  input  logic [$clog2(NREGS)-1:0] raddr_a_i,
  input  logic [$clog2(NREGS)-1:0] raddr_b_i,
  output logic [31:0]              rdata_a_o,
  output logic [31:0]              rdata_b_o
);
  logic [NREGS-1:0][31:0] rf_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   rf_q <= '0;
    else if (we_i) rf_q[waddr_i] <= wdata_i;
  end

  assign rdata_a_o = (we_i && waddr_i == raddr_a_i) ? wdata_i : rf_q[raddr_a_i];
  assign rdata_b_o = (we_i && waddr_i == raddr_b_i) ? wdata_i : rf_q[raddr_b_i];
endmodule
