// One bank of the L1 tightly-coupled data memory (TCDM).
//
// A single-port SRAM, 32 bits wide with byte enables, written as an array so
// that it synthesizes to a memory macro. A request is always accepted; the
// read data appear on rdata in the cycle after req (one-cycle latency, as a
// synchronous SRAM macro gives). Writes update only the enabled bytes.
// The paper gives the 32-bit bank port; the depth (1024 words, which makes
// 16 banks hold 64 KiB) and the one-cycle latency are this design's choice.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     wen_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  input  logic [3:0]               be_i,
  output logic [31:0]              rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (wen_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
