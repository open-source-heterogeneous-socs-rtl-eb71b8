// HCI router: the wide branch of the Heterogeneous Cluster Interconnect.
//
// The HWPE issues one wide access of NW consecutive 32-bit words (288 bits
// for NW = 9) starting at a word-aligned byte address. Because the TCDM is
// word-interleaved, the NW words fall in NW neighbouring banks (wrapping from
// bank NB-1 to bank 0 and then to the next row). The router computes which
// banks and rows the access touches (bank_use_o), and, once the HCI arbiter
// grants the whole access (gnt_i), drives those banks. The access is all or
// nothing: either every word is served in the same cycle or none is.
// Timing: gnt_o = gnt_i (combinational), rvalid/rdata one cycle after the
// grant, rdata word w coming from bank (first bank + w) mod NB.
// The paper gives the router's role and its up-to-512-bit width; the
// all-or-nothing grant is this design's choice.
module hci_router #(
  parameter int unsigned NB    = 16,
  parameter int unsigned NW    = 9,
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  // wide initiator port
  input  logic                     req_i,
  input  logic                     wen_i,
  input  logic [31:0]              addr_i,
  input  logic [NW*32-1:0]         wdata_i,
  input  logic [NW*4-1:0]          be_i,
  output logic                     gnt_o,
  output logic                     rvalid_o,
  output logic [NW*32-1:0]         rdata_o,
  // towards the arbiter / banks
  input  logic                     gnt_i,
  output logic [NB-1:0]            bank_use_o,
  output logic [NB-1:0]            bank_wen_o,
  output logic [NB-1:0][$clog2(WORDS)-1:0] bank_addr_o,
  output logic [NB-1:0][31:0]      bank_wdata_o,
  output logic [NB-1:0][3:0]       bank_be_o,
  input  logic [NB-1:0][31:0]      bank_rdata_i
);
  localparam int unsigned BB = $clog2(NB);
  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0]   word;             // first word index
  logic [BB-1:0] first_q;
  logic          rvalid_q;

  assign word = {2'b00, addr_i[31:2]};

  always_comb begin
    bank_use_o   = '0;
    bank_wen_o   = '0;
    bank_addr_o  = '0;
    bank_wdata_o = '0;
    bank_be_o    = '0;
    for (int w = 0; w < NW; w++) begin
      automatic logic [31:0] wi = word + 32'(w);
      automatic logic [BB-1:0] b = wi[BB-1:0];
      bank_use_o[b]   = req_i;
      bank_wen_o[b]   = wen_i;
      bank_addr_o[b]  = wi[BB +: AW];
      bank_wdata_o[b] = wdata_i[32*w +: 32];
      bank_be_o[b]    = be_i[4*w +: 4];
    end
  end

  assign gnt_o = req_i && gnt_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rvalid_q <= 1'b0;
      first_q  <= '0;
    end else begin
      rvalid_q <= gnt_o;
      if (gnt_o) first_q <= word[BB-1:0];
    end
  end

  assign rvalid_o = rvalid_q;
  always_comb
    for (int w = 0; w < NW; w++)
      rdata_o[32*w +: 32] = bank_rdata_i[BB'(32'(first_q) + 32'(w))];

  // A wide access must not touch a bank twice.
  initial assert (NW <= NB) else $error("NW must not exceed NB");
endmodule
