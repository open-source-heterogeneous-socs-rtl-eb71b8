// Testbench of the wide-port router. The HWPE side issues random NW-word
// reads and writes at word-aligned addresses; the banks are modelled here.
// The router must spread the NW words over NW consecutive banks (wrapping
// around the bank count and moving to the next row), grant only when the
// arbiter grants, and return the NW words of a read one cycle after the grant
// in order. A shadow memory checks every read.
`timescale 1ns/1ps
module tb_hci_router;
  localparam int NB = 8, NW = 3, WORDS = 8, AW = $clog2(WORDS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req, wen, gnt, rvalid, agnt;
  logic [31:0] addr;
  logic [NW*32-1:0] wdata, rdata, expd;
  logic [NW*4-1:0] be;
  logic [NB-1:0] use_b, bwen;
  logic [NB-1:0][AW-1:0] baddr;
  logic [NB-1:0][31:0] bwdata, brdata;
  logic [NB-1:0][3:0] bbe;
  logic [31:0] mem [NB][WORDS];
  logic [31:0] shadow [NB*WORDS];
  int checks = 0, failures = 0;
  logic was_read;

  hci_router #(.NB(NB), .NW(NW), .WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .wen_i(wen), .addr_i(addr), .wdata_i(wdata),
    .be_i(be), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata), .gnt_i(agnt),
    .bank_use_o(use_b), .bank_wen_o(bwen), .bank_addr_o(baddr), .bank_wdata_o(bwdata),
    .bank_be_o(bbe), .bank_rdata_i(brdata));

  // banks: used only when the arbiter grants the wide branch
  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (use_b[b] && agnt) begin
        if (bwen[b]) mem[b][baddr[b]] <= bwdata[b];
        brdata[b] <= mem[b][baddr[b]];
      end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int b = 0; b < NB; b++) for (int w = 0; w < WORDS; w++) begin
      mem[b][w] = 0; shadow[w*NB+b] = 0; end
    brdata = '0; req = 0; wen = 0; addr = 0; wdata = '0; be = '1; agnt = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      req = $urandom_range(0, 3) != 0; wen = $urandom_range(0, 1);
      addr = {$urandom_range(0, NB*WORDS-NW), 2'b00};
      for (int w = 0; w < NW; w++) wdata[32*w +: 32] = $urandom;
      agnt = $urandom_range(0, 3) != 0;
      #1;
      checks++;
      if (gnt !== (req && agnt)) begin failures++; $display("gnt"); end
      if (req) begin
        automatic logic [NB-1:0] exp_use = '0;
        for (int w = 0; w < NW; w++) begin
          automatic int wi = addr[31:2] + w;
          exp_use[wi % NB] = 1;
          checks++;
          if (baddr[wi % NB] != AW'(wi / NB) || bwdata[wi % NB] != wdata[32*w +: 32]) begin
            failures++; $display("word %0d routed wrong", w);
          end
        end
        checks++;
        if (use_b != exp_use) begin failures++; $display("bank_use %b exp %b", use_b, exp_use); end
      end
      was_read = 0;
      if (gnt) begin
        was_read = !wen;
        for (int w = 0; w < NW; w++) begin
          if (wen) shadow[addr[31:2] + w] = wdata[32*w +: 32];
          expd[32*w +: 32] = shadow[addr[31:2] + w];
        end
      end
      @(posedge clk); #1;
      checks++;
      if (rvalid !== gnt || (was_read && rdata !== expd)) begin
        failures++; $display("read %h exp %h", rdata, expd);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
