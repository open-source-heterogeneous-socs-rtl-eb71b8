// Testbench of the logarithmic crossbar (narrow branch of the interconnect).
// Four initiators issue random reads and writes to four word-interleaved banks
// modelled here as arrays; the wide branch steals random banks through
// bank_avail_i. A shadow memory updated at grant time predicts every read.
// Checks: read data, one-cycle response timing, no grant on a stolen bank,
// and round-robin fairness (no initiator waits more than NM grants of its bank).
`timescale 1ns/1ps
module tb_hci_log_xbar;
  import pulp_cluster_pkg::*;
  localparam int NM = 4, NB = 4, WORDS = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  tcdm_req_t [NM-1:0] req;
  tcdm_rsp_t [NM-1:0] rsp;
  logic [NB-1:0] avail, want, breq, bwen;
  logic [NB-1:0][$clog2(WORDS)-1:0] baddr;
  logic [NB-1:0][31:0] bwdata, brdata;
  logic [NB-1:0][3:0] bbe;
  int checks = 0, failures = 0;
  logic [31:0] mem [NB][WORDS];
  logic [31:0] shadow [NB*WORDS];
  logic [31:0] expd [NM];
  logic        pend [NM];
  logic        isrd [NM];
  int          wait_c [NM];

  hci_log_xbar #(.NM(NM), .NB(NB), .WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp),
    .bank_avail_i(avail), .bank_want_o(want), .bank_req_o(breq), .bank_wen_o(bwen),
    .bank_addr_o(baddr), .bank_wdata_o(bwdata), .bank_be_o(bbe), .bank_rdata_i(brdata));

  always_ff @(posedge clk)
    for (int b = 0; b < NB; b++)
      if (breq[b]) begin
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
    brdata = '0; req = '0; avail = '1;
    for (int m = 0; m < NM; m++) begin pend[m] = 0; wait_c[m] = 0; end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      avail = (n % 5 == 0) ? NB'($urandom) : '1;
      for (int m = 0; m < NM; m++)
        if (!req[m].req && $urandom_range(0, 2) != 0) begin
          req[m].req = 1; req[m].wen = $urandom_range(0, 1);
          req[m].addr = {$urandom_range(0, NB*WORDS-1), 2'b00};
          req[m].wdata = $urandom; req[m].be = 4'hf;
        end
      #1;
      for (int b = 0; b < NB; b++) begin
        checks++;
        if (breq[b] && !avail[b]) begin failures++; $display("bank %0d used while taken", b); end
      end
      for (int m = 0; m < NM; m++)
        if (rsp[m].gnt) begin
          automatic int wi = req[m].addr[31:2];
          if (req[m].wen) shadow[wi] = req[m].wdata;
          expd[m] = shadow[wi];
          isrd[m] = !req[m].wen;
        end
      @(posedge clk); #1;
      for (int m = 0; m < NM; m++) begin
        if (pend[m]) begin
          checks++;
          if (!rsp[m].rvalid || (isrd[m] && rsp[m].rdata !== expd[m])) begin
            failures++; $display("m%0d rdata %h exp %h rv %b", m, rsp[m].rdata, expd[m], rsp[m].rvalid);
          end
        end else if (rsp[m].rvalid) begin failures++; $display("m%0d spurious rvalid", m); end
        pend[m] = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // grant bookkeeping at the clock edge
  always @(posedge clk) if (rst_n)
    for (int m = 0; m < NM; m++) begin
      if (req[m].req && rsp[m].gnt) begin
        pend[m] <= 1; req[m].req <= 0; wait_c[m] <= 0;
      end else if (req[m].req && avail[req[m].addr[2 +: $clog2(NB)]]) begin
        wait_c[m] <= wait_c[m] + 1;
        checks++;
        if (wait_c[m] >= NM) begin failures++; $display("m%0d starved", m); end
      end
    end
endmodule
