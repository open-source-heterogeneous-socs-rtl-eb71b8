// Testbench of the peripheral interconnect with four cores and three targets.
// Each target is modelled as a device that answers one cycle after a request
// with a word encoding target, core id and address. Cores issue random
// requests, including to the unmapped region. Checks: every request reaches
// the target its address selects with the right core id and offset, each core
// gets exactly its own answer, unmapped accesses read 0, and round-robin
// fairness per target.
`timescale 1ns/1ps
module tb_periph_xbar;
  import pulp_cluster_pkg::*;
  localparam int NC = 4, NT = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  periph_req_t [NC-1:0] creq;
  periph_rsp_t [NC-1:0] crsp;
  periph_req_t [NT-1:0] treq;
  periph_rsp_t [NT-1:0] trsp;
  logic [NT-1:0][$clog2(NC)-1:0] tid;
  int checks = 0, failures = 0, waitc [NC];
  logic [31:0] expd [NC];
  logic [NC-1:0] gmask;

  periph_xbar #(.NC(NC), .NT(NT)) dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(creq),
    .core_rsp_o(crsp), .tgt_req_o(treq), .tgt_id_o(tid), .tgt_rsp_i(trsp));

  always_ff @(posedge clk or negedge rst_n)
    for (int t = 0; t < NT; t++)
      if (!rst_n) trsp[t] <= '0;
      else begin
        trsp[t].gnt    <= 1'b0;
        trsp[t].rvalid <= treq[t].req;
        trsp[t].rdata  <= {8'(t), 8'(tid[t]), 4'd0, treq[t].addr};
      end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    creq = '0;
    for (int c = 0; c < NC; c++) waitc[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int c = 0; c < NC; c++)
        if (!creq[c].req && $urandom_range(0, 1)) begin
          creq[c].req = 1; creq[c].wen = $urandom_range(0, 1); creq[c].wdata = $urandom;
          creq[c].addr = {2'($urandom_range(0, 3)), 8'($urandom), 2'b00};
        end
      #1;
      for (int t = 0; t < NT; t++)
        if (treq[t].req) begin
          checks++;
          if (creq[tid[t]].addr[11:10] != t || !crsp[tid[t]].gnt
              || treq[t].addr[9:0] != creq[tid[t]].addr[9:0] || treq[t].wdata != creq[tid[t]].wdata) begin
            failures++; $display("target %0d got a wrong request", t);
          end
        end
      for (int c = 0; c < NC; c++)
        if (crsp[c].gnt) begin
          automatic int t = creq[c].addr[11:10];
          expd[c] = (t < NT) ? {8'(t), 8'(c), 4'd0, 2'b00, creq[c].addr[9:0]} : 0;
          waitc[c] = 0;
        end else if (creq[c].req) begin
          waitc[c]++; checks++;
          if (waitc[c] > NC) begin failures++; $display("core %0d starved", c); end
        end
      gmask = '0;
      for (int c = 0; c < NC; c++) gmask[c] = crsp[c].gnt;
      @(posedge clk); #1;
      for (int c = 0; c < NC; c++) begin
        checks++;
        if (crsp[c].rvalid !== gmask[c] || (gmask[c] && crsp[c].rdata !== expd[c])) begin
          failures++; $display("core %0d rvalid %b rdata %h exp %h", c, crsp[c].rvalid, crsp[c].rdata, expd[c]);
        end
        if (gmask[c]) creq[c].req = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
