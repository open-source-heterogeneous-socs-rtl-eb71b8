// Testbench of the streamer-side multiplexer. NS streams issue random wide
// reads and writes; a memory model behind the single output port grants at
// random and answers one cycle after the grant with data that encode the
// address. Each stream must get exactly its own responses, in its own order.
// Also checks that a stream requesting continuously is served within NS grants
// (round robin) and that the number of requests in flight never exceeds MAX_OUT.
`timescale 1ns/1ps
module tb_hci_ooo_mux;
  localparam int NS = 3, NW = 2, MAX_OUT = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NS-1:0] ireq, iwen, ignt, irv;
  logic [NS-1:0][31:0] iaddr;
  logic [NS-1:0][NW*32-1:0] iwdata;
  logic [NS-1:0][NW*4-1:0] ibe;
  logic [NW*32-1:0] irdata, ordata;
  logic oreq, owen, ognt, orv;
  logic [NS-1:0] gmask;
  logic [31:0] oaddr;
  logic [NW*32-1:0] owdata;
  logic [NW*4-1:0] obe;
  int checks = 0, failures = 0, waitc [NS];
  logic [NW*32-1:0] expq [NS][$];
  logic [NW*32-1:0] pipe [$];

  function automatic logic [NW*32-1:0] line(logic [31:0] a);
    for (int w = 0; w < NW; w++) line[32*w +: 32] = a ^ (32'h5a5a0000 + w);
  endfunction

  hci_ooo_mux #(.NS(NS), .NW(NW), .MAX_OUT(MAX_OUT)) dut (.clk_i(clk), .rst_ni(rst_n),
    .clear_i(1'b0), .in_req_i(ireq), .in_wen_i(iwen), .in_addr_i(iaddr), .in_wdata_i(iwdata),
    .in_be_i(ibe), .in_gnt_o(ignt), .in_rvalid_o(irv), .in_rdata_o(irdata),
    .out_req_o(oreq), .out_wen_o(owen), .out_addr_o(oaddr), .out_wdata_o(owdata), .out_be_o(obe),
    .out_gnt_i(ognt), .out_rvalid_i(orv), .out_rdata_i(ordata));

  // memory with a random response delay of 1..3 cycles, in order
  int delay_q [$];
  always @(posedge clk or negedge rst_n)
    if (!rst_n) begin orv <= 0; ordata <= '0; end
    else begin
      orv <= 0;
      if (delay_q.size() > 0) begin
        if (delay_q[0] <= 1) begin
          void'(delay_q.pop_front()); orv <= 1; ordata <= pipe.pop_front();
        end else delay_q[0]--;
      end
      if (oreq && ognt) begin pipe.push_back(line(oaddr)); delay_q.push_back($urandom_range(1, 3)); end
    end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ireq = '0; iwen = '0; iaddr = '0; iwdata = '0; ibe = '1; ognt = 0;
    for (int s = 0; s < NS; s++) waitc[s] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      for (int s = 0; s < NS; s++)
        if (!ireq[s] && $urandom_range(0, 1)) begin
          ireq[s] = 1; iwen[s] = $urandom_range(0, 1); iaddr[s] = {$urandom_range(0, 1023), 2'b00};
        end
      ognt = $urandom_range(0, 3) != 0;
      #1;
      for (int s = 0; s < NS; s++) begin
        if (irv[s]) begin
          automatic logic [NW*32-1:0] e = expq[s].pop_front();
          checks++;
          if (irdata !== e) begin failures++; $display("stream %0d rdata %h exp %h", s, irdata, e); end
        end
        if (ignt[s]) begin expq[s].push_back(line(iaddr[s])); waitc[s] = 0; end
        else if (ireq[s] && ognt && oreq) begin
          waitc[s]++; checks++;
          if (waitc[s] > NS) begin failures++; $display("%0t stream %0d starved req=%b gnt=%b", $time, s, ireq, ignt); end
        end
      end
      checks++;
      if (pipe.size() > MAX_OUT) begin failures++; $display("too many in flight"); end
      gmask = ignt;
      @(posedge clk);
      #1;
      ireq = ireq & ~gmask;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
