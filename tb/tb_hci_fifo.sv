// Testbench of the HCI request queue. The streamer side pushes numbered wide
// requests whenever it is granted; the router side is granted at random.
// Checks that requests leave in order with unchanged contents, that the
// upstream grant drops only when the queue holds DEPTH requests, that the
// queue absorbs requests while the router is blocked, and that responses are
// passed through unchanged.
`timescale 1ns/1ps
module tb_hci_fifo;
  localparam int NW = 2, DEPTH = 2;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ireq, iwen, ignt, irv, oreq, owen, ognt, orv;
  logic [31:0] iaddr, oaddr;
  logic [NW*32-1:0] iwdata, owdata, irdata, ordata;
  logic [NW*4-1:0] ibe, obe;
  int checks = 0, failures = 0, occ = 0, seq = 0, absorbed = 0;
  logic [31:0] q [$];

  hci_fifo #(.NW(NW), .DEPTH(DEPTH)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(1'b0),
    .in_req_i(ireq), .in_wen_i(iwen), .in_addr_i(iaddr), .in_wdata_i(iwdata), .in_be_i(ibe),
    .in_gnt_o(ignt), .in_rvalid_o(irv), .in_rdata_o(irdata), .out_req_o(oreq), .out_wen_o(owen),
    .out_addr_o(oaddr), .out_wdata_o(owdata), .out_be_o(obe), .out_gnt_i(ognt),
    .out_rvalid_i(orv), .out_rdata_i(ordata));

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    ireq = 0; iwen = 0; iaddr = 0; iwdata = '0; ibe = '0; ognt = 0; orv = 0; ordata = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      ireq = $urandom_range(0, 2) != 0; iaddr = seq * 4; iwen = seq[0];
      iwdata = {NW{seq}}; ibe = (NW*4)'(seq);
      ognt = (n % 40 < 10) ? 0 : $urandom_range(0, 1);
      orv = $urandom_range(0, 1); ordata = {$urandom, $urandom};
      #1;
      checks += 3;
      if (ignt !== (q.size() < DEPTH || ognt)) begin failures++; $display("in_gnt %b with %0d queued", ignt, q.size()); end
      if (oreq !== (q.size() > 0)) begin failures++; $display("out_req"); end
      if (irv !== orv || irdata !== ordata) begin failures++; $display("response not passed"); end
      if (oreq && ognt) begin
        automatic logic [31:0] e = q.pop_front();
        checks++;
        if (oaddr !== e*4 || owdata !== {NW{e}} || owen !== e[0] || obe !== (NW*4)'(e)) begin
          failures++; $display("out %h exp %h", oaddr, e*4);
        end
      end
      if (ireq && ignt) begin
        if (!ognt) absorbed++;
        q.push_back(seq); seq++;
      end
    end
    checks++;
    if (absorbed == 0) begin failures++; $display("queue never absorbed a request"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
