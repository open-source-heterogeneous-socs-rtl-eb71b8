// Testbench of the interconnect arbiter between the narrow (crossbar) and the
// wide (HWPE) branch. Random bank wishes on both sides are applied every cycle;
// a reference model with its own stall counter predicts who owns each bank:
// the wide branch has priority, except that after MAX_STALL consecutive
// cycles in which it blocked a narrow request the narrow branch gets one cycle.
// Checks every bank's request/address/data source, wide_gnt_o, log_avail_o and
// starve_evt_o, and that the starvation guard actually fired.
`timescale 1ns/1ps
module tb_hci_arbiter;
  localparam int NB = 8, WORDS = 16, MAX_STALL = 3, AW = $clog2(WORDS);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NB-1:0] lwant, lavail, lreq, lwen, wuse, wwen, breq, bwen;
  logic [NB-1:0][AW-1:0] laddr, waddr, baddr;
  logic [NB-1:0][31:0] lwdata, wwdata, bwdata;
  logic [NB-1:0][3:0] lbe, wbe, bbe;
  logic wgnt, starve;
  int checks = 0, failures = 0, stall_ref = 0, nstarve = 0;

  hci_arbiter #(.NB(NB), .WORDS(WORDS), .MAX_STALL(MAX_STALL)) dut (
    .clk_i(clk), .rst_ni(rst_n), .log_want_i(lwant), .log_avail_o(lavail),
    .log_req_i(lreq), .log_wen_i(lwen), .log_addr_i(laddr), .log_wdata_i(lwdata), .log_be_i(lbe),
    .wide_use_i(wuse), .wide_gnt_o(wgnt), .wide_wen_i(wwen), .wide_addr_i(waddr),
    .wide_wdata_i(wwdata), .wide_be_i(wbe), .bank_req_o(breq), .bank_wen_o(bwen),
    .bank_addr_o(baddr), .bank_wdata_o(bwdata), .bank_be_o(bbe), .starve_evt_o(starve));

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("%0t %s", $time, what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic conflict, wwins;
    {lwant, lreq, lwen, wuse, wwen, laddr, waddr, lwdata, wwdata, lbe, wbe} = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      lwant = NB'($urandom); wuse = (n % 3 == 0) ? '0 : NB'($urandom);
      if (n % 50 < 20) begin lwant = 8'h01; wuse = 8'h03; end  // long conflict runs
      lwen = NB'($urandom); wwen = NB'($urandom);
      for (int b = 0; b < NB; b++) begin
        laddr[b] = AW'($urandom); waddr[b] = AW'($urandom);
        lwdata[b] = $urandom; wwdata[b] = $urandom; lbe[b] = 4'($urandom); wbe[b] = 4'($urandom);
      end
      #1;
      conflict = |(lwant & wuse);
      wwins = (|wuse) && !(conflict && stall_ref >= MAX_STALL);
      lreq = lwant & lavail;   // as the crossbar does
      #1;
      chk(wgnt == wwins, "wide_gnt");
      chk(starve == (conflict && !wwins), "starve event");
      chk(lavail == (wwins ? ~wuse : '1), "log_avail");
      for (int b = 0; b < NB; b++)
        if (wwins && wuse[b])
          chk(breq[b] && bwen[b] == wwen[b] && baddr[b] == waddr[b] && bwdata[b] == wwdata[b]
              && bbe[b] == wbe[b], "wide bank mux");
        else
          chk(breq[b] == lreq[b] && bwen[b] == lwen[b] && baddr[b] == laddr[b]
              && bwdata[b] == lwdata[b] && bbe[b] == lbe[b], "narrow bank mux");
      if (starve) nstarve++;
      @(posedge clk);
      stall_ref = (conflict && wwins) ? stall_ref + 1 : 0;
    end
    chk(nstarve > 0, "starvation guard never fired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
