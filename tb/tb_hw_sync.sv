// Testbench of the event unit / synchronizer with four cores. Directed
// sequences check: hardware events (DMA end of transfer, HWPE end of
// computation) set every core's event buffer; a core's event line follows
// buffer AND mask; writing the buffer clears bits; the barrier fires only
// when the last core of the barrier mask arrives, then re-arms; the mutex
// admits one owner until it is released; the software event reaches exactly
// the cores named in its mask.
`timescale 1ns/1ps
module tb_hw_sync;
  import pulp_cluster_pkg::*;
  localparam int NC = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  periph_req_t req;
  periph_rsp_t rsp;
  logic [$clog2(NC)-1:0] id;
  logic eot, eoc, bar;
  logic [NC-1:0] cevt;
  int checks = 0, failures = 0, nbar = 0;

  hw_sync #(.NC(NC)) dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .id_i(id),
    .cfg_rsp_o(rsp), .evt_dma_eot_i(eot), .evt_hwpe_eoc_i(eoc), .core_evt_o(cevt),
    .barrier_evt_o(bar));

  always @(posedge clk) if (rst_n && bar) nbar++;

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("%0t %s", $time, what); end
  endtask
  task automatic wr(input int core, input logic [3:0] r, input logic [31:0] d);
    @(negedge clk); id = core; req = '{req: 1, wen: 1, addr: {6'd0, r, 2'b00}, wdata: d};
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input int core, input logic [3:0] r, output logic [31:0] d);
    @(negedge clk); id = core; req = '{req: 1, wen: 0, addr: {6'd0, r, 2'b00}, wdata: 0};
    @(negedge clk); req = '0; d = rsp.rdata;
    chk(rsp.rvalid, "rvalid");
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0; id = 0; eot = 0; eoc = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); chk(cevt == 0, "no events after reset");
    wr(1, SYNC_REG_EVT_MASK, 32'b0010);            // core 1 listens to EOC only
    @(negedge clk); eot = 1; @(negedge clk); eot = 0;
    chk(cevt == 4'b1101, "EOT wakes the cores that listen to it");
    rd(2, SYNC_REG_EVT_BUFFER, d); chk(d == 32'b0001, "buffer holds EOT");
    @(negedge clk); eoc = 1; @(negedge clk); eoc = 0;
    chk(cevt == 4'b1111, "EOC wakes core 1 too");
    wr(1, SYNC_REG_EVT_BUFFER, 32'b0010);
    chk(cevt[1] == 0, "clearing the buffer bit lowers the line");
    rd(1, SYNC_REG_EVT_BUFFER, d); chk(d == 32'b0001, "other bit stays");
    for (int c = 0; c < NC; c++) wr(c, SYNC_REG_EVT_BUFFER, 32'hf);
    for (int c = 0; c < NC; c++) wr(c, SYNC_REG_EVT_MASK, 32'hf);
    chk(cevt == 0, "all cleared");
    // barrier among cores 0, 2, 3
    wr(0, SYNC_REG_BAR_MASK, 32'b1101);
    wr(0, SYNC_REG_BARRIER, 0); wr(3, SYNC_REG_BARRIER, 0);
    wr(1, SYNC_REG_BARRIER, 0);
    chk(nbar == 0 && cevt == 0, "barrier must wait for core 2");
    wr(2, SYNC_REG_BARRIER, 0);
    chk(nbar == 1, "barrier fired once");
    chk(cevt == 4'b1101, "barrier event to the masked cores");
    rd(0, SYNC_REG_EVT_BUFFER, d); chk(d[EVT_BARRIER], "barrier bit");
    for (int c = 0; c < NC; c++) wr(c, SYNC_REG_EVT_BUFFER, 32'hf);
    wr(2, SYNC_REG_BARRIER, 0);
    chk(nbar == 1, "barrier re-armed");
    wr(0, SYNC_REG_BARRIER, 0); wr(3, SYNC_REG_BARRIER, 0);
    chk(nbar == 2, "second barrier");
    for (int c = 0; c < NC; c++) wr(c, SYNC_REG_EVT_BUFFER, 32'hf);
    // mutex
    rd(1, SYNC_REG_MUTEX, d); chk(d == 0, "core 1 gets the mutex");
    rd(2, SYNC_REG_MUTEX, d); chk(d == 1, "core 2 must not get it");
    wr(1, SYNC_REG_MUTEX, 0);
    rd(2, SYNC_REG_MUTEX, d); chk(d == 0, "core 2 gets it after release");
    // software event
    wr(0, SYNC_REG_SW_EVT, 32'b0110);
    chk(cevt == 4'b0110, "software event to cores 1 and 2");
    rd(2, SYNC_REG_EVT_BUFFER, d); chk(d == (1 << EVT_SW), "sw bit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
