// Testbench of the cluster DMA. The system memory (64-bit, random grant,
// in-order answers after 1..3 cycles) and the TCDM (four 32-bit ports, random
// grant per port, answer one cycle after the grant) are modelled here.
// Each round queues a copy-in of a random block from system memory into the
// TCDM and a copy-out of it to another system address, without waiting in
// between, then waits for both end-of-transfer events. Checks: TCDM and system
// memory contents word by word, the command IDs and DONE_ID, STATUS, one EOT
// per command, and that copy-in uses only ports 0/1 and copy-out ports 2/3.
`timescale 1ns/1ps
module tb_cluster_dma;
  import pulp_cluster_pkg::*;
  localparam int EXTW = 2048, TW = 512;   // 64-bit system words, 32-bit TCDM words
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  periph_req_t req;
  periph_rsp_t rsp;
  logic eot;
  tcdm_req_t [DMA_PORTS-1:0] treq;
  tcdm_rsp_t [DMA_PORTS-1:0] trsp;
  logic ereq, ewe, egnt, erv;
  logic [31:0] eaddr;
  logic [63:0] ewdata, erdata;
  logic [7:0] ebe;
  logic [63:0] ext [EXTW];
  logic [31:0] tcdm [TW];
  int checks = 0, failures = 0, neot = 0;
  logic [DMA_PORTS-1:0] tgnt;
  logic [63:0] edata_q [$];
  int edelay_q [$];
  bit copy_out_phase;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(req), .cfg_rsp_o(rsp),
    .evt_eot_o(eot), .tcdm_req_o(treq), .tcdm_rsp_i(trsp), .ext_req_o(ereq), .ext_we_o(ewe),
    .ext_addr_o(eaddr), .ext_wdata_o(ewdata), .ext_be_o(ebe), .ext_gnt_i(egnt),
    .ext_rvalid_i(erv), .ext_rdata_i(erdata));

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("%0t %s", $time, what); end
  endtask

  always_comb
    for (int p = 0; p < DMA_PORTS; p++) trsp[p].gnt = treq[p].req && tgnt[p];

  always @(posedge clk) begin
    tgnt <= DMA_PORTS'($urandom);
    egnt <= $urandom_range(0, 2) != 0;
    if (rst_n && eot) neot++;
    for (int p = 0; p < DMA_PORTS; p++) begin
      trsp[p].rvalid <= rst_n && trsp[p].gnt;
      if (trsp[p].gnt) begin
        automatic int w = treq[p].addr[31:2] % TW;
        trsp[p].rdata <= tcdm[w];
        if (treq[p].wen) tcdm[w] <= treq[p].wdata;
      end
    end
    // system memory: in-order answers after 1..3 cycles
    erv <= 0;
    if (edelay_q.size() > 0) begin
      if (edelay_q[0] <= 1) begin void'(edelay_q.pop_front()); erv <= 1; erdata <= edata_q.pop_front(); end
      else edelay_q[0]--;
    end
    if (rst_n && ereq && egnt) begin
      edata_q.push_back(ext[eaddr[31:3] % EXTW]);
      if (ewe) ext[eaddr[31:3] % EXTW] <= ewdata;
      edelay_q.push_back($urandom_range(1, 3));
    end
  end

  // port usage rule
  always @(posedge clk) if (rst_n) begin
    if (treq[0].req && !treq[0].wen || treq[1].req && !treq[1].wen) begin
      failures++; $display("read on a copy-in port");
    end
    if (treq[2].req && treq[2].wen || treq[3].req && treq[3].wen) begin
      failures++; $display("write on a copy-out port");
    end
  end

  task automatic wr(input logic [3:0] r, input logic [31:0] d);
    @(negedge clk); req = '{req: 1, wen: 1, addr: {6'd0, r, 2'b00}, wdata: d};
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input logic [3:0] r, output logic [31:0] d);
    @(negedge clk); req = '{req: 1, wen: 0, addr: {6'd0, r, 2'b00}, wdata: 0};
    @(negedge clk); req = '0; d = rsp.rdata;
  endtask
  task automatic cmd(input logic [31:0] ea, input logic [31:0] ta, input int len, input bit out);
    wr(DMA_REG_EXT_ADDR, ea); wr(DMA_REG_TCDM_ADDR, ta); wr(DMA_REG_LEN, len); wr(DMA_REG_CMD, 32'(out));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d, id0;
    req = '0; tgnt = '0; egnt = 0; erv = 0; erdata = '0;
    for (int p = 0; p < DMA_PORTS; p++) begin trsp[p].rvalid = 0; trsp[p].rdata = 0; end
    for (int i = 0; i < EXTW; i++) ext[i] = {$urandom, $urandom};
    for (int i = 0; i < TW; i++) tcdm[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int round = 0; round < 12; round++) begin
      automatic int len = 8 * $urandom_range(1, 40);
      automatic int src = 8 * $urandom_range(0, 511);
      automatic int dst = 8 * $urandom_range(1024, 1500);
      automatic int ta = 8 * $urandom_range(0, (TW * 4 - len) / 8);
      automatic int n0 = neot;
      automatic int guard = 0;
      rd(DMA_REG_CMD, id0);
      cmd(src, ta, len, 0);
      cmd(dst, ta, len, 1);
      rd(DMA_REG_STATUS, d);
      chk(d >= 1 && d <= 2, $sformatf("status %0d with two commands", d));
      while (neot < n0 + 2 && guard < 5000) begin @(negedge clk); guard++; end
      chk(neot == n0 + 2, "two end-of-transfer events");
      rd(DMA_REG_DONE_ID, d); chk(d == id0 + 1, "done id of the copy-out");
      rd(DMA_REG_CMD, d); chk(d == id0 + 2, "next id");
      rd(DMA_REG_STATUS, d); chk(d == 0, "idle");
      for (int i = 0; i < len / 8; i++) begin
        automatic logic [63:0] s = ext[src / 8 + i];
        chk(tcdm[ta / 4 + 2 * i] == s[31:0] && tcdm[ta / 4 + 2 * i + 1] == s[63:32],
            $sformatf("round %0d copy-in word %0d", round, i));
        chk(ext[dst / 8 + i] == s, $sformatf("round %0d copy-out word %0d", round, i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
