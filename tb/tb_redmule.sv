// Testbench of the complete RedMulE accelerator (controller, streamer,
// datapath) at a reduced array size: M = 2 rows, N = 2 columns of CEs with
// 4-stage pipelines, so a tile is 2 x 8 outputs, and a 128-bit port.
// A word-addressed memory model answers the wide port with a random grant and
// a one-cycle response. Two jobs are queued back to back through the register
// interface: C += A*B with A 4x4, B 4x16, C 4x16, then the same product again
// on the result, so C ends as C0 + 2*A*B. The inputs are small integers, so
// FP16 arithmetic is exact and the result is compared bit for bit with a
// product computed here in real arithmetic. Also checks the job ids, the two
// end-of-computation events and the finished counter.
`timescale 1ns/1ps
module tb_redmule;
  import pulp_cluster_pkg::*;
  `include "fp16_ref.svh"
  localparam int M = 2, N = 2, LAT = 4, NW = 4, MW = 512;
  localparam int MR = 4, KR = 4, NCOL = 16;
  localparam int A_BASE = 32'h000, B_BASE = 32'h100, C_BASE = 32'h200;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  periph_req_t req;
  periph_rsp_t rsp;
  logic eoc, busy, stall, mreq, mwen, mgnt, mrv;
  logic [31:0] maddr;
  logic [NW*32-1:0] mwdata, mrdata;
  logic [NW*4-1:0] mbe;
  logic [31:0] mem [MW];
  int checks = 0, failures = 0, neoc = 0;
  real a [MR][KR], b [KR][NCOL], c0 [MR][NCOL];

  redmule #(.M(M), .N(N), .LAT(LAT), .NW(NW)) dut (.clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(req), .cfg_rsp_o(rsp), .evt_eoc_o(eoc), .busy_o(busy), .stall_o(stall),
    .tcdm_req_o(mreq), .tcdm_wen_o(mwen), .tcdm_addr_o(maddr), .tcdm_wdata_o(mwdata),
    .tcdm_be_o(mbe), .tcdm_gnt_i(mgnt), .tcdm_rvalid_i(mrv), .tcdm_rdata_i(mrdata));

  always @(posedge clk) begin
    mgnt <= $urandom_range(0, 3) != 0;
    mrv  <= rst_n && mreq && mgnt;
    if (rst_n && eoc) neoc++;
    if (mreq && mgnt)
      for (int w = 0; w < NW; w++) begin
        automatic int i = (maddr[31:2] + w) % MW;
        mrdata[32*w +: 32] <= mem[i];
        if (mwen) for (int by = 0; by < 4; by++)
          if (mbe[4*w+by]) mem[i][8*by +: 8] <= mwdata[32*w+8*by +: 8];
      end
  end

  function automatic void put16(int addr, real v);
    if (addr[1]) mem[addr / 4][31:16] = real_to_fp16(v);
    else         mem[addr / 4][15:0]  = real_to_fp16(v);
  endfunction
  function automatic logic [15:0] get16(int addr);
    return addr[1] ? mem[addr / 4][31:16] : mem[addr / 4][15:0];
  endfunction

  task automatic chk(input logic c, input string what);
    checks++; if (!c) begin failures++; $display("%0t %s", $time, what); end
  endtask
  task automatic wr(input int widx, input logic [31:0] d);
    @(negedge clk); req = '{req: 1, wen: 1, addr: 12'(widx * 4), wdata: d};
    @(negedge clk); req = '0;
  endtask
  task automatic rd(input int widx, output logic [31:0] d);
    @(negedge clk); req = '{req: 1, wen: 0, addr: 12'(widx * 4), wdata: 0};
    @(negedge clk); req = '0; d = rsp.rdata;
  endtask
  task automatic job(input int expect_id);
    logic [31:0] d;
    rd(HWPE_REG_ACQUIRE, d); chk(d == expect_id, $sformatf("acquire returned %0d", d));
    wr(HWPE_REG_JOB0 + JOB_A_ADDR, A_BASE); wr(HWPE_REG_JOB0 + JOB_B_ADDR, B_BASE);
    wr(HWPE_REG_JOB0 + JOB_C_ADDR, C_BASE); wr(HWPE_REG_JOB0 + JOB_M, MR);
    wr(HWPE_REG_JOB0 + JOB_K, KR); wr(HWPE_REG_JOB0 + JOB_N, NCOL);
    wr(HWPE_REG_TRIGGER, 0);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0; mgnt = 0; mrv = 0; mrdata = '0;
    for (int i = 0; i < MW; i++) mem[i] = 0;
    for (int i = 0; i < MR; i++) for (int k = 0; k < KR; k++) begin
      a[i][k] = $itor($urandom_range(0, 6)) - 3.0; put16(A_BASE + 2 * (i * KR + k), a[i][k]);
    end
    for (int k = 0; k < KR; k++) for (int j = 0; j < NCOL; j++) begin
      b[k][j] = $itor($urandom_range(0, 6)) - 3.0; put16(B_BASE + 2 * (k * NCOL + j), b[k][j]);
    end
    for (int i = 0; i < MR; i++) for (int j = 0; j < NCOL; j++) begin
      c0[i][j] = $itor($urandom_range(0, 40)) - 20.0; put16(C_BASE + 2 * (i * NCOL + j), c0[i][j]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    job(0);
    job(1);
    while (neoc < 2) @(negedge clk);
    repeat (4) @(negedge clk);
    chk(neoc == 2, "two end-of-computation events");
    rd(HWPE_REG_FINISHED, d); chk(d == 2, "finished counter");
    rd(HWPE_REG_STATUS, d); chk(d == 0, "idle");
    for (int i = 0; i < MR; i++) for (int j = 0; j < NCOL; j++) begin
      automatic real s = 0.0;
      for (int k = 0; k < KR; k++) s += a[i][k] * b[k][j];
      checks++;
      if (get16(C_BASE + 2 * (i * NCOL + j)) !== real_to_fp16(c0[i][j] + 2.0 * s)) begin
        failures++;
        $display("C[%0d][%0d] = %h, expected %h", i, j, get16(C_BASE + 2 * (i * NCOL + j)),
                 real_to_fp16(c0[i][j] + 2.0 * s));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
