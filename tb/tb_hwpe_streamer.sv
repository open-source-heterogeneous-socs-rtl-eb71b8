// Testbench of the HWPE streamer with two sources and one sink sharing one
// 64-bit port. A word-addressed memory model grants at random and answers one
// cycle after the grant. Source 0 reads a 2-D pattern, source 1 a strided
// 1-D pattern; the testbench adds the two streams word by word and feeds the
// sums to the sink, which writes them to a third region. Checks each source
// beat against the memory, the final contents of the sink region, that each
// stream reports done exactly once, and that the port saw requests of
// different streams interleaved.
`timescale 1ns/1ps
module tb_hwpe_streamer;
  localparam int NW = 2, NSRC = 2, ND = 4, MW = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start;
  logic [NSRC:0][31:0] base;
  logic [NSRC:0][ND-1:0][15:0] cnt;
  logic [NSRC:0][ND-1:0][31:0] stride;
  logic [NSRC:0] done;
  logic [NSRC-1:0] sval, srdy;
  logic [NSRC-1:0][NW*32-1:0] sdata;
  logic kval, krdy, mreq, mwen, mgnt, mrv;
  logic [NW*32-1:0] kdata, mwdata, mrdata;
  logic [NW*4-1:0] mbe;
  logic [31:0] maddr;
  logic [31:0] mem [MW];
  int checks = 0, failures = 0, ndone [NSRC+1], switches = 0;
  logic [31:0] a0q [$], a1q [$], outq [$];
  logic last_wen;

  hwpe_streamer #(.NW(NW), .NSRC(NSRC), .ND(ND)) dut (.clk_i(clk), .rst_ni(rst_n),
    .clear_i(1'b0), .start_i(start), .base_i(base), .cnt_i(cnt), .stride_i(stride),
    .done_o(done), .src_valid_o(sval), .src_ready_i(srdy), .src_data_o(sdata),
    .snk_valid_i(kval), .snk_ready_o(krdy), .snk_data_i(kdata), .snk_strb_i('1),
    .tcdm_req_o(mreq), .tcdm_wen_o(mwen), .tcdm_addr_o(maddr), .tcdm_wdata_o(mwdata),
    .tcdm_be_o(mbe), .tcdm_gnt_i(mgnt), .tcdm_rvalid_i(mrv), .tcdm_rdata_i(mrdata));

  always @(posedge clk) begin
    mgnt <= $urandom_range(0, 2) != 0;
    mrv  <= rst_n && mreq && mgnt;
    if (rst_n) for (int s = 0; s <= NSRC; s++) if (done[s]) ndone[s]++;
    if (mreq && mgnt) begin
      if (mwen != last_wen) switches++;
      last_wen <= mwen;
      for (int w = 0; w < NW; w++) begin
        mrdata[32*w +: 32] <= mem[(maddr[31:2] + w) % MW];
        if (mwen) mem[(maddr[31:2] + w) % MW] <= mwdata[32*w +: 32];
      end
    end
  end

  // the "datapath": sum of the two source streams
  logic [NW*32-1:0] sum;
  always_comb begin
    for (int w = 0; w < NW; w++) sum[32*w +: 32] = sdata[0][32*w +: 32] + sdata[1][32*w +: 32];
    kval = sval[0] && sval[1];
    kdata = sum;
    srdy = {2{kval && krdy}};
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // check source beats as they are consumed
  always @(posedge clk) if (rst_n && kval && krdy) begin
    for (int w = 0; w < NW; w++) begin
      checks += 2;
      if (sdata[0][32*w +: 32] !== mem[a0q[0] / 4 + w]) begin failures++; $display("src0 beat"); end
      if (sdata[1][32*w +: 32] !== mem[a1q[0] / 4 + w]) begin failures++; $display("src1 beat"); end
    end
    void'(a0q.pop_front()); void'(a1q.pop_front());
  end

  initial begin
    start = 0; base = '0; cnt = '0; stride = '0; mgnt = 0; mrv = 0; mrdata = '0; last_wen = 0;
    for (int s = 0; s <= NSRC; s++) ndone[s] = 0;
    for (int i = 0; i < MW; i++) mem[i] = $urandom;
    repeat (2) @(posedge clk); rst_n = 1;
    // source 0: 4 x 6 lines at 0x000, rows 64 B apart; source 1: 24 lines at 0x400, 12 B apart
    base[0] = 32'h000; cnt[0] = {16'd1, 16'd1, 16'd4, 16'd6}; stride[0] = {32'd0, 32'd0, 32'd64, 32'd8};
    base[1] = 32'h400; cnt[1] = {16'd1, 16'd1, 16'd1, 16'd24}; stride[1] = {32'd0, 32'd0, 32'd0, 32'd12};
    base[2] = 32'h800; cnt[2] = {16'd1, 16'd1, 16'd1, 16'd24}; stride[2] = {32'd0, 32'd0, 32'd0, 32'd8};
    for (int r = 0; r < 4; r++) for (int i = 0; i < 6; i++) a0q.push_back(r * 64 + i * 8);
    for (int i = 0; i < 24; i++) a1q.push_back(32'h400 + i * 12);
    for (int i = 0; i < 24; i++)
      for (int w = 0; w < NW; w++) outq.push_back(mem[a0q[i] / 4 + w] + mem[a1q[i] / 4 + w]);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (ndone[NSRC] == 0) @(negedge clk);
    repeat (3) @(negedge clk);
    for (int i = 0; i < 24 * NW; i++) begin
      checks++;
      if (mem[32'h800 / 4 + i] !== outq[i]) begin
        failures++; $display("sink word %0d = %h, expected %h", i, mem[32'h800 / 4 + i], outq[i]);
      end
    end
    for (int s = 0; s <= NSRC; s++) begin
      checks++;
      if (ndone[s] != 1) begin failures++; $display("stream %0d done %0d times", s, ndone[s]); end
    end
    checks++;
    if (switches < 4) begin failures++; $display("reads and writes were not interleaved"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
