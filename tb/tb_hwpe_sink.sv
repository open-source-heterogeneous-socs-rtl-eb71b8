// Testbench of a streamer sink. Random beats with random strobes are offered
// at random times; a wide memory model grants at random, applies the byte
// strobes and acknowledges one cycle later. Checks: each granted write goes
// to the next address of the pattern with the offered data, the final memory
// image (byte-wise against a shadow), and that done_o pulses exactly once,
// after the last acknowledge.
`timescale 1ns/1ps
module tb_hwpe_sink;
  localparam int NW = 2, ND = 4, MW = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, start, done, mreq, mgnt, mrv, sval, srdy;
  logic [31:0] base, maddr;
  logic [ND-1:0][15:0] cnt;
  logic [ND-1:0][31:0] stride;
  logic [NW*32-1:0] mwdata, sdata;
  logic [NW*4-1:0] mbe, sstrb;
  logic [31:0] mem [MW], shadow [MW];
  int checks = 0, failures = 0, ndone;
  logic [31:0] addrq [$];

  hwpe_sink #(.NW(NW), .ND(ND)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear),
    .start_i(start), .base_i(base), .cnt_i(cnt), .stride_i(stride), .done_o(done),
    .mem_req_o(mreq), .mem_addr_o(maddr), .mem_wdata_o(mwdata), .mem_be_o(mbe),
    .mem_gnt_i(mgnt), .mem_rvalid_i(mrv), .stream_valid_i(sval), .stream_ready_o(srdy),
    .stream_data_i(sdata), .stream_strb_i(sstrb));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) mrv <= 0;
    else begin
      mrv <= mreq && mgnt;
      if (mreq && mgnt)
        for (int w = 0; w < NW; w++)
          for (int b = 0; b < 4; b++)
            if (mbe[4*w+b]) mem[(maddr[31:2] + w) % MW][8*b +: 8] <= mwdata[32*w+8*b +: 8];
    end

  always @(posedge clk) if (done) ndone++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < MW; i++) begin mem[i] = 0; shadow[i] = 0; end
    clear = 0; start = 0; sval = 0; mgnt = 0; base = 0; cnt = '0; stride = '0;
    sdata = '0; sstrb = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int job = 0; job < 40; job++) begin
      automatic int cycles = 0;
      @(negedge clk);
      ndone = 0;
      base = $urandom_range(0, 63) * 4;
      cnt = '0; stride = '0;
      cnt[0] = $urandom_range(1, 5); cnt[1] = $urandom_range(1, 4);
      stride[0] = 4 * NW; stride[1] = $urandom_range(0, 40) * 4;
      for (int j = 0; j < cnt[1]; j++) for (int i = 0; i < cnt[0]; i++)
        addrq.push_back(base + i*stride[0] + j*stride[1]);
      start = 1; @(negedge clk); start = 0;
      while (addrq.size() > 0 && cycles < 2000) begin
        if (!sval || srdy) begin
          sval = $urandom_range(0, 2) != 0;
          for (int w = 0; w < NW; w++) sdata[32*w +: 32] = $urandom;
          sstrb = (NW*4)'($urandom);
        end
        mgnt = $urandom_range(0, 2) != 0;
        #1;
        if (srdy) begin
          automatic logic [31:0] e = addrq.pop_front();
          checks++;
          if (!(mreq && mgnt) || maddr !== e || mwdata !== sdata) begin
            failures++; $display("job %0d write at %h exp %h", job, maddr, e);
          end
          for (int w = 0; w < NW; w++) for (int b = 0; b < 4; b++)
            if (sstrb[4*w+b]) shadow[(e[31:2] + w) % MW][8*b +: 8] = sdata[32*w+8*b +: 8];
        end
        cycles++;
        @(negedge clk);
      end
      sval = 0; mgnt = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (ndone != 1) begin failures++; $display("job %0d done pulsed %0d times", job, ndone); end
    end
    for (int i = 0; i < MW; i++) begin
      checks++;
      if (mem[i] !== shadow[i]) begin failures++; $display("mem[%0d] %h exp %h", i, mem[i], shadow[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
