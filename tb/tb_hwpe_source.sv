// Testbench of a streamer source. A wide memory model grants requests at
// random and answers one cycle after the grant; the consumer takes beats with
// a random ready. For random 2-D patterns the stream must carry, in order,
// the NW-word lines at the pattern's addresses; done_o must pulse with the
// last beat. The FIFO overflow assertion in the source guards the credits.
`timescale 1ns/1ps
module tb_hwpe_source;
  localparam int NW = 2, ND = 4, DEPTH = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, start, done, mreq, mgnt, mrv, sval, srdy;
  logic [31:0] base, maddr;
  logic [ND-1:0][15:0] cnt;
  logic [ND-1:0][31:0] stride;
  logic [NW*32-1:0] mrdata, sdata;
  int checks = 0, failures = 0, ndone = 0;
  logic [NW*32-1:0] expq [$];

  function automatic logic [NW*32-1:0] line(logic [31:0] a);
    for (int w = 0; w < NW; w++) line[32*w +: 32] = a * 32'h9e3779b1 + w;
  endfunction

  hwpe_source #(.NW(NW), .ND(ND), .DEPTH(DEPTH)) dut (.clk_i(clk), .rst_ni(rst_n),
    .clear_i(clear), .start_i(start), .base_i(base), .cnt_i(cnt), .stride_i(stride),
    .done_o(done), .mem_req_o(mreq), .mem_addr_o(maddr), .mem_gnt_i(mgnt),
    .mem_rvalid_i(mrv), .mem_rdata_i(mrdata), .stream_valid_o(sval),
    .stream_ready_i(srdy), .stream_data_o(sdata));

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin mrv <= 0; mrdata <= '0; end
    else begin mrv <= mreq && mgnt; mrdata <= line(maddr); end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; start = 0; srdy = 0; mgnt = 0; base = 0; cnt = '0; stride = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int job = 0; job < 40; job++) begin
      automatic int cycles = 0;
      @(negedge clk);
      base = $urandom_range(0, 4096) * 4;
      cnt = '0; stride = '0;
      cnt[0] = $urandom_range(1, 6); cnt[1] = $urandom_range(1, 5);
      stride[0] = 4 * NW; stride[1] = $urandom_range(0, 100) * 4;
      for (int j = 0; j < cnt[1]; j++) for (int i = 0; i < cnt[0]; i++)
        expq.push_back(line(base + i*stride[0] + j*stride[1]));
      start = 1; @(negedge clk); start = 0;
      while (expq.size() > 0 && cycles < 2000) begin
        srdy = $urandom_range(0, 2) != 0; mgnt = $urandom_range(0, 2) != 0;
        #1;
        if (sval && srdy) begin
          automatic logic [NW*32-1:0] e = expq.pop_front();
          checks += 2;
          if (sdata !== e) begin failures++; $display("job %0d data %h exp %h", job, sdata, e); end
          if (done !== (expq.size() == 0)) begin failures++; $display("done %b", done); end
        end else begin
          checks++;
          if (done) begin failures++; $display("done without beat"); end
        end
        cycles++;
        @(negedge clk);
      end
      srdy = 0;
      repeat (3) @(negedge clk);
      checks++;
      if (sval || mreq) begin failures++; $display("source still active"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
