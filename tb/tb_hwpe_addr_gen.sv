// Testbench of the streamer address generator. Random loop nests (counts,
// signed strides, base) are loaded; the consumer accepts addresses with a
// random ready. A nested-loop reference computes the expected sequence.
// Checks every address, last_o on exactly the final one, and that valid_o
// drops after it; with ready always high it also checks one address per cycle.
`timescale 1ns/1ps
module tb_hwpe_addr_gen;
  localparam int ND = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, start, valid, ready, last;
  logic [31:0] base, addr;
  logic [ND-1:0][15:0] cnt;
  logic [ND-1:0][31:0] stride;
  int checks = 0, failures = 0;
  logic [31:0] expq [$];

  hwpe_addr_gen #(.ND(ND)) dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .start_i(start),
    .base_i(base), .cnt_i(cnt), .stride_i(stride), .valid_o(valid), .ready_i(ready),
    .addr_o(addr), .last_o(last));

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    clear = 0; start = 0; ready = 0; base = 0; cnt = '0; stride = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int job = 0; job < 60; job++) begin
      automatic int cycles = 0, n;
      automatic bit full_rate = (job % 4 == 0);
      @(negedge clk);
      base = $urandom;
      for (int d = 0; d < ND; d++) begin
        cnt[d] = $urandom_range(1, 4);
        stride[d] = $urandom_range(0, 1) ? $urandom_range(0, 64) : -$urandom_range(0, 64);
      end
      for (int i3 = 0; i3 < cnt[3]; i3++) for (int i2 = 0; i2 < cnt[2]; i2++)
        for (int i1 = 0; i1 < cnt[1]; i1++) for (int i0 = 0; i0 < cnt[0]; i0++)
          expq.push_back(base + i0*stride[0] + i1*stride[1] + i2*stride[2] + i3*stride[3]);
      n = expq.size();
      start = 1; @(negedge clk); start = 0;
      while (expq.size() > 0 && cycles < 1000) begin
        ready = full_rate ? 1 : $urandom_range(0, 1);
        #1;
        if (valid && ready) begin
          automatic logic [31:0] e = expq.pop_front();
          checks++;
          if (addr !== e || last !== (expq.size() == 0)) begin
            failures++; $display("job %0d addr %h exp %h last %b", job, addr, e, last);
          end
        end else if (!valid) begin failures++; $display("valid dropped early"); end
        cycles++;
        @(negedge clk);
      end
      ready = 0; checks++;
      if (valid) begin failures++; $display("valid after last"); end
      if (full_rate) begin
        checks++;
        if (cycles != n) begin failures++; $display("not one address per cycle"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
