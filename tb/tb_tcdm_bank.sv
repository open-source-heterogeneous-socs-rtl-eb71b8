// Self-checking test of one TCDM bank: random byte-masked writes and reads
// against a reference array kept in the testbench.
module tb_tcdm_bank;
  localparam int unsigned W = 64;
  logic clk = 0; always #5 clk = ~clk;
  logic req, wen; logic [5:0] addr; logic [31:0] wdata, rdata; logic [3:0] be;
  int checks = 0, failures = 0;
  logic [31:0] ref_mem [W];

  tcdm_bank #(.WORDS(W)) dut (.clk_i(clk), .req_i(req), .wen_i(wen), .addr_i(addr),
                               .wdata_i(wdata), .be_i(be), .rdata_o(rdata));

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req = 0; wen = 0; addr = 0; wdata = 0; be = 0;
    // initialise every word
    for (int i = 0; i < W; i++) begin
      @(negedge clk); req = 1; wen = 1; addr = 6'(i); wdata = 32'(i * 32'h01010101 + 7); be = 4'hf;
      ref_mem[i] = wdata;
    end
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      req = 1; wen = $urandom_range(0, 1) == 1; addr = 6'($urandom_range(0, W-1));
      wdata = $urandom; be = 4'($urandom);
      if (wen) begin
        for (int b = 0; b < 4; b++) if (be[b]) ref_mem[addr][8*b +: 8] = wdata[8*b +: 8];
      end else begin
        automatic logic [31:0] exp = ref_mem[addr];
        @(negedge clk); req = 0;
        checks++;
        if (rdata !== exp) begin failures++; $display("read mismatch %h vs %h", rdata, exp); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
