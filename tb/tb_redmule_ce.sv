// Self-checking test of one RedMulE CE: random FP16 operands (exactly
// representable sums, plus rounding cases checked against an exact
// reference), the 4-cycle latency, one result per cycle, the stationary A
// register and a freeze (en = 0) in the middle of the stream.
`include "fp16_ref.svh"
module tb_redmule_ce;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n, en, ld; logic [15:0] a, b, c, co;
  int checks = 0, failures = 0;
  logic [15:0] expq [$];
  redmule_ce #(.LAT(4)) dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .load_a_i(ld), .a_i(a), .b_i(b), .c_i(c), .c_o(co));
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    real av, bv, cv, astat;
    int issued = 0;
    rst_n = 0; en = 0; ld = 0; a = 0; b = 0; c = 0; astat = 0.0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // results of operations issued 4 enabled cycles ago
      en = (n % 17) != 5;
      ld = (n % 7 == 0);
      if (n % 3 == 0) begin
        av = real'($urandom_range(0, 2000)) / 64.0 - 15.0;
        bv = real'($urandom_range(0, 2000)) / 32.0 - 30.0;
        cv = real'($urandom_range(0, 4000)) / 16.0 - 120.0;
      end else begin
        av = real'($urandom_range(0, 16)) - 8.0;
        bv = real'($urandom_range(0, 16)) / 2.0 - 4.0;
        cv = real'($urandom_range(0, 64)) - 32.0;
      end
      a = real_to_fp16(av); b = real_to_fp16(bv); c = real_to_fp16(cv);
      if (ld && en) astat = fp16_to_real(a);
      #1;
      if (en) begin
        expq.push_back(real_to_fp16(astat * fp16_to_real(b) + fp16_to_real(c)));
        issued++;
      end
      @(posedge clk); #1;
      if (en && expq.size() >= 4) begin
        automatic logic [15:0] e = expq.pop_front();
        checks++;
        if (co !== e) begin failures++; $display("n=%0d got %h expected %h", n, co, e); end
      end
    end
    // special values
    @(negedge clk); en = 1; ld = 1; a = 16'h7c00; b = 16'h0000; c = 16'h3c00;
    @(negedge clk); ld = 0; a = 16'h3c00; b = 16'h3c00; c = 16'h3c00;
    repeat (3) @(negedge clk);
    checks++; if (co !== 16'h7e00) begin failures++; $display("inf*0 gives %h", co); end
    @(negedge clk);
    checks++; if (co !== 16'h7c00) begin failures++; $display("second op uses stationary inf: %h", co); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
