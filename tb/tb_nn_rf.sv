// Self-checking test of the NN-RF: random writes and two random reads per
// cycle against a reference array, including the same-cycle bypass.
module tb_nn_rf;
  logic clk = 0; always #5 clk = ~clk;
  logic rst_n, we; logic [2:0] wa, ra, rb; logic [31:0] wd, da, db;
  logic [31:0] refm [6];
  int checks = 0, failures = 0;
  nn_rf #(.NREGS(6)) dut (.clk_i(clk), .rst_ni(rst_n), .we_i(we), .waddr_i(wa), .wdata_i(wd),
    .raddr_a_i(ra), .raddr_b_i(rb), .rdata_a_o(da), .rdata_b_o(db));
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    rst_n = 0; we = 0; wa = 0; ra = 0; rb = 0; wd = 0;
    for (int i = 0; i < 6; i++) refm[i] = 0;
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      we = 1'($urandom); wa = 3'($urandom_range(0, 5)); wd = $urandom;
      ra = 3'($urandom_range(0, 5)); rb = (n % 4 == 0) ? wa : 3'($urandom_range(0, 5));
      #1;
      checks += 2;
      if (da !== ((we && wa == ra) ? wd : refm[ra])) failures++;
      if (db !== ((we && wa == rb) ? wd : refm[rb])) failures++;
      if (we) refm[wa] = wd;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
