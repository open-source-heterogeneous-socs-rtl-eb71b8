// Self-checking test of the Xpulpnn dot-product unit: random operands in all
// four lane widths and all signedness combinations against a reference that
// extracts lanes with shifts and sign extension by arithmetic.
module tb_xpulpnn_dotp;
  import pulp_cluster_pkg::*;
  logic [31:0] a, b, acc, r; dotp_prec_e prec; logic sa, sb;
  int checks = 0, failures = 0;
  xpulpnn_dotp dut (.op_a_i(a), .op_b_i(b), .acc_i(acc), .prec_i(prec), .sign_a_i(sa), .sign_b_i(sb), .result_o(r));
  function automatic longint lanev(logic [31:0] v, int w, int k, bit s);
    longint x = longint'((v >> (w*k)) & ((64'd1 << w) - 1));
    if (s && x >= (64'sd1 << (w-1))) x = x - (64'sd1 << w);
    return x;
  endfunction
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int n = 0; n < 2000; n++) begin
      automatic int p = n % 4, w = 2 << p;
      automatic longint s;
      a = $urandom; b = $urandom; acc = $urandom; sa = 1'($urandom); sb = 1'($urandom);
      if (n < 8) begin a = 32'hffff_ffff; b = 32'h8000_8000; end
      prec = dotp_prec_e'(p);
      s = longint'(acc);
      for (int k = 0; k < 32 / w; k++) s += lanev(a, w, k, sa) * lanev(b, w, k, sb);
      #1; checks++;
      if (r !== 32'(s)) begin failures++; $display("mode %0d sa %0d sb %0d: %h vs %h", p, sa, sb, r, 32'(s)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
