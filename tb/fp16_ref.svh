// Reference conversions between real numbers and IEEE 754 binary16, written
// independently of the RTL: round to nearest even, results below the normal
// range flushed to zero (as the datapath does), overflow to infinity.
function automatic logic [15:0] real_to_fp16(real r);
  logic [63:0] d;
  int          e;
  logic [52:0] m;
  logic [11:0] m11;
  logic        g, st, s;
  if (r == 0.0) return 16'h0000;
  s = (r < 0.0);
  d = $realtobits(s ? -r : r);
  e = int'(d[62:52]) - 1023;
  m = {1'b1, d[51:0]};
  m11 = {1'b0, m[52:42]};
  g   = m[41];
  st  = |m[40:0];
  if (g && (st || m11[0])) m11 = m11 + 12'd1;
  if (m11[11]) begin m11 = m11 >> 1; e = e + 1; end
  if (e > 15)  return {s, 5'h1f, 10'd0};
  if (e < -14) return {s, 15'd0};
  return {s, 5'(e + 15), m11[9:0]};
endfunction

function automatic real fp16_to_real(logic [15:0] h);
  logic [10:0] e;
  if (h[14:10] == 0) return 0.0;
  e = 11'(int'(h[14:10]) - 15 + 1023);
  return $bitstoreal({h[15], e, h[9:0], 42'd0});
endfunction
