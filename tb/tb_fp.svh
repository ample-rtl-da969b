// Conversions between real and IEEE-754 binary32 bit patterns for the
// testbenches' reference models (round to nearest; no subnormals).
function automatic logic [31:0] r2f(input real r);
  logic [63:0] d; int e; logic [23:0] m;
  if (r == 0.0) return 32'h0;
  d = $realtobits(r);
  e = int'(d[62:52]) - 1023 + 127;
  m = {1'b0, d[51:29]} + 24'(d[28]);
  if (m[23]) begin m = '0; e = e + 1; end
  return {d[63], e[7:0], m[22:0]};
endfunction
function automatic real f2r(input logic [31:0] f);
  if (f[30:23] == 0) return 0.0;
  return $bitstoreal({f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
endfunction
