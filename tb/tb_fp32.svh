// Conversions between real and IEEE-754 single precision for testbenches,
// done through the double-precision bit pattern (truncating).
function automatic logic [31:0] real2fp32(input real r);
  logic [63:0] d;
  int e;
  if (r <= 0.0) return 32'h0;
  d = $realtobits(r);
  e = int'(d[62:52]) - 1023 + 127;
  if (e <= 0) return 32'h0;
  return {1'b0, 8'(e), d[51:29]};
endfunction

function automatic real fp32real(input logic [31:0] f);
  logic [63:0] d;
  if (f[30:23] == 0) return 0.0;
  d = {1'b0, 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'b0};
  return $bitstoreal(d);
endfunction
