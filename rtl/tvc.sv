// tvc: thread value converter. Extends a narrow float, held right-aligned in
// the low 4*n bits of a 32-bit word, to IEEE single precision.
//
// Format: sign, E exponent bits and M mantissa bits as in the paper's format
// table (n = 8 slices is single precision itself and passes unchanged). The
// exponent is rebiased with one adder (e - (2^(E-1)-1) + 127) and the mantissa
// is shifted up with zeros appended. An all-ones exponent is kept as infinity
// or NaN; a zero exponent (zero or denormal) becomes a signed zero, as the
// paper flushes denormals. The bias and the undefined formats below 8 bits
// (read as zero) are this design's choices. Combinational.
module tvc
  import sdc_pkg::*;
(
  input  logic [TREG_W-1:0] din,
  input  logic [3:0]        nslices,   // 1..8 slices of the narrow float
  output logic [TREG_W-1:0] dout
);
  int unsigned E, M;
  logic [31:0] emask, mmask;
  logic        s;
  logic [7:0]  e, e32;
  logic [22:0] m, m32;

  always_comb begin
    E = fexp_bits(nslices);
    M = fman_bits(nslices);
    emask = (32'd1 << E) - 32'd1;
    mmask = (32'd1 << M) - 32'd1;
    s = din[(4*nslices - 1) & 31];
    e = 8'((din >> M) & emask);
    m = 23'(din & mmask);
    m32 = m << (23 - M);
    e32 = e - 8'((32'd1 << (E - 1)) - 1) + 8'd127;
    if (E == 0)                dout = '0;
    else if (nslices == 4'd8)  dout = din;
    else if (e == '0)          dout = {s, 31'b0};
    else if (32'(e) == emask)  dout = {s, 8'hFF, m32};
    else                       dout = {s, e32, m32};
  end
endmodule
