// tvt: thread value truncator, the writeback counterpart of tve/tvc.
//
// Step 1: a float destination narrower than 32 bits (n = popcount(m0)+
// popcount(m1) slices) is converted from single precision to its narrow
// format: exponent rebiased, mantissa truncated (no rounding), exponents too
// large for the format become infinity, too small ones (and denormals) become
// a signed zero, NaN stays NaN. Integers are simply cut to 4*n bits.
// Step 2: data slice k is placed in the k-th set slice of m0 in the r0 word,
// the data slices after popcount(m0) in the set slices of m1 in the r1 word;
// all other slices are zero (they are not written, the masks go to the
// register file). Rounding mode and overflow handling are this design's
// choices. Combinational.
module tvt
  import sdc_pkg::*;
(
  input  logic [TREG_W-1:0] din,
  input  logic              is_float,
  input  slice_mask_t       m0,
  input  slice_mask_t       m1,
  output logic [TREG_W-1:0] d0,        // slices for r0
  output logic [TREG_W-1:0] d1         // slices for r1
);
  logic [3:0]  n0, n;
  int unsigned E, M;
  logic [31:0] narrow, emax;
  logic        s;
  logic [7:0]  e8;
  logic [22:0] m23;
  logic signed [9:0] ex;

  always_comb begin
    n0  = popcount8(m0);
    n   = n0 + popcount8(m1);
    E   = fexp_bits(n);
    M   = fman_bits(n);
    s   = din[31];
    e8  = din[30:23];
    m23 = din[22:0];
    emax = (32'd1 << E) - 32'd1;
    ex  = 10'(signed'({2'b0, e8})) - 10'sd127 + 10'(signed'((32'd1 << (E - 1)) - 1));
    // step 1: format conversion
    narrow = din;
    if (is_float && n < 4'd8) begin
      if (E == 0)
        narrow = '0;
      else if (e8 == 8'hFF)
        narrow = (32'(s) << (E + M)) | (emax << M) |
                 32'(m23 >> (23 - M)) | 32'(m23 != '0);
      else if (e8 == 8'h00 || ex <= 0)
        narrow = 32'(s) << (E + M);
      else if (32'(ex) >= emax)
        narrow = (32'(s) << (E + M)) | (emax << M);
      else
        narrow = (32'(s) << (E + M)) | (32'(ex) << M) | 32'(m23 >> (23 - M));
    end
    // step 2: split and place in slices
    d0 = '0;
    d1 = '0;
    for (int i = 0; i < SLICES; i++) begin
      if (m0[i]) d0[4*i +: 4] = narrow[4*rank_below(m0, i) +: 4];
      if (m1[i]) d1[4*i +: 4] = narrow[4*(n0 + rank_below(m1, i)) +: 4];
    end
  end
endmodule
