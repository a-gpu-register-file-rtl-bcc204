// value_extractor: one per register bank. Aligns the slices of one operand
// part read from a physical warp register and zero-fills or sign-extends it.
//
// The select logic is computed once per warp from the two masks m0/m1 and the
// part being read, then drives 32 thread value extractors (tve). For part p
// the operand's data slices start at base = 0 (p=0) or popcount(m0) (p=1);
// data slice base+k comes from the k-th set bit of the part's mask. The part
// that holds the operand's top slice (r1 when m1 is non-zero, else r0) fills
// the slices above the operand with the fill nibble: 1111 for a negative
// signed integer, 0000 otherwise. Every other slice is 0000, so the two parts
// can be merged with an OR. Combinational; it sits in the register-read cycle.
module value_extractor
  import sdc_pkg::*;
#(
  parameter int unsigned NTHR = THREADS
) (
  input  logic [NTHR*TREG_W-1:0] din,
  input  xinfo_t                 xi,
  output logic [NTHR*TREG_W-1:0] dout
);
  slice_mask_t             mask;
  logic [3:0]              base, n;
  logic                    top;
  logic [SLICES-1:0]       use_in, use_fill;
  logic [SLICES-1:0][2:0]  sel;
  logic [2:0]              sign_slice;

  always_comb begin
    mask = xi.part ? xi.m1 : xi.m0;
    base = xi.part ? popcount8(xi.m0) : 4'd0;
    n    = popcount8(mask);
    top  = xi.part || (xi.m1 == '0);
    sign_slice = '0;
    for (int i = 0; i < SLICES; i++) if (mask[i]) sign_slice = 3'(i);
    use_in = '0; use_fill = '0; sel = '0;
    for (int j = 0; j < SLICES; j++) begin
      if ((4'(j) >= base) && (4'(j) < base + n)) begin
        use_in[j] = 1'b1;
        for (int i = 0; i < SLICES; i++)
          if (mask[i] && (rank_below(mask, i) == 4'(j) - base)) sel[j] = 3'(i);
      end else if (top && (4'(j) >= base + n)) begin
        use_fill[j] = 1'b1;
      end
    end
  end

  for (genvar t = 0; t < NTHR; t++) begin : g_tve
    tve u_tve (
      .din       (din[t*TREG_W +: TREG_W]),
      .use_in    (use_in),
      .sel       (sel),
      .use_fill  (use_fill),
      .sign_slice(sign_slice),
      .sign_ext  (xi.is_signed && top),
      .dout      (dout[t*TREG_W +: TREG_W])
    );
  end
endmodule
