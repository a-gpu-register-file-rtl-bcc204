// tve: thread value extractor. Eight 4-bit output multiplexers, each choosing
// one of the eight input slices or the fill nibble, plus one 2:1 multiplexer
// that makes the fill nibble 1111 or 0000.
//
// The select lines come from the warp-level value_extractor and are shared by
// all 32 threads; only the sign bit, and so the fill nibble, is per thread.
// An output whose select lines are all inactive gives 0000 (AOI-style
// multiplexer), which the low slices of a second operand part need so that
// the OR merge in the collector unit stays correct. Purely combinational.
module tve
  import sdc_pkg::*;
(
  input  logic [TREG_W-1:0]        din,       // thread register as read
  input  logic [SLICES-1:0]        use_in,    // output j takes input slice sel[j]
  input  logic [SLICES-1:0][2:0]   sel,
  input  logic [SLICES-1:0]        use_fill,  // output j takes the fill nibble
  input  logic [2:0]               sign_slice,// input slice holding the sign bit
  input  logic                     sign_ext,  // signed integer top part
  output logic [TREG_W-1:0]        dout
);
  logic [SLICE_W-1:0] fill;
  logic               sign_bit;

  always_comb begin
    sign_bit = din[4*sign_slice + 3];
    fill     = (sign_ext && sign_bit) ? 4'b1111 : 4'b0000;   // 2:1 mux
    for (int j = 0; j < SLICES; j++) begin                    // 9:1 muxes
      if (use_in[j])        dout[4*j +: 4] = din[4*sel[j] +: 4];
      else if (use_fill[j]) dout[4*j +: 4] = fill;
      else                  dout[4*j +: 4] = 4'b0000;
    end
  end
endmodule
