// value_truncator: NWVT warp value truncators (three, one per writeback bus
// operand), each of NTHR thread value truncators (tvt). For lane l it takes
// the 1024-bit result, the float flag and the destination indirection entry
// and produces the two compressed warp words for r0 and r1 with their 8-bit
// slice write masks. Combinational; the writeback pipeline registers it.
module value_truncator
  import sdc_pkg::*;
#(
  parameter int unsigned NWVT = 3,
  parameter int unsigned NTHR = THREADS
) (
  input  logic [NWVT-1:0][NTHR*TREG_W-1:0] din,
  input  logic [NWVT-1:0]                  is_float,
  input  it_entry_t [NWVT-1:0]             ent,
  output logic [NWVT-1:0][NTHR*TREG_W-1:0] d0,
  output logic [NWVT-1:0][NTHR*TREG_W-1:0] d1
);
  for (genvar l = 0; l < NWVT; l++) begin : g_wvt
    for (genvar t = 0; t < NTHR; t++) begin : g_tvt
      tvt u_tvt (
        .din     (din[l][t*TREG_W +: TREG_W]),
        .is_float(is_float[l]),
        .m0      (ent[l].m0),
        .m1      (ent[l].m1),
        .d0      (d0[l][t*TREG_W +: TREG_W]),
        .d1      (d1[l][t*TREG_W +: TREG_W])
      );
    end
  end
endmodule
