// value_converter: NWVC warp value converters (six: two instructions per
// cycle with three source operands each), each built from NTHR thread value
// converters (tvc). Lane l converts the whole warp operand opnd[l] when
// conv[l] is set, using the slice count of that operand; otherwise the
// operand passes unchanged (integers and full-width floats). Combinational:
// the issue stage registers its outputs, so conversion takes one pipeline
// stage as in the paper's pipeline.
module value_converter
  import sdc_pkg::*;
#(
  parameter int unsigned NWVC = 6,
  parameter int unsigned NTHR = THREADS
) (
  input  logic [NWVC-1:0]                    conv,
  input  logic [NWVC-1:0][3:0]               nslices,
  input  logic [NWVC-1:0][NTHR*TREG_W-1:0]   opnd,
  output logic [NWVC-1:0][NTHR*TREG_W-1:0]   res
);
  for (genvar l = 0; l < NWVC; l++) begin : g_wvc
    logic [NTHR*TREG_W-1:0] cvt;
    for (genvar t = 0; t < NTHR; t++) begin : g_tvc
      tvc u_tvc (
        .din    (opnd[l][t*TREG_W +: TREG_W]),
        .nslices(nslices[l]),
        .dout   (cvt[t*TREG_W +: TREG_W])
      );
    end
    assign res[l] = conv[l] ? cvt : opnd[l];
  end
endmodule
