// operand_xbar: the crossbar between the value extractors and the collector
// units. Bank b's extracted read (valid, owning collector unit, request slot,
// data) is steered to that collector unit. The arbitrator grants at most one
// read per collector unit per cycle, so no two banks ever target the same
// unit (the enclosing design asserts this on its clock). Combinational.
module operand_xbar
  import sdc_pkg::*;
#(
  parameter int unsigned NBANK = RF_BANKS,
  parameter int unsigned NCU   = NUM_CU,
  parameter int unsigned SW    = 3,
  parameter int unsigned DW    = THREADS * TREG_W,
  localparam int unsigned CW = (NCU > 1) ? $clog2(NCU) : 1
) (
  input  logic [NBANK-1:0]          in_valid,
  input  logic [NBANK-1:0][CW-1:0]  in_cu,
  input  logic [NBANK-1:0][SW-1:0]  in_slot,
  input  logic [NBANK-1:0][DW-1:0]  in_data,
  output logic [NCU-1:0]            out_valid,
  output logic [NCU-1:0][SW-1:0]    out_slot,
  output logic [NCU-1:0][DW-1:0]    out_data
);
  always_comb begin
    out_valid = '0; out_slot = '0;
    for (int c = 0; c < NCU; c++) begin
      out_data[c] = '0;
      for (int b = 0; b < NBANK; b++)
        if (in_valid[b] && 32'(in_cu[b]) == c) begin
          out_valid[c] = 1'b1;
          out_slot[c]  = in_slot[b];
          out_data[c]  = in_data[b];
        end
    end
  end

endmodule
