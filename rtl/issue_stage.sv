// issue_stage: the value-converter pipeline stage between the collector units
// and the execution units.
//
// Each cycle it picks up to ISSUE collector units whose operands are all
// ready (round-robin from a rotating pointer), acknowledges them so they are
// freed, passes their NOPS operands each through the value converter
// (ISSUE*NOPS = 6 warp value converters, one per possible operand) and
// registers the converted operands on the ex_* port of that slot. A slot
// takes a new instruction only when its register is empty or being taken
// (ex_ready). Latency: one cycle from inst_ready to ex_valid.
module issue_stage
  import sdc_pkg::*;
#(
  parameter int unsigned NCU   = NUM_CU,
  parameter int unsigned ISSUE = ISSUE_W,
  parameter int unsigned NOPS  = SRC_OPS,
  parameter int unsigned NTHR  = THREADS,
  localparam int unsigned DW = NTHR * TREG_W,
  localparam int unsigned CW = (NCU > 1) ? $clog2(NCU) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic [NCU-1:0]                       cu_ready,
  input  logic [NCU-1:0][WID_W-1:0]            cu_wid,
  input  logic [NCU-1:0][TAG_W-1:0]            cu_tag,
  input  logic [NCU-1:0][NOPS-1:0][DW-1:0]     cu_opnd,
  input  logic [NCU-1:0][NOPS-1:0]             cu_conv,
  input  logic [NCU-1:0][NOPS-1:0][3:0]        cu_nslices,
  output logic [NCU-1:0]                       cu_ack,
  output logic [ISSUE-1:0]                     ex_valid,
  output logic [ISSUE-1:0][WID_W-1:0]          ex_wid,
  output logic [ISSUE-1:0][TAG_W-1:0]          ex_tag,
  output logic [ISSUE-1:0][NOPS-1:0][DW-1:0]   ex_opnd,
  input  logic [ISSUE-1:0]                     ex_ready
);
  localparam int unsigned NL = ISSUE * NOPS;

  logic [CW-1:0]                ptr;
  logic [ISSUE-1:0]             pick;
  logic [ISSUE-1:0][CW-1:0]     pick_cu;
  logic [NL-1:0]                conv;
  logic [NL-1:0][3:0]           nsl;
  logic [NL-1:0][DW-1:0]        opnd, res;

  always_comb begin
    logic [CW-1:0] c;
    c = '0;
    cu_ack = '0; pick = '0; pick_cu = '0;
    for (int i = 0; i < ISSUE; i++) begin
      if (!ex_valid[i] || ex_ready[i]) begin
        for (int k = 0; k < NCU; k++) begin
          c = CW'((32'(ptr) + k) % NCU);
          if (!pick[i] && cu_ready[c] && !cu_ack[c]) begin
            pick[i]    = 1'b1;
            pick_cu[i] = CW'(c);
            cu_ack[c]  = 1'b1;
          end
        end
      end
    end
    conv = '0; nsl = '0;
    for (int i = 0; i < ISSUE; i++)
      for (int o = 0; o < NOPS; o++) begin
        conv[i*NOPS+o] = cu_conv[pick_cu[i]][o];
        nsl[i*NOPS+o]  = cu_nslices[pick_cu[i]][o];
        opnd[i*NOPS+o] = cu_opnd[pick_cu[i]][o];
      end
  end

  value_converter #(.NWVC(NL), .NTHR(NTHR)) u_vc (
    .conv(conv), .nslices(nsl), .opnd(opnd), .res(res)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ex_valid <= '0;
      ptr      <= '0;
    end else begin
      for (int i = 0; i < ISSUE; i++)
        if (!ex_valid[i] || ex_ready[i]) ex_valid[i] <= pick[i];
      if (|pick) ptr <= CW'((32'(pick_cu[0]) + 1) % NCU);
    end
    for (int i = 0; i < ISSUE; i++)
      if (pick[i]) begin
        ex_wid[i] <= cu_wid[pick_cu[i]];
        ex_tag[i] <= cu_tag[pick_cu[i]];
        for (int o = 0; o < NOPS; o++) ex_opnd[i][o] <= res[i*NOPS+o];
      end
  end
endmodule
