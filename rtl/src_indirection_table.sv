// src_indirection_table: the source indirection table with its own
// arbitrator. NCU collector units each offer up to NOPS lookups (one per
// source operand, architectural register number); per cycle each of the
// NBANK table banks serves one lookup and each collector unit gets at most
// one, so the table matches the register file's throughput.
//
// Timing: gnt/gnt_slot are combinational in cycle t (the requester marks the
// lookup as issued); resp_valid/resp_slot/resp_entry arrive in cycle t+1.
module src_indirection_table
  import sdc_pkg::*;
#(
  parameter int unsigned NCU     = NUM_CU,
  parameter int unsigned NOPS    = SRC_OPS,
  parameter int unsigned ENTRIES = ARCH_REGS,
  parameter int unsigned NBANK   = IT_BANKS,
  localparam int unsigned AW = $clog2(ENTRIES),
  localparam int unsigned BW = $clog2(NBANK),
  localparam int unsigned CW = (NCU > 1) ? $clog2(NCU) : 1,
  localparam int unsigned SW = (NOPS > 1) ? $clog2(NOPS) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NCU-1:0][NOPS-1:0]          req,
  input  logic [NCU-1:0][NOPS-1:0][AW-1:0]  req_reg,
  output logic [NCU-1:0]                    gnt,
  output logic [NCU-1:0][SW-1:0]            gnt_slot,
  output logic [NCU-1:0]                    resp_valid,
  output logic [NCU-1:0][SW-1:0]            resp_slot,
  output it_entry_t [NCU-1:0]               resp_entry,
  input  logic                              cfg_we,
  input  logic [AW-1:0]                     cfg_addr,
  input  it_entry_t                         cfg_data
);
  logic [NCU-1:0][NOPS-1:0][BW-1:0] req_bank;
  logic [NBANK-1:0]                 bank_gnt;
  logic [NBANK-1:0][CW-1:0]         bank_req;
  logic [NBANK-1:0][SW-1:0]         bank_slot;
  logic [NBANK-1:0][AW-BW-1:0]      rd_row;
  it_entry_t [NBANK-1:0]            rd_data;
  logic [NBANK-1:0]                 q_valid;
  logic [NBANK-1:0][CW-1:0]         q_req;
  logic [NBANK-1:0][SW-1:0]         q_slot;

  always_comb
    for (int c = 0; c < NCU; c++)
      for (int s = 0; s < NOPS; s++) req_bank[c][s] = req_reg[c][s][BW-1:0];

  bank_arbiter #(.NREQ(NCU), .NSLOT(NOPS), .NBANK(NBANK)) u_arb (
    .clk, .rst_n, .req, .req_bank, .gnt, .gnt_slot,
    .bank_gnt, .bank_req, .bank_slot
  );

  always_comb
    for (int b = 0; b < NBANK; b++)
      rd_row[b] = req_reg[bank_req[b]][bank_slot[b]][AW-1:BW];

  it_storage #(.ENTRIES(ENTRIES), .NBANK(NBANK)) u_mem (
    .clk, .rd_en(bank_gnt), .rd_row, .rd_data, .cfg_we, .cfg_addr, .cfg_data
  );

  always_ff @(posedge clk) begin
    if (!rst_n) q_valid <= '0;
    else        q_valid <= bank_gnt;
    q_req  <= bank_req;
    q_slot <= bank_slot;
  end

  // Route each bank's result back to its collector unit (at most one each).
  always_comb begin
    resp_valid = '0; resp_slot = '0; resp_entry = '0;
    for (int b = 0; b < NBANK; b++)
      if (q_valid[b]) begin
        resp_valid[q_req[b]] = 1'b1;
        resp_slot[q_req[b]]  = q_slot[b];
        resp_entry[q_req[b]] = rd_data[b];
      end
  end
endmodule
