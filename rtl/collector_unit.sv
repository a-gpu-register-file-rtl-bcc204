// collector_unit: one extended collector unit of the operand collector.
//
// It holds one warp instruction (warp id, payload, wbase) and, per source
// operand, the baseline valid flag, register id, ready flag and operand field
// plus the four extension fields: signed flag, convert flag, location flag
// and the 32-bit indirection info. Flow per operand:
//   1. location flag clear: request a lookup in the source indirection table
//      (slot = operand index); the entry returns one cycle after the grant,
//      sets the location flag and clears the convert flag if the operand is
//      32 bits wide;
//   2. request the read of r0, and of r1 when m1 is non-zero (slot =
//      2*operand + part); each read returns already aligned by the bank's
//      value extractor;
//   3. the first part is placed in the operand field, the second is OR'ed
//      into it (the CU's 1024-bit OR gate); the ready flag is set when all
//      parts are in.
// When every valid operand is ready, inst_ready rises; issue_ack frees the
// unit. The arbitrators deliver at most one operand per cycle. The two
// "issued/arrived" bits per part are this design's bookkeeping.
module collector_unit
  import sdc_pkg::*;
#(
  parameter int unsigned NOPS = SRC_OPS,
  parameter int unsigned NTHR = THREADS,
  localparam int unsigned DW  = NTHR * TREG_W,
  localparam int unsigned SW  = (NOPS > 1) ? $clog2(NOPS) : 1,
  localparam int unsigned RSW = $clog2(2 * NOPS)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // allocation from dispatch
  input  logic                        alloc,
  input  instr_t                      alloc_instr,
  output logic                        busy,
  // source indirection table
  output logic [NOPS-1:0]             it_req,
  output reg_id_t [NOPS-1:0]          it_req_reg,
  input  logic                        it_gnt,
  input  logic [SW-1:0]               it_gnt_slot,
  input  logic                        it_resp_valid,
  input  logic [SW-1:0]               it_resp_slot,
  input  it_entry_t                   it_resp_entry,
  // register file read requests (via the arbitrator)
  output logic [2*NOPS-1:0]           rf_req,
  output logic [2*NOPS-1:0][PREG_W-1:0] rf_req_addr,
  output xinfo_t [2*NOPS-1:0]         rf_req_xi,
  input  logic                        rf_gnt,
  input  logic [RSW-1:0]              rf_gnt_slot,
  input  logic                        rf_resp_valid,
  input  logic [RSW-1:0]              rf_resp_slot,
  input  logic [DW-1:0]               rf_resp_data,
  // to the issue stage
  output logic                        inst_ready,
  output logic [WID_W-1:0]            out_wid,
  output logic [TAG_W-1:0]            out_tag,
  output logic [NOPS-1:0][DW-1:0]     out_opnd,
  output logic [NOPS-1:0]             out_conv,
  output logic [NOPS-1:0][3:0]        out_nslices,
  input  logic                        issue_ack
);
  // per-operand fields, as listed for the extended collector unit in the paper
  logic [NOPS-1:0]          valid_f, signed_f, convert_f, location_f, ready_f;
  reg_id_t [NOPS-1:0]       regid;
  it_entry_t [NOPS-1:0]     ind;
  logic [NOPS-1:0][DW-1:0]  opnd;
  // bookkeeping
  logic [NOPS-1:0]          lookup_issued;
  logic [NOPS-1:0][1:0]     part_req, part_got;
  logic [WID_W-1:0]         wid;
  logic [PREG_W-1:0]        wbase;
  logic [TAG_W-1:0]         tag;

  always_comb begin
    for (int o = 0; o < NOPS; o++) begin
      it_req[o]     = busy && valid_f[o] && !location_f[o] && !lookup_issued[o];
      it_req_reg[o] = regid[o];
      for (int p = 0; p < 2; p++) begin
        rf_req[2*o+p]        = busy && valid_f[o] && location_f[o] && !part_req[o][p] &&
                               ((p == 0) || (ind[o].m1 != '0));
        rf_req_addr[2*o+p]   = preg_addr(wbase, (p == 0) ? ind[o].r0 : ind[o].r1);
        rf_req_xi[2*o+p].m0  = ind[o].m0;
        rf_req_xi[2*o+p].m1  = ind[o].m1;
        rf_req_xi[2*o+p].part      = 1'(p);
        rf_req_xi[2*o+p].is_signed = signed_f[o];
      end
    end
  end

  always_comb begin
    inst_ready = busy;
    for (int o = 0; o < NOPS; o++) begin
      if (valid_f[o] && !ready_f[o]) inst_ready = 1'b0;
      out_opnd[o]    = opnd[o];
      out_conv[o]    = valid_f[o] && convert_f[o];
      out_nslices[o] = popcount8(ind[o].m0) + popcount8(ind[o].m1);
    end
    out_wid = wid;
    out_tag = tag;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy          <= 1'b0;
      valid_f       <= '0;
      ready_f       <= '0;
      location_f    <= '0;
      lookup_issued <= '0;
      part_req      <= '0;
      part_got      <= '0;
    end else if (alloc && !busy) begin
      busy <= 1'b1;
      wid   <= alloc_instr.wid;
      wbase <= alloc_instr.wbase;
      tag   <= alloc_instr.tag;
      for (int o = 0; o < NOPS; o++) begin
        valid_f[o]    <= alloc_instr.src[o].valid;
        signed_f[o]   <= alloc_instr.src[o].is_signed;
        convert_f[o]  <= alloc_instr.src[o].is_float;
        regid[o]      <= alloc_instr.src[o].arch;
        location_f[o] <= 1'b0;
        ready_f[o]    <= 1'b0;
      end
      lookup_issued <= '0;
      part_req      <= '0;
      part_got      <= '0;
    end else if (busy) begin
      if (issue_ack) busy <= 1'b0;
      if (it_gnt) lookup_issued[it_gnt_slot] <= 1'b1;
      if (it_resp_valid) begin
        location_f[it_resp_slot] <= 1'b1;
        ind[it_resp_slot]        <= it_resp_entry;
        if (popcount8(it_resp_entry.m0) + popcount8(it_resp_entry.m1) == 4'd8)
          convert_f[it_resp_slot] <= 1'b0;
      end
      if (rf_gnt) part_req[rf_gnt_slot[RSW-1:1]][rf_gnt_slot[0]] <= 1'b1;
      if (rf_resp_valid) begin
        automatic int o = int'(rf_resp_slot[RSW-1:1]);
        automatic int p = int'(rf_resp_slot[0]);
        part_got[o][p] <= 1'b1;
        // first part placed, second part OR'ed in
        opnd[o] <= (part_got[o] == 2'b00) ? rf_resp_data : (opnd[o] | rf_resp_data);
        if (part_got[o][1-p] || (p == 0 && ind[o].m1 == '0)) ready_f[o] <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) if (rst_n && busy && rf_resp_valid)
    assert (!part_got[rf_resp_slot[RSW-1:1]][rf_resp_slot[0]]) else $error("part fetched twice");
endmodule
