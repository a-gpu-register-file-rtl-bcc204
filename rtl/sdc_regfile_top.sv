// sdc_regfile_top: a GPU streaming-multiprocessor register file that stores
// operands in 4-bit slices, with its extended operand collector.
//
// Read path (one instruction): dispatch allocates the warp instruction to a
// free collector unit (up to ISSUE per cycle) -> each source operand is
// looked up in the banked source indirection table (1 cycle) -> the parts r0
// and, if split, r1 are read through the arbitrator from the banks (grant,
// then a registered bank read whose output passes the bank's value extractor
// and the crossbar in the next cycle) -> the collector unit ORs the parts ->
// when all operands are ready the issue stage converts narrow floats to
// single precision and hands the instruction to the execution units (1 cycle).
// Write path: the WB-wide writeback bus is looked up in the destination
// indirection table (conflicting operands wait in a small buffer) -> the value
// truncator narrows floats and places the slices into r0/r1 words with slice
// masks -> the write side of the arbitrator grants each bank's single write
// port (one cycle per write; parts aimed at one bank are serialised).
// Both indirection tables are loaded with the same kernel configuration
// through cfg_*. Physical warp register = wbase + register name; its bank is
// the low four bits. Warp scheduling, the scoreboard and the execution units
// are outside this module.
module sdc_regfile_top
  import sdc_pkg::*;
#(
  parameter int unsigned NCU   = NUM_CU,
  parameter int unsigned NTHR  = THREADS,
  parameter int unsigned ROWS  = RF_ROWS,
  parameter int unsigned BUF   = 4,
  localparam int unsigned NBANK = RF_BANKS,
  localparam int unsigned NOPS  = SRC_OPS,
  localparam int unsigned ISSUE = ISSUE_W,
  localparam int unsigned WB    = WB_WIDTH,
  localparam int unsigned DW    = NTHR * TREG_W,
  localparam int unsigned CW    = (NCU > 1) ? $clog2(NCU) : 1,
  localparam int unsigned RB    = $clog2(ROWS),
  localparam int unsigned BW    = $clog2(NBANK),
  localparam int unsigned RSW   = $clog2(2 * NOPS),
  localparam int unsigned OSW   = (NOPS > 1) ? $clog2(NOPS) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // kernel configuration of both indirection tables
  input  logic                                cfg_we,
  input  reg_id_t                             cfg_addr,
  input  it_entry_t                           cfg_data,
  // from the dispatch units
  input  logic [ISSUE-1:0]                    disp_valid,
  input  instr_t [ISSUE-1:0]                  disp_instr,
  output logic [ISSUE-1:0]                    disp_ready,
  // to the execution units
  output logic [ISSUE-1:0]                    ex_valid,
  output logic [ISSUE-1:0][WID_W-1:0]         ex_wid,
  output logic [ISSUE-1:0][TAG_W-1:0]         ex_tag,
  output logic [ISSUE-1:0][NOPS-1:0][DW-1:0]  ex_opnd,
  input  logic [ISSUE-1:0]                    ex_ready,
  // writeback bus
  input  logic [WB-1:0]                       wb_valid,
  input  wb_hdr_t [WB-1:0]                    wb_hdr,
  input  logic [WB-1:0][DW-1:0]               wb_data,
  output logic                                wb_ready,
  // status
  output logic                                wb_conflict,
  output logic [$clog2(BUF+1)-1:0]            wb_buf_count
);
  // ---------------- collector units and dispatch allocation --------------
  logic [NCU-1:0]                   cu_busy, cu_alloc;
  instr_t [NCU-1:0]                 cu_alloc_instr;
  logic [NCU-1:0][NOPS-1:0]         it_req;
  reg_id_t [NCU-1:0][NOPS-1:0]      it_req_reg;
  logic [NCU-1:0]                   it_gnt, it_resp_valid;
  logic [NCU-1:0][OSW-1:0]          it_gnt_slot, it_resp_slot;
  it_entry_t [NCU-1:0]              it_resp_entry;
  logic [NCU-1:0][2*NOPS-1:0]       rf_req;
  logic [NCU-1:0][2*NOPS-1:0][PREG_W-1:0] rf_req_addr;
  xinfo_t [NCU-1:0][2*NOPS-1:0]     rf_req_xi;
  logic [NCU-1:0][2*NOPS-1:0][BW-1:0] rf_req_bank;
  logic [NCU-1:0]                   rf_gnt, rf_resp_valid;
  logic [NCU-1:0][RSW-1:0]          rf_gnt_slot, rf_resp_slot;
  logic [NCU-1:0][DW-1:0]           rf_resp_data;
  logic [NCU-1:0]                   cu_ready, cu_ack;
  logic [NCU-1:0][WID_W-1:0]        cu_wid;
  logic [NCU-1:0][TAG_W-1:0]        cu_tag;
  logic [NCU-1:0][NOPS-1:0][DW-1:0] cu_opnd;
  logic [NCU-1:0][NOPS-1:0]         cu_conv;
  logic [NCU-1:0][NOPS-1:0][3:0]    cu_nslices;

  // dispatch port d takes the d-th free collector unit
  always_comb begin
    int unsigned d;
    d = 0;
    cu_alloc = '0; cu_alloc_instr = '0; disp_ready = '0;
    for (int c = 0; c < NCU; c++) begin
      if (!cu_busy[c] && d < ISSUE) begin
        disp_ready[d]     = 1'b1;
        cu_alloc[c]       = disp_valid[d];
        cu_alloc_instr[c] = disp_instr[d];
        d++;
      end
    end
  end

  for (genvar c = 0; c < NCU; c++) begin : g_cu
    collector_unit #(.NOPS(NOPS), .NTHR(NTHR)) u_cu (
      .clk, .rst_n,
      .alloc        (cu_alloc[c]),
      .alloc_instr  (cu_alloc_instr[c]),
      .busy         (cu_busy[c]),
      .it_req       (it_req[c]),
      .it_req_reg   (it_req_reg[c]),
      .it_gnt       (it_gnt[c]),
      .it_gnt_slot  (it_gnt_slot[c]),
      .it_resp_valid(it_resp_valid[c]),
      .it_resp_slot (it_resp_slot[c]),
      .it_resp_entry(it_resp_entry[c]),
      .rf_req       (rf_req[c]),
      .rf_req_addr  (rf_req_addr[c]),
      .rf_req_xi    (rf_req_xi[c]),
      .rf_gnt       (rf_gnt[c]),
      .rf_gnt_slot  (rf_gnt_slot[c]),
      .rf_resp_valid(rf_resp_valid[c]),
      .rf_resp_slot (rf_resp_slot[c]),
      .rf_resp_data (rf_resp_data[c]),
      .inst_ready   (cu_ready[c]),
      .out_wid      (cu_wid[c]),
      .out_tag      (cu_tag[c]),
      .out_opnd     (cu_opnd[c]),
      .out_conv     (cu_conv[c]),
      .out_nslices  (cu_nslices[c]),
      .issue_ack    (cu_ack[c])
    );
  end

  // ---------------- source indirection table -----------------------------
  src_indirection_table #(.NCU(NCU), .NOPS(NOPS)) u_sit (
    .clk, .rst_n,
    .req(it_req), .req_reg(it_req_reg),
    .gnt(it_gnt), .gnt_slot(it_gnt_slot),
    .resp_valid(it_resp_valid), .resp_slot(it_resp_slot), .resp_entry(it_resp_entry),
    .cfg_we, .cfg_addr, .cfg_data
  );

  // ---------------- arbitrator: read side ---------------------------------
  logic [NBANK-1:0]           rd_gnt;
  logic [NBANK-1:0][CW-1:0]   rd_cu;
  logic [NBANK-1:0][RSW-1:0]  rd_slot;

  always_comb
    for (int c = 0; c < NCU; c++)
      for (int s = 0; s < 2 * NOPS; s++) rf_req_bank[c][s] = rf_req_addr[c][s][BW-1:0];

  bank_arbiter #(.NREQ(NCU), .NSLOT(2 * NOPS), .NBANK(NBANK)) u_rd_arb (
    .clk, .rst_n, .req(rf_req), .req_bank(rf_req_bank),
    .gnt(rf_gnt), .gnt_slot(rf_gnt_slot),
    .bank_gnt(rd_gnt), .bank_req(rd_cu), .bank_slot(rd_slot)
  );

  // ---------------- banks, value extractors, crossbar ---------------------
  logic [NBANK-1:0]           q_valid;
  logic [NBANK-1:0][CW-1:0]   q_cu;
  logic [NBANK-1:0][RSW-1:0]  q_slot;
  xinfo_t [NBANK-1:0]         q_xi;
  logic [NBANK-1:0][DW-1:0]   bank_rdata, bank_xdata;

  // write side signals (driven in the writeback section)
  logic [NBANK-1:0]           wr_gnt;
  logic [NBANK-1:0][2:0]      wr_slot;
  logic [2*WB-1:0]            s2_valid;
  logic [2*WB-1:0][PREG_W-1:0] s2_addr;
  slice_mask_t [2*WB-1:0]     s2_mask;
  logic [2*WB-1:0][DW-1:0]    s2_data;

  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    logic [RB-1:0] ra, wa;     // row = address bits above the bank number
    assign ra = rf_req_addr[rd_cu[b]][rd_slot[b]][BW +: RB];
    assign wa = s2_addr[wr_slot[b]][BW +: RB];
    rf_bank #(.ROWS(ROWS), .NTHR(NTHR)) u_bank (
      .clk,
      .re   (rd_gnt[b]),
      .raddr(ra),
      .rdata(bank_rdata[b]),
      .we   (wr_gnt[b]),
      .waddr(wa),
      .wmask(s2_mask[wr_slot[b]]),
      .wdata(s2_data[wr_slot[b]])
    );
    value_extractor #(.NTHR(NTHR)) u_ve (
      .din(bank_rdata[b]), .xi(q_xi[b]), .dout(bank_xdata[b])
    );
  end

  always_ff @(posedge clk) begin
    if (!rst_n) q_valid <= '0;
    else        q_valid <= rd_gnt;
    q_cu   <= rd_cu;
    q_slot <= rd_slot;
    for (int b = 0; b < NBANK; b++) q_xi[b] <= rf_req_xi[rd_cu[b]][rd_slot[b]];
  end

  operand_xbar #(.NBANK(NBANK), .NCU(NCU), .SW(RSW), .DW(DW)) u_xbar (
    .in_valid(q_valid), .in_cu(q_cu), .in_slot(q_slot), .in_data(bank_xdata),
    .out_valid(rf_resp_valid), .out_slot(rf_resp_slot), .out_data(rf_resp_data)
  );

  // One read per collector unit per cycle: no two banks deliver to one unit.
  always_ff @(posedge clk) if (rst_n)
    for (int b = 0; b < NBANK; b++)
      for (int b2 = b + 1; b2 < NBANK; b2++)
        assert (!(q_valid[b] && q_valid[b2] && q_cu[b] == q_cu[b2]))
          else $error("two banks routed to one collector unit");

  // ---------------- value converter stage to execution --------------------
  issue_stage #(.NCU(NCU), .ISSUE(ISSUE), .NOPS(NOPS), .NTHR(NTHR)) u_issue (
    .clk, .rst_n,
    .cu_ready, .cu_wid, .cu_tag, .cu_opnd, .cu_conv, .cu_nslices, .cu_ack,
    .ex_valid, .ex_wid, .ex_tag, .ex_opnd, .ex_ready
  );

  // ---------------- writeback: destination table, truncator, writes -------
  logic [WB-1:0]              d_valid;
  wb_hdr_t [WB-1:0]           d_hdr;
  logic [WB-1:0][DW-1:0]      d_data, t_d0, t_d1;
  it_entry_t [WB-1:0]         d_entry;
  logic [WB-1:0]              d_float;
  logic                       d_ready;

  dst_indirection_table #(.WB(WB), .BUF(BUF), .NTHR(NTHR)) u_dit (
    .clk, .rst_n,
    .wb_valid, .wb_hdr, .wb_data, .wb_ready,
    .out_valid(d_valid), .out_hdr(d_hdr), .out_data(d_data), .out_entry(d_entry),
    .out_ready(d_ready),
    .buf_count(wb_buf_count), .conflict(wb_conflict),
    .cfg_we, .cfg_addr, .cfg_data
  );

  always_comb for (int l = 0; l < WB; l++) d_float[l] = d_hdr[l].is_float;

  value_truncator #(.NWVT(WB), .NTHR(NTHR)) u_vt (
    .din(d_data), .is_float(d_float), .ent(d_entry), .d0(t_d0), .d1(t_d1)
  );

  // S2: up to 2*WB bank writes (lane l part p in slot 2l+p)
  logic [2*WB-1:0][0:0]       w_req;
  logic [2*WB-1:0][0:0][BW-1:0] w_bank;
  logic [2*WB-1:0]            w_gnt;
  logic [2*WB-1:0][0:0]       w_gnt_slot;
  logic [NBANK-1:0][0:0]      wr_bslot;
  logic [2*WB-1:0]            s2_left;

  always_comb
    for (int s = 0; s < 2 * WB; s++) begin
      w_req[s][0]  = s2_valid[s];
      w_bank[s][0] = s2_addr[s][BW-1:0];
      s2_left[s]   = s2_valid[s] && !w_gnt[s];
    end

  bank_arbiter #(.NREQ(2 * WB), .NSLOT(1), .NBANK(NBANK)) u_wr_arb (
    .clk, .rst_n, .req(w_req), .req_bank(w_bank),
    .gnt(w_gnt), .gnt_slot(w_gnt_slot),
    .bank_gnt(wr_gnt), .bank_req(wr_slot), .bank_slot(wr_bslot)
  );

  assign d_ready = !(|s2_left);

  always_ff @(posedge clk) begin
    if (!rst_n) s2_valid <= '0;
    else if (d_ready)
      for (int l = 0; l < WB; l++) begin
        s2_valid[2*l]   <= d_valid[l];
        s2_valid[2*l+1] <= d_valid[l] && (d_entry[l].m1 != '0);
      end
    else
      s2_valid <= s2_left;
    if (d_ready)
      for (int l = 0; l < WB; l++) begin
        s2_addr[2*l]   <= preg_addr(d_hdr[l].wbase, d_entry[l].r0);
        s2_addr[2*l+1] <= preg_addr(d_hdr[l].wbase, d_entry[l].r1);
        s2_mask[2*l]   <= d_entry[l].m0;
        s2_mask[2*l+1] <= d_entry[l].m1;
        s2_data[2*l]   <= t_d0[l];
        s2_data[2*l+1] <= t_d1[l];
      end
  end
endmodule
