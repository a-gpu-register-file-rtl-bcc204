// tb_collector_unit: the testbench plays the source indirection table and
// the register file around one collector unit. Random instructions with up
// to three operands (some unused, some split over two registers) are
// allocated; table lookups and bank reads are granted at random, responses
// come one cycle after a grant, one per cycle. The testbench checks the
// requested register numbers and physical addresses (wbase + r0/r1), the
// extraction info sent with each read, that no part is requested twice, that
// the two parts are OR'ed into the full operand, the convert flag and slice
// count handed to the issue stage, that the instruction is ready only when
// every operand has arrived, and that the unit frees itself on issue_ack.
module tb_collector_unit;
  import sdc_pkg::*;
  localparam int NOPS = 3, NT = 2, DW = NT * 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic alloc, busy, it_gnt, it_resp_valid, rf_gnt, rf_resp_valid, inst_ready, issue_ack;
  instr_t alloc_instr;
  logic [NOPS-1:0] it_req;
  reg_id_t [NOPS-1:0] it_req_reg;
  logic [1:0] it_gnt_slot, it_resp_slot;
  it_entry_t it_resp_entry;
  logic [2*NOPS-1:0] rf_req;
  logic [2*NOPS-1:0][PREG_W-1:0] rf_req_addr;
  xinfo_t [2*NOPS-1:0] rf_req_xi;
  logic [2:0] rf_gnt_slot, rf_resp_slot;
  logic [DW-1:0] rf_resp_data;
  logic [WID_W-1:0] out_wid;
  logic [TAG_W-1:0] out_tag;
  logic [NOPS-1:0][DW-1:0] out_opnd;
  logic [NOPS-1:0] out_conv;
  logic [NOPS-1:0][3:0] out_nslices;
  collector_unit #(.NOPS(NOPS), .NTHR(NT)) dut (.*);

  it_entry_t ent [NOPS];
  logic [NOPS-1:0][DW-1:0] val, p0, p1;
  logic [5:0] reqd;
  int split_seen;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic logic [7:0] rand_mask(int k);
    logic [7:0] m;
    int c;
    m = '0; c = 0;
    while (c < k) begin
      int b;
      b = $urandom_range(7);
      if (!m[b]) begin m[b] = 1'b1; c++; end
    end
    return m;
  endfunction

  initial begin
    alloc = 0; alloc_instr = '0; it_gnt = 0; it_gnt_slot = 0; it_resp_valid = 0; it_resp_slot = 0;
    it_resp_entry = '0; rf_gnt = 0; rf_gnt_slot = 0; rf_resp_valid = 0; rf_resp_slot = 0;
    rf_resp_data = '0; issue_ack = 0; split_seen = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int inst = 0; inst < 300; inst++) begin
      int cyc;
      // build an instruction
      @(negedge clk);
      chk(!busy, "unit not free");
      alloc_instr.wid = 6'($urandom);
      alloc_instr.wbase = 10'($urandom);
      alloc_instr.tag = $urandom;
      for (int o = 0; o < NOPS; o++) begin
        int n, n0;
        alloc_instr.src[o].valid = (o == 0) || ($urandom_range(3) != 0);
        alloc_instr.src[o].is_signed = 1'($urandom);
        alloc_instr.src[o].is_float = 1'($urandom);
        alloc_instr.src[o].arch = 8'($urandom);
        n = $urandom_range(8, 1);
        n0 = ($urandom_range(1) == 1) ? n : $urandom_range(n, 1);
        ent[o].m0 = rand_mask(n0);
        ent[o].m1 = rand_mask(n - n0);
        ent[o].r0 = 8'($urandom);
        ent[o].r1 = 8'($urandom);
        val[o] = {$urandom, $urandom};
        // extracted parts as the bank's extractor would return them
        p0[o] = val[o];
        p1[o] = val[o];
        for (int t = 0; t < NT; t++) begin
          p0[o][t*32 +: 32] = val[o][t*32 +: 32] & ((32'd1 << (4 * n0)) - 1);
          p1[o][t*32 +: 32] = val[o][t*32 +: 32] & ~((32'd1 << (4 * n0)) - 1);
        end
        if (ent[o].m1 == 0) p0[o] = val[o];
        if (ent[o].m1 != 0 && alloc_instr.src[o].valid) split_seen++;
      end
      alloc = 1;
      @(negedge clk);
      alloc = 0;
      chk(busy, "unit not busy after allocation");
      chk(out_wid == alloc_instr.wid && out_tag == alloc_instr.tag, "warp id / payload not held");
      reqd = '0;
      cyc = 0;
      while (!inst_ready && cyc < 200) begin
        // lookup grant (random) -> response next cycle
        it_gnt = 0;
        if (|it_req && $urandom_range(1) == 1) begin
          for (int o = NOPS - 1; o >= 0; o--) if (it_req[o]) it_gnt_slot = 2'(o);
          it_gnt = 1;
          chk(it_req_reg[it_gnt_slot] == alloc_instr.src[it_gnt_slot].arch, "wrong lookup register");
        end
        rf_gnt = 0;
        if (|rf_req && $urandom_range(1) == 1) begin
          int s, o, p;
          s = 0;
          for (int k = 2 * NOPS - 1; k >= 0; k--) if (rf_req[k]) s = k;
          o = s / 2; p = s % 2;
          rf_gnt = 1; rf_gnt_slot = 3'(s);
          chk(!reqd[s], "part requested twice");
          reqd[s] = 1'b1;
          chk(rf_req_addr[s] == alloc_instr.wbase + 10'(p ? ent[o].r1 : ent[o].r0), "wrong physical address");
          chk(rf_req_xi[s].m0 == ent[o].m0 && rf_req_xi[s].m1 == ent[o].m1 && rf_req_xi[s].part == 1'(p)
              && rf_req_xi[s].is_signed == alloc_instr.src[o].is_signed, "wrong extraction info");
        end
        @(negedge clk);
        it_resp_valid = it_gnt;
        it_resp_slot = it_gnt_slot;
        it_resp_entry = ent[it_gnt_slot];
        rf_resp_valid = rf_gnt;
        rf_resp_slot = rf_gnt_slot;
        rf_resp_data = rf_gnt_slot[0] ? p1[rf_gnt_slot[2:1]] : p0[rf_gnt_slot[2:1]];
        it_gnt = 0; rf_gnt = 0;
        #1;
        cyc++;
      end
      @(negedge clk);
      it_resp_valid = 0; rf_resp_valid = 0;
      #1;
      chk(inst_ready, "instruction never ready");
      for (int o = 0; o < NOPS; o++) if (alloc_instr.src[o].valid) begin
        int n;
        n = $countones(ent[o].m0) + $countones(ent[o].m1);
        chk(out_opnd[o] == val[o], "operand not assembled");
        chk(out_nslices[o] == 4'(n), "slice count");
        chk(out_conv[o] == (alloc_instr.src[o].is_float && n < 8), "convert flag");
        chk(reqd[2*o] && (reqd[2*o+1] == (ent[o].m1 != 0)), "parts fetched");
      end else chk(reqd[2*o +: 2] == 2'b00 && !out_conv[o], "unused operand fetched");
      issue_ack = 1;
      @(negedge clk);
      issue_ack = 0;
      chk(!busy, "unit not freed by issue_ack");
    end
    chk(split_seen > 50, "too few split operands");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
