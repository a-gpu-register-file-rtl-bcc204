// tb_issue_stage: 16 model collector units become ready at random with random
// operands (some narrow floats to convert) while the execution side stalls at
// random. Checks that at most two units are acknowledged per cycle and only
// ready ones, that every instruction leaves exactly once with its operands
// (so a stalled port held its output), that narrow floats arrive converted (a
// 16-bit 1.0 = 0x3C00 becomes 0x3F800000, an 8-bit 1.0 = 0x30 too) and other
// operands unchanged, that dual issue happens, and that every ready unit is
// eventually issued.
module tb_issue_stage;
  import sdc_pkg::*;
  localparam int NCU = 16, ISSUE = 2, NOPS = 3, NT = 2, DW = NT * 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCU-1:0] cu_ready, cu_ack;
  logic [NCU-1:0][WID_W-1:0] cu_wid;
  logic [NCU-1:0][TAG_W-1:0] cu_tag;
  logic [NCU-1:0][NOPS-1:0][DW-1:0] cu_opnd;
  logic [NCU-1:0][NOPS-1:0] cu_conv;
  logic [NCU-1:0][NOPS-1:0][3:0] cu_nslices;
  logic [ISSUE-1:0] ex_valid, ex_ready;
  logic [ISSUE-1:0][WID_W-1:0] ex_wid;
  logic [ISSUE-1:0][TAG_W-1:0] ex_tag;
  logic [ISSUE-1:0][NOPS-1:0][DW-1:0] ex_opnd;
  issue_stage #(.NCU(NCU), .ISSUE(ISSUE), .NOPS(NOPS), .NTHR(NT)) dut (.*);

  logic [NOPS-1:0][DW-1:0] exp_opnd [int];
  int issued, sent, seq, dual;
  logic [NCU-1:0] acked;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    cu_ready = '0; cu_wid = '0; cu_tag = '0; cu_opnd = '0; cu_conv = '0; cu_nslices = '0; ex_ready = '0;
    issued = 0; sent = 0; seq = 0; dual = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      ex_ready = (it > 2900) ? 2'b11 : 2'(($urandom_range(3) != 0) ? 3 : $urandom);
      // new ready units
      for (int c = 0; c < NCU; c++) if (!cu_ready[c] && it < 2700 && $urandom_range(3) == 0) begin
        cu_ready[c] = 1;
        cu_tag[c] = seq;
        for (int o = 0; o < NOPS; o++) begin
          logic [DW-1:0] e;
          case ($urandom_range(2))
            0: begin cu_conv[c][o] = 1; cu_nslices[c][o] = 4; cu_opnd[c][o] = {NT{32'h0000_3C00}}; e = {NT{32'h3F80_0000}}; end
            1: begin cu_conv[c][o] = 1; cu_nslices[c][o] = 2; cu_opnd[c][o] = {NT{32'h0000_0030}}; e = {NT{32'h3F80_0000}}; end
            default: begin cu_conv[c][o] = 0; cu_nslices[c][o] = 4'($urandom_range(8, 1));
                           cu_opnd[c][o] = {$urandom, $urandom}; e = cu_opnd[c][o]; end
          endcase
          exp_opnd[seq][o] = e;
        end
        seq++;
        sent++;
      end
      #1;
      // outputs taken at the coming edge
      for (int i = 0; i < ISSUE; i++) if (ex_valid[i] && ex_ready[i]) begin
        int tg;
        tg = int'(ex_tag[i]);
        chk(exp_opnd.exists(tg), "unknown or repeated instruction");
        if (exp_opnd.exists(tg)) begin
          chk(ex_opnd[i] == exp_opnd[tg], "operands");
          exp_opnd.delete(tg);
          issued++;
        end
      end
      if (ex_valid == 2'b11 && ex_ready == 2'b11) dual++;
      begin
        int n;
        n = 0;
        for (int c = 0; c < NCU; c++) if (cu_ack[c]) begin
          n++;
          chk(cu_ready[c], "ack of a unit that is not ready");
        end
        chk(n <= ISSUE, "more than two issued in a cycle");
        acked = cu_ack;
      end
      @(posedge clk);
      #1;
      for (int c = 0; c < NCU; c++) if (acked[c]) cu_ready[c] = 0;
    end
    chk(issued == sent, "not every ready unit issued");
    chk(dual > 0, "never two instructions in one cycle");
    $display("issued %0d instructions, %0d dual-issue cycles", issued, dual);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
