// tb_src_indirection_table: loads all 256 entries through the configuration
// port, then 16 requesters issue random lookups (3 slots each). For every
// grant in cycle t the testbench expects, in cycle t+1, a response to that
// requester with the same slot and the entry written for that register; no
// response may come without a grant. Also checks that, with lookups spread
// over distinct banks, 16 lookups are served in one cycle.
module tb_src_indirection_table;
  import sdc_pkg::*;
  localparam int NCU = 16, NOPS = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NCU-1:0][NOPS-1:0] req;
  logic [NCU-1:0][NOPS-1:0][7:0] req_reg;
  logic [NCU-1:0] gnt, resp_valid;
  logic [NCU-1:0][1:0] gnt_slot, resp_slot;
  it_entry_t [NCU-1:0] resp_entry;
  logic cfg_we;
  logic [7:0] cfg_addr;
  it_entry_t cfg_data;
  src_indirection_table #(.NCU(NCU), .NOPS(NOPS)) dut (.*);

  it_entry_t model [256];
  logic [NCU-1:0] exp_v;
  logic [NCU-1:0][1:0] exp_slot;
  it_entry_t [NCU-1:0] exp_e;
  int full_cycles;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    req = '0; req_reg = '0; cfg_we = 0; cfg_addr = 0; cfg_data = '0; exp_v = '0;
    full_cycles = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 8'(a); cfg_data = it_entry_t'($urandom);
      model[a] = cfg_data;
    end
    @(negedge clk); cfg_we = 0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      // responses for last cycle's grants
      for (int c = 0; c < NCU; c++) begin
        chk(resp_valid[c] == exp_v[c], "response without grant or missing");
        if (exp_v[c]) begin
          chk(resp_slot[c] == exp_slot[c], "wrong slot");
          chk(resp_entry[c] == exp_e[c], "wrong entry");
        end
      end
      for (int c = 0; c < NCU; c++)
        for (int s = 0; s < NOPS; s++) begin
          req[c][s] = ($urandom_range(2) == 0);
          req_reg[c][s] = (it % 4 == 0) ? 8'(c + 16 * s) : 8'($urandom);
        end
      if (it % 4 == 0) for (int c = 0; c < NCU; c++) req[c] = 3'b001;   // distinct banks
      #1;
      for (int c = 0; c < NCU; c++) begin
        exp_v[c] = gnt[c];
        exp_slot[c] = gnt_slot[c];
        if (gnt[c]) begin
          chk(req[c][gnt_slot[c]], "grant of idle slot");
          exp_e[c] = model[req_reg[c][gnt_slot[c]]];
        end
      end
      if (it % 4 == 0) begin
        chk(&gnt, "16 lookups to 16 banks not served in one cycle");
        full_cycles++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
