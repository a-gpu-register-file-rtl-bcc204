// tb_dst_indirection_table: random writeback beats (three lanes, many aimed
// at the same table bank) with random output stalls. Every accepted operand
// carries a unique id in its data; each must leave exactly once, with its
// header and data intact and with the table entry written for its
// destination register, and no two operands leaving in one cycle may share a
// table bank. Conflicts must actually occur and fill the buffer, and
// wb_ready must drop while the buffer cannot take a whole beat.
module tb_dst_indirection_table;
  import sdc_pkg::*;
  localparam int WB = 3, BUF = 4, NT = 2, DW = NT * 32;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [WB-1:0] wb_valid, out_valid;
  wb_hdr_t [WB-1:0] wb_hdr, out_hdr;
  logic [WB-1:0][DW-1:0] wb_data, out_data;
  it_entry_t [WB-1:0] out_entry;
  logic wb_ready, out_ready, conflict;
  logic [2:0] buf_count;
  logic cfg_we;
  logic [7:0] cfg_addr;
  it_entry_t cfg_data;
  dst_indirection_table #(.WB(WB), .BUF(BUF), .NTHR(NT)) dut (.*);

  it_entry_t model [256];
  wb_hdr_t   sent_hdr [int];
  int        next_id, done, conflicts, max_buf;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  initial begin
    wb_valid = '0; wb_hdr = '0; wb_data = '0; out_ready = 0; cfg_we = 0; cfg_addr = 0; cfg_data = '0;
    next_id = 0; done = 0; conflicts = 0; max_buf = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 8'(a); cfg_data = it_entry_t'($urandom);
      model[a] = cfg_data;
    end
    @(negedge clk); cfg_we = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      out_ready = ($urandom_range(3) != 0);
      for (int l = 0; l < WB; l++) begin
        wb_valid[l] = (it < 2800) && ($urandom_range(1) == 1);
        wb_hdr[l].wid = 6'($urandom);
        wb_hdr[l].wbase = 10'($urandom);
        wb_hdr[l].is_float = 1'($urandom);
        wb_hdr[l].dst = ($urandom_range(1) == 1) ? {4'($urandom), 4'd7} : 8'($urandom);
        wb_data[l] = DW'(next_id + l);
      end
      #1;
      if (conflict) conflicts++;
      chk(wb_ready == (buf_count <= 3'(BUF - WB)), "wb_ready does not follow buffer room");
      if (buf_count > max_buf) max_buf = int'(buf_count);
      // outputs leaving this cycle
      if (out_ready)
        for (int l = 0; l < WB; l++) if (out_valid[l]) begin
          int id;
          id = int'(out_data[l]);
          chk(sent_hdr.exists(id), "unknown or duplicated operand");
          if (sent_hdr.exists(id)) begin
            chk(out_hdr[l] == sent_hdr[id], "header corrupted");
            chk(out_entry[l] == model[out_hdr[l].dst], "wrong table entry");
            sent_hdr.delete(id);
            done++;
          end
          for (int l2 = l + 1; l2 < WB; l2++)
            if (out_valid[l2]) chk(out_hdr[l].dst[3:0] != out_hdr[l2].dst[3:0], "two lookups in one bank");
        end
      if (wb_ready)
        for (int l = 0; l < WB; l++) if (wb_valid[l]) sent_hdr[next_id + l] = wb_hdr[l];
      next_id += WB;
    end
    chk(sent_hdr.size() == 0, "operands lost");
    chk(conflicts > 0, "no bank conflict exercised");
    chk(max_buf >= 2, "buffer never held two operands");
    $display("operands %0d, cycles with a buffered conflict %0d", done, conflicts);
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
