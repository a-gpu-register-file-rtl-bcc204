// tb_rf_bank: random masked writes and reads against a model array. Checks
// that a write touches only the slices of its mask in every thread register,
// that read data appear exactly one cycle after the read request, and that a
// read and write of the same row in one cycle returns the old contents.
module tb_rf_bank;
  import sdc_pkg::*;
  localparam int ROWS = 64, NT = 32, DW = NT * 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic re, we;
  logic [5:0] raddr, waddr;
  slice_mask_t wmask;
  logic [DW-1:0] rdata, wdata;
  rf_bank #(.ROWS(ROWS), .NTHR(NT)) dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wmask, .wdata);

  logic [DW-1:0] model [ROWS];
  logic [DW-1:0] exp_q;
  logic          pend;

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wmask = 0; wdata = 0; pend = 0;
    // fill every row with a full-mask write
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      we = 1; waddr = 6'(r); wmask = 8'hFF;
      for (int w = 0; w < DW / 32; w++) wdata[w*32 +: 32] = $urandom;
      model[r] = wdata;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp_q) begin
          failures++;
          if (failures < 5) $display("FAIL read data mismatch at iteration %0d", it);
        end
      end
      re = 1'($urandom_range(1));
      we = 1'($urandom_range(1));
      raddr = 6'($urandom);
      waddr = ($urandom_range(3) == 0) ? raddr : 6'($urandom);
      wmask = 8'($urandom);
      for (int w = 0; w < DW / 32; w++) wdata[w*32 +: 32] = $urandom;
      pend = re;
      if (re) exp_q = model[raddr];          // old data on same-row collision
      if (we)
        for (int b = 0; b < DW; b++)
          if (wmask[(b % 32) / 4]) model[waddr][b] = wdata[b];
    end
    @(negedge clk);
    re = 0; we = 0;
    if (pend) begin
      checks++;
      if (rdata !== exp_q) failures++;
    end
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
