// tb_value_extractor: random operands of 1..8 slices are scattered over two
// physical warp registers with random masks (unused slices hold random
// junk), read back through two value extractors (part 0 and part 1) and
// merged with an OR, as the collector unit does. The merged value must equal
// the operand, zero-extended (unsigned, float) or sign-extended (signed
// integer); each part alone must be zero outside its own data slices apart
// from the fill of the top part. Also replays the published example of a
// split 16-bit float (data slice 0 in r0 slice 7, slices 1..3 in r1
// slices 2, 3, 6).
module tb_value_extractor;
  import sdc_pkg::*;
  localparam int NT = 32;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NT*32-1:0] r0, r1, x0, x1;
  xinfo_t xi0, xi1;
  value_extractor #(.NTHR(NT)) dut0 (.din(r0), .xi(xi0), .dout(x0));
  value_extractor #(.NTHR(NT)) dut1 (.din(r1), .xi(xi1), .dout(x1));

  function automatic logic [7:0] rand_mask(int k);
    logic [7:0] m = '0;
    int c = 0;
    while (c < k) begin
      int b = $urandom_range(7);
      if (!m[b]) begin m[b] = 1'b1; c++; end
    end
    return m;
  endfunction

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %h exp %h", what, got, exp);
    end
  endtask

  initial begin
    // the paper's split 16-bit float example: m0 = 10000000 (r0 slice 7), m1 = 01001100 (slices 2,3,6)
    r0 = {NT{32'hA_BCDEF01}};          // slice 7 = A
    r1 = {NT{32'h0_7_0_0_3_2_0_0}};    // slices 6,3,2 = 7,3,2
    xi0 = '{m0: 8'b1000_0000, m1: 8'b0100_1100, part: 1'b0, is_signed: 1'b0};
    xi1 = xi0; xi1.part = 1'b1;
    #1;
    check("fig3 part0", x0[31:0], 32'h0000_000A);
    check("fig3 part1", x1[31:0], 32'h0000_7320);
    check("fig3 merged", x0[31:0] | x1[31:0], 32'h0000_732A);

    for (int it = 0; it < 3000; it++) begin
      int n, n0;
      logic [7:0] m0, m1;
      logic sgn;
      logic [NT-1:0][31:0] val;
      n  = $urandom_range(8, 1);
      n0 = $urandom_range(n, 1);
      if ($urandom_range(1) == 1) n0 = n;
      m0 = rand_mask(n0);
      m1 = rand_mask(n - n0);
      sgn = 1'($urandom_range(1));
      for (int t = 0; t < NT; t++) begin
        val[t] = $urandom;
        if (n < 8) val[t] = val[t] & ((32'd1 << (4 * n)) - 1);
      end
      // scatter: walk the masks to place data slices
      for (int t = 0; t < NT; t++) begin
        int d;
        d = 0;
        r0[t*32 +: 32] = $urandom;
        r1[t*32 +: 32] = $urandom;
        for (int s = 0; s < 8; s++) if (m0[s]) begin r0[t*32 + 4*s +: 4] = val[t][4*d +: 4]; d++; end
        for (int s = 0; s < 8; s++) if (m1[s]) begin r1[t*32 + 4*s +: 4] = val[t][4*d +: 4]; d++; end
      end
      xi0 = '{m0: m0, m1: m1, part: 1'b0, is_signed: sgn};
      xi1 = xi0; xi1.part = 1'b1;
      @(posedge clk);
      for (int t = 0; t < NT; t++) begin
        logic [31:0] exp, merged;
        exp = val[t];
        if (sgn && n < 8 && val[t][4*n-1]) exp = exp | ~((32'd1 << (4 * n)) - 1);
        merged = x0[t*32 +: 32];
        if (m1 != 0) merged = merged | x1[t*32 +: 32];
        check("merged", merged, exp);
        if (m1 != 0) begin
          // part 0 carries only data slices 0..n0-1
          check("part0 only", x0[t*32 +: 32], val[t] & ((32'd1 << (4 * n0)) - 1));
        end
      end
    end
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
