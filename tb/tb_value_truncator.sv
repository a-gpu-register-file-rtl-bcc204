// tb_value_truncator: random single-precision floats (normal, zero,
// denormal, infinity, NaN, values beyond a format's range) and integers are
// written through the three warp value truncators with random destination
// masks. The expected narrow float is derived from the real value (exponent
// found by repeated halving/doubling, mantissa by truncation); the expected
// r0/r1 words are built by walking the masks, and only slices named by the
// masks are compared (the others are not written).
module tb_value_truncator;
  import sdc_pkg::*;
  localparam int NT = 32, NL = 3;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NL-1:0][NT*32-1:0] din, d0, d1;
  logic [NL-1:0] is_float;
  it_entry_t [NL-1:0] ent;
  value_truncator #(.NWVT(NL), .NTHR(NT)) dut (.din, .is_float, .ent, .d0, .d1);

  function automatic logic [7:0] rand_mask(logic [7:0] avoid, int k);
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

  // narrow float of n slices from a single-precision word, via its real value
  function automatic logic [31:0] ref_narrow(int n, logic [31:0] x);
    int E, M, bias, k;
    real mag, f;
    logic s;
    logic [31:0] top;
    case (n) 8: E = 8; 7: E = 7; 6: E = 6; 5: E = 5; 4: E = 5; 3: E = 4; default: E = 3; endcase
    M = 4 * n - 1 - E;
    bias = (1 << (E - 1)) - 1;
    s = x[31];
    top = 32'(s) << (E + M);
    if (x[30:23] == 8'hFF) return top | (((32'd1 << E) - 1) << M) | ((x[22:0] != 0) ? 32'd1 : 32'd0)
                                  | 32'(x[22:0] >> (23 - M));
    if (x[30:23] == 0) return top;
    mag = $bitstoreal({1'b0, 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'b0});
    k = 0;
    while (mag >= 2.0) begin mag = mag / 2.0; k++; end
    while (mag < 1.0)  begin mag = mag * 2.0; k--; end
    if (k + bias >= (1 << E) - 1) return top | (((32'd1 << E) - 1) << M);
    if (k + bias <= 0) return top;
    f = (mag - 1.0) * real'(64'd1 << M);
    return top | (32'(k + bias) << M) | 32'(longint'($floor(f)));
  endfunction

  initial begin
    for (int it = 0; it < 400; it++) begin
      logic [NL-1:0][NT-1:0][31:0] nar;
      for (int l = 0; l < NL; l++) begin
        int n, n0;
        n  = $urandom_range(8, 2);
        n0 = ($urandom_range(1) == 1) ? n : $urandom_range(n, 1);
        ent[l].m0 = rand_mask(8'h00, n0);
        ent[l].m1 = rand_mask(8'h00, n - n0);
        ent[l].r0 = 8'($urandom);
        ent[l].r1 = 8'($urandom);
        is_float[l] = ($urandom_range(3) != 0);
        for (int t = 0; t < NT; t++) begin
          logic [31:0] x;
          x = $urandom;
          case ($urandom_range(7))
            0: x[30:23] = 8'h00;
            1: x[30:23] = 8'hFF;
            2: x[30:23] = 8'(127 + $urandom_range(6) - 3);
            default: ;
          endcase
          din[l][t*32 +: 32] = x;
          if (is_float[l] && n < 8) nar[l][t] = ref_narrow(n, x);
          else nar[l][t] = x;
        end
      end
      @(posedge clk);
      for (int l = 0; l < NL; l++)
        for (int t = 0; t < NT; t++) begin
          int d;
          d = 0;
          for (int s = 0; s < 8; s++) if (ent[l].m0[s]) begin
            checks++;
            if (d0[l][t*32 + 4*s +: 4] !== nar[l][t][4*d +: 4]) begin
              failures++;
              if (failures < 10) $display("FAIL r0 in %h exp narrow %h got %h m0 %b m1 %b f%0d",
                din[l][t*32 +: 32], nar[l][t], d0[l][t*32 +: 32], ent[l].m0, ent[l].m1, is_float[l]);
            end
            d++;
          end
          for (int s = 0; s < 8; s++) if (ent[l].m1[s]) begin
            checks++;
            if (d1[l][t*32 + 4*s +: 4] !== nar[l][t][4*d +: 4]) begin
              failures++;
              if (failures < 10) $display("FAIL r1 in %h exp narrow %h got %h", din[l][t*32 +: 32],
                                          nar[l][t], d1[l][t*32 +: 32]);
            end
            d++;
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
