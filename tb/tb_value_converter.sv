// tb_value_converter: random narrow floats of every format in the format
// table (8..28 bits) and 32-bit floats go through the six warp value
// converters. The expected single-precision word is computed from the real
// value (sign * 2^(e-bias) * (1 + m/2^M)) through a double, not from the
// converter's own bit manipulation; zero/denormal exponents must give a
// signed zero, all-ones exponents infinity or NaN. Lanes with conv low must
// pass their operand unchanged, and so do 32-bit operands.
module tb_value_converter;
  import sdc_pkg::*;
  localparam int NT = 32, NL = 6;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NL-1:0] conv;
  logic [NL-1:0][3:0] nsl;
  logic [NL-1:0][NT*32-1:0] opnd, res;
  value_converter #(.NWVC(NL), .NTHR(NT)) dut (.conv, .nslices(nsl), .opnd, .res);

  function automatic logic [31:0] ref_fp32(int n, logic s, logic [31:0] e, logic [31:0] m);
    int E, M, bias;
    real v;
    logic [63:0] d;
    case (n) 8: E = 8; 7: E = 7; 6: E = 6; 5: E = 5; 4: E = 5; 3: E = 4; default: E = 3; endcase
    M = 4 * n - 1 - E;
    bias = (1 << (E - 1)) - 1;
    if (e == 0) return {s, 31'b0};
    if (e == (1 << E) - 1) return {s, 8'hFF, 23'(m << (23 - M))};
    v = 1.0 + real'(m) / real'(64'd1 << M);
    for (int i = 0; i < int'(e) - bias; i++) v = v * 2.0;
    for (int i = 0; i < bias - int'(e); i++) v = v / 2.0;
    if (s) v = -v;
    d = $realtobits(v);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  initial begin
    for (int it = 0; it < 400; it++) begin
      logic [NL-1:0][NT-1:0][31:0] exp;
      for (int l = 0; l < NL; l++) begin
        int n, E, M;
        n = $urandom_range(8, 2);
        conv[l] = ($urandom_range(3) != 0);
        nsl[l] = 4'(n);
        case (n) 8: E = 8; 7: E = 7; 6: E = 6; 5: E = 5; 4: E = 5; 3: E = 4; default: E = 3; endcase
        M = 4 * n - 1 - E;
        for (int t = 0; t < NT; t++) begin
          logic s;
          logic [31:0] e, m, w;
          s = 1'($urandom_range(1));
          case ($urandom_range(9))
            0: e = 0;
            1: e = (1 << E) - 1;
            default: e = $urandom_range((1 << E) - 2, 1);
          endcase
          m = $urandom & ((32'd1 << M) - 1);
          w = (32'(s) << (4 * n - 1)) | (e << M) | m;
          opnd[l][t*32 +: 32] = w;
          exp[l][t] = (conv[l] && n < 8) ? ref_fp32(n, s, e, m) : w;
        end
      end
      @(posedge clk);
      for (int l = 0; l < NL; l++)
        for (int t = 0; t < NT; t++) begin
          checks++;
          if (res[l][t*32 +: 32] !== exp[l][t]) begin
            failures++;
            if (failures < 10) $display("FAIL lane %0d n=%0d in %h got %h exp %h", l, nsl[l],
                                        opnd[l][t*32 +: 32], res[l][t*32 +: 32], exp[l][t]);
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
