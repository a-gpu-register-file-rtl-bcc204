// tb_workload_occupancy: runs the register footprint of each evaluated kernel
// on the full-size register file (defaults, no parameter overrides).
//
// For every kernel the table of register usage per thread and warps per block
// gives U architectural registers and a block size. A compressed layout is
// generated for those U registers: each gets a random width of 1..8 slices
// (mean 4.5 slices, about the ratio of the 52 -> 29 register example) and a
// random type, and they are packed densely, splitting an operand over two
// registers where it crosses a register end. The testbench then works out how
// many blocks fit, limited by the 1024 warp registers (16 banks x 64) and the
// 48 warps of the SM, once uncompressed (U registers per warp) and once
// compressed (P packed registers per warp), loads the layout, gives every warp
// its own window of P physical registers (wbase = w * P), writes every
// register of every resident warp over the writeback bus and reads all of them
// back through dispatched instructions, comparing each operand with the value
// written (floats widened to single precision, signed integers sign-extended).
// It checks that every kernel fits at least one block without compression,
// that compression never lowers the number of blocks, that all warps' data
// survive side by side, and prints the occupancy (active warps / 48) of both.
// The widths are this testbench's own random choice; the kernels' real widths
// come from a compiler analysis that is not part of the hardware.
module tb_workload_occupancy;
  import sdc_pkg::*;
  localparam int NT   = THREADS;
  localparam int DW   = NT * 32;
  localparam int MAXA = 64;
  localparam int NK   = 11;
  localparam int KREGS [NK] = '{47, 28, 46, 50, 60, 38, 31, 42, 52, 24, 36};
  localparam int KWPB  [NK] = '{ 8,  8,  8,  8,  6,  6,  8,  8, 10,  6,  8};
  localparam string KNAME [NK] = '{"Deferred", "SSAO", "Elevated", "Pathtracer", "CFD",
                                   "DWT2D", "Hotspot", "Hotspot3D", "IMGVF", "GICOV",
                                   "Hybridsort"};

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we;
  reg_id_t cfg_addr;
  it_entry_t cfg_data;
  logic [1:0] disp_valid, disp_ready, ex_valid, ex_ready;
  instr_t [1:0] disp_instr;
  logic [1:0][WID_W-1:0] ex_wid;
  logic [1:0][TAG_W-1:0] ex_tag;
  logic [1:0][2:0][DW-1:0] ex_opnd;
  logic [2:0] wb_valid;
  wb_hdr_t [2:0] wb_hdr;
  logic [2:0][DW-1:0] wb_data;
  logic wb_ready, wb_conflict;
  logic [2:0] wb_buf_count;

  sdc_regfile_top dut (.*);

  it_entry_t lay [MAXA];
  int        nsl [MAXA];
  int        kind [MAXA];
  logic [DW-1:0] expv [MAX_WARPS][MAXA];
  logic [2:0][DW-1:0] exp_ops [int];
  logic [2:0]         exp_use [int];
  int seq, NA, P;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  function automatic int fexp(int n);
    case (n) 8: return 8; 7: return 7; 6: return 6; 5: return 5; 4: return 5; 3: return 4; default: return 3; endcase
  endfunction

  // single precision word of a narrow float, from its real value
  function automatic logic [31:0] ref_fp32(int n, logic s, int e, logic [31:0] m);
    int E, M, bias;
    real v;
    logic [63:0] d;
    E = fexp(n); M = 4 * n - 1 - E; bias = (1 << (E - 1)) - 1;
    if (e == 0) return {s, 31'b0};
    if (e == (1 << E) - 1) return {s, 8'hFF, 23'(m << (23 - M))};
    v = 1.0 + real'(m) / real'(64'd1 << M);
    for (int i = 0; i < e - bias; i++) v = v * 2.0;
    for (int i = 0; i < bias - e; i++) v = v / 2.0;
    if (s) v = -v;
    d = $realtobits(v);
    return {d[63], 8'(int'(d[62:52]) - 1023 + 127), d[51:29]};
  endfunction

  // random value for one thread of register a: returns the word written
  function automatic logic [31:0] rand_value(int a);
    int n;
    n = nsl[a];
    if (kind[a] == 2) begin
      int E, M, e;
      logic [31:0] m;
      logic s;
      if (n == 8) return {1'($urandom), 8'($urandom_range(200, 50)), 23'($urandom)};
      E = fexp(n); M = 4 * n - 1 - E;
      s = 1'($urandom);
      e = ($urandom_range(15) == 0) ? 0 : $urandom_range((1 << E) - 2, 1);
      m = $urandom & ((32'd1 << M) - 1);
      return ref_fp32(n, s, e, m);
    end else if (kind[a] == 1) begin
      logic [31:0] v;
      v = $urandom;
      if (n < 8) begin
        v = v & ((32'd1 << (4 * n)) - 1);
        if (v[4*n-1]) v = v | ~((32'd1 << (4 * n)) - 1);     // sign-extend
      end
      return v;
    end else begin
      return (n == 8) ? $urandom : ($urandom & ((32'd1 << (4 * n)) - 1));
    end
  endfunction

  // dense packing with random slice order; returns registers used in P
  task automatic make_layout();
    int preg, used;
    int order [8];
    preg = 0; used = 0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    for (int a = 0; a < NA; a++) begin
      nsl[a] = $urandom_range(8, 1);
      kind[a] = $urandom_range(2);
      if (kind[a] == 2 && nsl[a] < 2) nsl[a] = 2;
      lay[a] = '0;
      lay[a].r0 = 8'(preg);
      lay[a].r1 = 8'(preg + 1);
      for (int k = 0; k < nsl[a]; k++) begin
        if (used == 8) begin
          preg++; used = 0;
          order.shuffle();
        end
        if (32'(preg) == 32'(lay[a].r0)) lay[a].m0[order[used]] = 1'b1;
        else                              lay[a].m1[order[used]] = 1'b1;
        used++;
      end
      if (lay[a].m1 == 0) lay[a].r1 = 8'(preg);
    end
    if (used != 0) preg++;
    P = preg;
  endtask

  // one writeback beat of up to three registers of warp w
  task automatic write_beat(int w, int a0, int cnt);
    forever begin
      @(negedge clk);
      wb_valid = '0;
      if (wb_ready) break;
    end
    for (int l = 0; l < cnt; l++) begin
      int a;
      logic [DW-1:0] d;
      a = a0 + l;
      for (int t = 0; t < NT; t++) d[t*32 +: 32] = rand_value(a);
      expv[w][a] = d;
      wb_valid[l] = 1'b1;
      wb_hdr[l].wid = 6'(w);
      wb_hdr[l].wbase = 10'(w * P);
      wb_hdr[l].dst = 8'(a);
      wb_hdr[l].is_float = (kind[a] == 2);
      wb_data[l] = d;
    end
  endtask

  // dispatch one instruction reading registers a0, a0+1, a0+2 of warp w
  task automatic read_triple(int w, int a0);
    instr_t in;
    in = '0;
    in.wid = 6'(w);
    in.wbase = 10'(w * P);
    in.tag = seq;
    for (int o = 0; o < 3; o++) begin
      int a;
      a = a0 + o;
      if (a < NA) begin
        in.src[o].valid = 1'b1;
        in.src[o].arch = 8'(a);
        in.src[o].is_signed = (kind[a] == 1);
        in.src[o].is_float = (kind[a] == 2);
        exp_ops[seq][o] = expv[w][a];
      end
    end
    exp_use[seq] = {in.src[2].valid, in.src[1].valid, in.src[0].valid};
    seq++;
    forever begin
      @(negedge clk);
      disp_instr[0] = in;
      disp_valid = 2'b01;
      #1;
      if (disp_ready[0]) break;
      disp_valid = '0;
    end
    @(negedge clk);
    disp_valid = '0;
  endtask

  always @(negedge clk) if (rst_n) ex_ready = 2'b11;

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 2; i++) if (ex_valid[i] && ex_ready[i]) begin
      int tg;
      tg = int'(ex_tag[i]);
      chk(exp_ops.exists(tg), "unexpected instruction at execution");
      if (exp_ops.exists(tg)) begin
        for (int o = 0; o < 3; o++) if (exp_use[tg][o])
          chk(ex_opnd[i][o] == exp_ops[tg][o], "operand value");
        exp_ops.delete(tg);
      end
    end
  end

  task automatic wait_idle();
    int guard;
    guard = 0;
    while (exp_ops.size() != 0 && guard < 20000) begin
      @(negedge clk);
      guard++;
    end
    chk(exp_ops.size() == 0, "instructions never reached execution");
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; disp_valid = '0; disp_instr = '0;
    wb_valid = '0; wb_hdr = '0; wb_data = '0; ex_ready = '0; seq = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int k = 0; k < NK; k++) begin
      int b_plain, b_comp, nw;
      NA = KREGS[k];
      make_layout();
      b_plain = (RF_BANKS * RF_ROWS) / (NA * KWPB[k]);
      if (b_plain > MAX_WARPS / KWPB[k]) b_plain = MAX_WARPS / KWPB[k];
      b_comp = (RF_BANKS * RF_ROWS) / (P * KWPB[k]);
      if (b_comp > MAX_WARPS / KWPB[k]) b_comp = MAX_WARPS / KWPB[k];
      nw = b_comp * KWPB[k];
      chk(b_plain >= 1, "kernel does not fit uncompressed");
      chk(b_comp >= b_plain, "compression lowered the number of blocks");
      chk(nw * P <= RF_BANKS * RF_ROWS, "warps exceed the register file");
      $display("%-10s %2d regs -> %2d packed, warps/block %2d: blocks %0d -> %0d, occupancy %0d%% -> %0d%%",
               KNAME[k], NA, P, KWPB[k], b_plain, b_comp,
               100 * b_plain * KWPB[k] / MAX_WARPS, 100 * nw / MAX_WARPS);
      // load the kernel's indirection info
      for (int a = 0; a < NA; a++) begin
        @(negedge clk);
        cfg_we = 1; cfg_addr = 8'(a); cfg_data = lay[a];
      end
      @(negedge clk); cfg_we = 0;
      // every register of every resident warp
      for (int w = 0; w < nw; w++)
        for (int a = 0; a < NA; a += 3) write_beat(w, a, (NA - a >= 3) ? 3 : NA - a);
      @(negedge clk);
      wb_valid = '0;
      repeat (12) @(negedge clk);
      for (int w = 0; w < nw; w++)
        for (int a = 0; a < NA; a += 3) read_triple(w, a);
      wait_idle();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
