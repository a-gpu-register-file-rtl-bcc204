// tb_sdc_regfile_top: end-to-end test of the compressed register file at its
// default size (16 collector units, 16 banks of 64 x 1024 bits, 32 threads).
//
// A kernel layout is generated the way a register allocator would: NA
// architectural registers get random widths of 1..8 slices and types
// (unsigned, signed, float), and are packed densely into physical registers
// with randomly ordered slices; an operand that does not fit in what is left
// of a register is split over two. Both indirection tables are loaded with
// it. Each round then
//   1. writes a value to every register of every warp over the three-lane
//      writeback bus; floats are chosen to be exact in their narrow format,
//      integers to fit their width (signed ones often negative);
//   2. dispatches random instructions (two ports) reading three registers
//      each and checks every operand delivered to the execution side against
//      the single-precision value / sign- or zero-extended integer written,
//      with the execution side stalling at random.
// In round 2 the writes of one half of the registers run while the other
// half is being read. An isolated read of an unsplit and of a split operand
// checks the read latency (5 and 6 clock edges from the edge that accepts
// the dispatch to the one that raises ex_valid). The testbench counts the
// mechanisms the design has and
// fails if one never happened: split operands (two fetches OR'ed), narrow
// float conversion, sign extension, destination-table conflicts buffered,
// writeback back-pressure, bank conflicts on reads, serialised bank writes,
// dual dispatch and execution stalls.
module tb_sdc_regfile_top;
  import sdc_pkg::*;
  localparam int NT   = THREADS;
  localparam int DW   = NT * 32;
  localparam int NA   = 64;      // architectural registers used by the kernel
  localparam int NW   = 4;       // warps
  localparam int WSTR = 48;      // physical registers reserved per warp

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

  // kernel layout
  it_entry_t lay [NA];
  int        nsl [NA];
  int        kind [NA];          // 0 unsigned, 1 signed, 2 float
  // expected register contents as seen by the execution units
  logic [DW-1:0] expv [NW][NA];

  // instruction bookkeeping
  logic [2:0][DW-1:0] exp_ops [int];
  logic [2:0]         exp_use [int];
  int seq;

  // mechanism counters
  int n_split, n_conv, n_signext, n_conflict, n_wbstall, n_rdconf, n_wrser, n_dual, n_exstall;

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

  // dense packing with random slice order, splitting at register ends
  task automatic make_layout();
    int preg, used;
    int order [8];
    preg = 0; used = 0;
    foreach (order[i]) order[i] = i;
    order.shuffle();
    for (int a = 0; a < NA; a++) begin
      int k;
      nsl[a] = (a < 8) ? 8 : $urandom_range(8, 1);
      kind[a] = $urandom_range(2);
      if (kind[a] == 2 && nsl[a] < 2) nsl[a] = 2;
      lay[a] = '0;
      lay[a].r0 = 8'(preg);
      lay[a].r1 = 8'(preg + 1);
      for (k = 0; k < nsl[a]; k++) begin
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
    chk(preg <= WSTR, "layout larger than a warp's register budget");
    $display("layout: %0d registers of 1..8 slices packed into %0d physical registers", NA, preg);
  endtask

  // write register a of warp w with fresh random data (queued on lane l)
  task automatic write_reg(int w, int a);
    int l;
    logic [DW-1:0] d;
    for (int t = 0; t < NT; t++) d[t*32 +: 32] = rand_value(a);
    expv[w][a] = d;
    // wait for a free lane
    forever begin
      @(negedge clk);
      wb_valid = '0;
      if (wb_ready) break;
      n_wbstall++;
    end
    l = $urandom_range(2);
    wb_valid[l] = 1'b1;
    wb_hdr[l].wid = 6'(w);
    wb_hdr[l].wbase = 10'(w * WSTR);
    wb_hdr[l].dst = 8'(a);
    wb_hdr[l].is_float = (kind[a] == 2);
    wb_data[l] = d;
  endtask

  // write several registers per beat (fills all three lanes)
  task automatic write_beat(int w, int a0, int cnt);
    forever begin
      @(negedge clk);
      wb_valid = '0;
      if (wb_ready) break;
      n_wbstall++;
    end
    for (int l = 0; l < cnt; l++) begin
      int a;
      logic [DW-1:0] d;
      a = a0 + l;
      for (int t = 0; t < NT; t++) d[t*32 +: 32] = rand_value(a);
      expv[w][a] = d;
      wb_valid[l] = 1'b1;
      wb_hdr[l].wid = 6'(w);
      wb_hdr[l].wbase = 10'(w * WSTR);
      wb_hdr[l].dst = 8'(a);
      wb_hdr[l].is_float = (kind[a] == 2);
      wb_data[l] = d;
    end
  endtask

  task automatic drain_writes();
    @(negedge clk);
    wb_valid = '0;
    repeat (12) @(negedge clk);
  endtask

  // build a read instruction of warp w over registers in [lo, hi)
  function automatic instr_t make_instr(int w, int lo, int hi, int tagv);
    instr_t in;
    in = '0;
    in.wid = 6'(w);
    in.wbase = 10'(w * WSTR);
    in.tag = tagv;
    for (int o = 0; o < 3; o++) begin
      int a;
      a = $urandom_range(hi - 1, lo);
      in.src[o].valid = (o == 0) || ($urandom_range(4) != 0);
      in.src[o].arch = 8'(a);
      in.src[o].is_signed = (kind[a] == 1);
      in.src[o].is_float = (kind[a] == 2);
    end
    return in;
  endfunction

  function automatic void note_instr(instr_t in);
    for (int o = 0; o < 3; o++) begin
      int a;
      a = int'(in.src[o].arch);
      exp_ops[int'(in.tag)][o] = expv[int'(in.wid)][a];
      exp_use[int'(in.tag)][o] = in.src[o].valid;
      if (in.src[o].valid) begin
        if (lay[a].m1 != 0) n_split++;
        if (kind[a] == 2 && nsl[a] < 8) n_conv++;
        if (kind[a] == 1 && nsl[a] < 8) n_signext++;
      end
    end
  endfunction

  // execution side: random stalls, check operands
  always @(negedge clk) if (rst_n) begin
    ex_ready = ($urandom_range(4) != 0) ? 2'b11 : 2'($urandom);
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 2; i++) begin
      if (ex_valid[i] && !ex_ready[i]) n_exstall++;
      if (ex_valid[i] && ex_ready[i]) begin
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
    if (|wb_conflict) n_conflict++;
    for (int c = 0; c < NUM_CU; c++) if (|dut.rf_req[c] && !dut.rf_gnt[c]) begin n_rdconf++; break; end
    if (!dut.d_ready) n_wrser++;
  end

  task automatic dispatch_reads(int cnt, int lo, int hi);
    int sent;
    sent = 0;
    while (sent < cnt) begin
      @(negedge clk);
      disp_valid = '0;
      for (int d = 0; d < 2; d++) begin
        if (sent < cnt && $urandom_range(3) != 0) begin
          disp_instr[d] = make_instr($urandom_range(NW - 1), lo, hi, seq);
          disp_valid[d] = 1'b1;
          seq++;
          sent++;
        end
      end
      #1;
      // only what was accepted counts
      for (int d = 0; d < 2; d++) if (disp_valid[d]) begin
        if (disp_ready[d]) note_instr(disp_instr[d]);
        else begin
          disp_valid[d] = 1'b0;
          sent--;
        end
      end
      if (disp_valid == 2'b11) n_dual++;
    end
    @(negedge clk);
    disp_valid = '0;
  endtask

  task automatic wait_idle();
    int guard;
    guard = 0;
    while (exp_ops.size() != 0 && guard < 20000) begin
      @(negedge clk);
      guard++;
    end
    chk(exp_ops.size() == 0, "instructions never reached execution");
  endtask

  // isolated read latency: edges from dispatch to ex_valid
  task automatic latency_probe(int a, int expect_edges);
    int edges;
    instr_t in;
    in = '0;
    in.wid = 0;
    in.wbase = 0;
    in.tag = seq;
    seq++;
    in.src[0].valid = 1'b1;
    in.src[0].arch = 8'(a);
    in.src[0].is_signed = (kind[a] == 1);
    in.src[0].is_float = (kind[a] == 2);
    @(negedge clk);
    force ex_ready = 2'b11;
    disp_instr[0] = in;
    disp_valid = 2'b01;
    #1;
    note_instr(in);
    edges = 0;
    @(negedge clk);
    disp_valid = '0;
    edges = 1;
    while (!ex_valid[0] && !ex_valid[1] && edges < 50) begin
      @(negedge clk);
      edges++;
    end
    // edges counts the edge that accepted the dispatch too
    chk(edges - 1 == expect_edges, $sformatf("read latency %0d edges, expected %0d", edges - 1, expect_edges));
    @(negedge clk);
    release ex_ready;
  endtask

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_data = '0; disp_valid = '0; disp_instr = '0;
    wb_valid = '0; wb_hdr = '0; wb_data = '0; ex_ready = '0; seq = 0;
    n_split = 0; n_conv = 0; n_signext = 0; n_conflict = 0; n_wbstall = 0;
    n_rdconf = 0; n_wrser = 0; n_dual = 0; n_exstall = 0;
    make_layout();
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load the kernel's indirection info
    for (int a = 0; a < NA; a++) begin
      @(negedge clk);
      cfg_we = 1; cfg_addr = 8'(a); cfg_data = lay[a];
    end
    @(negedge clk); cfg_we = 0;

    // round 1: write everything (three lanes per beat, bank conflicts in the
    // destination table come from registers a, a+16, a+32 in one beat)
    for (int w = 0; w < NW; w++)
      for (int a = 0; a < NA; a += 3) write_beat(w, a, (NA - a >= 3) ? 3 : NA - a);
    for (int w = 0; w < NW; w++)
      for (int a = 0; a < 16; a++) begin
        forever begin
          @(negedge clk);
          wb_valid = '0;
          if (wb_ready) break;
          n_wbstall++;
        end
        for (int l = 0; l < 3; l++) begin
          int r;
          logic [DW-1:0] d;
          r = a + 16 * l;
          for (int t = 0; t < NT; t++) d[t*32 +: 32] = rand_value(r);
          expv[w][r] = d;
          wb_valid[l] = 1'b1;
          wb_hdr[l].wid = 6'(w);
          wb_hdr[l].wbase = 10'(w * WSTR);
          wb_hdr[l].dst = 8'(r);
          wb_hdr[l].is_float = (kind[r] == 2);
          wb_data[l] = d;
        end
      end
    drain_writes();

    // latency of an isolated unsplit and split read
    begin
      int au, as;
      au = -1; as = -1;
      for (int a = 0; a < NA; a++) begin
        if (au < 0 && lay[a].m1 == 0) au = a;
        if (as < 0 && lay[a].m1 != 0) as = a;
      end
      wait_idle();
      latency_probe(au, 5);
      wait_idle();
      if (as >= 0) latency_probe(as, 6);
      wait_idle();
    end

    dispatch_reads(300, 0, NA);
    wait_idle();

    // round 2: rewrite the upper half while reading the lower half
    fork
      begin
        for (int w = 0; w < NW; w++)
          for (int a = NA / 2; a < NA; a++) write_reg(w, a);
        drain_writes();
      end
      dispatch_reads(200, 0, NA / 2);
    join
    wait_idle();
    dispatch_reads(200, NA / 2, NA);
    wait_idle();

    $display("split %0d, converted %0d, sign-extended %0d, table conflicts %0d, wb stalls %0d",
             n_split, n_conv, n_signext, n_conflict, n_wbstall);
    $display("read bank conflicts %0d, write serialisation %0d, dual dispatch %0d, exec stalls %0d",
             n_rdconf, n_wrser, n_dual, n_exstall);
    chk(n_split > 0, "no split operand read");
    chk(n_conv > 0, "no narrow float converted");
    chk(n_signext > 0, "no signed narrow integer");
    chk(n_conflict > 0, "no destination table conflict");
    chk(n_wbstall > 0, "no writeback back-pressure");
    chk(n_rdconf > 0, "no read bank conflict");
    chk(n_wrser > 0, "no serialised bank write");
    chk(n_dual > 0, "no dual dispatch");
    chk(n_exstall > 0, "no execution stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
