// dst_indirection_table: the destination indirection table (an identical
// copy of the source table's array) looked up by the WB writeback-bus lanes,
// plus the small buffer that holds operands losing a table-bank conflict.
//
// Each cycle the candidates are the buffered operands (oldest first) followed
// by the new writeback lanes. A candidate is looked up if its table bank is
// still free this cycle and fewer than WB lookups were taken; at most WB
// operands leave per cycle (one per warp value truncator). New operands that
// lose go into the buffer, which stays in arrival order. wb_ready is high
// while the buffer has room for a whole bus beat (BUF - count >= WB).
// Looked-up operands appear one cycle later on out_*, which all advance
// together when out_ready is high. Buffer depth and the age-ordered policy
// are this design's choices; the paper calls the buffer negligible in size.
module dst_indirection_table
  import sdc_pkg::*;
#(
  parameter int unsigned WB      = WB_WIDTH,
  parameter int unsigned BUF     = 4,
  parameter int unsigned NTHR    = THREADS,
  parameter int unsigned ENTRIES = ARCH_REGS,
  parameter int unsigned NBANK   = IT_BANKS,
  localparam int unsigned AW = $clog2(ENTRIES),
  localparam int unsigned BW = $clog2(NBANK),
  localparam int unsigned DW = NTHR * TREG_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [WB-1:0]           wb_valid,
  input  wb_hdr_t [WB-1:0]        wb_hdr,
  input  logic [WB-1:0][DW-1:0]   wb_data,
  output logic                    wb_ready,
  output logic [WB-1:0]           out_valid,
  output wb_hdr_t [WB-1:0]        out_hdr,
  output logic [WB-1:0][DW-1:0]   out_data,
  output it_entry_t [WB-1:0]      out_entry,
  input  logic                    out_ready,
  output logic [$clog2(BUF+1)-1:0] buf_count,   // for observation
  output logic                    conflict,     // a lane was buffered
  input  logic                    cfg_we,
  input  logic [AW-1:0]           cfg_addr,
  input  it_entry_t               cfg_data
);
  localparam int unsigned NC = BUF + WB;

  logic [BUF-1:0]           b_valid;
  wb_hdr_t [BUF-1:0]        b_hdr;
  logic [BUF-1:0][DW-1:0]   b_data;

  logic [NC-1:0]            c_valid, c_take;
  wb_hdr_t [NC-1:0]         c_hdr;
  logic [NC-1:0][DW-1:0]    c_data;

  logic [NBANK-1:0]             rd_en;
  logic [NBANK-1:0][AW-BW-1:0]  rd_row;
  it_entry_t [NBANK-1:0]        rd_data;

  logic [WB-1:0]            n_valid;
  wb_hdr_t [WB-1:0]         n_hdr;
  logic [WB-1:0][DW-1:0]    n_data;
  logic [WB-1:0][BW-1:0]    n_bank;
  logic [WB-1:0][BW-1:0]    s_bank;

  logic [BUF-1:0]           nb_valid;
  wb_hdr_t [BUF-1:0]        nb_hdr;
  logic [BUF-1:0][DW-1:0]   nb_data;

  logic s1_free, accept;

  assign s1_free  = !(|out_valid) || out_ready;
  assign wb_ready = (BUF - 32'(buf_count)) >= WB;
  assign accept   = wb_ready;

  always_comb begin
    int unsigned k;
    for (int i = 0; i < BUF; i++) begin
      c_valid[i] = b_valid[i]; c_hdr[i] = b_hdr[i]; c_data[i] = b_data[i];
    end
    for (int i = 0; i < WB; i++) begin
      c_valid[BUF+i] = wb_valid[i] && accept;
      c_hdr[BUF+i]   = wb_hdr[i];
      c_data[BUF+i]  = wb_data[i];
    end
    // lookup selection, oldest first
    c_take = '0; rd_en = '0; rd_row = '0;
    n_valid = '0; n_hdr = '0; n_data = '0; n_bank = '0;
    k = 0;
    for (int i = 0; i < NC; i++) begin
      if (s1_free && c_valid[i] && k < WB && !rd_en[c_hdr[i].dst[BW-1:0]]) begin
        c_take[i] = 1'b1;
        rd_en[c_hdr[i].dst[BW-1:0]]  = 1'b1;
        rd_row[c_hdr[i].dst[BW-1:0]] = c_hdr[i].dst[AW-1:BW];
        n_valid[k] = 1'b1;
        n_hdr[k]   = c_hdr[i];
        n_data[k]  = c_data[i];
        n_bank[k]  = c_hdr[i].dst[BW-1:0];
        k++;
      end
    end
    // refill the buffer with the losers, in age order
    nb_valid = '0; nb_hdr = '0; nb_data = '0;
    k = 0;
    for (int i = 0; i < NC; i++) begin
      if (c_valid[i] && !c_take[i] && k < BUF) begin
        nb_valid[k] = 1'b1;
        nb_hdr[k]   = c_hdr[i];
        nb_data[k]  = c_data[i];
        k++;
      end
    end
  end

  always_comb begin
    conflict = 1'b0;
    for (int i = 0; i < WB; i++) if (c_valid[BUF+i] && !c_take[BUF+i]) conflict = 1'b1;
  end

  it_storage #(.ENTRIES(ENTRIES), .NBANK(NBANK)) u_mem (
    .clk, .rd_en, .rd_row, .rd_data, .cfg_we, .cfg_addr, .cfg_data
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      b_valid   <= '0;
      out_valid <= '0;
      buf_count <= '0;
    end else begin
      b_valid   <= nb_valid;
      buf_count <= '0;
      for (int i = 0; i < BUF; i++) if (nb_valid[i]) buf_count <= $bits(buf_count)'(i + 1);
      if (s1_free) out_valid <= n_valid;
    end
    b_hdr  <= nb_hdr;
    b_data <= nb_data;
    if (s1_free) begin
      out_hdr  <= n_hdr;
      out_data <= n_data;
      s_bank   <= n_bank;
    end
  end

  always_comb
    for (int i = 0; i < WB; i++) out_entry[i] = rd_data[s_bank[i]];

  // The buffer never has to drop an operand.
  always_ff @(posedge clk) if (rst_n) begin
    int unsigned lose;
    lose = 0;
    for (int i = 0; i < NC; i++) if (c_valid[i] && !c_take[i]) lose++;
    assert (lose <= BUF) else $error("conflict buffer overflow");
  end
endmodule
