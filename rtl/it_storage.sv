// it_storage: the SRAM array of one indirection table, ENTRIES x 32 bits
// split into NBANK banks (entry a lives in bank a % NBANK, row a / NBANK),
// each bank with one registered read port. A separate configuration write
// port loads the kernel's indirection info before the kernel runs. The source
// and the destination table are two identical instances of this array.
module it_storage
  import sdc_pkg::*;
#(
  parameter int unsigned ENTRIES = ARCH_REGS,
  parameter int unsigned NBANK   = IT_BANKS,
  localparam int unsigned AW = $clog2(ENTRIES),
  localparam int unsigned BW = $clog2(NBANK),
  localparam int unsigned RWD = AW - BW
) (
  input  logic                         clk,
  input  logic [NBANK-1:0]             rd_en,
  input  logic [NBANK-1:0][RWD-1:0]    rd_row,
  output it_entry_t [NBANK-1:0]        rd_data,   // valid the cycle after rd_en
  input  logic                         cfg_we,
  input  logic [AW-1:0]                cfg_addr,
  input  it_entry_t                    cfg_data
);
  for (genvar b = 0; b < NBANK; b++) begin : g_bank
    it_entry_t mem [ENTRIES / NBANK];
    always_ff @(posedge clk) begin
      if (rd_en[b]) rd_data[b] <= mem[rd_row[b]];
      if (cfg_we && cfg_addr[BW-1:0] == BW'(b)) mem[cfg_addr[AW-1:BW]] <= cfg_data;
    end
  end
endmodule
