// rf_bank: one register-file bank, ROWS warp registers of NTHR x 32 bits,
// one read port and one write port.
//
// Read: raddr presented with re in cycle t, rdata valid in cycle t+1 (SRAM
// style registered read; a read and a write to the same row in the same cycle
// returns the old data). Write: the 8-bit slice mask is applied to every
// thread register of the row, so only the bit lines of the operand's slices
// are written and the other slices of the physical register keep their data.
module rf_bank
  import sdc_pkg::*;
#(
  parameter int unsigned ROWS = RF_ROWS,
  parameter int unsigned NTHR = THREADS
) (
  input  logic                       clk,
  input  logic                       re,
  input  logic [$clog2(ROWS)-1:0]    raddr,
  output logic [NTHR*TREG_W-1:0]     rdata,
  input  logic                       we,
  input  logic [$clog2(ROWS)-1:0]    waddr,
  input  slice_mask_t                wmask,
  input  logic [NTHR*TREG_W-1:0]     wdata
);
  logic [NTHR*TREG_W-1:0] mem [ROWS];
  logic [NTHR*TREG_W-1:0] bitmask;

  always_comb
    for (int b = 0; b < NTHR * TREG_W; b++) bitmask[b] = wmask[(b % TREG_W) / SLICE_W];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
    if (we) mem[waddr] <= (mem[waddr] & ~bitmask) | (wdata & bitmask);
  end
endmodule
