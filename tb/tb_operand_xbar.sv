// tb_operand_xbar: each cycle a random set of banks carries reads for a
// random one-to-one assignment of collector units (as the arbitrator
// guarantees); every unit must receive exactly the data and slot of the bank
// assigned to it, and units with no bank must see nothing.
module tb_operand_xbar;
  localparam int NBANK = 16, NCU = 16, SW = 3, DW = 64;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [NBANK-1:0] in_valid;
  logic [NBANK-1:0][3:0] in_cu;
  logic [NBANK-1:0][SW-1:0] in_slot;
  logic [NBANK-1:0][DW-1:0] in_data;
  logic [NCU-1:0] out_valid;
  logic [NCU-1:0][SW-1:0] out_slot;
  logic [NCU-1:0][DW-1:0] out_data;
  operand_xbar #(.NBANK(NBANK), .NCU(NCU), .SW(SW), .DW(DW)) dut (.*);

  int perm [NCU];
  int owner [NCU];

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int i = 0; i < NCU; i++) perm[i] = i;
      perm.shuffle();
      for (int c = 0; c < NCU; c++) owner[c] = -1;
      for (int b = 0; b < NBANK; b++) begin
        in_valid[b] = ($urandom_range(1) == 1);
        in_cu[b] = 4'(perm[b]);
        in_slot[b] = 3'($urandom);
        in_data[b] = {$urandom, $urandom};
        if (in_valid[b]) owner[perm[b]] = b;
      end
      @(posedge clk);
      for (int c = 0; c < NCU; c++) begin
        checks++;
        if (owner[c] < 0) begin
          if (out_valid[c]) failures++;
        end else if (!out_valid[c] || out_data[c] != in_data[owner[c]] || out_slot[c] != in_slot[owner[c]])
          failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
