// tb_bank_arbiter: random request patterns (16 requesters x 6 slots onto 16
// banks, as the register-file arbitrator is used). Every cycle it checks that
// each grant answers a real request to that bank, that no bank and no
// requester is granted twice, that the per-requester and per-bank grant
// outputs agree, and that the allocation is maximal: no bank is left idle
// while an ungranted requester asks for it. A requester that keeps one
// request up must be served within NREQ*NBANK cycles.
module tb_bank_arbiter;
  localparam int NREQ = 16, NSLOT = 6, NBANK = 16;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NREQ-1:0][NSLOT-1:0] req;
  logic [NREQ-1:0][NSLOT-1:0][3:0] req_bank;
  logic [NREQ-1:0] gnt;
  logic [NREQ-1:0][2:0] gnt_slot;
  logic [NBANK-1:0] bank_gnt;
  logic [NBANK-1:0][3:0] bank_req;
  logic [NBANK-1:0][2:0] bank_slot;
  bank_arbiter #(.NREQ(NREQ), .NSLOT(NSLOT), .NBANK(NBANK)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  int wait_cnt;
  int max_wait;

  initial begin
    req = '0; req_bank = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    max_wait = 0;
    wait_cnt = 0;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      for (int r = 0; r < NREQ; r++)
        for (int s = 0; s < NSLOT; s++) begin
          req[r][s] = ($urandom_range(3) == 0);
          req_bank[r][s] = 4'($urandom_range(it % 2 ? 3 : 15));   // heavy conflicts half the time
        end
      // requester 5 keeps a request on bank 2 (starvation test)
      req[5][0] = 1'b1; req_bank[5][0] = 4'd2;
      #1;
      for (int b = 0; b < NBANK; b++) if (bank_gnt[b]) begin
        chk(req[bank_req[b]][bank_slot[b]] && req_bank[bank_req[b]][bank_slot[b]] == 4'(b), "grant without request");
        chk(gnt[bank_req[b]] && gnt_slot[bank_req[b]] == bank_slot[b], "bank/requester grant mismatch");
      end
      for (int r = 0; r < NREQ; r++) begin
        int n;
        n = 0;
        for (int b = 0; b < NBANK; b++) if (bank_gnt[b] && bank_req[b] == 4'(r)) n++;
        chk(n == (gnt[r] ? 1 : 0), "requester granted more than once");
        if (!gnt[r])
          for (int s = 0; s < NSLOT; s++)
            if (req[r][s]) chk(bank_gnt[req_bank[r][s]], "bank idle while requested");
      end
      if (gnt[5] && gnt_slot[5] == 3'd0) wait_cnt = 0;
      else wait_cnt++;
      if (wait_cnt > max_wait) max_wait = wait_cnt;
    end
    chk(max_wait < NREQ * NBANK, "persistent request starved");
    $display("longest wait of the persistent request: %0d cycles", max_wait);
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
