// bank_arbiter: the operand-collector arbitrator. NREQ requesters each offer
// up to NSLOT requests, each aimed at one of NBANK single-ported banks. Every
// cycle it grants at most one request per bank and at most one per requester
// (one operand collected per collector unit per cycle), trying to use as many
// banks as possible.
//
// Allocation is greedy: banks are visited in an order that starts at a
// rotating bank, and each bank picks, round-robin from its own pointer, the
// first requester not yet granted that has a request for it (lowest slot
// first). A bank's pointer moves past its winner. The greedy, rotating scheme
// is this design's choice; the paper only says the arbitrator maximises bank
// accesses per cycle. Grants are combinational from the request inputs; the
// pointers update on the clock edge.
module bank_arbiter #(
  parameter int unsigned NREQ  = 16,
  parameter int unsigned NSLOT = 6,
  parameter int unsigned NBANK = 16,
  localparam int unsigned RW = (NREQ  > 1) ? $clog2(NREQ)  : 1,
  localparam int unsigned SW = (NSLOT > 1) ? $clog2(NSLOT) : 1,
  localparam int unsigned BW = (NBANK > 1) ? $clog2(NBANK) : 1
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic [NREQ-1:0][NSLOT-1:0]        req,
  input  logic [NREQ-1:0][NSLOT-1:0][BW-1:0] req_bank,
  output logic [NREQ-1:0]                   gnt,        // requester granted
  output logic [NREQ-1:0][SW-1:0]           gnt_slot,   // which of its slots
  output logic [NBANK-1:0]                  bank_gnt,   // bank used
  output logic [NBANK-1:0][RW-1:0]          bank_req,   // by which requester
  output logic [NBANK-1:0][SW-1:0]          bank_slot   // and which slot
);
  logic [NBANK-1:0][RW-1:0] ptr;
  logic [BW-1:0]            bstart;

  always_comb begin
    int unsigned b, r;
    gnt = '0; gnt_slot = '0; bank_gnt = '0; bank_req = '0; bank_slot = '0;
    for (int unsigned bi = 0; bi < NBANK; bi++) begin
      b = (bi + 32'(bstart)) % NBANK;
      for (int unsigned ri = 0; ri < NREQ; ri++) begin
        r = (ri + 32'(ptr[b])) % NREQ;
        if (!bank_gnt[b] && !gnt[r]) begin
          for (int unsigned s = 0; s < NSLOT; s++) begin
            if (!bank_gnt[b] && req[r][s] && (32'(req_bank[r][s]) == b)) begin
              bank_gnt[b]  = 1'b1;
              bank_req[b]  = RW'(r);
              bank_slot[b] = SW'(s);
              gnt[r]       = 1'b1;
              gnt_slot[r]  = SW'(s);
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ptr    <= '0;
      bstart <= '0;
    end else begin
      bstart <= BW'((32'(bstart) + 1) % NBANK);
      for (int unsigned b = 0; b < NBANK; b++)
        if (bank_gnt[b]) ptr[b] <= RW'((32'(bank_req[b]) + 1) % NREQ);
    end
  end

  // Each requester and each bank is granted at most once per cycle.
  always_ff @(posedge clk) if (rst_n)
    for (int unsigned b = 0; b < NBANK; b++)
      assert (!bank_gnt[b] || req[bank_req[b]][bank_slot[b]])
        else $error("grant without request");
endmodule
