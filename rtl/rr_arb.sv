// rr_arb -- round-robin arbiter.
//
// Grants one of REQS requesters (one-hot), searching from the position after
// the last winner.  The pointer moves only when `advance` is high, so a grant
// that is not used does not cost the winner its turn.  Combinational grant,
// pointer updated on the clock.  Used by the router's switch allocator; the
// paper does not describe the router's arbitration, this is the usual choice.
// The loop index is an int; only its low bits select a request.
module rr_arb #(
  parameter int unsigned REQS = 10
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [REQS-1:0] req,
  input  logic            advance,
  output logic [REQS-1:0] grant
);
  localparam int unsigned IW = (REQS > 1) ? $clog2(REQS) : 1;

  logic [IW-1:0] ptr_q;   // highest-priority requester

  always_comb begin
    int unsigned idx;
    logic        found;
    grant = '0;
    found = 1'b0;
    for (int unsigned k = 0; k < REQS; k++) begin
      idx = (int'(ptr_q) + k) % REQS;
      if (!found && req[idx]) begin
        grant[idx] = 1'b1;
        found      = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr_q <= '0;
    end else if (advance && (grant != '0)) begin
      for (int unsigned k = 0; k < REQS; k++)
        if (grant[k]) ptr_q <= IW'((k + 1) % REQS);
    end
  end
endmodule
