// rr_arbiter: round-robin choice of one requester out of N.
//
// The search for a requester starts one place after the last one granted and
// wraps around, so every requester is served within N grants. grant/grant_idx
// are combinational from req and the registered priority pointer; the pointer
// moves past grant_idx at the clock edge when advance is high. Reset
// (synchronous, active low) starts the search at requester 0.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          advance,
  output logic          grant,
  output logic [IW-1:0] grant_idx
);

  logic [IW-1:0] start_q;

  always_comb begin
    grant     = 1'b0;
    grant_idx = '0;
    for (int j = 0; j < int'(N); j++) begin
      int unsigned idx;
      idx = (int'(start_q) + j) % N;
      if (!grant && req[idx]) begin
        grant     = 1'b1;
        grant_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start_q <= '0;
    end else if (advance && grant) begin
      start_q <= (int'(grant_idx) == int'(N) - 1) ? '0 : grant_idx + 1'b1;
    end
  end

endmodule
