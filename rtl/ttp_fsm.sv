// ttp_fsm: the per-thread pop-streak state machine of TTP.
//
// Each thread's traversal stack has one of these 2-bit machines. A push returns
// it to S0; each pop moves it one state up, S0 -> S1 -> S2 -> S3, and further
// pops keep it in S3. The state tells how many stack entries below the top may
// be prefetched: 0 in S0, K_S1 = 1 in S1, K_S2 = 2 in S2 and K_S3 = 16 in S3
// (the defaults are the state machine's printed numbers; other intensities such
// as 1-2-4 or 1-2-8 are parameter changes).
//
// Interface: push and pop are one-cycle strobes from the traversal stack; at
// most one of them is high in a cycle (asserted). The state updates on the next
// clock edge; k is a combinational function of the registered state, so k
// reflects a pop in the cycle after it. Reset (synchronous, active low) puts the
// machine in S0. The reset style is this implementation's own choice.
module ttp_fsm
  import ttp_pkg::*;
#(
  parameter int unsigned K1 = K_S1,
  parameter int unsigned K2 = K_S2,
  parameter int unsigned K3 = K_S3,
  parameter int unsigned KW = $clog2(K3 + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic          pop,
  output ttp_state_e    state,
  output logic [KW-1:0] k
);

  ttp_state_e state_q, state_d;

  always_comb begin
    state_d = state_q;
    if (push) begin
      state_d = ST_S0;
    end else if (pop) begin
      unique case (state_q)
        ST_S0:   state_d = ST_S1;
        ST_S1:   state_d = ST_S2;
        ST_S2:   state_d = ST_S3;
        default: state_d = ST_S3;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state_q <= ST_S0;
    else        state_q <= state_d;
  end

  always_comb begin
    unique case (state_q)
      ST_S0:   k = '0;
      ST_S1:   k = KW'(K1);
      ST_S2:   k = KW'(K2);
      default: k = KW'(K3);
    endcase
  end

  assign state = state_q;

  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(push && pop))
    else $error("ttp_fsm: push and pop in the same cycle");

endmodule
