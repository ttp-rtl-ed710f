// tb_ttp_fsm: self-checking test of the pop-streak state machine.
// A reference counts consecutive pops since the last push (saturating at 3)
// and maps it to the expected prefetch distance 0/1/2/16; random push/pop/idle
// cycles are applied and state and k are compared every cycle.
module tb_ttp_fsm;
  import ttp_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0;
  ttp_state_e state;
  logic [4:0] k;
  int checks = 0, failures = 0;
  int streak = 0;
  int seen [4] = '{0, 0, 0, 0};

  ttp_fsm dut (.clk, .rst_n, .push, .pop, .state, .k);

  always #5 clk = ~clk;

  function automatic int exp_k(int s);
    case (s)
      0: return 0;
      1: return 1;
      2: return 2;
      default: return 16;
    endcase
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 4000; i++) begin
      int r;
      r = $urandom_range(0, 9);
      @(negedge clk);
      push = (r < 3);
      pop  = (r >= 3 && r < 8);
      @(posedge clk);
      if (push) streak = 0;
      else if (pop && streak < 3) streak++;
      #1;
      checks++;
      if (int'(state) != streak || int'(k) != exp_k(streak)) begin
        failures++;
        if (failures < 10) $display("mismatch cycle %0d: state %0d k %0d, expected %0d/%0d",
                                    i, state, k, streak, exp_k(streak));
      end
      seen[streak]++;
    end
    for (int s = 0; s < 4; s++) begin
      checks++;
      if (seen[s] == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
