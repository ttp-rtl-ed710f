// tb_traversal_stack: self-checking test of the LIFO/FIFO node store.
// A SystemVerilog queue is the reference. Random pushes and pops are applied
// first in DFS mode and then, after draining, in BFS mode; top_addr, count,
// empty/full and the prefetch read port at a random position are compared
// with the reference every cycle. The store is also filled to full once.
module tb_traversal_stack;
  import ttp_pkg::*;

  localparam int DEPTH = 16;
  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0;
  trav_mode_e mode = TRAV_DFS;
  addr_t push_addr = '0, top_addr, rd_addr;
  logic [4:0] count;
  logic empty, full;
  logic [3:0] rd_pos = '0;
  int checks = 0, failures = 0;
  addr_t ref_q [$];   // index 0 = oldest entry

  traversal_stack #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    addr_t exp_top;
    checks++;
    if (int'(count) != ref_q.size() || empty != (ref_q.size() == 0) || full != (ref_q.size() == DEPTH)) begin
      failures++;
      $display("count mismatch: %0d vs %0d", count, ref_q.size());
    end
    if (ref_q.size() > 0) begin
      exp_top = (mode == TRAV_DFS) ? ref_q[ref_q.size()-1] : ref_q[0];
      checks++;
      if (top_addr != exp_top) begin
        failures++;
        $display("top mismatch: %h vs %h", top_addr, exp_top);
      end
      checks++;
      if (int'(rd_pos) < ref_q.size() && rd_addr != ref_q[rd_pos]) begin
        failures++;
        $display("rd mismatch at %0d: %h vs %h", rd_pos, rd_addr, ref_q[rd_pos]);
      end
    end
  endtask

  task automatic run(int n, int push_pct);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      push = 1'b0; pop = 1'b0;
      if ($urandom_range(0, 99) < push_pct) begin
        if (ref_q.size() < DEPTH) begin push = 1'b1; push_addr = $urandom(); end
      end else if (ref_q.size() > 0) pop = 1'b1;
      @(posedge clk);
      if (push) ref_q.push_back(push_addr);
      if (pop) begin
        if (mode == TRAV_DFS) void'(ref_q.pop_back());
        else                  void'(ref_q.pop_front());
      end
      @(negedge clk);
      push = 1'b0; pop = 1'b0;
      if (ref_q.size() > 0) rd_pos = 4'($urandom_range(0, ref_q.size() - 1));
      #1 check();
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(600, 55);
    run(200, 90);   // fill up to full
    run(200, 0);    // drain
    @(negedge clk) mode = TRAV_BFS;
    run(600, 55);
    run(200, 90);
    run(200, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
