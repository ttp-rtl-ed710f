// tb_memory_access_queue: random writes and reads, including writes to a full
// queue that is being read in the same cycle; a SystemVerilog queue is the
// reference for order, contents, level and the ready/valid flags.
module tb_memory_access_queue;
  import ttp_pkg::*;

  localparam int L = 8, D = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  mem_req_t in_req, out_req;
  logic [L-1:0] in_mask = '0, out_mask;
  logic [2:0] level;
  int checks = 0, failures = 0, full_seen = 0, full_pass = 0;
  mem_req_t ref_q [$];
  logic [L-1:0] refm_q [$];

  memory_access_queue #(.LANES(L), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 5000; t++) begin
      bit wr, rd;
      @(negedge clk);
      in_valid  = ($urandom_range(0, 99) < ((t / 500) % 2 ? 80 : 40));
      out_ready = ($urandom_range(0, 99) < ((t / 500) % 2 ? 40 : 80));
      in_req    = '{addr: addr_t'($urandom()), kind: REQ_DEMAND, warp: 8'($urandom())};
      in_mask   = L'($urandom());
      #1;
      checks++;
      if (int'(level) != ref_q.size() || out_valid != (ref_q.size() != 0) ||
          in_ready != (ref_q.size() < D || out_ready)) failures++;
      if (ref_q.size() != 0) begin
        checks++;
        if (out_req != ref_q[0] || out_mask != refm_q[0]) failures++;
      end
      if (ref_q.size() == D) full_seen++;
      rd = out_valid && out_ready;
      wr = in_valid && in_ready;
      if (ref_q.size() == D && wr && rd) full_pass++;
      @(posedge clk);
      if (rd) begin void'(ref_q.pop_front()); void'(refm_q.pop_front()); end
      if (wr) begin ref_q.push_back(in_req); refm_q.push_back(in_mask); end
    end
    checks += 2;
    if (full_seen == 0) failures++;
    if (full_pass == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
