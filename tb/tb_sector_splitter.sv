// tb_sector_splitter: random node requests with random output back-pressure.
// The bench expects each node of 64 bytes to come out as two 32-byte sectors,
// at node address + 0 and + 32, in order, with the request's kind, warp and
// lane mask, out_last on the second. In the last phase out_ready is held high
// and nodes are offered every cycle; the sectors must then leave on
// consecutive cycles, one per cycle, with no gap between nodes.
module tb_sector_splitter;
  import ttp_pkg::*;

  localparam int L = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, out_valid, out_last, out_ready = 1'b0;
  mem_req_t in_req, out_req;
  logic [L-1:0] in_mask = '0, out_mask;
  int checks = 0, failures = 0, sent = 0, got = 0;
  mem_req_t exp_q [$];
  logic [L-1:0] expm_q [$];
  bit exp_last_q [$];
  bit always_ready = 0;
  int first_out = -1, last_out = -1, cyc = 0;

  sector_splitter #(.LANES(L)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // driver
  initial begin
    in_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      in_valid = (n >= 500) || ($urandom_range(0, 99) < 60);
      in_req = '{addr: addr_t'($urandom()) & ~addr_t'(63), kind: req_kind_e'($urandom_range(0, 1)), warp: 8'($urandom())};
      in_mask = L'($urandom());
      out_ready = always_ready || ($urandom_range(0, 99) < 70);
      #1;
      if (in_valid && in_ready) begin
        mem_req_t r;
        r = in_req;
        exp_q.push_back(r); expm_q.push_back(in_mask); exp_last_q.push_back(0);
        r.addr = r.addr + 32;
        exp_q.push_back(r); expm_q.push_back(in_mask); exp_last_q.push_back(1);
        sent++;
      end
      if (n == 499) begin
        // drain, then run the throughput phase with out_ready always high
        in_valid = 1'b0;
        while (exp_q.size() != 0) begin
          @(negedge clk) out_ready = 1'b1;
        end
        always_ready = 1;
        got = 0;
      end
    end
    @(negedge clk) in_valid = 1'b0;
    repeat (10) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) failures++;
    // in the last 100 cycles nodes are offered back to back; their sectors must leave on consecutive cycles
    checks++;
    if (got < 100 || last_out - first_out + 1 != got) begin
      failures++;
      $display("throughput: %0d sectors over %0d cycles", got, last_out - first_out + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++;
      end else begin
        if (out_req != exp_q[0] || out_mask != expm_q[0] || out_last != exp_last_q[0]) begin
          failures++;
          if (failures < 10) $display("sector mismatch: %h vs %h", out_req.addr, exp_q[0].addr);
        end
        void'(exp_q.pop_front()); void'(expm_q.pop_front()); void'(exp_last_q.pop_front());
      end
      if (always_ready) begin
        if (first_out < 0) first_out = cyc;
        last_out = cyc;
        got++;
      end
    end
  end
endmodule
