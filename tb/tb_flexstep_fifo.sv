// tb_flexstep_fifo -- Data Buffer FIFO against a queue model: random push/pop traffic, order,
// full/empty/count flags, ignored push-when-full and pop-when-empty, default depth of 64.
module tb_flexstep_fifo;
  import flexstep_pkg::*;
  localparam int unsigned DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, empty, full;
  entry_t din, dout;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0, n_full = 0;
  entry_t q [$];

  flexstep_fifo #(.DEPTH(DEPTH)) u_dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count);

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      @(negedge clk);
      // phases: fill-biased, drain-biased, balanced
      push = ($urandom % 100) < ((cyc / 2000) % 3 == 0 ? 80 : (cyc / 2000) % 3 == 1 ? 20 : 50);
      pop  = ($urandom % 100) < ((cyc / 2000) % 3 == 0 ? 20 : (cyc / 2000) % 3 == 1 ? 80 : 50);
      din  = entry_t'({$urandom, $urandom, $urandom, $urandom, $urandom});
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == DEPTH) || int'(count) != q.size()) begin
        failures++;
        $display("FAIL: flags count=%0d model=%0d", count, q.size());
      end
      if (q.size() > 0) begin
        checks++;
        if (dout != q[0]) begin
          failures++;
          $display("FAIL: head mismatch");
        end
      end
      if (full) n_full++;
      @(posedge clk);
      begin
        automatic int sz = q.size();
        if (pop && sz > 0) void'(q.pop_front());
        if (push && sz < DEPTH) q.push_back(din);   // a push into a full FIFO is dropped
      end
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("FAIL: never full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
