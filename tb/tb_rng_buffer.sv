// tb_rng_buffer: self-checking test of the random number buffer.
//
// Random pushes and pops (never a push while full) are compared cycle by
// cycle against a queue: head data, valid, full and count. The buffer is
// also filled to the brim and drained completely, so full, wrap-around of
// the pointers and empty are all exercised.
module tb_rng_buffer;
  localparam int unsigned W = 4, D = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic push, pop, valid, full;
  logic [W-1:0] push_data, head_data;
  logic [$clog2(D):0] count;
  int checks = 0, failures = 0;
  int n_full = 0, n_wraps = 0;

  rng_buffer #(.WIDTH(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  logic [W-1:0] q[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic step(bit do_push, bit do_pop);
    // never push into a full buffer; a full flag raised too early is an error
    if (do_push && full) begin
      check(q.size() == D, "full only when DEPTH entries are held");
      do_push = 0;
    end
    push = do_push; pop = do_pop; push_data = W'($urandom);
    @(negedge clk);
    if (do_pop && q.size() > 0) void'(q.pop_front());
    if (do_push && q.size() < D) q.push_back(push_data);
    push = 0; pop = 0;
    check(count == ($clog2(D)+1)'(q.size()), "count");
    check(valid == (q.size() > 0), "valid");
    check(full == (q.size() == D), "full");
    if (q.size() > 0) check(head_data == q[0], "head data");
    if (full) n_full++;
  endtask

  initial begin
    push = 0; pop = 0; push_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!valid && count == 0, "empty after reset");
    // fill completely, then drain completely, three times (pointer wrap)
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < D; i++) step(1, 0);
      check(full, "full after DEPTH pushes");
      for (int i = 0; i < D; i++) step(0, 1);
      check(!valid, "empty after DEPTH pops");
      n_wraps++;
    end
    // random traffic
    for (int i = 0; i < 2000; i++) begin
      bit p, o;
      p = $urandom_range(0, 1) == 1;
      o = $urandom_range(0, 2) != 0;
      if (full) p = 0;
      step(p, o);
    end
    check(n_full > 0 && n_wraps == 3, "full and wrap happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
