// tb_pidram_poc: self-checking test of the PiM Operations Controller.
//
// Register accesses are driven as the memory bus would; a scripted memory
// controller accepts requests and reports finishes; a queue stands in for
// the random number buffer. Checked: register read-back, the Start/Ack/Fin
// sequence of the workflow (Start set by software, cleared with Ack set on
// acceptance, Fin on the finish pulse), that the instruction held at the
// controller stays fixed while Start is pending, that a stale finish does
// not set Fin for a new operation, the one-cycle response latency, and that
// the data register returns the buffered random numbers in order.
module tb_pidram_poc;
  import pidram_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic req_valid, req_we, rsp_valid;
  logic [11:0] req_off;
  logic [REG_W-1:0] req_wdata, rsp_rdata;
  logic pim_valid, pim_ready, mc_fin;
  pim_instr_t pim_instr;
  logic rng_valid, rng_pop;
  logic [RNG_BITS-1:0] rng_data;
  int checks = 0, failures = 0;

  pidram_poc dut (.*);

  always #5 clk = ~clk;

  logic [RNG_BITS-1:0] rq[$];
  assign rng_valid = rq.size() > 0;
  assign rng_data  = rq.size() > 0 ? rq[0] : '0;
  always @(posedge clk) if (rng_pop && rq.size() > 0) void'(rq.pop_front());

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic wr(logic [11:0] off, logic [63:0] d);
    req_valid = 1; req_we = 1; req_off = off; req_wdata = d;
    @(negedge clk);
    req_valid = 0;
    check(rsp_valid, "write response after one cycle");
  endtask

  task automatic rd(logic [11:0] off, output logic [63:0] d);
    req_valid = 1; req_we = 0; req_off = off; req_wdata = '0;
    @(negedge clk);
    req_valid = 0;
    check(rsp_valid, "read response after one cycle");
    d = rsp_rdata;
  endtask

  task automatic expect_flags(bit s, bit a, bit f, string what);
    logic [63:0] d;
    rd(POC_FLAG, d);
    check(d[FLAG_START] == s && d[FLAG_ACK] == a && d[FLAG_FIN] == f &&
          d[63:3] == '0, what);
  endtask

  task automatic pulse_ready();
    pim_ready = 1; @(negedge clk); pim_ready = 0;
  endtask
  task automatic pulse_fin();
    mc_fin = 1; @(negedge clk); mc_fin = 0;
  endtask

  function automatic logic [63:0] mk(pim_op_e op, int b, int s, int d);
    pim_instr_t i = '0;
    i.op = op; i.bank = bank_t'(b); i.src_row = row_t'(s); i.dst_row = row_t'(d);
    return 64'(i);
  endfunction

  initial begin
    logic [63:0] d, x, y;
    req_valid = 0; req_we = 0; req_off = '0; req_wdata = '0;
    pim_ready = 0; mc_fin = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    expect_flags(0, 0, 0, "flags clear after reset");
    check(!pim_valid, "no request after reset");

    // A full operation: instruction, Start, accept, finish.
    x = mk(OP_RC_COPY, 3, 100, 200);
    wr(POC_INSTR, x);
    rd(POC_INSTR, d);
    check(d == x, "instruction read back");
    check(!pim_valid, "no request before Start");
    wr(POC_FLAG, 64'h1);
    check(pim_valid && 64'(pim_instr) == x, "request with instruction after Start");
    expect_flags(1, 0, 0, "Start pending");
    y = mk(OP_DRANGE, 1, 5, 0);
    wr(POC_INSTR, y);
    check(pim_valid && 64'(pim_instr) == x, "instruction held while Start pending");
    repeat (4) @(negedge clk);
    check(pim_valid, "request held until accepted");
    pulse_ready();
    check(!pim_valid, "request dropped after acceptance");
    expect_flags(0, 1, 0, "Start cleared, Ack set");
    repeat (3) @(negedge clk);
    pulse_fin();
    expect_flags(0, 1, 1, "Fin set at finish");

    // Second operation: stale finish while Start pending is dropped.
    wr(POC_INSTR, y);
    wr(POC_FLAG, 64'h1);
    expect_flags(1, 0, 0, "new Start clears Ack and Fin");
    pulse_fin();
    expect_flags(1, 0, 0, "stale finish ignored");
    pulse_ready();
    check(64'(pim_instr) == y, "second instruction");
    expect_flags(0, 1, 0, "second Ack");
    pulse_fin();
    expect_flags(0, 1, 1, "second Fin");

    // Ack-only use: next Start before Fin.
    wr(POC_FLAG, 64'h1);
    pulse_ready();
    expect_flags(0, 1, 0, "third Ack");
    wr(POC_FLAG, 64'h1);
    pulse_fin();   // finish of the third operation while fourth pending
    expect_flags(1, 0, 0, "fourth pending, third finish dropped");
    pulse_ready();
    pulse_fin();
    expect_flags(0, 1, 1, "fourth Fin");

    // Data register.
    rd(POC_DATA, d);
    check(d[DATA_VALID] == 0, "data register empty");
    for (int i = 0; i < 12; i++) rq.push_back(RNG_BITS'(i * 7 + 3));
    @(negedge clk);
    for (int i = 0; i < 12; i++) begin
      rd(POC_DATA, d);
      check(d[DATA_VALID] && d[RNG_BITS-1:0] == RNG_BITS'(i * 7 + 3) &&
            d[62:RNG_BITS] == '0, "random number in order");
      @(negedge clk);  // refill
    end
    rd(POC_DATA, d);
    check(d[DATA_VALID] == 0, "data register empty after draining");
    check(rq.size() == 0, "buffer drained");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
