// tb_pidram_mc: self-checking test of the PiDRAM memory controller (command
// scheduler plus random number buffer) against the DDR3 behavioural model.
//
// Checked: a written line reads back; a RowClone-Copy makes the destination
// row equal to the source row; D-RaNGe operations fill the random number
// buffer with exactly the selected bits of each burst, in order; once the
// buffer is full a further D-RaNGe instruction is not accepted, and it is
// accepted as soon as one entry is popped; the buffer's contents come out
// in order through rng_valid/rng_data/rng_pop.
module tb_pidram_mc;
  import pidram_pkg::*;

  localparam int unsigned DEPTH = 16;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  bus_req_t mem_req;
  bus_rsp_t mem_rsp;
  logic pim_valid, pim_ready, mc_fin;
  pim_instr_t pim_instr;
  logic rng_valid, rng_pop;
  logic [RNG_BITS-1:0] rng_data;
  dram_cmd_t phy_cmd;
  line_t phy_wdata, phy_rd_data;
  logic phy_rd_valid;
  int checks = 0, failures = 0;

  pidram_mc #(.RNG_DEPTH(DEPTH)) dut (.*);
  ddr3_model dram (.clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata),
                   .rd_valid(phy_rd_valid), .rd_data(phy_rd_data));

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // expected random numbers: selected bits of each reduced-tRCD burst
  logic [RNG_BITS-1:0] exp_q[$];
  int cur_bitsel;
  always @(posedge clk)
    if (rst_n && phy_rd_valid && dut.u_sched.rng_push)
      exp_q.push_back(RNG_BITS'(phy_rd_data >> cur_bitsel));

  function automatic addr_t la(int b, int r, int l);
    return addr_t'((r << (LINE_OFF + LCOL_W + BA_W)) | (b << (LINE_OFF + LCOL_W)) |
                   (l << LINE_OFF));
  endfunction

  task automatic access(bit we, addr_t a, line_t wd, output line_t rdat);
    mem_req_valid = 1; mem_req.we = we; mem_req.addr = a; mem_req.wdata = wd;
    #1;
    while (!mem_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    mem_req_valid = 0;
    #1;
    while (!mem_rsp_valid) begin @(negedge clk); #1; end
    rdat = mem_rsp.rdata;
    @(negedge clk);
  endtask

  task automatic set_instr(pim_op_e op, int b, int s, int d, int bs);
    pim_instr = '0;
    pim_instr.op = op; pim_instr.bank = bank_t'(b); pim_instr.src_row = row_t'(s);
    pim_instr.dst_row = row_t'(d); pim_instr.bitsel = BITSEL_W'(bs);
  endtask

  task automatic pim_wait_fin();
    pim_valid = 1;
    #1;
    while (!pim_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    pim_valid = 0;
    #1;
    while (!mc_fin) begin @(negedge clk); #1; end
    repeat (10) @(negedge clk);
  endtask

  initial begin
    line_t w, d;
    int stall;
    mem_req_valid = 0; mem_req = '0; pim_valid = 0; pim_instr = '0; rng_pop = 0;
    cur_bitsel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int i = 0; i < LINE_W / 32; i++) w[i*32 +: 32] = $urandom;
    access(1, la(3, 70, 12), w, d);
    access(0, la(3, 70, 12), '0, d);
    check(d == w, "line read back");

    set_instr(OP_RC_COPY, 3, 70, 71, 0);
    pim_wait_fin();
    access(0, la(3, 71, 12), '0, d);
    check(d == w, "copied line in destination row");
    access(0, la(3, 71, 40), '0, d);
    check(d == dram.peek(3, 70, 40), "untouched line copied too");

    // fill the buffer
    for (int k = 0; k < DEPTH; k++) begin
      cur_bitsel = 16 * (k % 32);
      set_instr(OP_DRANGE, k % 8, 2000 + k, 0, cur_bitsel);
      pim_wait_fin();
    end
    check(exp_q.size() == DEPTH, "one number per D-RaNGe operation");
    check(rng_valid, "buffer holds numbers");
    // one more: must stall while full
    set_instr(OP_DRANGE, 0, 3000, 0, 0);
    cur_bitsel = 0;
    pim_valid = 1;
    stall = 0;
    repeat (40) begin
      @(negedge clk); #1;
      if (!pim_ready) stall++;
    end
    check(stall == 40, "D-RaNGe stalls while the buffer is full");
    // pop one: the waiting instruction proceeds
    rng_pop = 1; #1;
    check(rng_data == exp_q[0], "first buffered number");
    void'(exp_q.pop_front());
    @(negedge clk); rng_pop = 0; #1;
    stall = 0;
    while (!pim_ready) begin @(negedge clk); #1; stall++; end
    check(stall < 3, "D-RaNGe proceeds once an entry is free");
    @(negedge clk);
    pim_valid = 0;
    #1;
    while (!mc_fin) begin @(negedge clk); #1; end
    repeat (10) @(negedge clk);
    // drain in order
    for (int k = 0; k < DEPTH; k++) begin
      #1;
      check(rng_valid && rng_data == exp_q[0], "buffered numbers in order");
      void'(exp_q.pop_front());
      rng_pop = 1;
      @(negedge clk);
      rng_pop = 0;
    end
    #1;
    check(!rng_valid && exp_q.size() == 0, "buffer empty after draining");
    check(dram.n_viol == 0 && dram.n_copy == 1 && dram.n_rng_rd == DEPTH + 1,
          "model saw one copy, the reduced-tRCD reads and no stray violation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
