// tb_pidram_workloads: the evaluated operations, measured in controller
// cycles on pidram_top at its default parameters with the DDR3 model.
//
//  * Copy of one 8 KiB row: first by the CPU (128 line loads and 128 line
//    stores over the memory bus), then by one RowClone-Copy instruction.
//    Both results are checked; the RowClone sequence must take exactly
//    T_RC_ACT_PRE + T_RC_PRE_ACT + tRAS cycles from first ACT to last PRE,
//    and the CPU copy must take more than 118.5 times the controller time of
//    the RowClone (its 23 cycles including tRP), the published end-to-end
//    copy speedup, so that the hardware leaves room for it.
//  * D-RaNGe latency: the 4 random bits reach the random number buffer
//    T_RNG_RCD + the PHY read latency after the first ACT.
//  * D-RaNGe rate: back-to-back operations started by a software-like loop
//    follow each other every tRAS + tRP cycles; at a 400 MHz controller
//    clock that rate must exceed the published 8.30 Mb/s.
module tb_pidram_workloads;
  import pidram_pkg::*;

  localparam addr_t POC = 32'h6000_0000;
  localparam int unsigned LINES = 1 << LCOL_W;
  localparam int unsigned RD_LAT = 9;
  localparam real CLK_NS = 2.5;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  bus_req_t cpu_req;
  bus_rsp_t cpu_rsp;
  dram_cmd_t phy_cmd;
  line_t phy_wdata, phy_rd_data;
  logic phy_rd_valid;
  int checks = 0, failures = 0;

  pidram_top dut (.*);
  ddr3_model #(.RD_LAT(RD_LAT)) dram (.clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata),
                   .rd_valid(phy_rd_valid), .rd_data(phy_rd_data));

  always #5 clk = ~clk;

  int cyc = 0;
  int act_t[$];
  int pre_t[$];
  int push_t[$];
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (phy_cmd.cmd == CMD_ACT) act_t.push_back(cyc);
      if (phy_cmd.cmd == CMD_PRE) pre_t.push_back(cyc);
      if (dut.u_mc.rng_push) push_t.push_back(cyc);
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic bus(bit we, addr_t a, line_t wd, output line_t rd);
    cpu_req_valid = 1; cpu_req.we = we; cpu_req.addr = a; cpu_req.wdata = wd;
    #1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cpu_req_valid = 0;
    #1;
    while (!cpu_rsp_valid) begin @(negedge clk); #1; end
    rd = cpu_rsp.rdata;
    @(negedge clk);
  endtask

  task automatic store64(addr_t a, logic [63:0] v);
    line_t d;
    bus(1, a, LINE_W'(v), d);
  endtask

  task automatic load64(addr_t a, output logic [63:0] v);
    line_t d;
    bus(0, a, '0, d);
    v = d[63:0];
  endtask

  function automatic addr_t la(int b, int r, int l);
    return addr_t'(32'h8000_0000 | (r << (LINE_OFF + LCOL_W + BA_W)) |
                   (b << (LINE_OFF + LCOL_W)) | (l << LINE_OFF));
  endfunction

  function automatic logic [63:0] instr(pim_op_e op, int b, int s, int d, int bs);
    pim_instr_t i = '0;
    i.op = op; i.bank = bank_t'(b); i.src_row = row_t'(s); i.dst_row = row_t'(d);
    i.bitsel = BITSEL_W'(bs);
    return 64'(i);
  endfunction

  task automatic start_and_wait(logic [63:0] ins, int flag_bit);
    logic [63:0] f;
    store64(POC + addr_t'(POC_INSTR), ins);
    store64(POC + addr_t'(POC_FLAG), 64'(1) << FLAG_START);
    do load64(POC + addr_t'(POC_FLAG), f); while (!f[flag_bit]);
  endtask

  initial begin
    line_t d;
    logic [63:0] v;
    int t0, cpu_cycles, rc_cycles, a0, p0, n0, min_gap, n_exact;
    real ratio, mbps;

    cpu_req_valid = 0; cpu_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- CPU copy of row 10 to row 11 (bank 4)
    t0 = cyc;
    for (int l = 0; l < LINES; l++) begin
      line_t x;
      bus(0, la(4, 10, l), '0, x);
      bus(1, la(4, 11, l), x, d);
    end
    repeat (20) @(negedge clk);
    cpu_cycles = cyc - t0 - 20;
    for (int l = 0; l < LINES; l += 7) begin
      bus(0, la(4, 11, l), '0, d);
      check(d == dram.peek(4, 10, l), "CPU copy correct");
    end

    // ---- RowClone-Copy of row 10 to row 12
    repeat (20) @(negedge clk);
    a0 = act_t.size(); p0 = pre_t.size();
    start_and_wait(instr(OP_RC_COPY, 4, 10, 12, 0), FLAG_FIN);
    repeat (20) @(negedge clk);
    rc_cycles = pre_t[p0 + 1] - act_t[a0] + T_RP;
    check(pre_t[p0 + 1] - act_t[a0] == T_RC_ACT_PRE + T_RC_PRE_ACT + T_RAS,
          "RowClone: first ACT to last PRE");
    for (int l = 0; l < LINES; l += 7) begin
      bus(0, la(4, 12, l), '0, d);
      check(d == dram.peek(4, 10, l), "RowClone copy correct");
    end
    ratio = real'(cpu_cycles) / real'(rc_cycles);
    $display("row copy: CPU %0d cycles, RowClone %0d cycles, ratio %.1f", cpu_cycles,
             rc_cycles, ratio);
    check(ratio > 118.5, "controller-level gap exceeds the published copy speedup");

    // ---- D-RaNGe latency
    a0 = act_t.size(); n0 = push_t.size();
    start_and_wait(instr(OP_DRANGE, 2, 300, 0, 16), FLAG_FIN);
    check(push_t.size() == n0 + 1 && push_t[n0] - act_t[a0] == T_RNG_RCD + RD_LAT,
          "D-RaNGe bits buffered T_RNG_RCD + read latency after ACT");
    $display("D-RaNGe: bits buffered %0d cycles (%.1f ns) after ACT",
             push_t[n0] - act_t[a0], CLK_NS * real'(push_t[n0] - act_t[a0]));
    load64(POC + addr_t'(POC_DATA), v);
    check(v[DATA_VALID] && v[RNG_BITS-1:0] == dram.last_rd[16 +: RNG_BITS],
          "D-RaNGe number delivered");

    // ---- D-RaNGe rate: a loop that queues the next operation on Ack and
    // reads the data register
    repeat (30) @(negedge clk);
    a0 = act_t.size();
    for (int k = 0; k < 24; k++) begin
      start_and_wait(instr(OP_DRANGE, k % 8, 400 + k, 0, 32), FLAG_ACK);
      load64(POC + addr_t'(POC_DATA), v);
    end
    repeat (40) @(negedge clk);
    min_gap = 1000; n_exact = 0;
    for (int i = a0 + 1; i < act_t.size(); i++) begin
      int g;
      g = act_t[i] - act_t[i-1];
      if (g < min_gap) min_gap = g;
      if (g == T_RAS + T_RP) n_exact++;
    end
    check(min_gap == T_RAS + T_RP, "back-to-back D-RaNGe every tRAS + tRP cycles");
    check(n_exact > 10, "most D-RaNGe operations back to back");
    mbps = real'(RNG_BITS) / (real'(min_gap) * CLK_NS) * 1000.0;
    $display("D-RaNGe: %0d cycles per 4-bit number, %.1f Mb/s at 400 MHz (%0d of %0d back to back)",
             min_gap, mbps, n_exact, act_t.size() - a0 - 1);
    check(mbps > 8.30, "rate above the published sustained throughput");
    check(dram.n_viol == 0, "no stray timing violation");

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
