// tb_cmd_scheduler: self-checking test of the command scheduler against the
// DDR3 behavioural model.
//
// A monitor logs every DRAM command with its cycle. Checked:
//  * line writes and reads return the written data, with ACT-to-RD/WR equal
//    to tRCD, ACT-to-PRE at least tRAS and PRE-to-ACT at least tRP, and no
//    timing violation seen by the model during conventional accesses;
//  * RowClone-Copy issues ACT(src), PRE and ACT(dst) exactly T_RC_ACT_PRE and
//    T_RC_PRE_ACT cycles apart, then PRE after tRAS; Ack (pim_ready) comes
//    with the first ACT, Fin (mc_fin) with the last PRE; every line of the
//    destination row then reads as the source row;
//  * D-RaNGe reads T_RNG_RCD cycles after ACT and pushes exactly the
//    selected bits of the burst returned;
//  * a D-RaNGe instruction is held back while the random number buffer is
//    full, and a bus request wins over a waiting PiDRAM instruction.
module tb_cmd_scheduler;
  import pidram_pkg::*;

  localparam int unsigned RD_LAT = 9;

  logic clk = 1'b0, rst_n = 1'b0;
  logic mem_req_valid, mem_req_ready, mem_rsp_valid;
  bus_req_t mem_req;
  bus_rsp_t mem_rsp;
  logic pim_valid, pim_ready, mc_fin;
  pim_instr_t pim_instr;
  logic rng_push, rng_full;
  logic [RNG_BITS-1:0] rng_push_data;
  dram_cmd_t phy_cmd;
  line_t phy_wdata, phy_rd_data;
  logic phy_rd_valid;
  int checks = 0, failures = 0;

  cmd_scheduler dut (.*);
  ddr3_model #(.RD_LAT(RD_LAT)) dram (
    .clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata),
    .rd_valid(phy_rd_valid), .rd_data(phy_rd_data));

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- monitor
  typedef struct { int t; dram_cmd_e c; int bank; int row; } ev_t;
  ev_t evs[$];
  int cyc = 0;
  int t_ack[$], t_fin[$], t_push[$];
  logic [RNG_BITS-1:0] push_vals[$];
  line_t rd_bursts[$];
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (phy_cmd.cmd != CMD_NOP)
        evs.push_back('{cyc, phy_cmd.cmd, int'(phy_cmd.bank), int'(phy_cmd.row)});
      if (pim_valid && pim_ready) t_ack.push_back(cyc);
      if (mc_fin) t_fin.push_back(cyc);
      if (rng_push) begin t_push.push_back(cyc); push_vals.push_back(rng_push_data); end
      if (phy_rd_valid) rd_bursts.push_back(phy_rd_data);
    end
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  function automatic addr_t la(int b, int r, int l);
    return addr_t'((r << (LINE_OFF + LCOL_W + BA_W)) | (b << (LINE_OFF + LCOL_W)) |
                   (l << LINE_OFF));
  endfunction

  function automatic line_t rnd_line();
    line_t v;
    for (int i = 0; i < LINE_W / 32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic access(bit we, addr_t a, line_t wd, output line_t rdat);
    mem_req_valid = 1; mem_req.we = we; mem_req.addr = a; mem_req.wdata = wd;
    while (!mem_req_ready) @(negedge clk);
    @(negedge clk);
    mem_req_valid = 0;
    while (!mem_rsp_valid) @(negedge clk);
    rdat = mem_rsp.rdata;
    @(negedge clk);
  endtask

  task automatic pim(pim_op_e op, int b, int s, int d, int col, int bitsel);
    pim_instr = '0;
    pim_instr.op = op; pim_instr.bank = bank_t'(b); pim_instr.src_row = row_t'(s);
    pim_instr.dst_row = row_t'(d); pim_instr.col = col_t'(col);
    pim_instr.bitsel = BITSEL_W'(bitsel);
    pim_valid = 1;
    #1;
    while (!pim_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    pim_valid = 0;
  endtask

  task automatic wait_idle();
    repeat (60) @(negedge clk);
  endtask

  // Timing of the conventional sequence starting at event index i.
  task automatic check_conv(int i, dram_cmd_e rw);
    check(evs[i].c == CMD_ACT && evs[i+1].c == rw && evs[i+2].c == CMD_PRE,
          "conventional command order");
    check(evs[i+1].t - evs[i].t == T_RCD, "ACT to RD/WR is tRCD");
    check(evs[i+2].t - evs[i].t >= T_RAS, "ACT to PRE at least tRAS");
    if (rw == CMD_WR)
      check(evs[i+2].t - evs[i+1].t >= T_CWL + BURST/2 + T_WR, "write recovery");
    else
      check(evs[i+2].t - evs[i+1].t >= T_RTP, "read to PRE at least tRTP");
    if (i > 0) check(evs[i].t - evs[i-1].t >= T_RP, "PRE to ACT at least tRP");
  endtask

  initial begin
    line_t d, w [4];
    int e0;
    mem_req_valid = 0; mem_req = '0; pim_valid = 0; pim_instr = '0; rng_full = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- conventional writes and reads
    for (int i = 0; i < 4; i++) begin
      w[i] = rnd_line();
      e0 = evs.size();
      access(1, la(2, 40 + i, i * 5), w[i], d);
      wait_idle();
      check_conv(e0, CMD_WR);
    end
    for (int i = 0; i < 4; i++) begin
      e0 = evs.size();
      access(0, la(2, 40 + i, i * 5), '0, d);
      check(d == w[i], "read returns written line");
      wait_idle();
      check_conv(e0, CMD_RD);
      check(evs[e0].bank == 2 && evs[e0].row == 40 + i, "bank and row from address");
    end
    check(dram.n_viol == 0, "no violation in conventional accesses");

    // ---- RowClone-Copy: row 41 -> row 300 of bank 2 (same subarray)
    e0 = evs.size();
    pim(OP_RC_COPY, 2, 41, 300, 0, 0);
    wait_idle();
    check(evs.size() - e0 == 4, "RowClone issues four commands");
    check(evs[e0].c == CMD_ACT && evs[e0].row == 41, "ACT source row");
    check(evs[e0+1].c == CMD_PRE && evs[e0+1].t - evs[e0].t == T_RC_ACT_PRE,
          "early PRE after T_RC_ACT_PRE");
    check(evs[e0+2].c == CMD_ACT && evs[e0+2].row == 300 &&
          evs[e0+2].t - evs[e0+1].t == T_RC_PRE_ACT, "ACT destination after T_RC_PRE_ACT");
    check(evs[e0+3].c == CMD_PRE && evs[e0+3].t - evs[e0+2].t == T_RAS,
          "closing PRE after tRAS");
    check(t_ack[$] == evs[e0].t, "Ack with the first command");
    check(t_fin[$] == evs[e0+3].t, "Fin with the last command");
    check(dram.n_copy == 1, "model saw one in-DRAM copy");
    check(dram.n_viol == 0, "no stray violation");
    for (int l = 0; l < (1 << LCOL_W); l += 9) begin
      access(0, la(2, 300, l), '0, d);
      check(d == dram.peek(2, 41, l), "destination line equals source line");
    end
    access(0, la(2, 300, 5), '0, d);
    check(d == w[1], "written source line copied");
    wait_idle();

    // ---- D-RaNGe
    for (int k = 0; k < 6; k++) begin
      int bs, np;
      bs = 16 * $urandom_range(0, 31);
      np = t_push.size();
      e0 = evs.size();
      pim(OP_DRANGE, k % 8, 1000 + k, 0, 8 * k, bs);
      wait_idle();
      check(evs[e0].c == CMD_ACT && evs[e0+1].c == CMD_RD &&
            evs[e0+1].t - evs[e0].t == T_RNG_RCD, "D-RaNGe RD after reduced tRCD");
      check(evs[e0+2].c == CMD_PRE && evs[e0+2].t - evs[e0].t >= T_RAS, "D-RaNGe PRE");
      check(t_push.size() == np + 1, "one random number pushed");
      check(t_push[$] - evs[e0+1].t == RD_LAT, "pushed when the burst returns");
      check(push_vals[$] == rd_bursts[$][bs +: RNG_BITS], "pushed bits are the selected bits");
      check(t_fin[$] == evs[e0+2].t, "D-RaNGe Fin with the last command");
    end
    check(dram.n_rng_rd == 6, "model saw six reduced-tRCD reads");

    // ---- stall while the buffer is full, then release
    rng_full = 1;
    pim_instr = '0; pim_instr.op = OP_DRANGE; pim_instr.bank = 1; pim_instr.src_row = 7;
    pim_valid = 1;
    e0 = evs.size();
    repeat (30) begin
      @(negedge clk);
      #1;
      check(!pim_ready, "D-RaNGe held while buffer full");
    end
    check(evs.size() == e0, "no command while stalled");
    // a bus request gets through while the instruction waits
    access(0, la(4, 9, 1), '0, d);
    check(d == dram.peek(4, 9, 1), "bus request served during stall");
    rng_full = 0;
    #1;
    while (!pim_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    pim_valid = 0;
    wait_idle();

    // ---- priority: bus request and PiDRAM instruction in the same cycle
    pim_instr = '0; pim_instr.op = OP_RC_COPY; pim_instr.bank = 5;
    pim_instr.src_row = 10; pim_instr.dst_row = 11;
    pim_valid = 1;
    mem_req_valid = 1; mem_req.we = 0; mem_req.addr = la(6, 3, 3);
    #1;
    check(mem_req_ready && !pim_ready, "bus request wins arbitration");
    @(negedge clk);
    mem_req_valid = 0;
    #1;
    while (!pim_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    pim_valid = 0;
    wait_idle();
    check(dram.n_copy == 2, "second copy after the bus request");
    check(dram.n_viol == 0, "no stray violation at the end");

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
