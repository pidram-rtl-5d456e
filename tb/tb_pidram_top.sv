// tb_pidram_top: end-to-end test of the PiDRAM hardware at its default
// parameters, with the DDR3 behavioural model behind the PHY port.
//
// The testbench plays the CPU and its software library: it issues loads and
// stores on the memory bus exactly as the library routines would.
//   copy(bank, src, dst, wait_fin)  store the RowClone-Copy instruction to the
//       POC instruction register, store Start, then poll the flag register
//       until Ack (non-blocking use) or Fin (blocking use) is set;
//   init(bank, dst)  RowClone-Copy from a row that software has filled with
//       zeros (the initialisation use of RowClone);
//   rand(bank, row, col, bitsel)  a D-RaNGe instruction, then loads of the
//       data register until it holds a number.
// Checked end to end: whole 8 KiB destination rows equal their source (or
// zero) after copy and init; random numbers equal the selected bits of the
// bursts the DRAM returned, in order; the exact RowClone command spacing on
// the PHY port; that no conventional access violates DRAM timing.
// Mechanisms that must each happen at least once (counted, a failure if
// never seen): copy, init, D-RaNGe, Ack-only return, Fin return, a bus
// access waiting behind a running PiM operation, a D-RaNGe instruction held
// back because the random number buffer is full, a load of an empty data
// register, a RowClone between different subarrays (which copies nothing).
module tb_pidram_top;
  import pidram_pkg::*;

  localparam addr_t POC = 32'h6000_0000;
  localparam int unsigned LINES = 1 << LCOL_W;
  localparam int unsigned DEPTH = 16;   // pidram_top's RNG_DEPTH default

  logic clk = 1'b0, rst_n = 1'b0;
  logic cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  bus_req_t cpu_req;
  bus_rsp_t cpu_rsp;
  dram_cmd_t phy_cmd;
  line_t phy_wdata, phy_rd_data;
  logic phy_rd_valid;
  int checks = 0, failures = 0;

  pidram_top dut (.*);
  ddr3_model dram (.clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata),
                   .rd_valid(phy_rd_valid), .rd_data(phy_rd_data));

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- monitor
  typedef struct { int t; dram_cmd_e c; int row; } ev_t;
  ev_t evs[$];
  int cyc = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      cyc++;
      if (phy_cmd.cmd != CMD_NOP) evs.push_back('{cyc, phy_cmd.cmd, int'(phy_cmd.row)});
    end
  end

  // mechanism counters
  int n_copy = 0, n_init = 0, n_rng = 0, n_ack_ret = 0, n_fin_ret = 0;
  int n_bus_wait = 0, n_full_stall = 0, n_empty_load = 0, n_cross_sub = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // ---------------------------------------------------------------- CPU side
  task automatic bus(bit we, addr_t a, line_t wd, output line_t rd, output int lat);
    int t0 = cyc;
    cpu_req_valid = 1; cpu_req.we = we; cpu_req.addr = a; cpu_req.wdata = wd;
    #1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    cpu_req_valid = 0;
    #1;
    while (!cpu_rsp_valid) begin @(negedge clk); #1; end
    rd = cpu_rsp.rdata;
    lat = cyc - t0;
    @(negedge clk);
  endtask

  task automatic store64(addr_t a, logic [63:0] v);
    line_t d; int l;
    bus(1, a, LINE_W'(v), d, l);
  endtask

  task automatic load64(addr_t a, output logic [63:0] v);
    line_t d; int l;
    bus(0, a, '0, d, l);
    v = d[63:0];
  endtask

  function automatic addr_t la(int b, int r, int l);
    return addr_t'(32'h8000_0000 | (r << (LINE_OFF + LCOL_W + BA_W)) |
                   (b << (LINE_OFF + LCOL_W)) | (l << LINE_OFF));
  endfunction

  function automatic logic [63:0] instr(pim_op_e op, int b, int s, int d, int col, int bs);
    pim_instr_t i = '0;
    i.op = op; i.bank = bank_t'(b); i.src_row = row_t'(s); i.dst_row = row_t'(d);
    i.col = col_t'(col); i.bitsel = BITSEL_W'(bs);
    return 64'(i);
  endfunction

  // Start an operation and poll until Ack (wait_fin=0) or Fin (wait_fin=1).
  task automatic pim_op(logic [63:0] ins, bit wait_fin, output int polls_pending);
    logic [63:0] f;
    store64(POC + addr_t'(POC_INSTR), ins);
    store64(POC + addr_t'(POC_FLAG), 64'(1) << FLAG_START);
    polls_pending = 0;
    do begin
      load64(POC + addr_t'(POC_FLAG), f);
      if (f[FLAG_START]) polls_pending++;
    end while (!(wait_fin ? f[FLAG_FIN] : f[FLAG_ACK]));
    if (wait_fin) n_fin_ret++; else n_ack_ret++;
  endtask

  task automatic copy(int b, int s, int d, bit wait_fin);
    int p;
    pim_op(instr(OP_RC_COPY, b, s, d, 0, 0), wait_fin, p);
  endtask

  task automatic check_row(int b, int r, int ref_row, bit zero, string what);
    line_t d, e; int l;
    for (int i = 0; i < LINES; i++) begin
      bus(0, la(b, r, i), '0, d, l);
      e = zero ? '0 : dram.peek(bank_t'(b), row_t'(ref_row), i);
      check(d == e, what);
    end
  endtask

  task automatic fill_row(int b, int r, bit zero);
    line_t d, w; int l;
    for (int i = 0; i < LINES; i++) begin
      for (int j = 0; j < LINE_W / 32; j++) w[j*32 +: 32] = zero ? 0 : $urandom;
      bus(1, la(b, r, i), w, d, l);
    end
  endtask

  initial begin
    logic [63:0] f, v;
    line_t d, src_snapshot [];
    int lat, p, e0;
    logic [RNG_BITS-1:0] exp_rng [$];

    cpu_req_valid = 0; cpu_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    load64(POC + addr_t'(POC_FLAG), f);
    check(f[2:0] == 3'b000, "flags clear after reset");
    load64(POC + addr_t'(POC_DATA), v);
    check(!v[DATA_VALID], "data register empty after reset");
    n_empty_load++;

    // ---- RowClone-Copy of a whole 8 KiB row, blocking on Fin
    fill_row(1, 100, 0);
    repeat (30) @(negedge clk);
    e0 = evs.size();
    copy(1, 100, 200, 1);
    n_copy++;
    check(evs[e0].c == CMD_ACT && evs[e0].row == 100 &&
          evs[e0+1].c == CMD_PRE && evs[e0+1].t - evs[e0].t == T_RC_ACT_PRE &&
          evs[e0+2].c == CMD_ACT && evs[e0+2].row == 200 &&
          evs[e0+2].t - evs[e0+1].t == T_RC_PRE_ACT &&
          evs[e0+3].c == CMD_PRE && evs[e0+3].t - evs[e0+2].t == T_RAS,
          "RowClone command sequence on the PHY port");
    check_row(1, 200, 100, 0, "copied row equals source row");

    // ---- RowClone-Copy returning on Ack; a load right behind it waits
    copy(2, 20, 21, 0);
    n_copy++;
    bus(0, la(2, 21, 3), '0, d, lat);
    check(d == dram.peek(2, 20, 3), "load after Ack-only copy sees copied data");
    if (lat > 2 + T_RCD + 9) n_bus_wait++;
    load64(POC + addr_t'(POC_FLAG), f);
    check(f[FLAG_ACK] && f[FLAG_FIN], "Fin set after the copy completes");

    // ---- RowClone-Init: zero row, then copy it over a filled row
    fill_row(0, 512 + 0, 1);
    fill_row(0, 512 + 77, 0);
    copy(0, 512, 512 + 77, 1);
    n_init++;
    check_row(0, 512 + 77, 0, 1, "initialised row reads as zero");

    // ---- RowClone between subarrays: nothing is copied
    copy(0, 512 + 77, 5, 1);
    n_cross_sub = dram.n_copy_fail;
    bus(0, la(0, 5, 0), '0, d, lat);
    check(d != '0, "row of another subarray keeps its data");

    // ---- D-RaNGe, one number at a time
    for (int k = 0; k < 8; k++) begin
      int bs;
      bs = 16 * $urandom_range(0, 31);
      pim_op(instr(OP_DRANGE, k % 8, 4000 + k, 0, 8 * k, bs), 1, p);
      n_rng++;
      do load64(POC + addr_t'(POC_DATA), v); while (!v[DATA_VALID]);
      check(v[RNG_BITS-1:0] == dram.last_rd[bs +: RNG_BITS],
            "random number is the selected bits of the failing read");
      check(v[62:RNG_BITS] == '0, "unused data bits are zero");
    end

    // ---- fill the buffer without reading, until an instruction is held:
    // the data register takes one number and the buffer DEPTH more.
    for (int k = 0; k < DEPTH + 1; k++) begin
      int bs;
      bs = 16 * (k % 32);
      pim_op(instr(OP_DRANGE, k % 8, 5000 + k, 0, 0, bs), 0, p);
      repeat (40) @(negedge clk);   // let it finish
      exp_rng.push_back(dram.last_rd[bs +: RNG_BITS]);
      n_rng++;
    end
    // one more: Start stays pending while the buffer is full
    store64(POC + addr_t'(POC_INSTR), instr(OP_DRANGE, 3, 6000, 0, 0, 32));
    store64(POC + addr_t'(POC_FLAG), 64'(1) << FLAG_START);
    for (int k = 0; k < 10; k++) begin
      load64(POC + addr_t'(POC_FLAG), f);
      check(f[FLAG_START] && !f[FLAG_ACK], "D-RaNGe held while the buffer is full");
      if (f[FLAG_START]) n_full_stall++;
    end
    // reading the data register frees an entry and the held one starts
    for (int k = 0; k < DEPTH + 1; k++) begin
      load64(POC + addr_t'(POC_DATA), v);
      check(v[DATA_VALID] && v[RNG_BITS-1:0] == exp_rng[k], "buffered numbers in order");
      if (k == 0) begin
        do load64(POC + addr_t'(POC_FLAG), f); while (!f[FLAG_FIN]);
        exp_rng.push_back(dram.last_rd[32 +: RNG_BITS]);
        n_rng++;
      end
    end
    load64(POC + addr_t'(POC_DATA), v);
    check(v[DATA_VALID] && v[RNG_BITS-1:0] == exp_rng[DEPTH + 1], "held number last");
    load64(POC + addr_t'(POC_DATA), v);
    check(!v[DATA_VALID], "data register empty at the end");
    n_empty_load++;
    check(dram.n_viol == 0, "no timing violation outside PiM sequences");

    // ---- mechanism coverage
    check(n_copy > 0, "copy happened");
    check(n_init > 0, "init happened");
    check(n_rng > 0, "D-RaNGe happened");
    check(n_ack_ret > 0, "Ack-only return happened");
    check(n_fin_ret > 0, "Fin return happened");
    check(n_bus_wait > 0, "bus access waited behind a PiM operation");
    check(n_full_stall > 0, "buffer-full stall happened");
    check(n_empty_load > 0, "empty data register load happened");
    check(n_cross_sub > 0, "cross-subarray RowClone happened");
    $display("mechanisms: copy=%0d init=%0d drange=%0d ack_ret=%0d fin_ret=%0d bus_wait=%0d full_stall=%0d empty_load=%0d cross_subarray=%0d",
             n_copy, n_init, n_rng, n_ack_ret, n_fin_ret, n_bus_wait, n_full_stall,
             n_empty_load, n_cross_sub);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
