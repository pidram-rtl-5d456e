// tb_mem_bus: self-checking test of the memory bus router.
//
// A scripted POC answers one cycle after each request with a value made from
// the request, and a scripted memory controller answers after a random delay
// and sometimes refuses requests (ready low). Random requests to the POC
// window and to DRAM addresses, including addresses just outside the
// window, are checked for routing (the right side sees each request, the
// other side sees none), for the forwarded fields, and for the response data
// returned to the CPU. It also checks that no second request is taken while
// one is in flight.
module tb_mem_bus;
  import pidram_pkg::*;

  localparam addr_t BASE = 32'h6000_0000;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cpu_req_valid, cpu_req_ready, cpu_rsp_valid;
  bus_req_t cpu_req;
  bus_rsp_t cpu_rsp;
  logic poc_req_valid, poc_req_we, poc_rsp_valid;
  logic [11:0] poc_req_off;
  logic [REG_W-1:0] poc_req_wdata, poc_rsp_rdata;
  logic mc_req_valid, mc_req_ready, mc_rsp_valid;
  bus_req_t mc_req;
  bus_rsp_t mc_rsp;
  int checks = 0, failures = 0;
  int n_poc = 0, n_mc = 0, n_refused = 0;

  mem_bus #(.POC_BASE(BASE)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // scripted POC: answers one cycle later with ~wdata ^ offset
  always @(posedge clk) begin
    poc_rsp_valid <= rst_n && poc_req_valid;
    poc_rsp_rdata <= ~poc_req_wdata ^ 64'(poc_req_off);
  end

  // scripted memory controller
  int mc_delay = -1;
  line_t mc_data;
  always @(posedge clk) begin
    mc_rsp_valid <= 1'b0;
    if (!rst_n) begin
      mc_delay = -1;
      mc_req_ready <= 1'b1;
    end else begin
      if (mc_req_valid && mc_req_ready) begin
        mc_delay = $urandom_range(1, 12);
        mc_data  = {16{mc_req.addr}} ^ mc_req.wdata;
        n_mc++;
      end else if (mc_delay > 0) begin
        mc_delay--;
        if (mc_delay == 0) begin
          mc_rsp_valid <= 1'b1;
          mc_rsp.rdata <= mc_data;
          mc_delay = -1;
        end
      end
      mc_req_ready <= ($urandom_range(0, 3) != 0) && mc_delay < 0;
    end
  end

  initial begin
    cpu_req_valid = 0; cpu_req = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 400; i++) begin
      bit to_poc;
      addr_t a;
      line_t exp;
      int k;
      k = $urandom_range(0, 3);
      if (k == 0)      a = BASE | addr_t'($urandom_range(0, 511) * 8);
      else if (k == 1) a = (($urandom_range(0, 1) == 1) ? BASE - 64 : BASE + 4096);
      else             a = addr_t'({$urandom} & 32'h3FFF_FFC0);
      to_poc = (a[31:12] == BASE[31:12]);
      cpu_req_valid = 1;
      cpu_req.we = $urandom_range(0, 1) == 1;
      cpu_req.addr = a;
      for (int j = 0; j < LINE_W / 32; j++) cpu_req.wdata[j*32 +: 32] = $urandom;
      #1;
      check(poc_req_valid == to_poc, "POC sees exactly its requests");
      check(mc_req_valid == !to_poc, "controller sees exactly its requests");
      if (to_poc) begin
        check(poc_req_off == a[11:0] && poc_req_we == cpu_req.we &&
              poc_req_wdata == cpu_req.wdata[63:0], "POC request fields");
        exp = '0;
        exp[63:0] = ~cpu_req.wdata[63:0] ^ 64'(a[11:0]);
        n_poc++;
      end else begin
        check(mc_req == cpu_req, "controller request fields");
        exp = {16{a}} ^ cpu_req.wdata;
      end
      while (!cpu_req_ready) begin
        n_refused++;
        @(negedge clk); #1;
      end
      @(negedge clk);
      cpu_req_valid = 0;
      cpu_req.addr = BASE;   // would hit the POC if taken
      cpu_req_valid = 1;
      #1;
      while (!cpu_rsp_valid) begin
        check(!cpu_req_ready && !poc_req_valid && !mc_req_valid,
              "no new request while one is in flight");
        @(negedge clk); #1;
      end
      check(cpu_rsp.rdata == exp, "response data");
      cpu_req_valid = 0;
      @(negedge clk);
    end
    check(n_poc > 50 && n_mc > 50 && n_refused > 0, "both targets and back-pressure seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
