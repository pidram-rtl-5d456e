// mem_bus: memory bus between the CPU and the PiDRAM hardware.
//
// The CPU's loads and stores reach both the POC's memory-mapped registers and
// DRAM over the same bus. This router decodes each request's address: a
// request inside the 4 KiB window at POC_BASE goes to the POC (register
// offset = address bits 11:0, data = low 64 bits of the line), any other
// request goes to the memory controller. It keeps one request in flight:
// after it forwards a request it accepts no other until the response has
// come back, so responses return in order to the CPU.
//
// Interfaces: CPU side cpu_req_valid/cpu_req/cpu_req_ready and a one-cycle
// cpu_rsp_valid/cpu_rsp; POC side req/rsp as in pidram_poc; memory
// controller side as in pidram_mc. A request is forwarded in the cycle it
// arrives; the response is passed back in the cycle it arrives.
//
// The paper shows one memory bus to both the POC and the controller; the
// address window, the single-request policy and the data widths are this
// design's choices.
module mem_bus
  import pidram_pkg::*;
#(
  parameter addr_t POC_BASE = 32'h6000_0000
) (
  input  logic             clk,
  input  logic             rst_n,
  // CPU
  input  logic             cpu_req_valid,
  input  bus_req_t         cpu_req,
  output logic             cpu_req_ready,
  output logic             cpu_rsp_valid,
  output bus_rsp_t         cpu_rsp,
  // POC registers
  output logic             poc_req_valid,
  output logic             poc_req_we,
  output logic [11:0]      poc_req_off,
  output logic [REG_W-1:0] poc_req_wdata,
  input  logic             poc_rsp_valid,
  input  logic [REG_W-1:0] poc_rsp_rdata,
  // memory controller
  output logic             mc_req_valid,
  output bus_req_t         mc_req,
  input  logic             mc_req_ready,
  input  logic             mc_rsp_valid,
  input  bus_rsp_t         mc_rsp
);

  typedef enum logic [1:0] {B_IDLE, B_POC, B_MC} bstate_e;
  bstate_e state_q;

  logic hit_poc;
  assign hit_poc = (cpu_req.addr[ADDR_W-1:12] == POC_BASE[ADDR_W-1:12]);

  assign poc_req_valid = (state_q == B_IDLE) && cpu_req_valid && hit_poc;
  assign poc_req_we    = cpu_req.we;
  assign poc_req_off   = cpu_req.addr[11:0];
  assign poc_req_wdata = cpu_req.wdata[REG_W-1:0];

  assign mc_req_valid  = (state_q == B_IDLE) && cpu_req_valid && !hit_poc;
  assign mc_req        = cpu_req;

  assign cpu_req_ready = (state_q == B_IDLE) && (hit_poc || mc_req_ready);

  always_comb begin
    cpu_rsp_valid = 1'b0;
    cpu_rsp.rdata = mc_rsp.rdata;
    if (state_q == B_POC) begin
      cpu_rsp_valid = poc_rsp_valid;
      cpu_rsp.rdata = LINE_W'(poc_rsp_rdata);
    end else if (state_q == B_MC) begin
      cpu_rsp_valid = mc_rsp_valid;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= B_IDLE;
    end else begin
      unique case (state_q)
        B_IDLE: begin
          if (poc_req_valid)                      state_q <= B_POC;
          else if (mc_req_valid && mc_req_ready)  state_q <= B_MC;
        end
        B_POC:   if (poc_rsp_valid) state_q <= B_IDLE;
        B_MC:    if (mc_rsp_valid)  state_q <= B_IDLE;
        default: state_q <= B_IDLE;
      endcase
    end
  end

  // Responses only come for a request in flight.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    (state_q == B_IDLE) |-> !(poc_rsp_valid || mc_rsp_valid));

endmodule
