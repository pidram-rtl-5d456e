// pidram_top: PiDRAM hardware between a CPU's memory bus and a DDR3 PHY.
//
// The CPU issues loads and stores on one memory bus (cpu_*). mem_bus sends
// those in the POC's 4 KiB window to the PiM Operations Controller
// (pidram_poc) and all others to the PiDRAM memory controller (pidram_mc).
// Software starts a PiM operation by storing a PiDRAM instruction to the
// POC's instruction register and Start to its flag register; the POC hands
// the instruction to the memory controller, whose command scheduler issues
// it as a DRAM command sequence with violated timings on the PHY port
// (phy_*), while the POC reports Ack (started) and Fin (last command issued)
// in the flag register. D-RaNGe results reach the POC data register through
// the controller's random number buffer.
//
// The CPU and the PHY with the DRAM module are outside this design; their
// signals are ports. phy_cmd carries at most one DRAM command per clock,
// phy_wdata the 512-bit write burst with CMD_WR, and phy_rd_valid/phy_rd_data
// the read burst returned by the PHY after its read latency.
//
// The structure (memory bus, POC with three registers, memory controller with
// command scheduler and random number buffer, PHY) follows the paper's
// overview; interface widths, the address window and timing values are this
// design's choices.
module pidram_top
  import pidram_pkg::*;
#(
  parameter addr_t       POC_BASE    = 32'h6000_0000,
  parameter int unsigned TRCD        = T_RCD,
  parameter int unsigned TRP         = T_RP,
  parameter int unsigned TRAS        = T_RAS,
  parameter int unsigned TWR         = T_WR,
  parameter int unsigned TRTP        = T_RTP,
  parameter int unsigned TCWL        = T_CWL,
  parameter int unsigned TRC_ACT_PRE = T_RC_ACT_PRE,
  parameter int unsigned TRC_PRE_ACT = T_RC_PRE_ACT,
  parameter int unsigned TRNG_RCD    = T_RNG_RCD,
  parameter int unsigned RNG_DEPTH   = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  // CPU memory bus
  input  logic      cpu_req_valid,
  input  bus_req_t  cpu_req,
  output logic      cpu_req_ready,
  output logic      cpu_rsp_valid,
  output bus_rsp_t  cpu_rsp,
  // DDR3 physical interface
  output dram_cmd_t phy_cmd,
  output line_t     phy_wdata,
  input  logic      phy_rd_valid,
  input  line_t     phy_rd_data
);

  logic                poc_req_valid, poc_req_we, poc_rsp_valid;
  logic [11:0]         poc_req_off;
  logic [REG_W-1:0]    poc_req_wdata, poc_rsp_rdata;
  logic                mc_req_valid, mc_req_ready, mc_rsp_valid;
  bus_req_t            mc_req;
  bus_rsp_t            mc_rsp;
  logic                pim_valid, pim_ready, mc_fin;
  pim_instr_t          pim_instr;
  logic                rng_valid, rng_pop;
  logic [RNG_BITS-1:0] rng_data;

  mem_bus #(.POC_BASE(POC_BASE)) u_bus (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req, .cpu_req_ready, .cpu_rsp_valid, .cpu_rsp,
    .poc_req_valid, .poc_req_we, .poc_req_off, .poc_req_wdata,
    .poc_rsp_valid, .poc_rsp_rdata,
    .mc_req_valid, .mc_req, .mc_req_ready, .mc_rsp_valid, .mc_rsp
  );

  pidram_poc u_poc (
    .clk, .rst_n,
    .req_valid(poc_req_valid), .req_we(poc_req_we), .req_off(poc_req_off),
    .req_wdata(poc_req_wdata),
    .rsp_valid(poc_rsp_valid), .rsp_rdata(poc_rsp_rdata),
    .pim_valid, .pim_instr, .pim_ready, .mc_fin,
    .rng_valid, .rng_data, .rng_pop
  );

  pidram_mc #(
    .TRCD(TRCD), .TRP(TRP), .TRAS(TRAS), .TWR(TWR), .TRTP(TRTP), .TCWL(TCWL),
    .TRC_ACT_PRE(TRC_ACT_PRE), .TRC_PRE_ACT(TRC_PRE_ACT), .TRNG_RCD(TRNG_RCD),
    .RNG_DEPTH(RNG_DEPTH)
  ) u_mc (
    .clk, .rst_n,
    .mem_req_valid(mc_req_valid), .mem_req(mc_req), .mem_req_ready(mc_req_ready),
    .mem_rsp_valid(mc_rsp_valid), .mem_rsp(mc_rsp),
    .pim_valid, .pim_instr, .pim_ready, .mc_fin,
    .rng_valid, .rng_data, .rng_pop,
    .phy_cmd, .phy_wdata, .phy_rd_valid, .phy_rd_data
  );

endmodule
