// pidram_mc: the PiDRAM memory controller.
//
// Sits between the memory bus and POC on one side and the DDR3 physical
// interface (PHY) on the other. It holds the command scheduler, which serves
// ordinary line reads and writes and executes PiDRAM instructions (RowClone
// copy, D-RaNGe) as DRAM command sequences with violated timings, and the
// random number buffer, which keeps the bits that D-RaNGe operations produce
// until the POC takes them for its data register.
//
// Interfaces, all synchronous to clk, active-low asynchronous reset:
//   memory bus   mem_req_valid/mem_req/mem_req_ready, mem_rsp_valid/mem_rsp
//   POC          pim_valid/pim_instr/pim_ready (accepted = started), mc_fin
//                (last command of the operation issued), rng_valid/rng_data
//                (head of the random number buffer), rng_pop
//   PHY          phy_cmd, phy_wdata, phy_rd_valid/phy_rd_data
// See cmd_scheduler for command timing and rng_buffer for the buffer.
//
// The split into a scheduler and a random number buffer follows the paper;
// the buffer's depth is this design's choice.
module pidram_mc
  import pidram_pkg::*;
#(
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
  input  logic                clk,
  input  logic                rst_n,
  input  logic                mem_req_valid,
  input  bus_req_t            mem_req,
  output logic                mem_req_ready,
  output logic                mem_rsp_valid,
  output bus_rsp_t            mem_rsp,
  input  logic                pim_valid,
  input  pim_instr_t          pim_instr,
  output logic                pim_ready,
  output logic                mc_fin,
  output logic                rng_valid,
  output logic [RNG_BITS-1:0] rng_data,
  input  logic                rng_pop,
  output dram_cmd_t           phy_cmd,
  output line_t               phy_wdata,
  input  logic                phy_rd_valid,
  input  line_t               phy_rd_data
);

  logic                      rng_push, rng_full;
  logic [RNG_BITS-1:0]       rng_push_data;
  logic [$clog2(RNG_DEPTH):0] rng_count;

  cmd_scheduler #(
    .TRCD(TRCD), .TRP(TRP), .TRAS(TRAS), .TWR(TWR), .TRTP(TRTP), .TCWL(TCWL),
    .TRC_ACT_PRE(TRC_ACT_PRE), .TRC_PRE_ACT(TRC_PRE_ACT), .TRNG_RCD(TRNG_RCD)
  ) u_sched (
    .clk, .rst_n,
    .mem_req_valid, .mem_req, .mem_req_ready, .mem_rsp_valid, .mem_rsp,
    .pim_valid, .pim_instr, .pim_ready, .mc_fin,
    .rng_push, .rng_push_data, .rng_full,
    .phy_cmd, .phy_wdata, .phy_rd_valid, .phy_rd_data
  );

  rng_buffer #(.WIDTH(RNG_BITS), .DEPTH(RNG_DEPTH)) u_rngbuf (
    .clk, .rst_n,
    .push(rng_push), .push_data(rng_push_data),
    .pop(rng_pop), .valid(rng_valid), .head_data(rng_data),
    .full(rng_full), .count(rng_count)
  );

  // The fill level is kept for debug visibility only.
  logic unused_count;
  assign unused_count = ^rng_count;

endmodule
