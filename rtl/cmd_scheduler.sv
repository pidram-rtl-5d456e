// cmd_scheduler: command scheduler of the PiDRAM memory controller.
//
// The scheduler turns two kinds of work into DRAM commands, one command per
// clock at most, for the physical interface (PHY):
//
//  * Conventional accesses from the memory bus, one 64-byte line each, with
//    manufacturer timings and a closed-page policy:
//      ACT(bank,row) -tRCD- RD/WR(col) ... PRE(bank) -tRP- idle
//    PRE waits for tRAS after ACT, tRTP after RD (and the read data), or
//    write latency + burst + tWR after WR.
//  * PiDRAM instructions from the POC, executed with violated timings:
//      RowClone-Copy  ACT(src) -T_RC_ACT_PRE- PRE -T_RC_PRE_ACT- ACT(dst)
//                     -tRAS- PRE -tRP- idle
//        The first ACT/PRE pair is cut far below tRAS and the second ACT
//        far below tRP, so the source row's charge is still on the bitlines
//        when the destination row opens, and the destination row takes the
//        source row's data (a row copy inside a subarray). Initialisation is
//        the same copy from a row that holds the initial value.
//      D-RaNGe        ACT(row) -T_RNG_RCD- RD(col) ... PRE -tRP- idle
//        RD is issued far below tRCD, so some cells of the line read fail at
//        random. RNG_BITS bits of the read line, from bit position bitsel
//        upward, are pushed into the random number buffer.
//    pim_ready is the "started" acknowledgement of a PiDRAM instruction:
//    it is given in the cycle its first command is issued. mc_fin is pulsed
//    in the cycle the sequence's last command (the final PRE) is issued.
//
// Arbitration: in the idle state a memory bus request goes first; a PiDRAM
// instruction is taken when no bus request waits. A D-RaNGe instruction
// waits (stalls) while the random number buffer is full. Other opcodes are
// accepted and finish one cycle later without any DRAM command.
//
// Interfaces: bus request valid/ready (mem_req_ready when idle, which
// includes the last cycle of a tRP wait);
// bus response mem_rsp_valid for one cycle, carrying the read line, or
// acknowledging a write in the cycle its WR is issued. PHY: phy_cmd each
// cycle (CMD_NOP when idle), phy_wdata valid with CMD_WR; read data returns
// on phy_rd_valid/phy_rd_data some cycles after CMD_RD (the PHY's latency).
// Timing parameters are in controller clock cycles, each at least 1.
//
// Follows the paper: a scheduler that issues ACT/PRE/RD/WR and, for PiM
// operations, command sequences with violated timing; RowClone's command
// sequence is the ACT-PRE-ACT one published for commodity DRAM; D-RaNGe's
// reduced-tRCD read and the random number buffer; Ack at start and Fin at the
// last command. This design's own choices: closed-page policy, the priority
// order, one command per cycle, the timing values, the bit-select field, and
// the absence of refresh (the paper does not mention refresh).
module cmd_scheduler
  import pidram_pkg::*;
#(
  parameter int unsigned TRCD         = T_RCD,
  parameter int unsigned TRP          = T_RP,
  parameter int unsigned TRAS         = T_RAS,
  parameter int unsigned TWR          = T_WR,
  parameter int unsigned TRTP         = T_RTP,
  parameter int unsigned TCWL         = T_CWL,
  parameter int unsigned TRC_ACT_PRE  = T_RC_ACT_PRE,
  parameter int unsigned TRC_PRE_ACT  = T_RC_PRE_ACT,
  parameter int unsigned TRNG_RCD     = T_RNG_RCD
) (
  input  logic                clk,
  input  logic                rst_n,
  // memory bus
  input  logic                mem_req_valid,
  input  bus_req_t            mem_req,
  output logic                mem_req_ready,
  output logic                mem_rsp_valid,
  output bus_rsp_t            mem_rsp,
  // PiDRAM instructions from the POC
  input  logic                pim_valid,
  input  pim_instr_t          pim_instr,
  output logic                pim_ready,
  output logic                mc_fin,
  // random number buffer
  output logic                rng_push,
  output logic [RNG_BITS-1:0] rng_push_data,
  input  logic                rng_full,
  // physical interface
  output dram_cmd_t           phy_cmd,
  output line_t               phy_wdata,
  input  logic                phy_rd_valid,
  input  line_t               phy_rd_data
);

  localparam int unsigned CW = 8;   // wide enough for every timing value
  localparam int unsigned TWRP = TCWL + BURST/2 + TWR;

  typedef enum logic [3:0] {
    S_IDLE,     // ready for the next request
    S_RCD,      // ACT issued, waiting to issue RD/WR
    S_RDWAIT,   // RD issued, waiting for the read data
    S_PREWAIT,  // waiting for tRAS / tRTP / write recovery, then PRE
    S_RPWAIT,   // PRE issued, waiting tRP
    S_RC_PRE,   // RowClone: first ACT issued, waiting to issue the early PRE
    S_RC_ACT2,  // RowClone: early PRE issued, waiting to issue ACT(dst)
    S_DONE      // instruction without DRAM commands: report finish
  } state_e;

  typedef enum logic [1:0] {K_RD, K_WR, K_RC, K_RNG} kind_e;

  state_e              state_q;
  kind_e               kind_q;
  logic [CW-1:0]       cnt_q, ras_q;
  bank_t               bank_q;
  row_t                dst_q;
  col_t                col_q;
  logic [BITSEL_W-1:0] bitsel_q;
  line_t               wdata_q;

  // Free for a new request: idle, or in the last cycle of the tRP wait, so
  // that the next ACT follows PRE after exactly tRP cycles.
  logic idle;
  assign idle = (state_q == S_IDLE) || (state_q == S_RPWAIT && cnt_q == '0);

  logic pim_ok, take_mem, take_pim;
  assign pim_ok   = (pim_instr.op != OP_DRANGE) || !rng_full;
  assign take_mem = idle && mem_req_valid;
  assign take_pim = idle && !mem_req_valid && pim_valid && pim_ok;

  assign mem_req_ready = idle;
  assign pim_ready     = take_pim;

  logic issue_pre;   // the closing PRE of any sequence is issued this cycle
  assign issue_pre = (state_q == S_PREWAIT) && (cnt_q == '0) && (ras_q == '0);

  // ------------------------------------------------------------ commands
  always_comb begin
    phy_cmd       = '{cmd: CMD_NOP, bank: bank_q, row: '0, col: col_q};
    phy_wdata     = wdata_q;
    mem_rsp_valid = 1'b0;
    mem_rsp.rdata = phy_rd_data;
    rng_push      = 1'b0;
    rng_push_data = RNG_BITS'(phy_rd_data >> bitsel_q);
    mc_fin        = 1'b0;
    if (idle) begin
        if (take_mem) begin
          phy_cmd.cmd  = CMD_ACT;
          phy_cmd.bank = addr_bank(mem_req.addr);
          phy_cmd.row  = addr_row(mem_req.addr);
        end else if (take_pim && pim_instr.op inside {OP_RC_COPY, OP_DRANGE}) begin
          phy_cmd.cmd  = CMD_ACT;
          phy_cmd.bank = pim_instr.bank;
          phy_cmd.row  = pim_instr.src_row;
        end
    end else begin
      unique case (state_q)
      S_RCD: begin
        if (cnt_q == '0)
          phy_cmd.cmd = (kind_q == K_WR) ? CMD_WR : CMD_RD;
        if (cnt_q == '0 && kind_q == K_WR)
          mem_rsp_valid = 1'b1;
      end
      S_RDWAIT: begin
        if (phy_rd_valid) begin
          mem_rsp_valid = (kind_q == K_RD);
          rng_push      = (kind_q == K_RNG);
        end
      end
      S_PREWAIT: begin
        if (issue_pre) begin
          phy_cmd.cmd = CMD_PRE;
          mc_fin      = (kind_q == K_RC) || (kind_q == K_RNG);
        end
      end
      S_RC_PRE: begin
        if (cnt_q == '0) phy_cmd.cmd = CMD_PRE;
      end
      S_RC_ACT2: begin
        if (cnt_q == '0) begin
          phy_cmd.cmd = CMD_ACT;
          phy_cmd.row = dst_q;
        end
      end
      S_DONE:   mc_fin = 1'b1;
      default:  ;
      endcase
    end
  end

  // ------------------------------------------------------------ sequencing
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      kind_q   <= K_RD;
      cnt_q    <= '0;
      ras_q    <= '0;
      bank_q   <= '0;
      dst_q    <= '0;
      col_q    <= '0;
      bitsel_q <= '0;
      wdata_q  <= '0;
    end else begin
      if (cnt_q != '0) cnt_q <= cnt_q - 1'b1;
      if (ras_q != '0) ras_q <= ras_q - 1'b1;
      if (idle) begin
          if (take_mem) begin
            kind_q  <= mem_req.we ? K_WR : K_RD;
            bank_q  <= addr_bank(mem_req.addr);
            col_q   <= addr_col(mem_req.addr);
            wdata_q <= mem_req.wdata;
            cnt_q   <= CW'(TRCD - 1);
            ras_q   <= CW'(TRAS - 1);
            state_q <= S_RCD;
          end else if (take_pim) begin
            bank_q   <= pim_instr.bank;
            dst_q    <= pim_instr.dst_row;
            col_q    <= pim_instr.col;
            bitsel_q <= pim_instr.bitsel;
            unique case (pim_instr.op)
              OP_RC_COPY: begin
                kind_q  <= K_RC;
                cnt_q   <= CW'(TRC_ACT_PRE - 1);
                state_q <= S_RC_PRE;
              end
              OP_DRANGE: begin
                kind_q  <= K_RNG;
                cnt_q   <= CW'(TRNG_RCD - 1);
                ras_q   <= CW'(TRAS - 1);
                state_q <= S_RCD;
              end
              default: state_q <= S_DONE;
            endcase
          end else begin
            state_q <= S_IDLE;
          end
      end else begin
        unique case (state_q)
        S_RCD: begin
          if (cnt_q == '0) begin
            if (kind_q == K_WR) begin
              cnt_q   <= CW'(TWRP - 1);
              state_q <= S_PREWAIT;
            end else begin
              cnt_q   <= CW'(TRTP - 1);
              state_q <= S_RDWAIT;
            end
          end
        end
        S_RDWAIT:  if (phy_rd_valid) state_q <= S_PREWAIT;
        S_PREWAIT: begin
          if (issue_pre) begin
            cnt_q   <= CW'(TRP - 1);
            state_q <= S_RPWAIT;
          end
        end
        S_RC_PRE: begin
          if (cnt_q == '0) begin
            cnt_q   <= CW'(TRC_PRE_ACT - 1);
            state_q <= S_RC_ACT2;
          end
        end
        S_RC_ACT2: begin
          if (cnt_q == '0) begin
            ras_q   <= CW'(TRAS - 1);
            state_q <= S_PREWAIT;
          end
        end
        S_DONE:    state_q <= S_IDLE;
        default:   ;   // S_IDLE, S_RPWAIT: handled above / keep counting
        endcase
      end
    end
  end

  // Rules of the interfaces.
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(rng_push && rng_full));
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    !(take_mem && take_pim));

endmodule
