// pidram_poc: PiM Operations Controller (POC).
//
// The CPU drives PiM operations with ordinary loads and stores to three
// memory-mapped 64-bit registers:
//   instruction (offset 0x000)  the PiDRAM instruction to execute
//   flag        (offset 0x008)  bit 0 Start, bit 1 Ack, bit 2 Fin
//   data        (offset 0x010)  result of the operation (random numbers)
// A PiM operation runs as the paper's workflow describes: software stores
// the instruction, then stores Start=1. While Start is set the POC offers the
// instruction to the memory controller (pim_valid/pim_instr). When the
// controller accepts it (pim_ready), i.e. starts executing it, the POC clears
// Start and sets Ack. When the controller reports that it issued the last
// DRAM command of the operation (mc_fin), the POC sets Fin. Software polls Ack
// or Fin with loads. The data register is filled from the controller's random
// number buffer (rng_valid/rng_data, popped with rng_pop); a load of it
// returns the number in the low RNG_BITS bits with bit 63 set, and empties it.
//
// Register interface: one request per cycle (req_valid, req_we, req_off,
// req_wdata); the response (rsp_valid, rsp_rdata) follows one cycle later for
// reads and writes alike. Memory controller interface: valid/ready handshake;
// pim_valid and pim_instr hold steady until pim_ready.
//
// Follows the paper: the three registers, the Start/Ack/Fin flags and when each
// is set or cleared by hardware. This design's choices: offsets and bit
// positions; a store of Start=1 clears Ack and Fin; a controller finish that
// arrives while a new Start is pending belongs to the older operation and is
// dropped; stores to the instruction register are ignored while Start is
// pending; the data-valid bit in the data register.
module pidram_poc
  import pidram_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // register access from the memory bus
  input  logic                req_valid,
  input  logic                req_we,
  input  logic [11:0]         req_off,
  input  logic [REG_W-1:0]    req_wdata,
  output logic                rsp_valid,
  output logic [REG_W-1:0]    rsp_rdata,
  // PiM request to the memory controller
  output logic                pim_valid,
  output pim_instr_t          pim_instr,
  input  logic                pim_ready,
  input  logic                mc_fin,
  // random number buffer in the memory controller
  input  logic                rng_valid,
  input  logic [RNG_BITS-1:0] rng_data,
  output logic                rng_pop
);

  pim_instr_t          instr_q;
  logic                start_q, ack_q, fin_q;
  logic                dvalid_q;
  logic [RNG_BITS-1:0] data_q;

  logic wr_instr, wr_flag, rd_data;
  assign wr_instr = req_valid &&  req_we && (req_off == POC_INSTR);
  assign wr_flag  = req_valid &&  req_we && (req_off == POC_FLAG);
  assign rd_data  = req_valid && !req_we && (req_off == POC_DATA);

  assign pim_valid = start_q;
  assign pim_instr = instr_q;
  assign rng_pop   = !dvalid_q && rng_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      instr_q  <= '0;
      start_q  <= 1'b0;
      ack_q    <= 1'b0;
      fin_q    <= 1'b0;
      dvalid_q <= 1'b0;
      data_q   <= '0;
    end else begin
      if (wr_instr && !start_q)
        instr_q <= pim_instr_t'(req_wdata);

      // Flags. Hardware events first, a CPU store of Start=1 overrides.
      if (pim_valid && pim_ready) begin
        start_q <= 1'b0;
        ack_q   <= 1'b1;
        fin_q   <= 1'b0;
      end
      if (mc_fin && !start_q)
        fin_q <= 1'b1;
      if (wr_flag && req_wdata[FLAG_START]) begin
        start_q <= 1'b1;
        ack_q   <= 1'b0;
        fin_q   <= 1'b0;
      end

      // Data register: a load consumes it, an empty register refills.
      if (rng_pop) begin
        dvalid_q <= 1'b1;
        data_q   <= rng_data;
      end else if (rd_data) begin
        dvalid_q <= 1'b0;
      end
    end
  end

  // One-cycle response.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp_rdata <= '0;
    end else begin
      rsp_valid <= req_valid;
      rsp_rdata <= '0;
      if (req_valid && !req_we) begin
        unique case (req_off)
          POC_INSTR: rsp_rdata <= REG_W'(instr_q);
          POC_FLAG:  begin
            rsp_rdata[FLAG_START] <= start_q;
            rsp_rdata[FLAG_ACK]   <= ack_q;
            rsp_rdata[FLAG_FIN]   <= fin_q;
          end
          POC_DATA:  begin
            rsp_rdata[DATA_VALID]     <= dvalid_q;
            rsp_rdata[RNG_BITS-1:0]   <= data_q;
          end
          default:   rsp_rdata <= '0;
        endcase
      end
    end
  end

  // Handshake rule towards the memory controller: a request stays up, with
  // the same instruction, until it is accepted.
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (pim_valid && !pim_ready) |=> (pim_valid && $stable(pim_instr)));

endmodule
