// pidram_pkg: types and constants shared by the PiDRAM hardware.
//
// PiDRAM puts processing-in-DRAM operations that violate DDR3 timing (RowClone
// in-DRAM copy, D-RaNGe true random numbers) under software control. The CPU
// talks to a memory-mapped PiM Operations Controller (POC), which hands
// PiDRAM instructions to a memory controller whose command scheduler issues
// the DRAM command sequences.
//
// This package holds:
//   * the 64-bit PiDRAM instruction format and its opcodes,
//   * the POC register map (instruction, flag, data) and flag bit positions,
//   * the memory bus request/response structs (one 64-byte cache line),
//   * the DRAM command struct at the controller/PHY boundary,
//   * DDR3 geometry and default timing values in controller clock cycles.
//
// The three registers and the Start/Ack/Fin flags follow the paper. Every
// encoding, offset, bit position, width and timing value here is this
// design's own choice: the paper does not give them.
package pidram_pkg;

  // ---------------------------------------------------------------- geometry
  // A 1 GiB DDR3 module with a 64-bit data bus: 8 banks, 16K rows, 1K
  // columns of 8 bytes (8 KiB row), burst length 8 (one 64-byte line).
  localparam int unsigned BA_W     = 3;
  localparam int unsigned ROW_W    = 14;
  localparam int unsigned COL_W    = 10;
  localparam int unsigned DQ_W     = 64;
  localparam int unsigned BURST    = 8;
  localparam int unsigned LINE_W   = DQ_W * BURST;           // 512 bits
  localparam int unsigned LINE_OFF = $clog2(LINE_W / 8);     // 6: byte offset
  localparam int unsigned LCOL_W   = COL_W - $clog2(BURST);  // 7: lines per row
  localparam int unsigned ADDR_W   = 32;

  typedef logic [BA_W-1:0]   bank_t;
  typedef logic [ROW_W-1:0]  row_t;
  typedef logic [COL_W-1:0]  col_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ADDR_W-1:0] addr_t;

  // Physical address of a DRAM line: {row, bank, line-in-row, byte offset}.
  // Bits above LINE_OFF+LCOL_W+BA_W+ROW_W (= 30) are ignored by the controller.
  function automatic bank_t addr_bank(addr_t a);
    return a[LINE_OFF+LCOL_W +: BA_W];
  endfunction
  function automatic row_t addr_row(addr_t a);
    return a[LINE_OFF+LCOL_W+BA_W +: ROW_W];
  endfunction
  function automatic col_t addr_col(addr_t a);
    return {a[LINE_OFF +: LCOL_W], {($clog2(BURST)){1'b0}}};
  endfunction

  // ------------------------------------------------------- default timings
  // DDR3-800 speed bin, controller running at the DRAM clock (2.5 ns).
  localparam int unsigned T_RCD = 6;   // ACT to RD/WR        (15 ns)
  localparam int unsigned T_RP  = 6;   // PRE to ACT          (15 ns)
  localparam int unsigned T_RAS = 15;  // ACT to PRE          (37.5 ns)
  localparam int unsigned T_WR  = 6;   // end of write burst to PRE (15 ns)
  localparam int unsigned T_RTP = 4;   // RD to PRE
  localparam int unsigned T_CWL = 5;   // write latency
  // Violated timings of the PiM command sequences.
  localparam int unsigned T_RC_ACT_PRE = 1; // RowClone: ACT(src) to PRE
  localparam int unsigned T_RC_PRE_ACT = 1; // RowClone: PRE to ACT(dst)
  localparam int unsigned T_RNG_RCD    = 2; // D-RaNGe: reduced ACT to RD

  // ------------------------------------------------------- PiDRAM instruction
  typedef enum logic [3:0] {
    OP_NOP      = 4'd0,
    OP_RC_COPY  = 4'd1,   // RowClone-Copy: copy row src_row to dst_row in bank
    OP_DRANGE   = 4'd2    // D-RaNGe: read RNG_BITS random bits of one line
  } pim_op_e;

  localparam int unsigned INSTR_W  = 64;
  localparam int unsigned BITSEL_W = $clog2(LINE_W);          // 9
  localparam int unsigned RNG_BITS = 4;

  // Bit layout, LSB first: op[3:0] bank[6:4] src_row[20:7] dst_row[34:21]
  // col[44:35] bitsel[53:45], the rest reserved.
  typedef struct packed {
    logic [INSTR_W-4-BA_W-2*ROW_W-COL_W-BITSEL_W-1:0] rsvd;
    logic [BITSEL_W-1:0] bitsel;   // D-RaNGe: lowest bit of the random field
    col_t                col;      // D-RaNGe: column of the line that is read
    row_t                dst_row;  // RowClone: destination row
    row_t                src_row;  // RowClone: source row / D-RaNGe: row
    bank_t               bank;
    pim_op_e             op;
  } pim_instr_t;

  // ------------------------------------------------------- POC register map
  localparam int unsigned REG_W       = 64;
  localparam logic [11:0] POC_INSTR   = 12'h000;
  localparam logic [11:0] POC_FLAG    = 12'h008;
  localparam logic [11:0] POC_DATA    = 12'h010;
  localparam int unsigned FLAG_START  = 0;
  localparam int unsigned FLAG_ACK    = 1;
  localparam int unsigned FLAG_FIN    = 2;
  // Data register read value: bit DATA_VALID says a random number is there.
  localparam int unsigned DATA_VALID  = 63;

  // ------------------------------------------------------- memory bus
  // One request moves one 64-byte line to/from DRAM, or the low 64 bits of
  // wdata/rdata to/from a POC register.
  typedef struct packed {
    logic  we;
    addr_t addr;
    line_t wdata;
  } bus_req_t;

  typedef struct packed {
    line_t rdata;
  } bus_rsp_t;

  // ------------------------------------------------------- DRAM commands
  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } dram_cmd_e;

  typedef struct packed {
    dram_cmd_e cmd;
    bank_t     bank;
    row_t      row;   // ACT
    col_t      col;   // RD / WR
  } dram_cmd_t;

endpackage
