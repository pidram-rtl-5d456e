// ddr3_model: behavioural model of a DDR3 module behind its PHY, for
// simulation only (not synthesizable: associative-array storage, $urandom).
//
// It takes the controller-side command stream (one dram_cmd_t per clock, the
// write burst with CMD_WR) and returns each read burst on rd_valid/rd_data
// in the cycle RD_LAT cycles after the cycle of its CMD_RD. Storage is
// sparse: a line never written reads as a fixed pattern made from its bank, row and line index, so any copy is
// visible.
//
// It models the two timing-violation effects the controller relies on:
//  * RowClone: a PRE issued less than TRAS_MIN cycles after ACT(src),
//    followed by ACT(dst) less than TRP_MIN cycles after that PRE, in the
//    same bank, copies the whole source row into the destination row when
//    both lie in the same subarray of SUBARRAY_ROWS rows (and copies nothing
//    otherwise, as in real chips).
//  * D-RaNGe: a RD less than TRCD_MIN cycles after ACT returns the stored
//    line with its "RNG cells" (bits whose index mod 16 is below 4) replaced
//    by random values.
// Any other timing violation, a command to a closed bank or an ACT to an open
// bank is counted in n_viol. Counters of every command and effect are public
// for testbenches, as is the last burst returned (last_rd).
module ddr3_model
  import pidram_pkg::*;
#(
  parameter int unsigned RD_LAT        = 9,
  parameter int unsigned TRCD_MIN      = T_RCD,
  parameter int unsigned TRP_MIN       = T_RP,
  parameter int unsigned TRAS_MIN      = T_RAS,
  parameter int unsigned SUBARRAY_ROWS = 512
) (
  input  logic      clk,
  input  logic      rst_n,
  input  dram_cmd_t cmd,
  input  line_t     wdata,
  output logic      rd_valid,
  output line_t     rd_data
);

  localparam int unsigned NB = 1 << BA_W;
  localparam int unsigned LINES = 1 << LCOL_W;

  line_t mem [longint unsigned];

  longint unsigned cyc;
  logic         open_q   [NB];
  row_t         row_q    [NB];
  longint       t_act    [NB];
  longint       t_pre    [NB];
  logic         early_q  [NB];   // last PRE came before tRAS
  row_t         early_row[NB];

  int n_act, n_pre, n_rd, n_wr, n_copy, n_copy_fail, n_rng_rd, n_viol;
  line_t last_rd;

  // Read return pipeline.
  logic  pend_v [RD_LAT];
  line_t pend_d [RD_LAT];

  function automatic longint unsigned key(bank_t b, row_t r, int unsigned l);
    return (longint'(b) << 32) | (longint'(r) << 8) | longint'(l);
  endfunction

  function automatic line_t init_line(bank_t b, row_t r, int unsigned l);
    line_t v;
    for (int i = 0; i < LINE_W / 32; i++)
      v[i*32 +: 32] = {8'hA5, 5'(b), 11'(r), 8'(l)} ^ (32'h9E37_79B9 * 32'(i + 1));
    return v;
  endfunction

  function automatic line_t get_line(bank_t b, row_t r, int unsigned l);
    if (mem.exists(key(b, r, l))) return mem[key(b, r, l)];
    return init_line(b, r, l);
  endfunction

  // Functional view of the array, for checks.
  function automatic line_t peek(bank_t b, row_t r, int unsigned l);
    return get_line(b, r, l);
  endfunction

  function automatic line_t rng_mask();
    line_t m;
    for (int i = 0; i < LINE_W; i++) m[i] = ((i % 16) < 4);
    return m;
  endfunction

  always @(posedge clk) begin
    if (!rst_n) begin
      cyc = 0;
      for (int b = 0; b < NB; b++) begin
        open_q[b] = 1'b0; row_q[b] = '0; t_act[b] = -1000; t_pre[b] = -1000;
        early_q[b] = 1'b0; early_row[b] = '0;
      end
      for (int i = 0; i < RD_LAT; i++) begin pend_v[i] = 1'b0; pend_d[i] = '0; end
      n_act = 0; n_pre = 0; n_rd = 0; n_wr = 0; n_copy = 0; n_copy_fail = 0;
      n_rng_rd = 0; n_viol = 0;
      last_rd = '0;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      cyc++;
      // read pipeline: a burst leaves RD_LAT cycles after its RD
      for (int i = RD_LAT - 1; i > 0; i--) begin
        pend_v[i] = pend_v[i-1]; pend_d[i] = pend_d[i-1];
      end
      pend_v[0] = 1'b0;

      case (cmd.cmd)
        CMD_ACT: begin
          n_act++;
          if (open_q[cmd.bank]) n_viol++;
          if (longint'(cyc) - t_pre[cmd.bank] < longint'(TRP_MIN)) begin
            if (early_q[cmd.bank]) begin
              if (int'(early_row[cmd.bank]) / SUBARRAY_ROWS == int'(cmd.row) / SUBARRAY_ROWS) begin
                n_copy++;
                for (int unsigned l = 0; l < LINES; l++)
                  mem[key(cmd.bank, cmd.row, l)] = get_line(cmd.bank, early_row[cmd.bank], l);
              end else begin
                n_copy_fail++;
              end
            end else begin
              n_viol++;
            end
          end
          early_q[cmd.bank] = 1'b0;
          open_q[cmd.bank]  = 1'b1;
          row_q[cmd.bank]   = cmd.row;
          t_act[cmd.bank]   = longint'(cyc);
        end
        CMD_PRE: begin
          n_pre++;
          early_q[cmd.bank]   = (longint'(cyc) - t_act[cmd.bank] < longint'(TRAS_MIN));
          early_row[cmd.bank] = row_q[cmd.bank];
          open_q[cmd.bank]    = 1'b0;
          t_pre[cmd.bank]     = longint'(cyc);
        end
        CMD_RD: begin
          n_rd++;
          if (!open_q[cmd.bank]) n_viol++;
          pend_v[0] = 1'b1;
          pend_d[0] = get_line(cmd.bank, row_q[cmd.bank], int'(cmd.col) >> 3);
          if (longint'(cyc) - t_act[cmd.bank] < longint'(TRCD_MIN)) begin
            n_rng_rd++;
            pend_d[0] = (pend_d[0] & ~rng_mask()) |
                        ({8{$urandom(), $urandom()}} & rng_mask());
          end
          last_rd = pend_d[0];
        end
        CMD_WR: begin
          n_wr++;
          if (!open_q[cmd.bank]) n_viol++;
          if (longint'(cyc) - t_act[cmd.bank] < longint'(TRCD_MIN)) n_viol++;
          mem[key(cmd.bank, row_q[cmd.bank], int'(cmd.col) >> 3)] = wdata;
        end
        default: ;
      endcase
      rd_valid <= pend_v[RD_LAT-1];
      rd_data  <= pend_d[RD_LAT-1];
    end
  end

endmodule
