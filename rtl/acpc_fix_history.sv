// acpc_fix_history: memory of past corrections, applied blindly to new reads.
//
// Each time the decoder corrects a bit, the block index, position and corrected
// value are logged here. Before a block read back on a later scrub pass is
// decoded, every logged bit of that block is forced to its corrected value
// (cw_out), so an upset that has come back at a known weak position is removed
// before decoding and leaves the code's capacity for new errors. This
// follows the published scheme; the table size (DEPTH), the replacement rule
// (an entry for the same position is overwritten, else the oldest entry, round
// robin) and the clearing of a block's entries when that block is configured
// anew (clr_valid) are this design's choices.
//
// Interface: log_* writes one entry per cycle; clr_* invalidates all entries
// of one block; apply_blk/cw_in -> cw_out and changed are combinational.
// Clear takes priority over a log to the same block in the same cycle.
module acpc_fix_history
  import acpc_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned BLKW  = 3
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            log_valid,
  input  logic [BLKW-1:0] log_blk,
  input  logic            log_mat,
  input  logic [3:0]      log_row,
  input  logic [4:0]      log_col,
  input  logic            log_val,
  input  logic            clr_valid,
  input  logic [BLKW-1:0] clr_blk,
  input  logic [BLKW-1:0] apply_blk,
  input  cw_t             cw_in,
  output cw_t             cw_out,
  output logic            changed
);

  typedef struct packed {
    logic            valid;
    logic [BLKW-1:0] blk;
    logic            mat;
    logic [3:0]      row;
    logic [4:0]      col;
    logic            val;
  } entry_t;

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  entry_t          tab [DEPTH];
  logic [PW-1:0]   wr_ptr;

  // Entry that already holds the logged position, if any.
  logic            match;
  logic [PW-1:0]   match_idx;
  always_comb begin
    match     = 1'b0;
    match_idx = '0;
    for (int i = 0; i < int'(DEPTH); i++)
      if (!match && tab[i].valid && tab[i].blk == log_blk && tab[i].mat == log_mat &&
          tab[i].row == log_row && tab[i].col == log_col) begin
        match     = 1'b1;
        match_idx = PW'(i);
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(DEPTH); i++) tab[i] <= '0;
      wr_ptr <= '0;
    end else begin
      if (log_valid) begin
        if (match) tab[match_idx].val <= log_val;
        else begin
          tab[wr_ptr] <= '{valid: 1'b1, blk: log_blk, mat: log_mat, row: log_row,
                           col: log_col, val: log_val};
          wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
        end
      end
      if (clr_valid)
        for (int i = 0; i < int'(DEPTH); i++)
          if (tab[i].blk == clr_blk) tab[i].valid <= 1'b0;
    end
  end

  always_comb begin
    cw_out = cw_in;
    for (int i = 0; i < int'(DEPTH); i++)
      if (tab[i].valid && tab[i].blk == apply_blk &&
          int'(tab[i].row) < int'(ROWS) && int'(tab[i].col) < int'(W))
        cw_out[tab[i].mat][tab[i].row][tab[i].col] = tab[i].val;
    changed = (cw_out != cw_in);
  end

endmodule
