// to_backup_mem: the dirty-bit ("to_backup") memory of Freezer.
//
// One bit per SRAM block. A tracked store sets the bit of its block; during a
// backup the controller takes dirty blocks one at a time, lowest index first,
// and each bit is cleared as its block is taken, so the table is clean when
// the backup ends.
//
// Organisation: the bits form a matrix of ROWS rows of ROW_W bits, kept in
// flip-flops (a register bank of standard cells, as the paper sizes it). A
// per-row OR vector marks the rows holding at least one dirty bit; a priority
// encoder over it jumps straight over all-zero rows, a second one finds the
// lowest dirty bit of the chosen row. next_idx/next_valid are therefore
// combinational on the state and always show the next block to back up, so
// the controller can fetch the next block while the current one is still
// being copied. Matrix organisation, whole-row checking and zero-row skipping
// are the paper's suggestions; the row width and the one-cycle search are
// this design's choices.
//
// Interface (all synchronous to clk, reset clears every bit):
//   set_en/set_idx  mark block set_idx dirty
//   clr_en          clear bit next_idx (the block just taken); a set of the
//                   same block in the same cycle wins
//   next_valid      any block dirty;  next_idx  lowest dirty block
//   dirty_cnt       number of dirty blocks (the size of the coming backup)
module to_backup_mem #(
  parameter int unsigned BLOCK_NUM = 1024,
  parameter int unsigned ROW_W     = 32,
  localparam int unsigned IDX_W    = (BLOCK_NUM > 1) ? $clog2(BLOCK_NUM) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             set_en,
  input  logic [IDX_W-1:0] set_idx,
  input  logic             clr_en,
  output logic             next_valid,
  output logic [IDX_W-1:0] next_idx,
  output logic [IDX_W:0]   dirty_cnt
);

  localparam int unsigned RW    = (ROW_W < BLOCK_NUM) ? ROW_W : BLOCK_NUM;
  localparam int unsigned ROWS  = BLOCK_NUM / RW;
  localparam int unsigned COL_W = (RW > 1) ? $clog2(RW) : 1;
  localparam int unsigned ROW_IW = (ROWS > 1) ? $clog2(ROWS) : 1;

  logic [RW-1:0]   bits_q [ROWS];
  logic [ROWS-1:0] row_any;
  logic [ROW_IW-1:0] sel_row;
  logic [COL_W-1:0]  sel_col;
  logic [RW-1:0]     row_bits;

  // Which rows hold a dirty bit.
  always_comb begin
    for (int r = 0; r < ROWS; r++) row_any[r] = |bits_q[r];
  end

  // Lowest non-zero row, then lowest dirty bit inside it.
  always_comb begin
    sel_row = '0;
    for (int r = ROWS - 1; r >= 0; r--)
      if (row_any[r]) sel_row = ROW_IW'(r);
    row_bits = bits_q[sel_row];
    sel_col = '0;
    for (int c = RW - 1; c >= 0; c--)
      if (row_bits[c]) sel_col = COL_W'(c);
  end

  assign next_valid = |row_any;
  if (ROWS > 1) begin : g_idx_rows
    if (RW > 1) begin : g_idx_cols
      assign next_idx = IDX_W'({sel_row, sel_col});
    end else begin : g_idx_nocol
      assign next_idx = IDX_W'(sel_row);
    end
  end else begin : g_idx_onerow
    assign next_idx = IDX_W'(sel_col);
  end

  // Row/column of the set request.
  logic [ROW_IW-1:0] set_row;
  logic [COL_W-1:0]  set_col;
  assign set_row = (ROWS > 1) ? ROW_IW'(set_idx / RW) : '0;
  assign set_col = (RW > 1)   ? COL_W'(set_idx % RW)  : '0;

  logic was_set;   // the block being set is already dirty
  logic does_clr;  // a dirty block is really cleared this cycle
  assign was_set  = bits_q[set_row][set_col];
  assign does_clr = clr_en && next_valid && !(set_en && set_idx == next_idx);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) bits_q[r] <= '0;
      dirty_cnt <= '0;
    end else begin
      if (does_clr) bits_q[sel_row][sel_col] <= 1'b0;
      if (set_en)   bits_q[set_row][set_col] <= 1'b1;
      dirty_cnt <= dirty_cnt + (IDX_W+1)'(set_en && !was_set) - (IDX_W+1)'(does_clr);
    end
  end

  // The counter must agree with the table and never wrap.
  a_cnt_range: assert property (@(posedge clk) disable iff (!rst_n)
    32'(dirty_cnt) <= BLOCK_NUM);
  a_cnt_zero: assert property (@(posedge clk) disable iff (!rst_n)
    (dirty_cnt == 0) == !next_valid);

endmodule
