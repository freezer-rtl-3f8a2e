// tb_to_backup_mem: self-checking test of the dirty-bit memory.
//
// A reference bit array in the testbench mirrors every set and clear. Each
// cycle the test compares next_valid, next_idx (must be the lowest dirty
// block) and dirty_cnt with the reference. Phases: random sets, draining all
// dirty blocks one per cycle (checks that a full scan takes exactly one cycle
// per dirty block, whatever the gaps of clear rows between them), a set and a
// clear of the same block in one cycle, and a sparse table with one block in
// the last row only.
module tb_to_backup_mem;
  localparam int unsigned BLOCK_NUM = 1024;
  localparam int unsigned ROW_W     = 32;
  localparam int unsigned IDX_W     = $clog2(BLOCK_NUM);

  logic clk = 1'b0, rst_n = 1'b0;
  logic set_en = 1'b0, clr_en = 1'b0;
  logic [IDX_W-1:0] set_idx = '0, next_idx;
  logic next_valid;
  logic [IDX_W:0] dirty_cnt;

  bit ref_bits [BLOCK_NUM];
  int checks = 0, failures = 0;

  to_backup_mem #(.BLOCK_NUM(BLOCK_NUM), .ROW_W(ROW_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_lowest();
    for (int i = 0; i < BLOCK_NUM; i++) if (ref_bits[i]) return i;
    return -1;
  endfunction

  function automatic int ref_count();
    int n = 0;
    for (int i = 0; i < BLOCK_NUM; i++) n += int'(ref_bits[i]);
    return n;
  endfunction

  task automatic compare(string what);
    int lo = ref_lowest();
    checks++;
    if ((lo >= 0) != next_valid || (lo >= 0 && int'(next_idx) != lo) ||
        int'(dirty_cnt) != ref_count()) begin
      failures++;
      $display("FAIL %s: valid=%0d idx=%0d cnt=%0d, expected lowest=%0d cnt=%0d",
               what, next_valid, next_idx, dirty_cnt, lo, ref_count());
    end
  endtask

  // Apply one cycle of set/clear and update the reference the same way.
  task automatic step(bit s, int si, bit c);
    int lo = ref_lowest();
    set_en = s; set_idx = IDX_W'(si); clr_en = c;
    @(posedge clk); #1;
    if (c && lo >= 0) ref_bits[lo] = 1'b0;
    if (s) ref_bits[si] = 1'b1;
    set_en = 0; clr_en = 0;
  endtask

  initial begin
    int n, cycles;
    foreach (ref_bits[i]) ref_bits[i] = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    compare("after reset");

    // random stores, with repeats
    for (int k = 0; k < 300; k++) begin
      step(1'b1, $urandom_range(BLOCK_NUM - 1), 1'b0);
      compare("random set");
    end
    // mix of stores and takes
    for (int k = 0; k < 200; k++) begin
      step($urandom_range(1), $urandom_range(BLOCK_NUM - 1), $urandom_range(1));
      compare("mixed");
    end
    // drain: one block per cycle, in increasing order
    n = ref_count();
    cycles = 0;
    while (next_valid) begin
      step(1'b0, 0, 1'b1);
      cycles++;
      compare("drain");
    end
    checks++;
    if (cycles != n) begin
      failures++;
      $display("FAIL drain took %0d cycles for %0d blocks", cycles, n);
    end
    // set and take the same block in one cycle: the set wins
    step(1'b1, 77, 1'b0);
    step(1'b1, 77, 1'b1);
    compare("set+clear same block");
    checks++;
    if (!next_valid || next_idx != 77) begin
      failures++; $display("FAIL set lost on simultaneous clear");
    end
    step(1'b0, 0, 1'b1);
    compare("cleared");
    // sparse: only the last block of the last row and block 0 of row 3
    step(1'b1, BLOCK_NUM - 1, 1'b0);
    step(1'b1, 3 * ROW_W, 1'b0);
    compare("sparse");
    step(1'b0, 0, 1'b1);
    compare("sparse take 1");
    checks++;
    if (next_idx != IDX_W'(BLOCK_NUM - 1)) begin
      failures++; $display("FAIL zero rows not skipped: idx=%0d", next_idx);
    end
    step(1'b0, 0, 1'b1);
    compare("sparse take 2");
    // reset clears everything
    step(1'b1, 5, 1'b0);
    rst_n = 1'b0; #1; rst_n = 1'b1;
    foreach (ref_bits[i]) ref_bits[i] = 1'b0;
    compare("reset");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
