// tb_freezer_fsm: self-checking test of the Freezer controller together with
// its dirty-bit memory, on testbench memories.
//
// Two rounds, first with single-cycle memories, then with random grant and
// response latencies. Each round:
//   1. preloads the NVM with an image and boots with restore=1: the SRAM must
//      equal the image, RESTORED = SRAM_WORDS, and (single-cycle round) the
//      restore must move one word per cycle;
//   2. emulates CPU stores (writes the SRAM array, pulses the spy tap) to
//      random addresses, keeping the set of dirty blocks in a reference;
//   3. raises pwr_fail: cpu_halt must rise the next cycle; when backup_done
//      rises, the NVM must hold the new data of every dirty block and the old
//      data of every clean block, exactly BLOCK_SIZE words per dirty block
//      must have been written, and (single-cycle round) the backup must take
//      one cycle per word plus a fixed 8-cycle start-up and drain;
//   4. drops pwr_fail: the controller must go back to RUN, table clean.
module tb_freezer_fsm;
  import freezer_pkg::*;
  localparam int unsigned SRAM_WORDS = 256;
  localparam int unsigned BLOCK_SIZE = 8;
  localparam int unsigned BLOCK_NUM  = SRAM_WORDS / BLOCK_SIZE;
  localparam int unsigned IDX_W      = $clog2(BLOCK_NUM);
  localparam int unsigned CNT_W      = $clog2(SRAM_WORDS) + 1;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pwr_fail = 1'b0, restore = 1'b0, random_lat = 1'b0;
  logic spy_valid = 1'b0, spy_we = 1'b0;
  logic [ADDR_W-1:0] spy_addr = '0;
  logic set_en, clr_en, next_valid, cpu_halt, backup_done;
  logic [IDX_W-1:0] set_idx, next_idx;
  logic [IDX_W:0] dirty_cnt;
  rgv_req_t sram_req, nvm_req;
  rgv_rsp_t sram_rsp, nvm_rsp;
  phase_e phase;
  logic [CNT_W-1:0] saved_words, restored_words;

  int checks = 0, failures = 0;

  freezer_fsm #(.SRAM_WORDS(SRAM_WORDS), .BLOCK_SIZE(BLOCK_SIZE), .FIFO_DEPTH(4)) dut (
    .clk, .rst_n, .pwr_fail, .restore, .track_en(1'b1),
    .spy_valid, .spy_we, .spy_addr,
    .set_en, .set_idx, .clr_en, .next_valid, .next_idx,
    .sram_req_o(sram_req), .sram_rsp_i(sram_rsp),
    .nvm_req_o(nvm_req), .nvm_rsp_i(nvm_rsp),
    .cpu_halt, .backup_done, .phase, .saved_words, .restored_words
  );
  to_backup_mem #(.BLOCK_NUM(BLOCK_NUM), .ROW_W(8)) u_tb (
    .clk, .rst_n, .set_en, .set_idx, .clr_en, .next_valid, .next_idx, .dirty_cnt
  );
  tb_rgv_mem #(.WORDS(SRAM_WORDS)) u_sram (.clk, .rst_n, .random_lat, .req_i(sram_req), .rsp_o(sram_rsp));
  tb_rgv_mem #(.WORDS(SRAM_WORDS)) u_nvm  (.clk, .rst_n, .random_lat, .req_i(nvm_req),  .rsp_o(nvm_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  logic [31:0] image [SRAM_WORDS];
  bit dirty_ref [BLOCK_NUM];

  task automatic round(bit rl);
    int cycles, nd, w0, errs;
    random_lat = rl;
    // 1. boot and restore
    foreach (image[i]) begin
      image[i] = $urandom;
      u_nvm.mem[i] = image[i];
      u_sram.mem[i] = $urandom;
    end
    w0 = u_nvm.writes;
    rst_n = 1'b0; restore = 1'b1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    cycles = 0;
    @(posedge clk); #1;
    check(cpu_halt, "CPU halted during boot/restore");
    while (phase == PH_RESTORE || cycles == 0) begin
      @(posedge clk); #1; cycles++;
      if (cycles > 100000) break;
    end
    restore = 1'b0;
    check(phase == PH_RUN && !cpu_halt, "RUN after restore");
    check(int'(restored_words) == SRAM_WORDS, $sformatf("restored %0d words", restored_words));
    errs = 0;
    foreach (image[i]) if (u_sram.mem[i] !== image[i]) errs++;
    check(errs == 0, $sformatf("restore image mismatches: %0d", errs));
    if (!rl) check(cycles <= SRAM_WORDS + 8,
                   $sformatf("restore took %0d cycles for %0d words", cycles, SRAM_WORDS));
    check(u_nvm.writes == w0, "restore wrote to the NVM");
    // 2. tracked stores
    foreach (dirty_ref[b]) dirty_ref[b] = 1'b0;
    for (int k = 0; k < 20; k++) begin
      int a = $urandom_range(SRAM_WORDS - 1);
      @(negedge clk);
      u_sram.mem[a] = $urandom;
      spy_valid = 1'b1; spy_we = 1'b1; spy_addr = ADDR_W'(a * 4);
      dirty_ref[a / BLOCK_SIZE] = 1'b1;
      @(negedge clk);
      // a load does not mark anything
      spy_we = 1'b0; spy_addr = ADDR_W'($urandom_range(SRAM_WORDS - 1) * 4);
      @(negedge clk);
      spy_valid = 1'b0;
    end
    nd = 0;
    foreach (dirty_ref[b]) nd += int'(dirty_ref[b]);
    @(negedge clk);
    check(int'(dirty_cnt) == nd, $sformatf("dirty count %0d, expected %0d", dirty_cnt, nd));
    // 3. power failure
    w0 = u_nvm.writes;
    @(negedge clk); pwr_fail = 1'b1;
    @(posedge clk); #1;
    check(cpu_halt, "cpu_halt one cycle after pwr_fail");
    cycles = 1;
    while (!backup_done && cycles < 100000) begin
      @(posedge clk); #1; cycles++;
    end
    check(backup_done, "backup completed");
    check(u_nvm.writes - w0 == nd * BLOCK_SIZE,
          $sformatf("NVM writes %0d, expected %0d", u_nvm.writes - w0, nd * BLOCK_SIZE));
    check(int'(saved_words) == nd * BLOCK_SIZE, $sformatf("SAVED=%0d", saved_words));
    errs = 0;
    foreach (image[i]) begin
      logic [31:0] exp = dirty_ref[i / BLOCK_SIZE] ? u_sram.mem[i] : image[i];
      if (u_nvm.mem[i] !== exp) errs++;
    end
    check(errs == 0, $sformatf("NVM snapshot mismatches: %0d", errs));
    if (!rl) check(cycles <= nd * BLOCK_SIZE + 8,
                   $sformatf("backup took %0d cycles for %0d words", cycles, nd * BLOCK_SIZE));
    check(dirty_cnt == 0, "table clean after backup");
    // 4. power comes back without a loss
    @(negedge clk); pwr_fail = 1'b0;
    @(posedge clk); #1;
    check(phase == PH_RUN && !cpu_halt, "back to RUN when pwr_fail drops");
  endtask

  initial begin
    round(1'b0);
    round(1'b1);
    round(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
