// tb_block_sizes: the top at the two extreme block sizes of the design
// space, 1 word (word-level tracking) and 64 words, side by side.
//
// Both instances (1024-word SRAM) get the same CPU stores in lockstep. After
// a power failure each must save exactly BLOCK_SIZE x (distinct blocks
// stored to) words, and both NVMs must then equal the reference image; after
// a power loss and restore both SRAMs must equal it too.
module tb_block_sizes;
  import freezer_pkg::*;
  localparam int unsigned SRAM_WORDS = 1024;
  localparam int unsigned BS [2] = '{1, 64};

  logic clk = 1'b0, rst_n = 1'b0, pwr_fail = 0, restore = 0;
  rgv_req_t cpu_req = '0;
  rgv_rsp_t cpu_rsp [2];
  logic cpu_halt [2], backup_done [2], pready [2], pslverr [2];
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] prdata [2];

  freezer_soc #(.SRAM_WORDS(SRAM_WORDS), .BLOCK_SIZE(1)) dut1 (
    .clk, .rst_n, .pwr_fail, .restore, .cpu_req_i(cpu_req), .cpu_rsp_o(cpu_rsp[0]),
    .cpu_halt(cpu_halt[0]), .backup_done(backup_done[0]), .psel, .penable, .pwrite, .paddr,
    .pwdata('0), .prdata(prdata[0]), .pready(pready[0]), .pslverr(pslverr[0]));
  freezer_soc #(.SRAM_WORDS(SRAM_WORDS), .BLOCK_SIZE(64)) dut64 (
    .clk, .rst_n, .pwr_fail, .restore, .cpu_req_i(cpu_req), .cpu_rsp_o(cpu_rsp[1]),
    .cpu_halt(cpu_halt[1]), .backup_done(backup_done[1]), .psel, .penable, .pwrite, .paddr,
    .pwdata('0), .prdata(prdata[1]), .pready(pready[1]), .pslverr(pslverr[1]));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  logic [31:0] ref_mem [SRAM_WORDS];
  bit words_hit [SRAM_WORDS];
  bit blocks_hit [SRAM_WORDS / 64];

  task automatic compare(int which, bit nvm, string what);
    int errs = 0;
    for (int i = 0; i < SRAM_WORDS; i++) begin
      logic [31:0] v;
      if (which == 0) v = nvm ? dut1.u_nvm.mem[i] : dut1.u_sram.mem[i];
      else            v = nvm ? dut64.u_nvm.mem[i] : dut64.u_sram.mem[i];
      if (v !== ref_mem[i]) errs++;
    end
    check(errs == 0, $sformatf("block size %0d, %s: %0d words differ", BS[which], what, errs));
  endtask

  initial begin
    int nw, nb;
    for (int i = 0; i < SRAM_WORDS; i++) begin
      ref_mem[i] = $urandom;
      dut1.u_nvm.mem[i] = ref_mem[i];
      dut64.u_nvm.mem[i] = ref_mem[i];
    end
    for (int round = 0; round < 2; round++) begin
      for (int i = 0; i < SRAM_WORDS; i++) begin
        dut1.u_sram.mem[i] = $urandom;
        dut64.u_sram.mem[i] = $urandom;
      end
      rst_n = 0; restore = 1; pwr_fail = 0;
      repeat (3) @(posedge clk);
      #1 rst_n = 1;
      wait (!cpu_halt[0] && !cpu_halt[1]);
      restore = 0;
      compare(0, 0, "SRAM after restore");
      compare(1, 0, "SRAM after restore");
      foreach (words_hit[i]) words_hit[i] = 0;
      foreach (blocks_hit[i]) blocks_hit[i] = 0;
      for (int k = 0; k < 40; k++) begin
        automatic int a = (k < 5) ? 64 * k + 3 : $urandom_range(SRAM_WORDS - 1);
        @(negedge clk);
        cpu_req.req = 1; cpu_req.we = 1; cpu_req.be = '1;
        cpu_req.addr = ADDR_W'(a * 4); cpu_req.wdata = $urandom;
        #1;
        check(cpu_rsp[0].gnt && cpu_rsp[1].gnt, "both grant the CPU store");
        ref_mem[a] = cpu_req.wdata;
        words_hit[a] = 1;
        blocks_hit[a / 64] = 1;
        @(negedge clk);
        cpu_req = '0;
      end
      nw = 0; nb = 0;
      foreach (words_hit[i]) nw += int'(words_hit[i]);
      foreach (blocks_hit[i]) nb += int'(blocks_hit[i]);
      @(negedge clk); pwr_fail = 1;
      wait (backup_done[0] && backup_done[1]);
      check(int'(dut1.u_freezer.u_fsm.saved_words) == nw,
            $sformatf("1-word blocks saved %0d, expected %0d", dut1.u_freezer.u_fsm.saved_words, nw));
      check(int'(dut64.u_freezer.u_fsm.saved_words) == nb * 64,
            $sformatf("64-word blocks saved %0d, expected %0d", dut64.u_freezer.u_fsm.saved_words, nb * 64));
      compare(0, 1, "NVM after backup");
      compare(1, 1, "NVM after backup");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
