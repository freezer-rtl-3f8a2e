// tb_freezer_soc: end-to-end test of the memory subsystem with Freezer, at
// the default sizes (32 KB SRAM, blocks of 8 words, NVM three times slower
// than the SRAM).
//
// The testbench plays the CPU (random loads and stores on the CPU port, with
// a reference copy of the memory) and the power management (pwr_fail,
// restore, rst_n). It runs a sequence of power intervals:
//   boot with restore -> run -> power failure at a random moment -> backup
//   -> power off (reset, SRAM content scrambled) -> next interval.
// After each restore the whole SRAM must equal the reference; after each
// backup the whole NVM must equal it too (the snapshot is always complete,
// although only dirty blocks were written), SAVED must be 8 x the blocks the
// testbench saw stored to, and the backup must take no more than one NVM
// access time per saved word plus a fixed overhead. Loads are checked against
// the reference all along.
// Mechanisms that must each happen at least once: restore, backup, CPU
// stalled by cpu_halt, clean blocks skipped by a backup, a backup with no
// dirty block, a power failure withdrawn before the power went (resume
// without restore), a store to an already dirty block, and a store granted in
// the cycle pwr_fail rises.
module tb_freezer_soc;
  import freezer_pkg::*;
  localparam int unsigned SRAM_WORDS = 8192;
  localparam int unsigned BLOCK_SIZE = 8;
  localparam int unsigned NVM_WAIT   = 2;
  localparam int unsigned N_IV       = 6;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pwr_fail = 0, restore = 0;
  rgv_req_t cpu_req = '0;
  rgv_rsp_t cpu_rsp;
  logic cpu_halt, backup_done;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;

  freezer_soc dut (.clk, .rst_n, .pwr_fail, .restore, .cpu_req_i(cpu_req), .cpu_rsp_o(cpu_rsp),
                   .cpu_halt, .backup_done, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata,
                   .pready, .pslverr);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_restore = 0, n_backup = 0, n_halt_stall = 0, n_skip = 0, n_empty = 0;
  int n_resume = 0, n_redirty = 0, n_store_at_fail = 0;

  initial begin
    repeat (2000000) @(posedge clk);
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
  bit          dirty   [SRAM_WORDS / BLOCK_SIZE];
  bit          stop_cpu = 0, cpu_busy = 0;

  task automatic apb_rd(input logic [11:0] a, output logic [31:0] rd);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1; rd = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  // CPU: random accesses inside a few regions; stores optional.
  task automatic cpu_run(bit allow_store);
    cpu_busy = 1;
    while (!stop_cpu) begin
      int region, a;
      bit we, granted;
      logic [31:0] exp;
      region = $urandom_range(3);
      a = region * 2048 + $urandom_range(255);
      we = allow_store && $urandom_range(1);
      @(negedge clk);
      cpu_req.req = 1; cpu_req.we = we; cpu_req.be = we ? 4'($urandom_range(15) | 1) : 4'hF;
      cpu_req.addr = ADDR_W'(a * 4); cpu_req.wdata = $urandom;
      granted = 0;
      while (!granted) begin
        #1;
        if (cpu_rsp.gnt) granted = 1;
        else begin
          if (cpu_halt) n_halt_stall++;
          if (stop_cpu) break;
          @(negedge clk);
        end
      end
      if (!granted) begin cpu_req = '0; break; end
      if (pwr_fail && we) n_store_at_fail++;
      exp = ref_mem[a];
      if (we) begin
        for (int b = 0; b < 4; b++) if (cpu_req.be[b]) ref_mem[a][8*b +: 8] = cpu_req.wdata[8*b +: 8];
        if (dirty[a / BLOCK_SIZE]) n_redirty++;
        dirty[a / BLOCK_SIZE] = 1;
      end
      @(negedge clk);
      cpu_req = '0;
      check(cpu_rsp.rvalid, "CPU response one cycle after grant");
      if (!we) check(cpu_rsp.rdata == exp, $sformatf("load @%0d: %h, expected %h", a, cpu_rsp.rdata, exp));
    end
    cpu_busy = 0;
  endtask

  task automatic compare_array(bit nvm, string what);
    int errs = 0;
    for (int i = 0; i < SRAM_WORDS; i++)
      if ((nvm ? dut.u_nvm.mem[i] : dut.u_sram.mem[i]) !== ref_mem[i]) begin
        if (errs == 0) $display("  first difference at word %0d: %h, expected %h", i, nvm ? dut.u_nvm.mem[i] : dut.u_sram.mem[i], ref_mem[i]);
        errs++;
      end
    check(errs == 0, $sformatf("%s: %0d words differ", what, errs));
  endtask

  initial begin
    logic [31:0] rd;
    bit resumed = 0;
    int nd, t0, t1;
    // the program's initial image sits in the NVM
    for (int i = 0; i < SRAM_WORDS; i++) begin
      ref_mem[i] = $urandom;
      dut.u_nvm.mem[i] = ref_mem[i];
    end
    for (int iv = 0; iv < N_IV; iv++) begin
      if (!resumed) begin
        // power up: SRAM content is garbage, restore from the NVM
        for (int i = 0; i < SRAM_WORDS; i++) dut.u_sram.mem[i] = $urandom;
        rst_n = 0; restore = 1; pwr_fail = 0;
        repeat (3) @(posedge clk);
        #1 rst_n = 1;
        t0 = $time;
        wait (!cpu_halt);
        restore = 0;
        n_restore++;
        compare_array(0, $sformatf("interval %0d: SRAM after restore", iv));
        apb_rd(12'h010, rd);
        check(rd == SRAM_WORDS, $sformatf("RESTORED=%0d", rd));
        foreach (dirty[b]) dirty[b] = 0;
      end
      resumed = 0;
      // run, then fail at a random moment
      stop_cpu = 0;
      fork cpu_run(iv != 2); join_none
      repeat ($urandom_range(200, 2000)) @(posedge clk);
      @(negedge clk);
      pwr_fail = 1;
      t0 = $time;
      wait (backup_done);
      t1 = $time;
      stop_cpu = 1;
      wait (!cpu_busy);
      n_backup++;
      nd = 0;
      foreach (dirty[b]) nd += int'(dirty[b]);
      apb_rd(12'h00C, rd);
      check(rd == nd * BLOCK_SIZE, $sformatf("SAVED=%0d, expected %0d", rd, nd * BLOCK_SIZE));
      if (nd == 0) n_empty++;
      if (nd > 0 && nd < SRAM_WORDS / BLOCK_SIZE) n_skip++;
      check((t1 - t0) / 10 <= nd * BLOCK_SIZE * (NVM_WAIT + 1) + 10,
            $sformatf("backup of %0d words took %0d cycles", nd * BLOCK_SIZE, (t1 - t0) / 10));
      compare_array(1, $sformatf("interval %0d: NVM after backup", iv));
      foreach (dirty[b]) dirty[b] = 0;
      if (iv == 3) begin
        // the supply recovers before switching off: no restore needed
        @(negedge clk); pwr_fail = 0;
        @(posedge clk); #1;
        check(!cpu_halt, "CPU released when pwr_fail drops");
        resumed = 1;
        n_resume++;
        compare_array(0, "SRAM kept after withdrawn failure");
      end
    end
    $display("restores %0d backups %0d halt-stalls %0d skips %0d empty %0d resume %0d redirty %0d store-at-fail %0d",
             n_restore, n_backup, n_halt_stall, n_skip, n_empty, n_resume, n_redirty, n_store_at_fail);
    check(n_restore > 0, "restore happened");
    check(n_backup > 0, "backup happened");
    check(n_halt_stall > 0, "CPU stalled by cpu_halt");
    check(n_skip > 0, "clean blocks skipped");
    check(n_empty > 0, "empty backup");
    check(n_resume > 0, "resume without restore");
    check(n_redirty > 0, "store to an already dirty block");
    check(n_store_at_fail > 0, "store granted in the pwr_fail cycle");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
