// tb_workload_matmul: a 16x16 integer matrix product (the access pattern of
// the matmul16_int benchmark) run to completion on intermittent power, with
// the memory subsystem at its default sizes.
//
// The testbench plays the CPU. Matrices A, B and C sit at words 0, 256 and
// 512; the program keeps its progress (index of the next C element) in
// memory word 1023, which is all of its state that survives a power loss,
// as when software spills its registers to memory. Every N_PROG cycles of
// execution the supply fails: the CPU is halted, Freezer saves the dirty
// blocks, the node loses power (reset, SRAM scrambled), comes back, Freezer
// restores the SRAM, and the program reloads its progress and continues,
// redoing the element it was working on.
//
// Checked: the final C equals A x B; each backup saves 8 x (blocks stored to
// in that interval) words; the program needs several intervals. Reported:
// backup size per interval against the full-data-memory backup of 1024 words
// (8 pages of 128 words), the baseline the backup-size results are given
// against.
module tb_workload_matmul;
  import freezer_pkg::*;
  localparam int unsigned SRAM_WORDS = 8192;
  localparam int unsigned N          = 16;
  localparam int unsigned A0 = 0, B0 = 256, C0 = 512, PROG = 1023;
  localparam int unsigned N_PROG     = 2500;    // execution cycles per interval
  localparam int unsigned FULL_BKP   = 1024;    // 8 pages of 128 words

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
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic apb_rd(input logic [11:0] a, output logic [31:0] rd);
    @(negedge clk); psel = 1; penable = 0; pwrite = 0; paddr = a;
    @(negedge clk); penable = 1; #1; rd = prdata;
    @(negedge clk); psel = 0; penable = 0;
  endtask

  // One CPU access; ok = 0 if the CPU was halted before the grant.
  bit dirty [SRAM_WORDS / 8];
  task automatic access(input bit we, input int a, input logic [31:0] d,
                        output logic [31:0] rd, output bit ok);
    ok = 0;
    @(negedge clk);
    if (cpu_halt) return;
    cpu_req.req = 1; cpu_req.we = we; cpu_req.be = '1; cpu_req.addr = ADDR_W'(a * 4);
    cpu_req.wdata = d;
    #1;
    while (!cpu_rsp.gnt) begin
      if (cpu_halt) begin cpu_req = '0; return; end
      @(negedge clk); #1;
    end
    if (we) dirty[a / 8] = 1;
    @(negedge clk);
    cpu_req = '0;
    rd = cpu_rsp.rdata;
    ok = 1;
  endtask

  bit done = 0;
  // The program: resumes from the progress word after every restore.
  task automatic program_run();
    logic [31:0] rd, acc, a, b;
    bit ok;
    access(0, PROG, '0, rd, ok); if (!ok) return;
    for (int e = int'(rd); e < N * N; e++) begin
      int i = e / N, j = e % N;
      acc = 0;
      for (int k = 0; k < N; k++) begin
        access(0, A0 + i * N + k, '0, a, ok); if (!ok) return;
        access(0, B0 + k * N + j, '0, b, ok); if (!ok) return;
        acc += a * b;
      end
      access(1, C0 + e, acc, rd, ok); if (!ok) return;
      access(1, PROG, 32'(e + 1), rd, ok); if (!ok) return;
    end
    done = 1;
  endtask

  logic [31:0] A [N*N], B [N*N];

  initial begin
    logic [31:0] rd, exp;
    int iv = 0, total_saved = 0, errs = 0, nd;
    // program image in the NVM: A, B, C = 0, progress = 0
    for (int i = 0; i < SRAM_WORDS; i++) dut.u_nvm.mem[i] = '0;
    for (int i = 0; i < N * N; i++) begin
      A[i] = $urandom_range(1000); B[i] = $urandom_range(1000);
      dut.u_nvm.mem[A0 + i] = A[i];
      dut.u_nvm.mem[B0 + i] = B[i];
    end
    while (!done && iv < 40) begin
      for (int i = 0; i < SRAM_WORDS; i++) dut.u_sram.mem[i] = $urandom;
      rst_n = 0; restore = 1; pwr_fail = 0;
      repeat (3) @(posedge clk);
      #1 rst_n = 1;
      wait (!cpu_halt);
      restore = 0;
      foreach (dirty[b]) dirty[b] = 0;
      fork
        program_run();
        begin
          repeat (N_PROG) @(posedge clk);
          @(negedge clk); pwr_fail = 1;
        end
      join_any
      if (done) break;
      wait (backup_done);
      // let program_run notice the halt and return
      wait fork;
      apb_rd(12'h00C, rd);
      nd = 0;
      foreach (dirty[b]) nd += int'(dirty[b]);
      check(rd == nd * 8, $sformatf("interval %0d: SAVED=%0d, expected %0d", iv, rd, nd * 8));
      $display("interval %0d: backup %0d words (full-memory backup: %0d)", iv, rd, FULL_BKP);
      total_saved += int'(rd);
      iv++;
    end
    disable fork;
    check(done, "program completed");
    check(iv >= 3, $sformatf("program needed %0d interrupted intervals", iv));
    for (int e = 0; e < N * N; e++) begin
      exp = 0;
      for (int k = 0; k < N; k++) exp += A[(e / N) * N + k] * B[k * N + (e % N)];
      if (dut.u_sram.mem[C0 + e] !== exp) errs++;
    end
    check(errs == 0, $sformatf("%0d wrong elements of C", errs));
    if (iv > 0)
      $display("average backup %0d words per interval, %0d%% of the full-memory backup",
               total_saved / iv, 100 * total_saved / (iv * FULL_BKP));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
