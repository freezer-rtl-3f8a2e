// tb_freezer: self-checking test of the Freezer controller as a whole
// (controller, dirty-bit memory and APB registers) on testbench memories,
// with blocks of 4 words.
//
// Checks, through the APB port: RESTORED after a boot with restore, DIRTY
// after a series of spied stores (repeated stores to one block count once,
// loads count nothing), STATUS showing BACKUP while the backup runs and OFF
// with backup_done at the end, SAVED = 4 x dirty blocks. With TRACK_EN
// cleared a store is not tracked and the next backup leaves its block alone.
// The NVM content is checked word by word against the expected snapshot.
module tb_freezer;
  import freezer_pkg::*;
  localparam int unsigned SRAM_WORDS = 512;
  localparam int unsigned BLOCK_SIZE = 4;
  localparam int unsigned BLOCK_NUM  = SRAM_WORDS / BLOCK_SIZE;

  logic clk = 1'b0, rst_n = 1'b0;
  logic pwr_fail = 0, restore = 0;
  logic spy_valid = 0, spy_we = 0;
  logic [ADDR_W-1:0] spy_addr = '0;
  rgv_req_t sram_req, nvm_req;
  rgv_rsp_t sram_rsp, nvm_rsp;
  logic cpu_halt, backup_done;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr;
  int checks = 0, failures = 0;

  freezer #(.SRAM_WORDS(SRAM_WORDS), .BLOCK_SIZE(BLOCK_SIZE), .ROW_W(16)) dut (
    .clk, .rst_n, .pwr_fail, .restore, .spy_valid, .spy_we, .spy_addr,
    .sram_req_o(sram_req), .sram_rsp_i(sram_rsp), .nvm_req_o(nvm_req), .nvm_rsp_i(nvm_rsp),
    .cpu_halt, .backup_done, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr
  );
  tb_rgv_mem #(.WORDS(SRAM_WORDS)) u_sram (.clk, .rst_n, .random_lat(1'b0), .req_i(sram_req), .rsp_o(sram_rsp));
  tb_rgv_mem #(.WORDS(SRAM_WORDS)) u_nvm  (.clk, .rst_n, .random_lat(1'b1), .req_i(nvm_req),  .rsp_o(nvm_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
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
  task automatic apb_wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); psel = 1; penable = 0; pwrite = 1; paddr = a; pwdata = d;
    @(negedge clk); penable = 1;
    @(negedge clk); psel = 0; penable = 0; pwrite = 0;
  endtask
  task automatic store(int a, bit we);
    @(negedge clk);
    if (we) u_sram.mem[a] = $urandom;
    spy_valid = 1; spy_we = we; spy_addr = ADDR_W'(a * 4);
    @(negedge clk); spy_valid = 0;
  endtask

  logic [31:0] snap [SRAM_WORDS];
  bit dirty_ref [BLOCK_NUM];

  initial begin
    logic [31:0] rd;
    int nd, errs;
    bit seen_backup;
    foreach (snap[i]) begin snap[i] = $urandom; u_nvm.mem[i] = snap[i]; end
    restore = 1;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    wait (!cpu_halt);
    restore = 0;
    apb_rd(12'h010, rd);
    check(rd == SRAM_WORDS, $sformatf("RESTORED=%0d", rd));
    apb_rd(12'h004, rd);
    check(rd[2:0] == PH_RUN && !rd[8], "STATUS RUN");
    // stores
    foreach (dirty_ref[b]) dirty_ref[b] = 0;
    for (int k = 0; k < 30; k++) begin
      automatic int a = $urandom_range(SRAM_WORDS - 1);
      store(a, 1'b1);
      dirty_ref[a / BLOCK_SIZE] = 1;
      store(a ^ 1, 1'b1);             // same block again
      store($urandom_range(SRAM_WORDS - 1), 1'b0);   // a load
    end
    nd = 0;
    foreach (dirty_ref[b]) nd += int'(dirty_ref[b]);
    apb_rd(12'h008, rd);
    check(rd == nd, $sformatf("DIRTY=%0d expected %0d", rd, nd));
    // tracking off: this store is not saved
    apb_wr(12'h000, 0);
    begin
      int a;
      a = 0;
      while (dirty_ref[a / BLOCK_SIZE]) a += BLOCK_SIZE;
      store(a, 1'b1);
      apb_rd(12'h008, rd);
      check(rd == nd, "untracked store not counted");
    end
    apb_wr(12'h000, 1);
    // backup
    @(negedge clk); pwr_fail = 1;
    seen_backup = 0;
    while (!backup_done) begin
      apb_rd(12'h004, rd);
      if (rd[2:0] == PH_BACKUP) seen_backup = 1;
    end
    check(seen_backup, "STATUS showed BACKUP");
    apb_rd(12'h004, rd);
    check(rd[2:0] == PH_OFF && rd[9] && rd[8], "STATUS OFF, backup_done, cpu_halt");
    apb_rd(12'h00C, rd);
    check(rd == nd * BLOCK_SIZE, $sformatf("SAVED=%0d", rd));
    apb_rd(12'h008, rd);
    check(rd == 0, "DIRTY cleared by backup");
    errs = 0;
    foreach (snap[i]) begin
      logic [31:0] exp;
      exp = dirty_ref[i / BLOCK_SIZE] ? u_sram.mem[i] : snap[i];
      if (u_nvm.mem[i] !== exp) errs++;
    end
    check(errs == 0, $sformatf("snapshot mismatches %0d", errs));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
