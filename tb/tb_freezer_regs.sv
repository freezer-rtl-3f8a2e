// tb_freezer_regs: self-checking test of Freezer's APB registers.
// Checks the reset value and write/read-back of CTRL.TRACK_EN, that every
// status register returns the value driven on its input (random values),
// pslverr on unmapped addresses and on writes to read-only registers, and
// pready always high (no wait states).
module tb_freezer_regs;
  import freezer_pkg::*;
  localparam int unsigned CNT_W = 14;

  logic clk = 1'b0, rst_n = 1'b0;
  logic psel = 0, penable = 0, pwrite = 0;
  logic [11:0] paddr = '0;
  logic [31:0] pwdata = '0, prdata;
  logic pready, pslverr, track_en, cpu_halt = 0, backup_done = 0;
  phase_e phase = PH_RUN;
  logic [CNT_W-1:0] dirty_cnt = '0, saved_words = '0, restored_words = '0;
  int checks = 0, failures = 0;

  freezer_regs #(.CNT_W(CNT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic apb(input bit wr, input logic [11:0] a, input logic [31:0] d,
                     output logic [31:0] rd, output logic err);
    @(negedge clk);
    psel = 1; penable = 0; pwrite = wr; paddr = a; pwdata = d;
    @(negedge clk);
    penable = 1;
    #1;
    check(pready, "pready high");
    rd = prdata; err = pslverr;
    @(negedge clk);
    psel = 0; penable = 0; pwrite = 0;
  endtask

  initial begin
    logic [31:0] rd;
    logic err;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    check(track_en == 1'b1, "TRACK_EN resets to 1");
    apb(0, 12'h000, 0, rd, err);
    check(rd == 32'h1 && !err, "CTRL read after reset");
    apb(1, 12'h000, 32'h0, rd, err);
    check(track_en == 1'b0 && !err, "CTRL write 0");
    apb(0, 12'h000, 0, rd, err);
    check(rd == 32'h0, "CTRL read back 0");
    apb(1, 12'h000, 32'h1, rd, err);
    check(track_en == 1'b1, "CTRL write 1");
    for (int k = 0; k < 10; k++) begin
      phase = phase_e'($urandom_range(4));
      cpu_halt = 1'($urandom); backup_done = 1'($urandom);
      dirty_cnt = CNT_W'($urandom); saved_words = CNT_W'($urandom);
      restored_words = CNT_W'($urandom);
      apb(0, 12'h004, 0, rd, err);
      check(rd == {22'd0, backup_done, cpu_halt, 5'd0, phase} && !err, "STATUS");
      apb(0, 12'h008, 0, rd, err);
      check(rd == 32'(dirty_cnt) && !err, "DIRTY");
      apb(0, 12'h00C, 0, rd, err);
      check(rd == 32'(saved_words) && !err, "SAVED");
      apb(0, 12'h010, 0, rd, err);
      check(rd == 32'(restored_words) && !err, "RESTORED");
    end
    apb(0, 12'h014, 0, rd, err);
    check(err && rd == 0, "unmapped read gives pslverr");
    apb(1, 12'h008, 32'h5, rd, err);
    check(err, "write to read-only DIRTY gives pslverr");
    check(track_en == 1'b1, "RO write leaves CTRL alone");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
