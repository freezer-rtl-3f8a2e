// tb_nvm_model: self-checking test of the NVM model.
// Checks that a request is granted after exactly WAIT_CYCLES waiting cycles,
// that rvalid follows the grant by one cycle, that reads return what was
// written, and that the content survives a reset (non-volatility).
module tb_nvm_model;
  import freezer_pkg::*;
  localparam int unsigned WORDS = 8192;
  localparam int unsigned WAIT  = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  rgv_req_t req = '0;
  rgv_rsp_t rsp;
  logic [31:0] ref_mem [64];
  int checks = 0, failures = 0;

  nvm_model #(.WORDS(WORDS), .WAIT_CYCLES(WAIT)) dut (.clk, .rst_n, .req_i(req), .rsp_o(rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (1000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic access(bit we, int a, logic [31:0] d, output logic [31:0] rd);
    int waited = 0;
    @(negedge clk);
    req.req = 1; req.we = we; req.addr = ADDR_W'(a * 4); req.wdata = d; req.be = '1;
    #1;
    while (!rsp.gnt) begin
      @(negedge clk); #1; waited++;
    end
    check(waited == WAIT, $sformatf("granted after %0d wait cycles", waited));
    @(negedge clk);
    req = '0;
    check(rsp.rvalid, "rvalid one cycle after gnt");
    rd = rsp.rdata;
  endtask

  initial begin
    logic [31:0] rd;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      ref_mem[i] = $urandom;
      access(1, i * 100 % WORDS, ref_mem[i], rd);
    end
    for (int i = 0; i < 64; i++) begin
      access(0, i * 100 % WORDS, '0, rd);
      check(rd == ref_mem[i], "read back");
    end
    // power cycle
    @(negedge clk); rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) begin
      access(0, i * 100 % WORDS, '0, rd);
      check(rd == ref_mem[i], "content kept across reset");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
