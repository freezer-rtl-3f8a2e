// tb_sram_rgv: self-checking test of the SRAM model with its rgv port.
// Random full-word and byte-enabled writes and reads against a reference
// array; checks gnt in the request cycle, rvalid exactly one cycle later for
// both reads and writes, and back-to-back accesses at one per cycle.
module tb_sram_rgv;
  import freezer_pkg::*;
  localparam int unsigned WORDS = 8192;

  logic clk = 1'b0, rst_n = 1'b0;
  rgv_req_t req = '0;
  rgv_rsp_t rsp;
  logic [31:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  sram_rgv #(.WORDS(WORDS)) dut (.clk, .rst_n, .req_i(req), .rsp_o(rsp));

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

  // Issue one request in this cycle; the expected response of the previous
  // request is checked in the same cycle (pipelined, one per cycle).
  bit          exp_valid = 0, exp_read = 0;
  logic [31:0] exp_data;

  task automatic access(bit we, int a, logic [31:0] d, logic [3:0] be);
    @(negedge clk);
    check(rsp.rvalid == exp_valid, "rvalid one cycle after the request");
    if (exp_valid && exp_read) check(rsp.rdata == exp_data, $sformatf("read data %h vs %h", rsp.rdata, exp_data));
    req.req = 1; req.we = we; req.addr = ADDR_W'(a * 4); req.wdata = d; req.be = be;
    #1;
    check(rsp.gnt, "gnt in the request cycle");
    exp_valid = 1; exp_read = !we; exp_data = ref_mem[a];
    if (we) for (int b = 0; b < 4; b++) if (be[b]) ref_mem[a][8*b +: 8] = d[8*b +: 8];
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 64; i++) access(1, i, $urandom, 4'hF);
    for (int k = 0; k < 400; k++) begin
      automatic int a = $urandom_range(63);
      if ($urandom_range(1)) access(1, a, $urandom, 4'($urandom));
      else access(0, a, '0, 4'hF);
    end
    access(1, WORDS - 1, 32'hCAFE_F00D, 4'hF);
    access(0, WORDS - 1, '0, 4'hF);
    @(negedge clk);
    req = '0;
    check(rsp.rvalid && rsp.rdata == 32'hCAFE_F00D, "last word");
    @(negedge clk);
    check(!rsp.rvalid, "no response without request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
