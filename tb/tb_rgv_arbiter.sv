// tb_rgv_arbiter: self-checking test of the two-master SRAM arbiter.
//
// Two testbench masters (CPU = m0, Freezer = m1) run random writes and
// read-backs at the same time into separate halves of a memory with random
// grant and response latency. Checked: every read returns the last value
// that master wrote (so responses are routed to the right master), the
// number of responses each master receives equals its number of grants,
// m1 wins when both may be granted, and m1 is never granted while m0 still
// has a response outstanding (or the reverse). The test also requires the
// drain case, m1 held off by outstanding m0 responses, to happen.
module tb_rgv_arbiter;
  import freezer_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  rgv_req_t m_req [2];
  rgv_rsp_t m_rsp [2];
  rgv_req_t s_req;
  rgv_rsp_t s_rsp;
  int checks = 0, failures = 0;
  int outst [2] = '{0, 0};
  int grants [2] = '{0, 0}, resps [2] = '{0, 0};
  int drain_waits = 0, prio_checks = 0;

  rgv_arbiter #(.MAX_OUTSTANDING(4)) dut (
    .clk, .rst_n,
    .m0_req_i(m_req[0]), .m0_rsp_o(m_rsp[0]),
    .m1_req_i(m_req[1]), .m1_rsp_o(m_rsp[1]),
    .s_req_o(s_req), .s_rsp_i(s_rsp)
  );
  tb_rgv_mem #(.WORDS(256)) u_mem (.clk, .rst_n, .random_lat(1'b1), .req_i(s_req), .rsp_o(s_rsp));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    $display("grants %0d %0d resps %0d %0d outst %0d %0d", grants[0], grants[1], resps[0], resps[1], outst[0], outst[1]);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Monitor, sampled just before each rising edge.
  always @(negedge clk) if (rst_n) begin
    #4;
    for (int m = 0; m < 2; m++) begin
      if (m_rsp[m].gnt) begin
        check(m_req[m].req, "grant only with a request");
        check(outst[1-m] == 0, $sformatf("m%0d granted while m%0d has responses pending", m, 1-m));
      end
    end
    if (m_req[0].req && m_req[1].req && outst[0] == 0 && outst[1] == 0 && s_rsp.gnt) begin
      check(m_rsp[1].gnt && !m_rsp[0].gnt, "m1 has priority");
      prio_checks++;
    end
    if (m_req[1].req && outst[0] > 0) drain_waits++;
    check(!(m_rsp[0].rvalid && m_rsp[1].rvalid), "one response at a time");
  end
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 2; m++) begin
      outst[m] += int'(m_rsp[m].gnt) - int'(m_rsp[m].rvalid);
      grants[m] += int'(m_rsp[m].gnt);
      resps[m]  += int'(m_rsp[m].rvalid);
    end
  end

  // One master: pipelined requests (up to 3 in flight), reads checked
  // against its own reference.
  task automatic master(int m, int n);
    logic [31:0] shadow [128];
    logic [31:0] expq [$];
    bit          isrd [$];
    int issued = 0;
    for (int i = 0; i < 128; i++) shadow[i] = '0;
    // initialise own half
    fork
      begin : collect
        forever begin
          @(posedge clk);
          if (m_rsp[m].rvalid) begin
            logic [31:0] e = expq.pop_front();
            if (isrd.pop_front()) check(m_rsp[m].rdata == e, $sformatf("m%0d read data", m));
          end
        end
      end
    join_none
    while (issued < n) begin
      int a = $urandom_range(31);
      bit wr = (issued < 32) || $urandom_range(1);
      @(negedge clk);
      m_req[m].req = ($urandom_range(3) != 0) && (expq.size() < 3);
      m_req[m].we = wr; m_req[m].be = '1;
      m_req[m].addr = ADDR_W'((m * 128 + (issued < 32 ? issued : a)) * 4);
      m_req[m].wdata = $urandom;
      #4;
      if (m_req[m].req && m_rsp[m].gnt) begin
        int idx = issued < 32 ? issued : a;
        expq.push_back(wr ? 32'd0 : shadow[idx]);
        isrd.push_back(!wr);
        if (wr) shadow[idx] = m_req[m].wdata;
        issued++;
      end
    end
    @(negedge clk); m_req[m] = '0;
    repeat (40) @(posedge clk);
  endtask

  initial begin
    m_req[0] = '0; m_req[1] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    fork
      master(0, 300);
      master(1, 300);
    join
    check(grants[0] == resps[0] && grants[1] == resps[1], "every grant answered once");
    check(grants[0] == 300 && grants[1] == 300, "all requests granted");
    check(drain_waits > 0, "m1 waited for m0 responses at least once");
    check(prio_checks > 0, "priority case happened");
    $display("drain waits %0d, priority cases %0d", drain_waits, prio_checks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
