// rgv_arbiter: shares one rgv slave (the single-port SRAM) between the CPU
// (master 0) and Freezer (master 1).
//
// The CPU and Freezer never need the SRAM at the same time: Freezer only
// uses it while the CPU is halted. The arbiter therefore stays simple:
//   * master 1 has priority; while it requests, master 0 gets no grant;
//   * a master is granted only if the other master has no response
//     outstanding, so a switch of owner waits until the slave has answered
//     everything the previous owner asked for;
//   * since responses come back in order, every rvalid belongs to the master
//     that owns the outstanding requests and is routed to it alone.
// At most MAX_OUTSTANDING requests may be pending at the slave.
// Interface: two rgv slave ports m0_*/m1_*, one rgv master port s_*.
// Timing: grant is combinational (same cycle as the slave's gnt), no added
// latency. The priority and drain-before-switch rules are this design's own.
module rgv_arbiter
  import freezer_pkg::*;
#(
  parameter int unsigned MAX_OUTSTANDING = 4
) (
  input  logic     clk,
  input  logic     rst_n,
  input  rgv_req_t m0_req_i,
  output rgv_rsp_t m0_rsp_o,
  input  rgv_req_t m1_req_i,
  output rgv_rsp_t m1_rsp_o,
  output rgv_req_t s_req_o,
  input  rgv_rsp_t s_rsp_i
);

  localparam int unsigned CW = $clog2(MAX_OUTSTANDING + 1);

  logic [CW-1:0] cnt_q;
  logic          owner_q;   // master owning the outstanding requests
  logic          room, allow0, allow1, sel0, sel1, fire;

  assign room   = (int'(cnt_q) < MAX_OUTSTANDING);
  assign allow0 = room && (cnt_q == '0 || owner_q == 1'b0);
  assign allow1 = room && (cnt_q == '0 || owner_q == 1'b1);
  assign sel1   = m1_req_i.req && allow1;
  assign sel0   = m0_req_i.req && !m1_req_i.req && allow0;

  always_comb begin
    s_req_o = '0;
    if (sel1)      s_req_o = m1_req_i;
    else if (sel0) s_req_o = m0_req_i;
  end

  assign fire = s_req_o.req && s_rsp_i.gnt;

  always_comb begin
    m0_rsp_o        = '0;
    m1_rsp_o        = '0;
    m0_rsp_o.gnt    = sel0 && s_rsp_i.gnt;
    m1_rsp_o.gnt    = sel1 && s_rsp_i.gnt;
    m0_rsp_o.rdata  = s_rsp_i.rdata;
    m1_rsp_o.rdata  = s_rsp_i.rdata;
    m0_rsp_o.rvalid = s_rsp_i.rvalid && (owner_q == 1'b0);
    m1_rsp_o.rvalid = s_rsp_i.rvalid && (owner_q == 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt_q   <= '0;
      owner_q <= 1'b0;
    end else begin
      cnt_q <= cnt_q + CW'(fire) - CW'(s_rsp_i.rvalid);
      if (fire) owner_q <= sel1;
    end
  end

  a_no_orphan_rvalid: assert property (@(posedge clk) disable iff (!rst_n)
    s_rsp_i.rvalid |-> (cnt_q != '0));
  a_one_grant: assert property (@(posedge clk) disable iff (!rst_n)
    !(m0_rsp_o.gnt && m1_rsp_o.gnt));

endmodule
