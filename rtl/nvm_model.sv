// nvm_model: behavioural model of the backup NVM (FeRAM, STT-MRAM or RRAM).
//
// This is a model, not the memory: the non-volatile bit cells are a
// process-specific macro. It gives the controller what matters about such a
// part: an rgv slave port of WORDS 32-bit words with byte enables, a slower
// access, and content that survives a reset (the array is never reset, so a
// testbench can cycle rst_n to emulate a power loss and find the snapshot
// still there). Nothing is granted while rst_n is low, so no write can reach
// the array while the rest of the chip is held in reset.
//
// Timing: a request waits WAIT_CYCLES cycles before it is granted, so at most
// one access every WAIT_CYCLES+1 cycles; rvalid follows the grant by one
// cycle. The default of 2 wait cycles matches an 8 MHz (125 ns) FeRAM next to
// a 24 MHz system clock, the pairing the paper uses for its timing results.
module nvm_model
  import freezer_pkg::*;
#(
  parameter int unsigned WORDS       = 8192,
  parameter int unsigned WAIT_CYCLES = 2
) (
  input  logic     clk,
  input  logic     rst_n,
  input  rgv_req_t req_i,
  output rgv_rsp_t rsp_o
);

  localparam int unsigned AW = $clog2(WORDS);
  localparam int unsigned WW = $clog2(WAIT_CYCLES + 1) + 1;

  logic [DATA_W-1:0] mem [WORDS];
  logic [AW-1:0]     waddr;
  logic [WW-1:0]     wait_q;
  logic              gnt, rvalid_q;
  logic [DATA_W-1:0] rdata_q;

  assign waddr = req_i.addr[2 +: AW];
  assign gnt   = rst_n && req_i.req && (int'(wait_q) >= WAIT_CYCLES);

  always_ff @(posedge clk) begin
    if (gnt) begin
      if (req_i.we) begin
        for (int b = 0; b < BE_W; b++)
          if (req_i.be[b]) mem[waddr][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end else begin
        rdata_q <= mem[waddr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wait_q   <= '0;
      rvalid_q <= 1'b0;
    end else begin
      rvalid_q <= gnt;
      if (gnt)            wait_q <= '0;
      else if (req_i.req) wait_q <= wait_q + 1'b1;
    end
  end

  assign rsp_o.gnt    = gnt;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;

endmodule
