// sram_rgv: the node's volatile main memory, WORDS words of 32 bits with
// byte enables, behind an rgv slave port.
//
// Every request is granted in the cycle it is made (gnt = req); the response
// (rvalid, and rdata for a read) follows one cycle later. Writes honour the
// byte enables. The word address is addr[2 +: log2(WORDS)]; higher address
// bits are ignored, so the SRAM aliases over the CPU's address space.
// The array has no reset, as a real SRAM macro. Default size 32 KB, the SRAM
// size the paper uses to size the dirty-bit memory; the one-cycle timing is
// this design's choice.
module sram_rgv
  import freezer_pkg::*;
#(
  parameter int unsigned WORDS = 8192
) (
  input  logic     clk,
  input  logic     rst_n,
  input  rgv_req_t req_i,
  output rgv_rsp_t rsp_o
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [DATA_W-1:0] mem [WORDS];
  logic [AW-1:0]     waddr;
  logic              rvalid_q;
  logic [DATA_W-1:0] rdata_q;

  assign waddr = req_i.addr[2 +: AW];

  always_ff @(posedge clk) begin
    if (req_i.req) begin
      if (req_i.we) begin
        for (int b = 0; b < BE_W; b++)
          if (req_i.be[b]) mem[waddr][8*b +: 8] <= req_i.wdata[8*b +: 8];
      end else begin
        rdata_q <= mem[waddr];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rvalid_q <= 1'b0;
    else        rvalid_q <= req_i.req;
  end

  assign rsp_o.gnt    = req_i.req;
  assign rsp_o.rvalid = rvalid_q;
  assign rsp_o.rdata  = rdata_q;

endmodule
