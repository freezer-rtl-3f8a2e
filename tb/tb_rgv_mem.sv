// tb_rgv_mem: testbench memory with an rgv slave port and variable latency.
//
// When random_lat is 0 it behaves like a single-cycle SRAM: gnt = req and
// the response comes the next cycle. When random_lat is 1 the grant is
// withheld on random cycles and each response is delayed by a random number
// of cycles (responses stay in order). Reads return the word at grant time;
// writes update the array at grant time. The array `mem` is public to the
// testbench for preloading and checking. Counters: reads and writes granted.
module tb_rgv_mem
  import freezer_pkg::*;
#(
  parameter int unsigned WORDS = 256
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     random_lat,
  input  rgv_req_t req_i,
  output rgv_rsp_t rsp_o
);
  logic [DATA_W-1:0] mem [WORDS];
  logic [DATA_W-1:0] pending [$];
  logic stall_q = 1'b0;
  int   reads = 0, writes = 0;
  int   idx;

  assign idx       = int'(req_i.addr[2 +: $clog2(WORDS)]);
  assign rsp_o.gnt = req_i.req && !stall_q;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending.delete();
      rsp_o.rvalid <= 1'b0;
      rsp_o.rdata  <= '0;
      stall_q      <= 1'b0;
    end else begin
      // response of an earlier request
      if (pending.size() > 0 && (!random_lat || $urandom_range(2) == 0)) begin
        rsp_o.rvalid <= 1'b1;
        rsp_o.rdata  <= pending.pop_front();
      end else begin
        rsp_o.rvalid <= 1'b0;
      end
      // request accepted this cycle
      if (req_i.req && !stall_q) begin
        if (req_i.we) begin
          for (int b = 0; b < BE_W; b++)
            if (req_i.be[b]) mem[idx][8*b +: 8] = req_i.wdata[8*b +: 8];
          pending.push_back('0);
          writes++;
        end else begin
          pending.push_back(mem[idx]);
          reads++;
        end
      end
      stall_q <= random_lat && ($urandom_range(3) == 0);
    end
  end
endmodule
