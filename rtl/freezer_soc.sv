// freezer_soc: memory subsystem of an intermittently powered node with the
// Freezer backup controller.
//
// Contents: Freezer, the two-master arbiter in front of the single-port
// SRAM, the SRAM and the backup NVM, wired as in the paper's block diagram
// of Freezer. The CPU, the power-failure detector and the rest of the SoC
// are outside: their signals are ports.
//
//   CPU port --(gated by cpu_halt)--> arbiter m0 --+--> SRAM
//        `-- granted requests spied by Freezer      |
//   Freezer SRAM port -------------> arbiter m1 --'
//   Freezer NVM port  ----------------------------------> NVM
//
// Interface: cpu_req_i/cpu_rsp_o is the CPU's rgv bus to the SRAM (byte
// addresses, see freezer_pkg); cpu_halt tells the core to stop (its memory
// requests are also held off while it is high); pwr_fail and restore come
// from the power management; backup_done tells it the snapshot is complete;
// the APB port reaches Freezer's registers.
//
// Timing: a CPU access sees the SRAM's one-cycle latency, unchanged by
// Freezer. On pwr_fail, cpu_halt rises the next cycle and the backup starts
// two cycles after pwr_fail; each dirty block then costs BLOCK_SIZE NVM
// writes, one per NVM access time.
module freezer_soc
  import freezer_pkg::*;
#(
  parameter int unsigned SRAM_WORDS = 8192,
  parameter int unsigned BLOCK_SIZE = 8,
  parameter int unsigned ROW_W      = 32,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned NVM_WAIT   = 2
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pwr_fail,
  input  logic        restore,
  input  rgv_req_t    cpu_req_i,
  output rgv_rsp_t    cpu_rsp_o,
  output logic        cpu_halt,
  output logic        backup_done,
  input  logic        psel,
  input  logic        penable,
  input  logic        pwrite,
  input  logic [11:0] paddr,
  input  logic [31:0] pwdata,
  output logic [31:0] prdata,
  output logic        pready,
  output logic        pslverr
);

  rgv_req_t cpu_req_g, frz_sram_req, sram_req, nvm_req;
  rgv_rsp_t frz_sram_rsp, sram_rsp, nvm_rsp;

  // A halted CPU gets no grant.
  always_comb begin
    cpu_req_g     = cpu_req_i;
    cpu_req_g.req = cpu_req_i.req && !cpu_halt;
  end

  freezer #(
    .SRAM_WORDS(SRAM_WORDS), .BLOCK_SIZE(BLOCK_SIZE), .ROW_W(ROW_W),
    .FIFO_DEPTH(FIFO_DEPTH)
  ) u_freezer (
    .clk, .rst_n, .pwr_fail, .restore,
    .spy_valid (cpu_req_g.req && cpu_rsp_o.gnt),
    .spy_we    (cpu_req_g.we),
    .spy_addr  (cpu_req_g.addr),
    .sram_req_o(frz_sram_req), .sram_rsp_i(frz_sram_rsp),
    .nvm_req_o (nvm_req),      .nvm_rsp_i (nvm_rsp),
    .cpu_halt, .backup_done,
    .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready, .pslverr
  );

  rgv_arbiter #(.MAX_OUTSTANDING(FIFO_DEPTH)) u_arb (
    .clk, .rst_n,
    .m0_req_i(cpu_req_g),    .m0_rsp_o(cpu_rsp_o),
    .m1_req_i(frz_sram_req), .m1_rsp_o(frz_sram_rsp),
    .s_req_o (sram_req),     .s_rsp_i (sram_rsp)
  );

  sram_rgv #(.WORDS(SRAM_WORDS)) u_sram (
    .clk, .rst_n, .req_i(sram_req), .rsp_o(sram_rsp)
  );

  nvm_model #(.WORDS(SRAM_WORDS), .WAIT_CYCLES(NVM_WAIT)) u_nvm (
    .clk, .rst_n, .req_i(nvm_req), .rsp_o(nvm_rsp)
  );

endmodule
