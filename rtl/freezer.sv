// freezer: the Freezer NVM backup controller.
//
// Freezer sits beside a micro-controller whose main memory is a volatile
// SRAM and saves, when the power is failing, only the SRAM blocks the program
// has written since the last restore, into a backup NVM; after the power
// returns it copies the saved image back. It is built from three parts, as in
// the paper's block diagram:
//   freezer_fsm    the controller: store tracking, backup and restore copies
//   to_backup_mem  one dirty bit per block of BLOCK_SIZE words
//   freezer_regs   APB registers (control bit and status)
//
// Interface: the spy tap of the CPU's SRAM bus (a granted request: valid,
// we, addr), an rgv master port to the SRAM (behind the SRAM arbiter) and one
// to the NVM, pwr_fail and restore inputs, cpu_halt and backup_done outputs,
// an APB slave port. Timing: see freezer_fsm; tracking adds no latency to the
// CPU's accesses, it only observes them.
module freezer
  import freezer_pkg::*;
#(
  parameter int unsigned SRAM_WORDS = 8192,
  parameter int unsigned BLOCK_SIZE = 8,
  parameter int unsigned ROW_W      = 32,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned BLOCK_NUM = SRAM_WORDS / BLOCK_SIZE,
  localparam int unsigned IDX_W     = (BLOCK_NUM > 1) ? $clog2(BLOCK_NUM) : 1,
  localparam int unsigned CNT_W     = $clog2(SRAM_WORDS) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pwr_fail,
  input  logic              restore,
  input  logic              spy_valid,
  input  logic              spy_we,
  input  logic [ADDR_W-1:0] spy_addr,
  output rgv_req_t          sram_req_o,
  input  rgv_rsp_t          sram_rsp_i,
  output rgv_req_t          nvm_req_o,
  input  rgv_rsp_t          nvm_rsp_i,
  output logic              cpu_halt,
  output logic              backup_done,
  input  logic              psel,
  input  logic              penable,
  input  logic              pwrite,
  input  logic [11:0]       paddr,
  input  logic [31:0]       pwdata,
  output logic [31:0]       prdata,
  output logic              pready,
  output logic              pslverr
);

  logic             set_en, clr_en, next_valid, track_en;
  logic [IDX_W-1:0] set_idx, next_idx;
  logic [IDX_W:0]   dirty_cnt;
  logic [CNT_W-1:0] saved_words, restored_words;
  phase_e           phase;

  freezer_fsm #(
    .SRAM_WORDS(SRAM_WORDS), .BLOCK_SIZE(BLOCK_SIZE), .FIFO_DEPTH(FIFO_DEPTH)
  ) u_fsm (
    .clk, .rst_n, .pwr_fail, .restore, .track_en,
    .spy_valid, .spy_we, .spy_addr,
    .set_en, .set_idx, .clr_en, .next_valid, .next_idx,
    .sram_req_o, .sram_rsp_i, .nvm_req_o, .nvm_rsp_i,
    .cpu_halt, .backup_done, .phase, .saved_words, .restored_words
  );

  to_backup_mem #(.BLOCK_NUM(BLOCK_NUM), .ROW_W(ROW_W)) u_to_backup (
    .clk, .rst_n, .set_en, .set_idx, .clr_en, .next_valid, .next_idx, .dirty_cnt
  );

  freezer_regs #(.CNT_W(CNT_W), .APB_AW(12)) u_regs (
    .clk, .rst_n, .psel, .penable, .pwrite, .paddr, .pwdata, .prdata, .pready,
    .pslverr, .track_en, .phase, .cpu_halt, .backup_done,
    .dirty_cnt(CNT_W'(dirty_cnt)), .saved_words, .restored_words
  );

endmodule
