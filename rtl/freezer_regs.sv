// freezer_regs: APB register file of Freezer.
//
// Gives software a view of the controller and one control bit. The register
// map is this design's own; the block diagram of Freezer only shows a
// register block reached over APB and linked to the FSM.
//
//   0x00 CTRL      RW  bit 0 TRACK_EN: store tracking on (reset value 1)
//   0x04 STATUS    RO  bits 2:0 current phase (freezer_pkg::phase_e),
//                      bit 8 cpu_halt, bit 9 backup_done
//   0x08 DIRTY     RO  number of dirty blocks, i.e. blocks the next backup saves
//   0x0C SAVED     RO  words written to the NVM by the current / last backup
//   0x10 RESTORED  RO  words copied back to the SRAM since power-up
//   other          read 0, pslverr
//
// Timing: APB3 without wait states (pready is always 1); a write takes effect
// at the end of the access phase, read data is combinational in that phase.
module freezer_regs
  import freezer_pkg::*;
#(
  parameter int unsigned CNT_W = 14,
  parameter int unsigned APB_AW = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  // APB slave
  input  logic              psel,
  input  logic              penable,
  input  logic              pwrite,
  input  logic [APB_AW-1:0] paddr,
  input  logic [31:0]       pwdata,
  output logic [31:0]       prdata,
  output logic              pready,
  output logic              pslverr,
  // to / from the controller
  output logic              track_en,
  input  phase_e            phase,
  input  logic              cpu_halt,
  input  logic              backup_done,
  input  logic [CNT_W-1:0]  dirty_cnt,
  input  logic [CNT_W-1:0]  saved_words,
  input  logic [CNT_W-1:0]  restored_words
);

  localparam logic [APB_AW-1:0] A_CTRL     = APB_AW'('h00);
  localparam logic [APB_AW-1:0] A_STATUS   = APB_AW'('h04);
  localparam logic [APB_AW-1:0] A_DIRTY    = APB_AW'('h08);
  localparam logic [APB_AW-1:0] A_SAVED    = APB_AW'('h0C);
  localparam logic [APB_AW-1:0] A_RESTORED = APB_AW'('h10);

  logic access, hit;
  assign access = psel && penable;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) track_en <= 1'b1;
    else if (access && pwrite && paddr == A_CTRL) track_en <= pwdata[0];
  end

  always_comb begin
    prdata = '0;
    hit    = 1'b1;
    unique case (paddr)
      A_CTRL:     prdata = {31'd0, track_en};
      A_STATUS:   prdata = {22'd0, backup_done, cpu_halt, 5'd0, phase};
      A_DIRTY:    prdata = 32'(dirty_cnt);
      A_SAVED:    prdata = 32'(saved_words);
      A_RESTORED: prdata = 32'(restored_words);
      default:    hit = 1'b0;
    endcase
    // read-only registers refuse writes
    if (pwrite && paddr != A_CTRL) hit = 1'b0;
  end

  assign pready  = 1'b1;
  assign pslverr = access && !hit;

  a_apb_setup: assert property (@(posedge clk) disable iff (!rst_n)
    (psel && !penable) |=> (psel && penable));

endmodule
