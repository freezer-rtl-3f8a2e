// freezer_fsm: the sequencing controller of Freezer.
//
// What it does, phase by phase (this is the Modified Block backup algorithm):
//   BOOT     one cycle after reset with the CPU halted; if `restore` is high
//            the controller restores, otherwise it lets the CPU run.
//   RESTORE  copies the whole SRAM image, word 0 to SRAM_WORDS-1, from the
//            NVM back into the SRAM, then releases the CPU.
//   RUN      watches the CPU's granted SRAM requests (the spy tap) and, for
//            every store, marks block  word_address >> log2(BLOCK_SIZE)
//            dirty in the to_backup memory.
//   DRAIN    entered on pwr_fail: the CPU is halted. One cycle long, so that
//            a store granted in the cycle pwr_fail rose has set its bit.
//   BACKUP   takes the dirty blocks lowest first, clearing each bit as the
//            block is taken, and copies every word of the block from the SRAM
//            to the same word address of the NVM.
//   OFF      backup_done is high; the system may now lose power. If pwr_fail
//            falls instead, the SRAM is still intact and RUN resumes.
//
// Copy engine: restore and backup share one pipelined engine with a read
// port (the source memory), a FIFO_DEPTH-entry word buffer and a write port
// (the destination). A read is issued only when its word is sure to find a
// buffer entry, so neither port ever has to be stalled; the write of word n
// overlaps the read of word n+1. With single-cycle memories one word moves
// per clock; with a slower NVM the NVM sets the pace. During a backup the
// next dirty block is read from the to_backup memory at the last word of the
// current block, so blocks follow each other with no dead cycle.
//
// Interfaces: two rgv master ports (see freezer_pkg), sram_* and nvm_*,
// tolerant of any grant and response latency; the to_backup memory's set /
// take / next signals; power-event inputs; status outputs for the registers.
//
// From the paper: the algorithm (track stores by block, copy dirty blocks on
// power failure, full restore on resume), the halt of the CPU, the pipelining
// of the copy loop and the search of the next block in parallel with the copy.
// This design's own choices: the BOOT, DRAIN and OFF phases, tracking a store
// granted in the cycle pwr_fail rises, the buffer depth and the handshake
// rules, and the snapshot sitting at the same word address in the NVM.
module freezer_fsm
  import freezer_pkg::*;
#(
  parameter int unsigned SRAM_WORDS = 8192,
  parameter int unsigned BLOCK_SIZE = 8,
  parameter int unsigned FIFO_DEPTH = 4,
  localparam int unsigned BLOCK_NUM = SRAM_WORDS / BLOCK_SIZE,
  localparam int unsigned IDX_W     = (BLOCK_NUM > 1) ? $clog2(BLOCK_NUM) : 1,
  localparam int unsigned WAW       = $clog2(SRAM_WORDS),
  localparam int unsigned CNT_W     = WAW + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // power events
  input  logic             pwr_fail,
  input  logic             restore,
  // configuration
  input  logic             track_en,
  // cpu_req spy: a granted request on the CPU's SRAM bus
  input  logic             spy_valid,
  input  logic             spy_we,
  input  logic [ADDR_W-1:0] spy_addr,
  // to_backup memory
  output logic             set_en,
  output logic [IDX_W-1:0] set_idx,
  output logic             clr_en,
  input  logic             next_valid,
  input  logic [IDX_W-1:0] next_idx,
  // SRAM_rgv and NVM_rgv master ports
  output rgv_req_t         sram_req_o,
  input  rgv_rsp_t         sram_rsp_i,
  output rgv_req_t         nvm_req_o,
  input  rgv_rsp_t         nvm_rsp_i,
  // system control and status
  output logic             cpu_halt,
  output logic             backup_done,
  output phase_e           phase,
  output logic [CNT_W-1:0] saved_words,
  output logic [CNT_W-1:0] restored_words
);

  typedef enum logic [2:0] {
    S_BOOT, S_RESTORE, S_RUN, S_DRAIN, S_BACKUP, S_OFF
  } state_e;

  localparam int unsigned PW = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1;

  state_e state_q, state_d;

  // ------------------------------------------------------------------
  // Store tracking (runs in every phase; the CPU is halted outside RUN)
  // ------------------------------------------------------------------
  logic [WAW-1:0] spy_word;
  assign spy_word = spy_addr[2 +: WAW];
  assign set_en   = spy_valid && spy_we && track_en;
  assign set_idx  = IDX_W'(spy_word / BLOCK_SIZE);

  // ------------------------------------------------------------------
  // Copy engine
  // ------------------------------------------------------------------
  logic           gen_busy_q;          // more words to read
  logic [WAW-1:0] rd_word_q;           // next word to read
  logic [WAW-1:0] addr_q [FIFO_DEPTH]; // word address of each buffer entry
  logic [DATA_W-1:0] data_q [FIFO_DEPTH];
  logic [PW:0]    alloc_p, fill_p, drain_p;  // read granted / data in / written
  logic [PW:0]    occ;
  logic [CNT_W-1:0] wr_out_q;          // writes granted, response pending
  logic           restoring;           // direction: NVM -> SRAM

  rgv_req_t rd_req, wr_req;
  rgv_rsp_t rd_rsp, wr_rsp;
  logic     rd_fire, wr_fire, copy_idle, last_of_block;

  assign restoring = (state_q == S_RESTORE);
  assign occ       = alloc_p - drain_p;

  always_comb begin
    rd_req       = '0;
    rd_req.req   = gen_busy_q && (occ < (PW+1)'(FIFO_DEPTH));
    rd_req.we    = 1'b0;
    rd_req.be    = '1;
    rd_req.addr  = ADDR_W'({rd_word_q, 2'b00});
    wr_req       = '0;
    wr_req.req   = (fill_p != drain_p);
    wr_req.we    = 1'b1;
    wr_req.be    = '1;
    wr_req.addr  = ADDR_W'({addr_q[drain_p[PW-1:0]], 2'b00});
    wr_req.wdata = data_q[drain_p[PW-1:0]];
  end

  // Route the two engine ports to the memories according to the direction.
  always_comb begin
    sram_req_o = '0;
    nvm_req_o  = '0;
    if (state_q == S_RESTORE) begin
      nvm_req_o  = rd_req;
      sram_req_o = wr_req;
      rd_rsp     = nvm_rsp_i;
      wr_rsp     = sram_rsp_i;
    end else begin
      sram_req_o = rd_req;
      nvm_req_o  = wr_req;
      rd_rsp     = sram_rsp_i;
      wr_rsp     = nvm_rsp_i;
    end
  end

  assign rd_fire   = rd_req.req && rd_rsp.gnt;
  assign wr_fire   = wr_req.req && wr_rsp.gnt;
  assign copy_idle = !gen_busy_q && (alloc_p == drain_p) && (wr_out_q == '0);
  assign last_of_block = (int'(rd_word_q) % BLOCK_SIZE) == BLOCK_SIZE - 1;

  // Take a dirty block: entering BACKUP, or at the last word of a block.
  always_comb begin
    clr_en = 1'b0;
    if (state_q == S_DRAIN && next_valid) clr_en = 1'b1;
    if (state_q == S_BACKUP && rd_fire && last_of_block && next_valid) clr_en = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_busy_q <= 1'b0;
      rd_word_q  <= '0;
      alloc_p    <= '0;
      fill_p     <= '0;
      drain_p    <= '0;
      wr_out_q   <= '0;
      for (int i = 0; i < FIFO_DEPTH; i++) begin
        addr_q[i] <= '0;
        data_q[i] <= '0;
      end
    end else begin
      // address generator
      if (state_q == S_BOOT && restore) begin
        gen_busy_q <= 1'b1;
        rd_word_q  <= '0;
      end else if (state_q == S_DRAIN) begin
        gen_busy_q <= next_valid;
        rd_word_q  <= WAW'(int'(next_idx) * BLOCK_SIZE);
      end else if (rd_fire) begin
        if (restoring) begin
          if (int'(rd_word_q) == SRAM_WORDS - 1) gen_busy_q <= 1'b0;
          rd_word_q <= rd_word_q + 1'b1;
        end else if (last_of_block) begin
          gen_busy_q <= next_valid;
          rd_word_q  <= WAW'(int'(next_idx) * BLOCK_SIZE);
        end else begin
          rd_word_q <= rd_word_q + 1'b1;
        end
      end
      // buffer
      if (rd_fire) begin
        addr_q[alloc_p[PW-1:0]] <= rd_word_q;
        alloc_p <= alloc_p + 1'b1;
      end
      if (rd_rsp.rvalid) begin
        data_q[fill_p[PW-1:0]] <= rd_rsp.rdata;
        fill_p <= fill_p + 1'b1;
      end
      if (wr_fire) drain_p <= drain_p + 1'b1;
      wr_out_q <= wr_out_q + CNT_W'(wr_fire) - CNT_W'(wr_rsp.rvalid);
    end
  end

  // ------------------------------------------------------------------
  // Phase sequencing
  // ------------------------------------------------------------------
  always_comb begin
    state_d = state_q;
    unique case (state_q)
      S_BOOT:    state_d = restore ? S_RESTORE : S_RUN;
      S_RESTORE: if (copy_idle) state_d = S_RUN;
      S_RUN:     if (pwr_fail) state_d = S_DRAIN;
      S_DRAIN:   state_d = S_BACKUP;
      S_BACKUP:  if (copy_idle) state_d = S_OFF;
      S_OFF:     if (!pwr_fail) state_d = S_RUN;
      default:   state_d = S_BOOT;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q        <= S_BOOT;
      saved_words    <= '0;
      restored_words <= '0;
    end else begin
      state_q <= state_d;
      if (state_q == S_DRAIN) saved_words <= '0;
      else if (state_q == S_BACKUP && wr_fire) saved_words <= saved_words + 1'b1;
      if (state_q == S_RESTORE && wr_fire) restored_words <= restored_words + 1'b1;
    end
  end

  assign cpu_halt    = (state_q != S_RUN);
  assign backup_done = (state_q == S_OFF);

  always_comb begin
    unique case (state_q)
      S_RESTORE: phase = PH_RESTORE;
      S_DRAIN:   phase = PH_DRAIN;
      S_BACKUP:  phase = PH_BACKUP;
      S_OFF:     phase = PH_OFF;
      default:   phase = PH_RUN;
    endcase
  end

  // ------------------------------------------------------------------
  // Handshake rules
  // ------------------------------------------------------------------
  a_fifo_bound: assert property (@(posedge clk) disable iff (!rst_n)
    occ <= (PW+1)'(FIFO_DEPTH));
  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp.rvalid |-> (alloc_p != fill_p));
  a_wr_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    wr_rsp.rvalid |-> (wr_out_q != '0));
  a_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (sram_req_o.req && !sram_rsp_i.gnt && state_q == $past(state_q)) |=>
      (sram_req_o.req && $stable(sram_req_o.addr)));

endmodule
