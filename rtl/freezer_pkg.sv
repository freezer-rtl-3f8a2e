// freezer_pkg: types and constants shared by the Freezer backup controller,
// its memories and the testbenches.
//
// Every memory port in this design uses the same request/grant/valid ("rgv")
// handshake. A master drives a request bundle (req, we, be, addr, wdata); the
// request is accepted in the cycle where req and gnt are both high. Each
// accepted request, read or write, is answered later by exactly one cycle of
// rvalid (with rdata for reads), in the order the requests were accepted.
// The signal names are the ones of the memory buses of the Freezer block
// diagram; the precise rules above are this design's own choice.
package freezer_pkg;

  localparam int unsigned DATA_W = 32;  // one word = 32 bits
  localparam int unsigned ADDR_W = 32;  // byte address on every rgv bus
  localparam int unsigned BE_W   = DATA_W / 8;

  // Request half of an rgv bus (master -> slave).
  typedef struct packed {
    logic              req;
    logic              we;
    logic [BE_W-1:0]   be;
    logic [ADDR_W-1:0] addr;   // byte address, word aligned
    logic [DATA_W-1:0] wdata;
  } rgv_req_t;

  // Response half of an rgv bus (slave -> master).
  typedef struct packed {
    logic              gnt;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
  } rgv_rsp_t;

  // Phase of the controller, as seen in the STATUS register.
  typedef enum logic [2:0] {
    PH_RUN     = 3'd0,  // normal execution, stores are tracked
    PH_RESTORE = 3'd1,  // NVM -> SRAM copy after power-up
    PH_DRAIN   = 3'd2,  // power failure seen, waiting for the CPU to stop
    PH_BACKUP  = 3'd3,  // dirty blocks SRAM -> NVM
    PH_OFF     = 3'd4   // backup complete, waiting for the power to go
  } phase_e;

endpackage
