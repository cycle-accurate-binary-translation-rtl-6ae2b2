// cabt_pkg: types and constants shared by the FPGA side of the cycle accurate
// binary translation prototyping system.
//
// The C6x VLIW processor reaches the FPGA through its external memory
// interface. Inside the FPGA that interface is reduced to a simple
// synchronous request/ready bus (c6x_req_t / c6x_rsp_t): the master raises
// `sel` with `we`, `addr` and `wdata` and holds them until a cycle in which
// `ready` is high; that cycle completes the transfer and, for a read, carries
// `rdata`. Slaves stretch an access by holding `ready` low, which is how the
// C6x external-memory ready input lets a read of the synchronization device
// wait for the end of cycle generation.
//
// The SoC side uses an APB-style two-phase bus (soc_req_t / soc_rsp_t). The
// paper only says the bus interface adapts the C6x bus to "the SoC bus of the
// emulated processor core"; APB was chosen here as a simple, widely known
// on-chip bus. All widths are this design's choice: the paper gives none.
package cabt_pkg;

  localparam int unsigned DATA_W     = 32;  // C6x data bus and SoC data width
  localparam int unsigned C6X_ADDR_W = 22;  // byte address inside one C6x chip-enable space
  localparam int unsigned SOC_ADDR_W = 32;  // SoC bus address width

  typedef logic [DATA_W-1:0]     word_t;
  typedef logic [C6X_ADDR_W-1:0] c6x_addr_t;
  typedef logic [SOC_ADDR_W-1:0] soc_addr_t;

  // C6x side: request from the VLIW processor, response from an FPGA slave.
  typedef struct packed {
    logic      sel;    // access in progress, held until ready
    logic      we;     // 1 = write (C6x store), 0 = read (C6x load)
    c6x_addr_t addr;   // byte address
    word_t     wdata;  // store data
  } c6x_req_t;

  typedef struct packed {
    logic  ready;  // transfer completes in this cycle
    word_t rdata;  // load data, valid with ready on a read
  } c6x_rsp_t;

  // SoC side: APB-style request from the bus interface, response from the
  // attached hardware. Both change only on generated SoC cycles.
  typedef struct packed {
    logic      psel;
    logic      penable;
    logic      pwrite;
    soc_addr_t paddr;
    word_t     pwdata;
  } soc_req_t;

  typedef struct packed {
    logic  pready;
    word_t prdata;
  } soc_rsp_t;

endpackage
