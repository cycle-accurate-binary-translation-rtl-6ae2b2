// cabt_fpga: the FPGA half of the cycle accurate prototyping system.
//
// A C6x VLIW processor runs a statically translated program of the emulated
// core (for instance TriCore). This FPGA logic gives that program the two
// pieces of hardware it needs: the synchronization device, through which each
// translated basic block generates the clock cycles the block would have taken
// on the source processor, and the bus interface, through which translated
// I/O loads/stores reach the SoC hardware as SoC bus transfers. Both blocks
// are the paper's; the address map and the bus decoder below are this
// design's own.
//
// Address map inside the C6x chip-enable space given to the FPGA (byte
// addresses, C6X_ADDR_W bits):
//   MSB = 0 : synchronization device (store n = start n cycles,
//             load = wait for end of generation)
//   MSB = 1 : bus interface, the remaining bits are the offset put on the
//             SoC bus (paddr = SOC_BASE + offset)
//
// Interface: the C6x side is the request/ready bus of cabt_pkg, the SoC side
// an APB-style bus plus the generated clock (`soc_clk`) and its host-clock
// enable (`soc_clk_en`); attached hardware inside the FPGA is clocked by `clk`
// gated with `soc_clk_en`. The decoder is combinational, so each slave's
// timing is seen unchanged by the C6x.
module cabt_fpga
  import cabt_pkg::*;
#(
  parameter int unsigned CNT_W       = 32,
  parameter int unsigned HALF_PERIOD = 1,
  parameter soc_addr_t   SOC_BASE    = '0
) (
  input  logic     clk,
  input  logic     rst_n,
  // C6x external bus
  input  c6x_req_t c6x_req,
  output c6x_rsp_t c6x_rsp,
  // generated SoC clock
  output logic     soc_clk,
  output logic     soc_clk_en,
  output logic     cyc_busy,
  // SoC bus towards the attached hardware
  output soc_req_t soc_req,
  input  soc_rsp_t soc_rsp
);

  logic     to_io;
  logic     io_need;
  c6x_req_t sync_req, io_req;
  c6x_rsp_t sync_rsp, io_rsp;

  assign to_io = c6x_req.addr[C6X_ADDR_W-1];

  always_comb begin
    sync_req     = c6x_req;
    sync_req.sel = c6x_req.sel && !to_io;
    io_req       = c6x_req;
    io_req.sel   = c6x_req.sel && to_io;
    io_req.addr  = {1'b0, c6x_req.addr[C6X_ADDR_W-2:0]};
    c6x_rsp      = to_io ? io_rsp : sync_rsp;
  end

  sync_device #(
    .CNT_W      (CNT_W),
    .HALF_PERIOD(HALF_PERIOD)
  ) u_sync (
    .clk       (clk),
    .rst_n     (rst_n),
    .req       (sync_req),
    .rsp       (sync_rsp),
    .soc_clk   (soc_clk),
    .soc_clk_en(soc_clk_en),
    .io_need   (io_need),
    .busy      (cyc_busy)
  );

  bus_interface #(
    .SOC_BASE(SOC_BASE)
  ) u_bus (
    .clk       (clk),
    .rst_n     (rst_n),
    .soc_clk_en(soc_clk_en),
    .req       (io_req),
    .rsp       (io_rsp),
    .soc_req   (soc_req),
    .soc_rsp   (soc_rsp),
    .io_need   (io_need)
  );

endmodule
