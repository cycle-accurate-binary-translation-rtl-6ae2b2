// bus_interface: adapts the bus of the C6x VLIW processor to the SoC bus of
// the emulated processor core.
//
// The translator replaces every load/store of the source program that reaches
// I/O by a load/store to this interface; the interface replays it as a
// transfer on the SoC bus, so the attached hardware sees the same bus
// handshakes it would see from the real core. That much is the paper's. The
// paper does not describe the SoC bus or the interface's insides; the SoC bus
// here is APB-style (setup phase, then access phase ended by pready) and the
// construction is this design's own.
//
// How it works: the SoC bus belongs to the generated clock domain, so every
// SoC-side change happens only on a host clock in which `soc_clk_en` (from
// the synchronization device) is high. A C6x access held on `req` is turned
// into SETUP (psel) at the next generated cycle, ACCESS (psel, penable) at the
// one after, and ends at the first generated cycle with pready high, where
// read data is captured. One host clock later the interface raises `ready`
// towards the C6x for one clock. A transfer therefore takes at least two
// generated SoC cycles, plus one per wait state of the slave; the C6x is held
// for that time.
//
// Because the bus advances only on generated cycles, the interface raises
// `io_need` from the moment it sees a request until the transfer has ended.
// If the basic block's own cycles have already run out, the synchronization
// device answers with demand cycles, so the transfer cannot hang; such cycles
// lie outside the translator's prediction (own choice, see sync_device).
//
// Interface: C6x side c6x_req_t/c6x_rsp_t (see cabt_pkg); the decoder raises
// `sel` only for this interface. SoC side soc_req_t/soc_rsp_t; paddr is
// SOC_BASE plus the C6x byte offset.
module bus_interface
  import cabt_pkg::*;
#(
  parameter soc_addr_t SOC_BASE = '0  // SoC address of C6x offset 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     soc_clk_en,  // generated SoC cycle starts in this host clock
  input  c6x_req_t req,
  output c6x_rsp_t rsp,
  output soc_req_t soc_req,
  input  soc_rsp_t soc_rsp,
  output logic     io_need      // transfer waits for generated cycles
);

  typedef enum logic [1:0] {
    S_IDLE,    // no transfer on the SoC bus
    S_SETUP,   // psel high, penable low
    S_ACCESS,  // psel and penable high until pready
    S_DONE     // transfer ended, answer the C6x
  } state_t;

  state_t    state;
  logic      we_q;
  soc_addr_t addr_q;
  word_t     wdata_q;
  word_t     rdata_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      we_q    <= 1'b0;
      addr_q  <= '0;
      wdata_q <= '0;
      rdata_q <= '0;
    end else begin
      unique case (state)
        S_IDLE:
          if (req.sel && soc_clk_en) begin
            state   <= S_SETUP;
            we_q    <= req.we;
            addr_q  <= SOC_BASE + soc_addr_t'(req.addr);
            wdata_q <= req.wdata;
          end
        S_SETUP:
          if (soc_clk_en) state <= S_ACCESS;
        S_ACCESS:
          if (soc_clk_en && soc_rsp.pready) begin
            state <= S_DONE;
            if (!we_q) rdata_q <= soc_rsp.prdata;
          end
        S_DONE:
          state <= S_IDLE;
        default:
          state <= S_IDLE;
      endcase
    end
  end

  assign soc_req.psel    = (state == S_SETUP) || (state == S_ACCESS);
  assign soc_req.penable = (state == S_ACCESS);
  assign soc_req.pwrite  = we_q;
  assign soc_req.paddr   = addr_q;
  assign soc_req.pwdata  = wdata_q;

  assign io_need = (state == S_IDLE && req.sel) || soc_req.psel;

  assign rsp.ready = (state == S_DONE);
  assign rsp.rdata = rdata_q;

  // APB rule: an access phase always follows a setup phase of the same transfer.
  a_apb_setup_first : assert property (@(posedge clk) disable iff (!rst_n)
    $rose(soc_req.penable) |-> $past(soc_req.psel) && !$past(soc_req.penable))
    else $error("bus_interface: access phase without setup phase");

  // The C6x must hold its request until it is answered.
  a_req_stable : assert property (@(posedge clk) disable iff (!rst_n)
    req.sel && !rsp.ready |=> req.sel && $stable(req.we) && $stable(req.addr) && $stable(req.wdata))
    else $error("bus_interface: request changed while waiting");

endmodule
