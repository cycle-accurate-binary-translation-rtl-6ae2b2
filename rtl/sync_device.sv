// sync_device: the synchronization device that generates the clock cycles of
// the attached SoC hardware on behalf of the translated program.
//
// There is no common clock between the C6x processor and the SoC hardware:
// the emulated core itself produces the SoC clock. Each translated basic block
// begins with a store of n, the number of cycles the block takes on the
// source processor, to this device, and ends with a load from it. The store
// starts generation of n SoC cycles, which then run in parallel with the rest
// of the block. The load returns at once if all n cycles have been generated,
// and otherwise is held (ready low) until the last one has. A correction block
// uses the same pair of accesses to generate its correction cycles. This
// behaviour is the paper's; how it is built below is this design's own.
//
// How it works: `remaining` holds the cycles still to generate and `phase`
// counts host clocks inside one SoC cycle. One SoC cycle lasts 2*HALF_PERIOD
// host clocks: `soc_clk` is high for the first HALF_PERIOD of them and low for
// the rest, and `soc_clk_en` is high for the first host clock only, so SoC
// logic in the FPGA can be clocked by `clk` with `soc_clk_en` as its enable.
// A store of n therefore yields exactly n rising edges of `soc_clk` and n
// pulses of `soc_clk_en`, spread over 2*HALF_PERIOD*n host clocks, the first
// pulse in the clock after the store completes. n = 0 generates nothing.
//
// Interface (c6x_req_t / c6x_rsp_t from cabt_pkg; the decoder in front only
// raises `sel` for this device, so the address is not looked at):
//   store n : completes (ready) at once if idle. A store that arrives while
//             generation is still running is held until it has ended (own
//             choice; the translator always waits before the next start).
//   load    : held until generation has ended, then completes returning the
//             total number of SoC cycles generated since reset (own choice,
//             the paper does not say what the load returns).
//   io_need : raised by the bus interface while an I/O transfer waits for
//             SoC cycles. If no generation is running, the device then makes
//             demand cycles, one whole cycle at a time, for as long as it is
//             held, and counts them in the total. Own choice, not the
//             paper's: without it an I/O access that the C6x reaches after the
//             block's n cycles have run out could never complete, because the
//             C6x, the only bus master, is stalled on that access.
// Timing: responses are combinational on the registered state; ready for an
// idle device comes in the same cycle as the request. A demand cycle starts
// one host clock after io_need rises and follows a running generation
// without a gap.
module sync_device
  import cabt_pkg::*;
#(
  parameter int unsigned CNT_W       = 32,  // width of n; a C6x store is one 32-bit word
  parameter int unsigned HALF_PERIOD = 1    // host clocks per half SoC cycle
) (
  input  logic     clk,
  input  logic     rst_n,
  input  c6x_req_t req,
  output c6x_rsp_t rsp,
  output logic     soc_clk,     // generated SoC clock
  output logic     soc_clk_en,  // one host-clock pulse at the start of each SoC cycle
  input  logic     io_need,     // an I/O transfer waits for SoC cycles
  output logic     busy         // cycle generation in progress
);

  localparam int unsigned PH_W = $clog2(2 * HALF_PERIOD) > 0 ? $clog2(2 * HALF_PERIOD) : 1;
  localparam logic [PH_W-1:0] PH_LAST = PH_W'(2 * HALF_PERIOD - 1);
  localparam logic [PH_W-1:0] PH_HIGH = PH_W'(HALF_PERIOD);

  logic [CNT_W-1:0]  remaining;  // SoC cycles still to generate
  logic [PH_W-1:0]   phase;      // host clock inside the current SoC cycle
  logic [DATA_W-1:0] total;      // SoC cycles generated since reset
  logic              start;      // store accepted in this cycle

  assign busy       = (remaining != '0);
  assign soc_clk    = busy && (phase < PH_HIGH);
  assign soc_clk_en = busy && (phase == '0);

  // A store waits for an idle device; a load waits for the end of generation.
  assign rsp.ready = req.sel && !busy;
  assign rsp.rdata = total;
  assign start     = req.sel && req.we && !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      remaining <= '0;
      phase     <= '0;
      total     <= '0;
    end else if (start) begin
      remaining <= req.wdata[CNT_W-1:0];
      phase     <= '0;
    end else if (busy) begin
      if (phase == '0) total <= total + 1'b1;
      if (phase == PH_LAST) begin
        phase <= '0;
        // the last cycle of a generation is followed by a demand cycle
        if (!(remaining == CNT_W'(1) && io_need)) remaining <= remaining - 1'b1;
      end else begin
        phase <= phase + 1'b1;
      end
    end else if (io_need) begin
      remaining <= CNT_W'(1);  // demand cycle
      phase     <= '0;
    end
  end

  // A master that is kept waiting must hold its request unchanged.
  a_req_stable : assert property (@(posedge clk) disable iff (!rst_n)
    req.sel && !rsp.ready |=> req.sel && $stable(req.we) && $stable(req.wdata))
    else $error("sync_device: request changed while waiting");

endmodule
