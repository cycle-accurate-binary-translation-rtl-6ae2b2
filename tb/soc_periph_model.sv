// soc_periph_model: behavioural model of SoC hardware attached to the
// emulated core's bus, for testbenches only.
//
// It stands for the user's peripherals, which run on the generated SoC
// cycles: every state change happens on a rising host clock at which
// `soc_clk_en` is high. Registers 0..14 are plain read/write words;
// register 15 is a read-only cycle counter that counts generated SoC cycles
// since reset, so software can see the SoC-side time. An APB-style access
// phase is stretched by `wait_states` cycles (pready low), and the model
// counts protocol errors (access without setup, signals changing during a
// transfer) and wait-state cycles for the testbench.
module soc_periph_model
  import cabt_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     soc_clk_en,
  input  soc_req_t req,
  output soc_rsp_t rsp,
  input  int       wait_states,
  output int       protocol_errors,
  output int       wait_cycles,
  output word_t    cycle_count
);

  word_t    regs [15];
  int       wcnt;
  soc_req_t req_q;

  assign rsp.pready = req.psel && req.penable && (wcnt >= wait_states);
  assign rsp.prdata = (req.paddr[5:2] == 4'd15) ? cycle_count : regs[req.paddr[5:2]];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 15; i++) regs[i] <= '0;
      wcnt            <= 0;
      req_q           <= '0;
      cycle_count     <= '0;
      protocol_errors <= 0;
      wait_cycles     <= 0;
    end else if (soc_clk_en) begin
      cycle_count <= cycle_count + 1'b1;
      req_q       <= req;
      if (req.penable && !(req_q.psel && !req_q.penable) && !(req_q.psel && req_q.penable))
        protocol_errors <= protocol_errors + 1;
      if (req.psel && req_q.psel && (req.paddr != req_q.paddr || req.pwrite != req_q.pwrite))
        protocol_errors <= protocol_errors + 1;
      if (req.psel && req.penable) begin
        if (wcnt >= wait_states) begin
          wcnt <= 0;
          if (req.pwrite && req.paddr[5:2] != 4'd15) regs[req.paddr[5:2]] <= req.pwdata;
        end else begin
          wcnt        <= wcnt + 1;
          wait_cycles <= wait_cycles + 1;
        end
      end
    end
  end

endmodule
