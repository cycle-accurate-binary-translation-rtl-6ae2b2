// tb_bus_interface: self-checking testbench of the C6x-to-SoC bus interface.
//
// The testbench makes the generated-cycle enable itself (every second host
// clock, or stopped), and attaches a small APB-style register-file model with
// a programmable number of wait states. It checks, against a reference array
// kept here, that C6x stores land at SOC_BASE + offset with their data and
// C6x loads return the register contents; that a transfer uses exactly
// 3 + wait-state generated cycles counted from the request (launch, setup,
// access); that nothing moves on the SoC bus while no cycles are generated;
// and the APB rules (setup before access, signals stable during a transfer).
module tb_bus_interface;
  import cabt_pkg::*;

  localparam soc_addr_t BASE = 32'hF000_0000;

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  c6x_req_t req;
  c6x_rsp_t rsp;
  soc_req_t sreq;
  soc_rsp_t srsp;
  logic     en, need;

  bus_interface #(.SOC_BASE(BASE)) u_dut (
    .clk, .rst_n, .soc_clk_en(en), .req, .rsp, .soc_req(sreq), .soc_rsp(srsp), .io_need(need)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // generated-cycle enable: every second clock while `gen_on`
  bit gen_on;
  logic tog;
  always @(posedge clk or negedge rst_n)
    if (!rst_n) tog <= 1'b0; else tog <= ~tog;
  assign en = gen_on && tog;

  // APB register-file model, clocked by generated cycles
  word_t regs [16];
  int    ws, wcnt;
  assign srsp.pready = sreq.psel && sreq.penable && (wcnt == ws);
  assign srsp.prdata = regs[sreq.paddr[5:2]];
  soc_req_t sreq_q;
  int protocol_err = 0, wrong_base = 0, need_err = 0;
  always @(posedge clk) if (rst_n && sreq.psel && !need) need_err++;
  always @(posedge clk) if (rst_n && en) begin
    if (sreq.penable && !(sreq_q.psel && (sreq_q.penable || 1'b1))) protocol_err++;
    if (sreq.penable && !sreq_q.psel) protocol_err++;
    if (sreq.psel && sreq_q.psel && (sreq.paddr != sreq_q.paddr || sreq.pwrite != sreq_q.pwrite
        || sreq.pwdata != sreq_q.pwdata)) protocol_err++;
    if (sreq.psel && sreq.paddr[31:8] != BASE[31:8]) wrong_base++;
    if (sreq.psel && sreq.penable) begin
      if (wcnt == ws) begin
        wcnt <= 0;
        if (sreq.pwrite) regs[sreq.paddr[5:2]] <= sreq.pwdata;
      end else wcnt <= wcnt + 1;
    end
    sreq_q <= sreq;
  end

  // generated cycles seen while the C6x request waits
  int cyc_in_req;
  always @(posedge clk) if (req.sel && !rsp.ready && en) cyc_in_req++;

  task automatic acc(input logic we, input int idx, input word_t d, output word_t rd);
    @(negedge clk);
    req.sel = 1'b1; req.we = we; req.addr = c6x_addr_t'(idx * 4); req.wdata = d;
    cyc_in_req = 0;
    #4;
    while (!rsp.ready) begin
      @(negedge clk);
      #4;
    end
    rd = rsp.rdata;
    @(posedge clk);
    #1 req.sel = 1'b0;
  endtask

  word_t model [16];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd, d;
    int    idx;
    req = '0; gen_on = 1'b1; ws = 0; wcnt = 0; sreq_q = '0;
    for (int i = 0; i < 16; i++) begin regs[i] = '0; model[i] = '0; end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    check(!sreq.psel && !rsp.ready, "idle after reset");

    for (int k = 0; k < 60; k++) begin
      ws  = int'($urandom_range(0, 3));
      idx = int'($urandom_range(0, 15));
      if ($urandom_range(0, 1) == 1) begin
        d = $urandom;
        acc(1'b1, idx, d, rd);
        model[idx] = d;
      end else begin
        acc(1'b0, idx, '0, rd);
        check(rd == model[idx], $sformatf("read reg %0d = %h, expected %h", idx, rd, model[idx]));
      end
      check(cyc_in_req == 3 + ws, $sformatf("transfer took %0d generated cycles, expected %0d",
                                            cyc_in_req, 3 + ws));
      check(regs[idx] == model[idx], $sformatf("reg %0d = %h, expected %h", idx, regs[idx], model[idx]));
    end

    // no generated cycles: the transfer must not start
    ws = 1;
    gen_on = 1'b0;
    fork
      acc(1'b1, 5, 32'hCAFE_0005, rd);
      begin
        repeat (30) @(posedge clk);
        check(!sreq.psel && regs[5] == model[5], "SoC bus moved without generated cycles");
        gen_on = 1'b1;
      end
    join
    model[5] = 32'hCAFE_0005;
    check(regs[5] == 32'hCAFE_0005, "write after generation resumed");
    check(cyc_in_req == 4, $sformatf("resumed transfer took %0d cycles", cyc_in_req));
    acc(1'b0, 5, '0, rd);
    check(rd == 32'hCAFE_0005, "read back after resume");

    check(protocol_err == 0, $sformatf("%0d APB protocol errors", protocol_err));
    check(wrong_base == 0, "SoC address not based at SOC_BASE");
    #1;
    check(need_err == 0 && !need, "io_need must cover the whole transfer and drop after it");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
