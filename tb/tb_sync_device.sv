// tb_sync_device: self-checking testbench of the synchronization device.
//
// Two instances are driven, one at the default HALF_PERIOD = 1 and one at
// HALF_PERIOD = 3. For each the testbench plays what a translated basic
// block does: store n, optionally do other work, then load to wait for the
// end of generation. It checks, against numbers computed here, that
//   - exactly n soc_clk_en pulses and n rising soc_clk edges appear,
//   - soc_clk is high for HALF_PERIOD*n host clocks,
//   - a load right after the store is held for 2*HALF_PERIOD*n host clocks,
//     and a load after enough parallel work is not held at all,
//   - a store issued while generation runs is held until it has ended,
//   - the load returns the running total of generated cycles,
//   - io_need held for K cycles gives K whole demand cycles, also when it
//     arrives during a generation, which it then extends without a gap.
// Bus accesses are driven at the falling clock edge and complete at the next
// rising edge at which ready is high.
module tb_sync_device;
  import cabt_pkg::*;

  localparam int HP0 = 1;
  localparam int HP1 = 3;
  localparam int HPV [2] = '{HP0, HP1};

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  c6x_req_t req [2];
  c6x_rsp_t rsp [2];
  logic     sclk [2], sen [2], busy [2], need [2];

  sync_device u_dut0 (.clk, .rst_n, .req(req[0]), .rsp(rsp[0]),
                      .soc_clk(sclk[0]), .soc_clk_en(sen[0]), .io_need(need[0]), .busy(busy[0]));
  sync_device #(.HALF_PERIOD(HP1)) u_dut1 (.clk, .rst_n, .req(req[1]), .rsp(rsp[1]),
                      .soc_clk(sclk[1]), .soc_clk_en(sen[1]), .io_need(need[1]), .busy(busy[1]));

  int checks = 0, failures = 0;

  // cycle monitors
  int pulses [2], rises [2], highs [2];
  logic sclk_q [2];
  always @(posedge clk) begin
    for (int i = 0; i < 2; i++) begin
      if (sen[i]) pulses[i]++;
      if (sclk[i]) highs[i]++;
      if (sclk[i] && !sclk_q[i]) rises[i]++;
      sclk_q[i] <= sclk[i];
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic acc(input int i, input logic we, input word_t d,
                     output word_t rd, output int waits);
    @(negedge clk);
    req[i].sel   = 1'b1;
    req[i].we    = we;
    req[i].addr  = '0;
    req[i].wdata = d;
    waits = 0;
    #4;
    while (!rsp[i].ready) begin
      @(negedge clk);
      #4;
      waits++;
    end
    rd = rsp[i].rdata;
    @(posedge clk);
    #1 req[i].sel = 1'b0;
  endtask

  int unsigned total [2];

  // one basic block: store n, work for `work` host clocks, load
  task automatic block(input int i, input int n, input int work);
    word_t rd;
    int    w, p0, r0, h0, exp_wait;
    p0 = pulses[i]; r0 = rises[i]; h0 = highs[i];
    acc(i, 1'b1, word_t'(n), rd, w);
    check(w == 0, $sformatf("dut%0d store n=%0d held %0d", i, n, w));
    repeat (work) @(posedge clk);
    acc(i, 1'b0, '0, rd, w);
    // the load comes 1 + work clocks after the store completed
    exp_wait = 2 * HPV[i] * n - work;
    if (exp_wait < 0) exp_wait = 0;
    check(w == exp_wait, $sformatf("dut%0d n=%0d work=%0d load held %0d, expected %0d",
                                   i, n, work, w, exp_wait));
    total[i] += n;
    check(rd == total[i], $sformatf("dut%0d total %0d, expected %0d", i, rd, total[i]));
    check(pulses[i] - p0 == n, $sformatf("dut%0d pulses %0d, expected %0d", i, pulses[i] - p0, n));
    check(rises[i] - r0 == n, $sformatf("dut%0d rises %0d, expected %0d", i, rises[i] - r0, n));
    check(highs[i] - h0 == HPV[i] * n, $sformatf("dut%0d high clocks %0d, expected %0d",
                                               i, highs[i] - h0, HPV[i] * n));
  endtask

  // a store while generation still runs (back-to-back start)
  task automatic overlap(input int i, input int n1, input int n2);
    word_t rd;
    int    w, p0;
    p0 = pulses[i];
    acc(i, 1'b1, word_t'(n1), rd, w);
    acc(i, 1'b1, word_t'(n2), rd, w);
    check(w == 2 * HPV[i] * n1, $sformatf("dut%0d second store held %0d, expected %0d",
                                         i, w, 2 * HPV[i] * n1));
    acc(i, 1'b0, '0, rd, w);
    check(w == 2 * HPV[i] * n2, $sformatf("dut%0d load held %0d, expected %0d",
                                         i, w, 2 * HPV[i] * n2));
    total[i] += n1 + n2;
    check(rd == total[i], "overlap total");
    check(pulses[i] - p0 == n1 + n2, "overlap pulses");
  endtask

  // io_need from idle: hold it until k pulses were seen, then drop it
  task automatic demand(input int i, input int k, input int n_before);
    word_t rd;
    int    w, p0, h0, gap, last;
    p0 = pulses[i]; h0 = highs[i];
    if (n_before > 0) acc(i, 1'b1, word_t'(n_before), rd, w);
    @(negedge clk);
    need[i] = 1'b1;
    while (pulses[i] - p0 < n_before + k) @(negedge clk);
    need[i] = 1'b0;
    while (busy[i]) @(negedge clk);
    total[i] += n_before + k;
    check(pulses[i] - p0 == n_before + k, $sformatf("dut%0d demand pulses %0d, expected %0d",
                                                     i, pulses[i] - p0, n_before + k));
    check(highs[i] - h0 == HPV[i] * (n_before + k), $sformatf("dut%0d demand cycles not whole", i));
    acc(i, 1'b0, '0, rd, w);
    check(rd == total[i] && w == 0, "demand cycles counted in total");
  endtask

  // the gap between pulses across the end of a generation followed by demand
  int last_pulse [2], max_gap [2];
  always @(posedge clk) for (int i = 0; i < 2; i++) if (sen[i]) begin
    if (need[i] && last_pulse[i] >= 0 && int'($time / 10) - last_pulse[i] > max_gap[i])
      max_gap[i] = int'($time / 10) - last_pulse[i];
    last_pulse[i] = int'($time / 10);
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2; i++) begin
      req[i] = '0; need[i] = 1'b0; last_pulse[i] = -1; max_gap[i] = 0; pulses[i] = 0; rises[i] = 0; highs[i] = 0; total[i] = 0; sclk_q[i] = 1'b0;
    end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < 2; i++) begin
      check(!busy[i] && !sen[i], "idle after reset");
      block(i, 0, 0);
      block(i, 1, 0);
      block(i, 2, 0);
      block(i, 7, 3);
      block(i, 5, 40);   // parallel work longer than generation: no wait
      block(i, 33, 0);
      for (int k = 0; k < 10; k++) block(i, int'($urandom_range(1, 50)), int'($urandom_range(0, 60)));
      overlap(i, 6, 4);
      demand(i, 5, 0);
      max_gap[i] = 0; last_pulse[i] = -1;
      demand(i, 3, 4);
      check(max_gap[i] == 2 * HPV[i], $sformatf("dut%0d gap %0d between generation and demand cycles",
                                                i, max_gap[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
