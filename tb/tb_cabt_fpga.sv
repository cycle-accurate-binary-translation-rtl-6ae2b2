// tb_cabt_fpga: end-to-end testbench of the FPGA logic at its default
// parameters.
//
// The testbench plays the C6x running translated TriCore-style programs. Each
// translated basic block stores its predicted cycle count n to the
// synchronization device, does its work (host clocks of "parallel
// execution") and loads from the device to wait for the end of generation.
// I/O loads/stores go through the bus interface to a peripheral model whose
// register 15 counts SoC cycles. Three small programs are run, gcd by
// repeated subtraction, a sieve of Eratosthenes and a Fibonacci loop, at the three detail levels of
// cycle accuracy:
//   1 static prediction only,
//   2 plus branch correction (a correction block after each conditional
//     branch generates the extra cycles counted at run time),
//   3 plus instruction-cache correction, with the two-way LRU tag lookup of
//     the simulated cache done here in software as the C6x would.
// Cycle counts per block, branch penalties and the cache geometry are
// example numbers of this testbench, not taken from any real core.
//
// Checked against values computed here: program results written over the
// SoC bus; after every wait, the device's cycle total equals the sum of all
// n so far (plus the expected demand cycles); the SoC cycle counter read
// over the bus is that sum plus the cycles lvl_start the read was sampled; the
// final SoC-side count equals the device's total. Every mechanism (start,
// held load, free load, held store, correction block, zero correction, I/O
// load/store, SoC wait state, demand cycles, cache hit/miss, mispredicted
// branch) is counted and must occur at least once.
module tb_cabt_fpga;
  import cabt_pkg::*;

  localparam c6x_addr_t SYNC = '0;
  localparam c6x_addr_t IO   = c6x_addr_t'(1) << (C6X_ADDR_W - 1);

  logic clk = 1'b0;
  logic rst_n;
  always #5 clk = ~clk;

  c6x_req_t c6x_req;
  c6x_rsp_t c6x_rsp;
  soc_req_t soc_req;
  soc_rsp_t soc_rsp;
  logic     soc_clk, soc_clk_en, cyc_busy;

  cabt_fpga u_dut (
    .clk, .rst_n, .c6x_req, .c6x_rsp, .soc_clk, .soc_clk_en, .cyc_busy, .soc_req, .soc_rsp
  );

  int    ws;
  int    prot_err, wait_cyc;
  word_t soc_cycles;
  soc_periph_model u_per (
    .clk, .rst_n, .soc_clk_en, .req(soc_req), .rsp(soc_rsp), .wait_states(ws),
    .protocol_errors(prot_err), .wait_cycles(wait_cyc), .cycle_count(soc_cycles)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters
  int n_start, n_load_held, n_load_free, n_store_held, n_corr, n_corr_zero;
  int n_io_rd, n_io_wr, n_demand, n_hit, n_miss, n_mispredict;

  // ---------------- C6x bus master ----------------
  task automatic acc(input logic we, input c6x_addr_t a, input word_t d,
                     output word_t rd, output int waits);
    @(negedge clk);
    c6x_req.sel = 1'b1; c6x_req.we = we; c6x_req.addr = a; c6x_req.wdata = d;
    waits = 0;
    #4;
    while (!c6x_rsp.ready) begin
      @(negedge clk);
      #4;
      waits++;
    end
    rd = c6x_rsp.rdata;
    @(posedge clk);
    #1 c6x_req.sel = 1'b0;
  endtask

  int unsigned exp_total;  // cycles the device must have generated
  int          level;
  int unsigned corr;       // correction cycle counter (a C6x register)

  task automatic start_gen(input int unsigned n);
    word_t rd; int w;
    acc(1'b1, SYNC, word_t'(n), rd, w);
    exp_total += n;
    n_start++;
    if (w > 0) n_store_held++;
  endtask

  task automatic wait_gen();
    word_t rd; int w;
    acc(1'b0, SYNC, '0, rd, w);
    if (w > 0) n_load_held++; else n_load_free++;
    check(rd == exp_total, $sformatf("device total %0d, expected %0d", rd, exp_total));
  endtask

  task automatic work(input int k);
    repeat (k) @(posedge clk);
  endtask

  // I/O access; `idle` marks one made outside any cycle generation, which is
  // served by 3 + wait-state demand cycles
  task automatic io_wr(input int idx, input word_t d, input bit idle = 1'b0);
    word_t rd; int w;
    ws = int'($urandom_range(0, 1));
    acc(1'b1, IO | c6x_addr_t'(idx * 4), d, rd, w);
    n_io_wr++;
    if (idle) begin
      exp_total += 3 + ws;
      n_demand++;
    end
  endtask

  task automatic io_rd(input int idx, output word_t d, input bit idle = 1'b0);
    int w;
    ws = int'($urandom_range(0, 1));
    acc(1'b0, IO | c6x_addr_t'(idx * 4), '0, d, w);
    n_io_rd++;
    if (idle) begin
      exp_total += 3 + ws;
      n_demand++;
    end
  endtask

  // correction block (detail levels 2 and 3)
  task automatic correction();
    if (level >= 2) begin
      start_gen(corr);
      wait_gen();
      n_corr++;
      if (corr == 0) n_corr_zero++;
      corr = 0;
    end
  endtask

  // branch correction: taken costs 1 extra cycle, a wrong static prediction
  // (backward taken / forward not taken) 2 more
  task automatic branch(input bit taken, input bit predicted_taken);
    if (level >= 2) begin
      if (taken) corr += 1;
      if (taken != predicted_taken) begin
        corr += 2;
        n_mispredict++;
      end
    end
  endtask

  // simulated instruction cache: 2 ways, 8 sets, 16-byte lines, 6-cycle miss
  localparam int SETS = 8, LINE = 16, MISS = 6;
  int unsigned tag_v [SETS][2];  // {valid, tag} combined in one word
  bit          lru   [SETS];     // way to replace next
  task automatic cache_block(input int unsigned src_addr);
    int unsigned idx, tag;
    if (level >= 3) begin
      idx = (src_addr / LINE) % SETS;
      tag = src_addr / (LINE * SETS);
      if (tag_v[idx][0] == (tag | 32'h8000_0000)) begin
        lru[idx] = 1'b1; n_hit++;
      end else if (tag_v[idx][1] == (tag | 32'h8000_0000)) begin
        lru[idx] = 1'b0; n_hit++;
      end else begin
        tag_v[idx][lru[idx]] = tag | 32'h8000_0000;
        lru[idx] = !lru[idx];
        corr += MISS;
        n_miss++;
      end
      work(8);  // the lookup subroutine runs on the C6x
    end
  endtask

  // read the SoC cycle counter in a block of its own: the value is sampled
  // after the launch and setup cycles and any wait states of the read
  task automatic check_soc_time();
    word_t t; int unsigned t0;
    t0 = exp_total;
    start_gen(12);
    io_rd(15, t);
    check(t == t0 + 2 + ws, $sformatf("SoC time %0d, expected %0d", t, t0 + 2 + ws));
    wait_gen();
  endtask

  // ---------------- translated gcd ----------------
  task automatic prog_gcd(input word_t a0, input word_t b0);
    word_t a, b, r;
    word_t ra, rb;
    io_wr(0, a0, 1'b1); io_wr(1, b0, 1'b1);  // operands come from SoC registers
    // entry block: two cache analysis blocks, reads both operands
    cache_block(32'h100); cache_block(32'h110);
    start_gen(16);
    io_rd(0, a); io_rd(1, b);
    work(2);
    wait_gen();
    forever begin
      cache_block(32'h120);
      start_gen(3);
      work(1);
      branch(a == b, 1'b0);  // forward exit branch, predicted not taken
      wait_gen();
      correction();
      if (a == b) break;
      cache_block(32'h128);
      start_gen(2);
      branch(a > b, 1'b0);
      wait_gen();
      correction();
      cache_block(a > b ? 32'h130 : 32'h1A0);
      start_gen(3);
      if (a > b) a -= b; else b -= a;
      work(5);  // the C6x is slower than the generation here
      wait_gen();
      // back to the loop head: unconditional
    end
    cache_block(32'h140);
    start_gen(16);
    io_wr(2, a);
    wait_gen();
    io_rd(2, r, 1'b1);  // outside any block: served by demand cycles
    ra = a0; rb = b0;
    while (ra != rb) if (ra > rb) ra -= rb; else rb -= ra;
    check(r == ra, $sformatf("gcd(%0d,%0d) = %0d, expected %0d", a0, b0, r, ra));
  endtask

  // ---------------- translated sieve ----------------
  task automatic prog_sieve(input int n);
    bit    comp [64];
    int    primes;
    word_t r;
    primes = 0;
    for (int i = 0; i < 64; i++) comp[i] = 1'b0;
    for (int i = 2; i < n; i++) begin
      cache_block(32'h200);
      start_gen(2);
      branch(comp[i], 1'b0);
      wait_gen();
      correction();
      if (!comp[i]) begin
        primes++;
        for (int j = 2 * i; j < n; j += i) begin
          cache_block(32'h210 + 32'(j % 3) * 32'h80);  // loop body spread over lines
          start_gen(2);
          comp[j] = 1'b1;
          branch(j + i < n, 1'b1);  // backward loop branch, predicted taken
          wait_gen();
          correction();
        end
      end
    end
    start_gen(16);
    io_wr(3, word_t'(primes));
    wait_gen();
    start_gen(16);
    io_rd(3, r);
    wait_gen();
    check(r == 32'(primes) && primes == 10, $sformatf("sieve(%0d) primes %0d/%0d", n, r, primes));
  endtask

  // ---------------- translated fibonacci ----------------
  task automatic prog_fib(input int n);
    word_t f0, f1, t, r;
    f0 = 0; f1 = 1;
    for (int i = 2; i <= n; i++) begin
      cache_block(32'h300);
      start_gen(4);
      t = f0 + f1; f0 = f1; f1 = t;
      work(2);
      branch(i < n, 1'b1);  // backward loop branch, predicted taken
      wait_gen();
      correction();
    end
    start_gen(16);
    io_wr(4, f1);
    io_rd(4, r);
    wait_gen();
    check(r == 32'd6765 && n == 20, $sformatf("fib(%0d) = %0d, expected 6765", n, r));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    word_t rd; int w;
    int unsigned lvl_cycles [4];
    c6x_req = '0; ws = 0; exp_total = 0; corr = 0; level = 1;
    {n_start, n_load_held, n_load_free, n_store_held, n_corr, n_corr_zero} = '0;
    {n_io_rd, n_io_wr, n_demand, n_hit, n_miss, n_mispredict} = '0;
    for (int s = 0; s < SETS; s++) begin tag_v[s][0] = 0; tag_v[s][1] = 0; lru[s] = 1'b0; end
    rst_n = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    check_soc_time();
    for (int l = 1; l <= 3; l++) begin
      int unsigned lvl_start;
      level  = l;
      lvl_start = exp_total;
      for (int s = 0; s < SETS; s++) begin tag_v[s][0] = 0; tag_v[s][1] = 0; lru[s] = 1'b0; end
      prog_gcd(32'd84, 32'd36);
      prog_sieve(30);
      prog_fib(20);
      lvl_cycles[l] = exp_total - lvl_start;
      $display("detail level %0d: %0d SoC cycles generated", l, lvl_cycles[l]);
      check_soc_time();
    end
    check(lvl_cycles[2] > lvl_cycles[1] && lvl_cycles[3] > lvl_cycles[2],
          "each detail level adds correction cycles");

    // a start issued while the previous generation still runs is held
    start_gen(20);
    start_gen(5);
    wait_gen();

    #1;
    check(soc_cycles == exp_total, $sformatf("SoC counted %0d cycles, device %0d", soc_cycles, exp_total));
    check(prot_err == 0, $sformatf("%0d SoC bus protocol errors", prot_err));

    $display("mechanisms: start=%0d held_load=%0d free_load=%0d held_store=%0d corr=%0d corr0=%0d",
             n_start, n_load_held, n_load_free, n_store_held, n_corr, n_corr_zero);
    $display("            io_rd=%0d io_wr=%0d soc_wait=%0d demand=%0d hit=%0d miss=%0d mispredict=%0d",
             n_io_rd, n_io_wr, wait_cyc, n_demand, n_hit, n_miss, n_mispredict);
    check(n_start > 0, "no cycle generation started");
    check(n_load_held > 0, "no load held until end of generation");
    check(n_load_free > 0, "no load answered at once");
    check(n_store_held > 0, "no store held by a running generation");
    check(n_corr > 0, "no correction block");
    check(n_corr_zero > 0, "no empty correction block");
    check(n_io_rd > 0 && n_io_wr > 0, "no I/O load or store");
    check(wait_cyc > 0, "no SoC wait state");
    check(n_demand > 0, "no demand cycles");
    check(n_hit > 0 && n_miss > 0, "no cache hit or miss");
    check(n_mispredict > 0, "no mispredicted branch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
