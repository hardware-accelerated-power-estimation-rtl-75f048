// tb_pe_binsearch_top: end-to-end test of the power-emulation example at its default
// parameters.
//
// A 256-word memory is filled with a strictly increasing random array. Searches are run
// over random ranges (full, sub-range, single word, empty) for keys that are present
// and absent. For each search the testbench checks the result index against its own
// binary search and the number of cycles from 'start' to 'done' against the probe count
// of that search (4 cycles per probe).
//
// In parallel it recomputes the power estimate independently: at every strobe it reads
// the bits each power model monitors, counts the bits that changed since that model's
// previous sample, weights them by the coefficients, and queues the circuit's power
// for that strobe. Each 'cycle_valid' must come exactly three cycles after its strobe
// with the queued value, and 'total_power' and 'n_strobes' must match the running sums.
//
// The run goes through the power-emulation modes: strobe every cycle, strobe every 3
// and every 5 cycles, estimation disabled (no strobes), and 'pe_clear'. Each mechanism
// (found, absent key, empty range, first = mid+1, last = mid-1, each strobe period,
// disable, clear, and a non-zero output from every one of the 19 power models) is
// counted, and one that never happened counts as a failure.
module tb_pe_binsearch_top;
  import pe_pkg::*;
  localparam int unsigned NWORDS = 2 ** ADDR_W;
  localparam int unsigned SUM_W  = PM_PW + $clog2(NUM_PM);

  logic clk = 1'b0, rst_n = 1'b0;
  logic start = 1'b0;
  idx_t first = '0, last = '0;
  data_t value = '0;
  idx_t out;
  logic busy, done;
  logic mem_rd;
  logic [ADDR_W-1:0] mem_addr;
  data_t mem_data;
  logic pe_enable = 1'b0, pe_clear = 1'b0;
  logic [7:0] strobe_period = 8'd1;
  logic [PM_PW-1:0] pm_power [NUM_PM];
  logic [SUM_W-1:0] cycle_power;
  logic cycle_valid;
  logic [47:0] total_power;
  logic [31:0] n_strobes;

  logic we = 1'b0;
  logic [ADDR_W-1:0] waddr = '0;
  data_t wdata = '0;

  int checks = 0, failures = 0;
  int cyc = 0;

  pe_binsearch_top dut (.*);
  sorted_mem #(.AW(ADDR_W), .DW(DATA_W)) u_mem (
    .clk, .rd(mem_rd), .addr(mem_addr), .data(mem_data), .we, .waddr, .wdata
  );

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string msg);
    failures++;
    $display("FAIL @%0d: %s", cyc, msg);
  endtask

  // ------------------------------------------------------------------ reference power
  logic [MAXN-1:0]    ref_prev [NUM_PM];
  bit                 ref_seen = 0;
  longint unsigned    exp_total = 0, exp_strobes = 0;
  longint unsigned    exp_q [$];
  int                 due_q [$];
  bit                 pm_nonzero [NUM_PM];
  int                 n_strobe_cycles = 0;

  // Bits each power model should monitor, taken from the components themselves.
  logic [MAXN-1:0] tb_x [NUM_PM];
  always_comb begin
    tb_x[PM_MUX_A]     = MAXN'(dut.u_dp.taps.mux_a);
    tb_x[PM_MUX_B]     = MAXN'(dut.u_dp.taps.mux_b);
    tb_x[PM_ADD]       = MAXN'(dut.u_dp.taps.add);
    tb_x[PM_SHR]       = MAXN'(dut.u_dp.taps.shr);
    tb_x[PM_LT]        = MAXN'(dut.u_dp.taps.lt);
    tb_x[PM_EQ]        = MAXN'(dut.u_dp.taps.eq);
    tb_x[PM_LE]        = MAXN'(dut.u_dp.taps.le);
    tb_x[PM_ADDSUB]    = MAXN'(dut.u_dp.taps.addsub);
    tb_x[PM_MUX_FIRST] = MAXN'(dut.u_dp.taps.mux_first);
    tb_x[PM_MUX_LAST]  = MAXN'(dut.u_dp.taps.mux_last);
    tb_x[PM_MUX_OUT]   = MAXN'(dut.u_dp.taps.mux_out);
    tb_x[PM_REG_MID]   = MAXN'(dut.u_dp.taps.reg_mid);
    tb_x[PM_REG_C0]    = MAXN'(dut.u_dp.taps.reg_c0);
    tb_x[PM_REG_C1]    = MAXN'(dut.u_dp.taps.reg_c1);
    tb_x[PM_REG_C2]    = MAXN'(dut.u_dp.taps.reg_c2);
    tb_x[PM_REG_FIRST] = MAXN'(dut.u_dp.taps.reg_first);
    tb_x[PM_REG_LAST]  = MAXN'(dut.u_dp.taps.reg_last);
    tb_x[PM_REG_OUT]   = MAXN'(dut.u_dp.taps.reg_out);
    tb_x[PM_FSM]       = MAXN'({dut.u_ctrl.state, dut.u_ctrl.ctrl});
  end

  function automatic longint unsigned model_power(int i, logic [MAXN-1:0] a, logic [MAXN-1:0] b);
    logic [MAXN*CW-1:0] cf;
    longint unsigned s;
    cf = pm_coeff(i, PM_N[i]);
    s = 0;
    for (int k = 0; k < PM_N[i]; k++)
      if (a[k] != b[k]) s += 64'(cf[k*CW +: CW]);
    return s;
  endfunction

  always @(negedge clk) begin
    if (rst_n && dut.u_strobe.strobe) begin
      longint unsigned p;
      p = 0;
      for (int i = 0; i < NUM_PM; i++) begin
        if (ref_seen) p += model_power(i, ref_prev[i], tb_x[i]);
        ref_prev[i] = tb_x[i];
      end
      ref_seen = 1;
      exp_q.push_back(p);
      due_q.push_back(cyc + 3);
      n_strobe_cycles++;
    end
    if (rst_n && cycle_valid) begin
      longint unsigned e;
      int d;
      checks += 2;
      if (exp_q.size() == 0) fail("cycle_valid without a strobe");
      else begin
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (cycle_power != SUM_W'(e)) fail($sformatf("cycle_power %0d expected %0d", cycle_power, e));
        if (d != cyc) fail($sformatf("cycle_valid at %0d expected %0d", cyc, d));
        exp_total += e;
        exp_strobes++;
      end
      checks += 2;
      if (total_power != 48'(exp_total)) fail($sformatf("total_power %0d expected %0d", total_power, exp_total));
      if (n_strobes != 32'(exp_strobes)) fail($sformatf("n_strobes %0d expected %0d", n_strobes, exp_strobes));
    end
    for (int i = 0; i < NUM_PM; i++) if (pm_power[i] != 0) pm_nonzero[i] = 1;
  end

  // ------------------------------------------------------------------ search helpers
  data_t arr [NWORDS];
  int n_found = 0, n_absent = 0, n_empty = 0, n_right = 0, n_left = 0;

  always @(negedge clk) begin
    if (rst_n && dut.ctrl.ld_first && !dut.ctrl.fl_sel_port) n_right++;
    if (rst_n && dut.ctrl.ld_last  && !dut.ctrl.fl_sel_port) n_left++;
  end

  // reference binary search: result index (or -1) and number of probes
  task automatic ref_search(int f, int l, data_t v, output int res, output int probes, output bit empty_exit);
    res = -1; probes = 0; empty_exit = 0;
    forever begin
      int m;
      if (f > l) begin empty_exit = 1; break; end
      m = (f + l) >>> 1;
      probes++;
      if (arr[m] == v) begin res = m; break; end
      else if (arr[m] < v) f = m + 1;
      else l = m - 1;
    end
  endtask

  task automatic search(int f, int l, data_t v);
    int res, probes, t0, lat, exp_lat;
    bit empty_exit;
    ref_search(f, l, v, res, probes, empty_exit);
    @(negedge clk);
    first = idx_t'(f); last = idx_t'(l); value = v; start = 1'b1;
    t0 = cyc;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    lat = cyc - t0;
    // found at probe k: done 4k cycles after start; empty after k probes: 4k+3
    exp_lat = empty_exit ? 4 * probes + 3 : 4 * probes;
    checks += 2;
    if (int'(out) != res) fail($sformatf("search [%0d,%0d] for %0d: out %0d expected %0d", f, l, v, out, res));
    if (lat != exp_lat) fail($sformatf("search latency %0d expected %0d (probes %0d)", lat, exp_lat, probes));
    if (res >= 0) n_found++;
    else if (probes == 0) n_empty++;
    else n_absent++;
  endtask

  task automatic random_searches(int n);
    for (int s = 0; s < n; s++) begin
      int f, l, kind;
      data_t v;
      kind = $urandom_range(0, 9);
      f = $urandom_range(0, NWORDS - 1);
      l = $urandom_range(0, NWORDS - 1);
      if (kind <= 2) begin f = 0; l = NWORDS - 1; end
      else if (kind == 3) l = f;
      else if (kind == 4) begin if (f < l) begin int t = f; f = l; l = t; end if (f == l) f = l + 1; end
      else if (f > l) begin int t = f; f = l; l = t; end
      if ($urandom_range(0, 1) != 0 && f <= l) v = arr[$urandom_range(f, l)];
      else v = data_t'($urandom);
      search(f, l, v);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
  endtask

  task automatic drain_and_check();
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) fail($sformatf("%0d strobes not reported", exp_q.size()));
  endtask

  int p1_strobes, p3_strobes, p5_strobes, n_clear = 0, n_disabled_ok = 0;

  initial begin
    int v;
    // strictly increasing contents
    v = $urandom_range(0, 50);
    for (int i = 0; i < NWORDS; i++) begin
      arr[i] = data_t'(v);
      v += $urandom_range(1, 200);
    end
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < NWORDS; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = ADDR_W'(i); wdata = arr[i];
    end
    @(negedge clk) we = 1'b0;

    // directed cases: first, last, absent below/above, empty range
    search(0, NWORDS - 1, arr[0]);
    search(0, NWORDS - 1, arr[NWORDS-1]);
    search(0, NWORDS - 1, arr[NWORDS-1] + 1);
    search(5, 4, arr[5]);

    // mode 1: cycle-accurate estimation (strobe every cycle)
    @(negedge clk); pe_enable = 1'b1; strobe_period = 8'd1;
    v = n_strobe_cycles;
    random_searches(150);
    p1_strobes = n_strobe_cycles - v;
    @(negedge clk); pe_enable = 1'b0;
    drain_and_check();

    // estimation disabled: searches produce no strobes
    v = n_strobe_cycles;
    random_searches(10);
    checks++;
    if (n_strobe_cycles != v) fail("strobes while estimation disabled");
    else n_disabled_ok++;

    // clear
    @(negedge clk); pe_clear = 1'b1;
    @(negedge clk); pe_clear = 1'b0;
    exp_total = 0; exp_strobes = 0; n_clear++;
    checks += 2;
    if (total_power != 0) fail("total_power not cleared");
    if (n_strobes != 0) fail("n_strobes not cleared");

    // coarser estimates: strobe every 3 and every 5 cycles
    @(negedge clk); pe_enable = 1'b1; strobe_period = 8'd3;
    v = n_strobe_cycles;
    random_searches(60);
    p3_strobes = n_strobe_cycles - v;
    @(negedge clk); pe_enable = 1'b0;
    drain_and_check();
    @(negedge clk); pe_enable = 1'b1; strobe_period = 8'd5;
    v = n_strobe_cycles;
    random_searches(60);
    p5_strobes = n_strobe_cycles - v;
    @(negedge clk); pe_enable = 1'b0;
    drain_and_check();

    // mechanisms
    checks += 11;
    if (n_found == 0)       fail("no search found its key");
    if (n_absent == 0)      fail("no search for an absent key");
    if (n_empty == 0)       fail("no empty-range search");
    if (n_right == 0)       fail("no first = mid + 1 step");
    if (n_left == 0)        fail("no last = mid - 1 step");
    if (p1_strobes == 0)    fail("no strobes at period 1");
    if (p3_strobes == 0)    fail("no strobes at period 3");
    if (p5_strobes == 0)    fail("no strobes at period 5");
    if (n_disabled_ok == 0) fail("disable not exercised");
    if (n_clear == 0)       fail("clear not exercised");
    if (exp_strobes == 0)   fail("no power reported after clear");
    for (int i = 0; i < NUM_PM; i++) begin
      checks++;
      if (!pm_nonzero[i]) fail($sformatf("power model %0d never reported power", i));
    end
    $display("searches: found=%0d absent=%0d empty=%0d; steps right=%0d left=%0d",
             n_found, n_absent, n_empty, n_right, n_left);
    $display("strobes: period1=%0d period3=%0d period5=%0d; total_power=%0d over %0d strobes",
             p1_strobes, p3_strobes, p5_strobes, total_power, n_strobes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    fail("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
