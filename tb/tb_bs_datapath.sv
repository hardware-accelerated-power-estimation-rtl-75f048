// tb_bs_datapath: self-checking test of bs_datapath.
//
// Applies random control words and random port/memory values every cycle and keeps a
// reference copy of every register, updated here from the operations the datapath is
// meant to perform (mid = floor((a+b)/2) over integers, comparisons, mid +/- 1, -1 for
// "not found"). Each cycle it compares addr, out, the status flags and a few tap fields
// (sum, shifted value, '+/-' result) with the reference.
module tb_bs_datapath;
  import pe_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  idx_t first, last;
  data_t value, data;
  ctrl_t ctrl;
  logic [ADDR_W-1:0] addr;
  idx_t out;
  stat_t stat;
  dp_taps_t taps;
  int checks = 0, failures = 0;

  bs_datapath dut (.*);

  always #5 clk = ~clk;

  int r_mid = 0, r_first = 0, r_last = 0, r_out = 0;
  bit r_c0 = 0, r_c1 = 0, r_c2 = 0;

  function automatic int sx(idx_t v); return int'(v); endfunction
  function automatic int floor_half(int s); return (s >= 0) ? s / 2 : -((-s + 1) / 2); endfunction
  function automatic int wrap(int v); // to IDX_W-bit two's complement
    int m = 1 << IDX_W;
    v = ((v % m) + m) % m;
    return (v >= m / 2) ? v - m : v;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    ctrl = '0; first = '0; last = '0; value = '0; data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 3000; k++) begin
      int a, b, nm, nf, nl, no, as;
      bit n0, n1, n2;
      @(negedge clk);
      ctrl  = ctrl_t'($urandom);
      first = idx_t'($urandom);
      last  = idx_t'($urandom);
      value = data_t'($urandom_range(0, 15));  // small range so '=' is often true
      data  = data_t'($urandom_range(0, 15));
      if (k % 5 == 0) value = data_t'($urandom);
      // reference of the combinational results
      a  = ctrl.add_sel_port ? sx(first) : r_first;
      b  = ctrl.add_sel_port ? sx(last)  : r_last;
      as = wrap(ctrl.sub ? r_mid - 1 : r_mid + 1);
      #1;
      check("sum", int'(taps.add.s), a + b);
      check("shr", sx(taps.shr.y), wrap(floor_half(a + b)));
      check("addsub", sx(taps.addsub.y), as);
      nm = ctrl.ld_mid   ? wrap(floor_half(a + b)) : r_mid;
      nf = ctrl.ld_first ? (ctrl.fl_sel_port ? sx(first) : as) : r_first;
      nl = ctrl.ld_last  ? (ctrl.fl_sel_port ? sx(last)  : as) : r_last;
      no = ctrl.ld_out   ? (ctrl.out_sel_nf ? -1 : r_mid) : r_out;
      n0 = ctrl.ld_c01 ? (data < value)  : r_c0;
      n1 = ctrl.ld_c01 ? (data == value) : r_c1;
      n2 = ctrl.ld_c2  ? (r_first <= r_last) : r_c2;
      @(posedge clk);
      r_mid = nm; r_first = nf; r_last = nl; r_out = no; r_c0 = n0; r_c1 = n1; r_c2 = n2;
      #1;
      check("addr", int'(addr), r_mid & ((1 << ADDR_W) - 1));
      check("out", sx(out), r_out);
      check("c0", int'(stat.c0), int'(r_c0));
      check("c1", int'(stat.c1), int'(r_c1));
      check("c2", int'(stat.c2), int'(r_c2));
      check("reg_first", sx(taps.reg_first.q), r_first);
      check("reg_last", sx(taps.reg_last.q), r_last);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
