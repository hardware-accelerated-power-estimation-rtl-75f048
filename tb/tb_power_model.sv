// tb_power_model: self-checking test of power_model.
//
// Drives random bundles with randomly spaced strobes into a 12-bit model with distinct
// coefficients. The expected power of each strobe is recomputed here from the last two
// sampled values (sum of the coefficients of the bits that differ) and compared with
// 'power' when 'valid' rises, which must be exactly two cycles after the strobe. Also
// checks that the first strobe after reset reports 0 and that 'power' holds between
// evaluations.
module tb_power_model;
  localparam int unsigned N  = 12;
  localparam int unsigned CW = 6;
  localparam int unsigned PW = CW + $clog2(N + 1);

  function automatic logic [N*CW-1:0] mk_coeffs();
    logic [N*CW-1:0] v;
    for (int i = 0; i < N; i++) v[i*CW +: CW] = CW'(i * 5 + 3);
    return v;
  endfunction
  localparam logic [N*CW-1:0] C = mk_coeffs();

  logic clk = 1'b0, rst_n = 1'b0, strobe = 1'b0;
  logic [N-1:0] x = '0;
  logic [PW-1:0] power;
  logic valid;
  int checks = 0, failures = 0;

  power_model #(.N(N), .CW(CW), .PW(PW), .COEFFS(C)) dut (.*);

  always #5 clk = ~clk;

  // expected values, queued at each strobe
  int unsigned exp_q[$];
  int          due_q[$];
  logic [N-1:0] prev;
  int          nseen = 0;
  int          cyc = 0;

  function automatic int unsigned ref_power(logic [N-1:0] a, logic [N-1:0] b);
    int unsigned s = 0;
    for (int i = 0; i < N; i++) if (a[i] != b[i]) s += i * 5 + 3;
    return s;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && strobe) begin
      exp_q.push_back(nseen == 0 ? 0 : ref_power(prev, x));
      due_q.push_back(cyc + 2);
      prev = x;
      nseen++;
    end
    if (rst_n && valid) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: valid without strobe at cycle %0d", cyc);
      end else begin
        int unsigned e;
        int d;
        e = exp_q.pop_front();
        d = due_q.pop_front();
        if (power !== PW'(e)) begin
          failures++; $display("FAIL: power %0d expected %0d at cycle %0d", power, e, cyc);
        end
        checks++;
        if (d != cyc) begin
          failures++; $display("FAIL: latency, valid at %0d expected %0d", cyc, d);
        end
      end
    end
  end

  // power must hold while valid is low
  logic [PW-1:0] last_power;
  always @(posedge clk) begin
    if (rst_n && !valid && cyc > 3) begin
      checks++;
      if (power !== last_power) begin failures++; $display("FAIL: power changed without valid"); end
    end
    last_power <= power;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    // back-to-back strobes, then random spacing, then all bits toggling
    for (int k = 0; k < 400; k++) begin
      @(negedge clk);
      x      = N'($urandom);
      strobe = (k < 100) ? 1'b1 : ($urandom_range(0, 2) == 0);
      if (k >= 380) x = (k % 2 != 0) ? '1 : '0;
    end
    @(negedge clk) strobe = 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d evaluations missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
