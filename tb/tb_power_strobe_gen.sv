// tb_power_strobe_gen: self-checking test of power_strobe_gen.
//
// For periods 0, 1, 2, 3 and 7 enables the generator, records the cycle of every
// strobe and checks: first strobe one cycle after enable, spacing equal to the period
// (0 counts as 1), one-cycle pulses, and no strobes while disabled.
module tb_power_strobe_gen;
  localparam int unsigned PW = 4;
  logic clk = 1'b0, rst_n = 1'b0, enable = 1'b0, strobe;
  logic [PW-1:0] period = '0;
  int checks = 0, failures = 0;
  int cyc = 0;

  power_strobe_gen #(.PERIOD_W(PW)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run(int p, int ncyc);
    int last_s, en_cyc, n;
    int eff;
    eff = (p <= 1) ? 1 : p;
    @(negedge clk);
    period = PW'(p);
    enable = 1'b1;
    en_cyc = cyc;          // enable is seen at the next rising edge
    last_s = -1; n = 0;
    repeat (ncyc) begin
      @(negedge clk);
      if (strobe) begin
        checks++;
        if (last_s < 0) begin
          if (cyc != en_cyc + 1) begin failures++; $display("FAIL p=%0d first strobe at %0d, enable at %0d", p, cyc, en_cyc); end
        end else if (cyc - last_s != eff) begin
          failures++; $display("FAIL p=%0d spacing %0d", p, cyc - last_s);
        end
        last_s = cyc; n++;
      end
    end
    checks++;
    if (n < ncyc / eff - 1) begin failures++; $display("FAIL p=%0d only %0d strobes", p, n); end
    enable = 1'b0;
    repeat (6) begin
      @(negedge clk);
      checks++;
      if (strobe) begin failures++; $display("FAIL strobe while disabled"); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    run(1, 20);
    run(0, 20);
    run(2, 30);
    run(3, 30);
    run(7, 60);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
