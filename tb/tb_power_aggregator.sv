// tb_power_aggregator: self-checking test of power_aggregator.
//
// Feeds random model outputs (including all-maximum values) with random 'in_valid',
// keeps its own running sum and strobe count, and checks cycle_power, cycle_valid,
// total_power and n_strobes one cycle after each input cycle. Exercises 'clear'
// in the middle of the run, also together with 'in_valid'.
module tb_power_aggregator;
  localparam int unsigned NUM = 7, IN_W = 10, ACC_W = 24;
  localparam int unsigned SUM_W = IN_W + $clog2(NUM);
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, in_valid = 1'b0;
  logic [IN_W-1:0] in_power [NUM];
  logic [SUM_W-1:0] cycle_power;
  logic cycle_valid;
  logic [ACC_W-1:0] total_power;
  logic [31:0] n_strobes;
  int checks = 0, failures = 0;

  power_aggregator #(.NUM(NUM), .IN_W(IN_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  longint unsigned tot = 0, cnt = 0, cp = 0;

  initial begin
    for (int i = 0; i < NUM; i++) in_power[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 500; k++) begin
      longint unsigned s;
      logic v;
      s = 0;
      @(negedge clk);
      for (int i = 0; i < NUM; i++) begin
        in_power[i] = (k % 50 == 7) ? '1 : IN_W'($urandom);
        s += 64'(in_power[i]);
      end
      in_valid = $urandom_range(0, 3) != 0;
      clear    = (k == 200) || (k == 201) || (k == 350 && in_valid);
      v = in_valid;
      if (clear) begin tot = 0; cnt = 0; end
      else if (v) begin tot = (tot + s) % (64'd1 << ACC_W); cnt++; cp = s; end
      @(negedge clk);
      in_valid = 1'b0; clear = 1'b0;
      checks += 4;
      if (cycle_valid !== (v && !(k == 200 || k == 201 || k == 350))) begin failures++; $display("FAIL cycle_valid k=%0d", k); end
      if (cycle_power !== SUM_W'(cp)) begin failures++; $display("FAIL cycle_power %0d exp %0d", cycle_power, cp); end
      if (total_power !== ACC_W'(tot)) begin failures++; $display("FAIL total %0d exp %0d", total_power, tot); end
      if (n_strobes !== 32'(cnt)) begin failures++; $display("FAIL n_strobes %0d exp %0d", n_strobes, cnt); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
