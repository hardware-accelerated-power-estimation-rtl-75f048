// power_aggregator: adds up the outputs of all power models of the circuit.
//
// The source description builds aggregation as a sequence of additions over the power
// model outputs; here that is a chain of NUM-1 adders. When 'in_valid' is high (the
// models have just produced the power of one strobe period) the chain's sum is
// registered on 'cycle_power', added into the 'total_power' accumulator and the strobe
// period counter 'n_strobes' is incremented, so a host can read total energy and form
// average power as total_power / n_strobes. 'clear' (own addition) zeroes the total and
// the counter and has priority over 'in_valid'.
//
// Timing: outputs are registered; cycle_power and total_power reflect an 'in_valid'
// cycle one cycle later, with 'cycle_valid' high for that cycle.
module power_aggregator #(
  parameter int unsigned NUM   = 19,
  parameter int unsigned IN_W  = 14,
  parameter int unsigned ACC_W = 48,
  parameter int unsigned SUM_W = IN_W + $clog2(NUM)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  in_power [NUM],
  output logic [SUM_W-1:0] cycle_power,
  output logic             cycle_valid,
  output logic [ACC_W-1:0] total_power,
  output logic [31:0]      n_strobes
);

  logic [SUM_W-1:0] chain [NUM]; // chain[i] = in_power[0] + ... + in_power[i]

  always_comb begin
    chain[0] = SUM_W'(in_power[0]);
    for (int unsigned i = 1; i < NUM; i++) begin
      chain[i] = chain[i-1] + SUM_W'(in_power[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cycle_power <= '0;
      cycle_valid <= 1'b0;
      total_power <= '0;
      n_strobes   <= '0;
    end else begin
      cycle_valid <= in_valid && !clear;
      if (clear) begin
        total_power <= '0;
        n_strobes   <= '0;
      end else if (in_valid) begin
        cycle_power <= chain[NUM-1];
        total_power <= total_power + ACC_W'(chain[NUM-1]);
        n_strobes   <= n_strobes + 32'd1;
      end
    end
  end

endmodule
