// power_strobe_gen: power strobe generator for one clock domain.
//
// Every power model of a clock domain samples its component and evaluates its
// macromodel when this strobe is high. The source description asks for one generator
// per clock domain and says what it is for; how it works here is this design's choice.
// While 'enable' is high the generator emits a one-cycle pulse every 'period' cycles
// (a period of 0 or 1 gives a strobe on every cycle, which is the cycle-accurate use of
// the macromodels). A longer period makes the models compare values 'period' cycles
// apart, which merges the transitions in between - a cheaper, coarser estimate.
//
// Timing: 'strobe' is a register output. The first pulse comes in the cycle after
// 'enable' is first seen high; dropping 'enable' stops the pulses at once and restarts
// the count. A new 'period' takes effect after the next pulse.
module power_strobe_gen #(
  parameter int unsigned PERIOD_W = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                enable,
  input  logic [PERIOD_W-1:0] period,
  output logic                strobe
);

  logic [PERIOD_W-1:0] cnt; // cycles left before the next pulse

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      strobe <= 1'b0;
    end else if (!enable) begin
      cnt    <= '0;
      strobe <= 1'b0;
    end else if (cnt == '0) begin
      strobe <= 1'b1;
      cnt    <= (period > PERIOD_W'(1)) ? period - PERIOD_W'(1) : '0;
    end else begin
      strobe <= 1'b0;
      cnt    <= cnt - PERIOD_W'(1);
    end
  end

endmodule
