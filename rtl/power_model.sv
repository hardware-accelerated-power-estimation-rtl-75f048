// power_model: hardware evaluation of a cycle-accurate linear-regression power
// macromodel for one RTL component.
//
// The component's power for one strobe period is
//     P = sum_i Coeff_i * (x_i(previous) XOR x_i(current))
// over its N monitored input/output bits. A two-entry queue per bit holds the values
// seen at the last two strobes; XOR gives the transition (0 or 1) of each bit, and
// since that is a single bit the multiply is an AND of the bit with the CW-bit
// coefficient. The N gated coefficients are summed by an adder. This structure is the
// one the source description gives; the widths, the registered output and the handling
// of the first sample are this design's choices.
//
// Interface: 'x' is sampled when 'strobe' is high. The power of the transition from the
// previous to this sample is on 'power' with 'valid' high two cycles after the strobe
// cycle (strobe in cycle t -> valid in cycle t+2); 'power' holds its value in between.
// The first strobe after reset has no previous sample and reports 0.
// COEFFS packs coefficient i at bits [i*CW +: CW]; PW must hold N * (2**CW - 1).
module power_model #(
  parameter int unsigned N  = 8,
  parameter int unsigned CW = 8,
  parameter int unsigned PW = CW + $clog2(N + 1),
  parameter logic [N*CW-1:0] COEFFS = '1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          strobe,
  input  logic [N-1:0]  x,
  output logic [PW-1:0] power,
  output logic          valid
);

  if (PW < CW + $clog2(N + 1)) begin : g_pw_check
    $error("power_model: PW too narrow for N coefficients");
  end

  logic [N-1:0]  q_cur, q_prev; // queue_x(0), queue_x(1)
  logic [1:0]    nsamp;         // samples held in the queue, saturating at 2
  logic          eval;          // the queue was updated last cycle
  logic [N-1:0]  tc;            // per-bit transition count
  logic [PW-1:0] sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_cur  <= '0;
      q_prev <= '0;
      nsamp  <= '0;
      eval   <= 1'b0;
    end else begin
      eval <= strobe;
      if (strobe) begin
        q_prev <= q_cur;
        q_cur  <= x;
        if (nsamp != 2'd2) nsamp <= nsamp + 2'd1;
      end
    end
  end

  assign tc = (nsamp == 2'd2) ? (q_cur ^ q_prev) : '0;

  always_comb begin
    sum = '0;
    for (int unsigned i = 0; i < N; i++) begin
      sum = sum + PW'(COEFFS[i*CW +: CW] & {CW{tc[i]}});
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      power <= '0;
      valid <= 1'b0;
    end else begin
      valid <= eval;
      if (eval) power <= sum;
    end
  end

endmodule
