// pe_binsearch_top: the binary-search example circuit enhanced for power emulation.
//
// Power emulation adds power-estimation hardware to a design so that the design, run on
// an emulator or FPGA, reports its own power while it works. The functional part here
// is a small binary-search engine (bs_controller + bs_datapath) that looks a key up in
// an external sorted memory. Added to it are:
//   * one power_model per RTL component (19: five muxes, six functional units, seven
//     registers and the FSM), each watching that component's input/output bits;
//   * one power_strobe_gen for the single clock domain, whose strobe makes every model
//     sample its bits and evaluate its macromodel;
//   * one power_aggregator that sums the 19 model outputs per strobe period and
//     accumulates the circuit's total.
// The model outputs (pm_power) and the aggregator outputs are ports, so the host can
// read the power of the whole circuit or of any component.
//
// Timing: with strobe_period = 1 a model samples every cycle; the transition seen at a
// strobe in cycle t appears in pm_power in cycle t+2 and in cycle_power/total_power in
// cycle t+3. The functional circuit's timing is given in bs_controller. The power
// hardware only observes; it never changes the functional behaviour.
// The component set follows the example circuit; the coefficient values are
// placeholders (pe_pkg::pm_coeff), to be replaced by characterized ones.
module pe_binsearch_top
  import pe_pkg::*;
#(
  parameter int unsigned ACC_W    = 48,
  parameter int unsigned PERIOD_W = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // search request / result
  input  logic                          start,
  input  idx_t                          first,
  input  idx_t                          last,
  input  data_t                         value,
  output idx_t                          out,
  output logic                          busy,
  output logic                          done,
  // external sorted-data memory (synchronous, one-cycle read latency)
  output logic                          mem_rd,
  output logic [ADDR_W-1:0]             mem_addr,
  input  data_t                         mem_data,
  // power emulation control and results
  input  logic                          pe_enable,
  input  logic [PERIOD_W-1:0]           strobe_period,
  input  logic                          pe_clear,
  output logic [PM_PW-1:0]              pm_power [NUM_PM],
  output logic [PM_PW+$clog2(NUM_PM)-1:0] cycle_power,
  output logic                          cycle_valid,
  output logic [ACC_W-1:0]              total_power,
  output logic [31:0]                   n_strobes
);

  ctrl_t     ctrl;
  stat_t     stat;
  state_t    state;
  dp_taps_t  dp_taps;
  fsm_taps_t fsm_taps;

  bs_controller u_ctrl (
    .clk, .rst_n, .start, .stat, .ctrl, .busy, .done, .state
  );

  bs_datapath u_dp (
    .clk, .rst_n, .first, .last, .value, .data(mem_data), .ctrl,
    .addr(mem_addr), .out, .stat, .taps(dp_taps)
  );

  assign mem_rd   = ctrl.mem_rd;
  assign fsm_taps = '{state: state, ctrl: ctrl};

  // Monitored bundle of each power model, zero-extended to MAXN bits.
  logic [MAXN-1:0] pm_x [NUM_PM];

  always_comb begin
    pm_x[PM_MUX_A]     = MAXN'(dp_taps.mux_a);
    pm_x[PM_MUX_B]     = MAXN'(dp_taps.mux_b);
    pm_x[PM_ADD]       = MAXN'(dp_taps.add);
    pm_x[PM_SHR]       = MAXN'(dp_taps.shr);
    pm_x[PM_LT]        = MAXN'(dp_taps.lt);
    pm_x[PM_EQ]        = MAXN'(dp_taps.eq);
    pm_x[PM_LE]        = MAXN'(dp_taps.le);
    pm_x[PM_ADDSUB]    = MAXN'(dp_taps.addsub);
    pm_x[PM_MUX_FIRST] = MAXN'(dp_taps.mux_first);
    pm_x[PM_MUX_LAST]  = MAXN'(dp_taps.mux_last);
    pm_x[PM_MUX_OUT]   = MAXN'(dp_taps.mux_out);
    pm_x[PM_REG_MID]   = MAXN'(dp_taps.reg_mid);
    pm_x[PM_REG_C0]    = MAXN'(dp_taps.reg_c0);
    pm_x[PM_REG_C1]    = MAXN'(dp_taps.reg_c1);
    pm_x[PM_REG_C2]    = MAXN'(dp_taps.reg_c2);
    pm_x[PM_REG_FIRST] = MAXN'(dp_taps.reg_first);
    pm_x[PM_REG_LAST]  = MAXN'(dp_taps.reg_last);
    pm_x[PM_REG_OUT]   = MAXN'(dp_taps.reg_out);
    pm_x[PM_FSM]       = MAXN'(fsm_taps);
  end

  logic                strobe;
  logic [NUM_PM-1:0]   pm_valid;

  power_strobe_gen #(.PERIOD_W(PERIOD_W)) u_strobe (
    .clk, .rst_n, .enable(pe_enable), .period(strobe_period), .strobe
  );

  for (genvar i = 0; i < NUM_PM; i++) begin : g_pm
    localparam int unsigned N = PM_N[i];
    localparam logic [MAXN*CW-1:0] CF = pm_coeff(i, N);
    power_model #(.N(N), .CW(CW), .PW(PM_PW), .COEFFS(CF[N*CW-1:0])) u_pm (
      .clk, .rst_n, .strobe, .x(pm_x[i][N-1:0]), .power(pm_power[i]), .valid(pm_valid[i])
    );
  end

  // All models share one strobe, so they must report in the same cycle.
  a_models_in_step: assert property (@(posedge clk) disable iff (!rst_n)
    (pm_valid == '0) || (pm_valid == '1));

  power_aggregator #(.NUM(NUM_PM), .IN_W(PM_PW), .ACC_W(ACC_W)) u_agg (
    .clk, .rst_n, .clear(pe_clear), .in_valid(&pm_valid), .in_power(pm_power),
    .cycle_power, .cycle_valid, .total_power, .n_strobes
  );

endmodule
