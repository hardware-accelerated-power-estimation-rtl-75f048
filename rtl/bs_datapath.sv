// bs_datapath: datapath of the example binary-search circuit.
//
// It holds the components of the example: two operand muxes in front of the adder
// '+', the shifter '>> 1' that halves the sum into reg_mid, the comparators '<' and '='
// (memory word against the key) into reg_c0 and reg_c1, the comparator '<=' (first
// against last) into reg_c2, the '+/-' unit that forms mid + 1 or mid - 1, the muxes in
// front of reg_first and reg_last (port value or '+/-' result), and the mux in front of
// reg_out (mid or the constant -1). The component list and register names follow the
// example circuit; the operand routing, widths and schedule are this design's reading
// of it (the shared buses of the drawing are plain nets here).
//
// All registers load only when their enable in 'ctrl' is high; 'addr' is reg_mid, so a
// memory read issued with ctrl.mem_rd returns 'data' in the following cycle, when
// ctrl.ld_c01 captures the comparisons. 'taps' exports the input and output bits of
// every component for its power model (see pe_pkg::dp_taps_t). Indices are signed.
// ctrl.mem_rd is part of the shared control word but goes to the memory, not here.
module bs_datapath
  import pe_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  idx_t                first,
  input  idx_t                last,
  input  data_t               value,
  input  data_t               data,
  input  ctrl_t               ctrl,
  output logic [ADDR_W-1:0]   addr,
  output idx_t                out,
  output stat_t               stat,
  output dp_taps_t            taps
);

  idx_t reg_mid, reg_first, reg_last, reg_out;
  logic reg_c0, reg_c1, reg_c2;

  // Functional units and muxes
  idx_t                    mux_a_y, mux_b_y, mux_first_y, mux_last_y, mux_out_y;
  logic signed [IDX_W:0]   add_s;
  idx_t                    shr_y, addsub_y;
  logic                    lt_y, eq_y, le_y;

  assign mux_a_y     = ctrl.add_sel_port ? first : reg_first;
  assign mux_b_y     = ctrl.add_sel_port ? last  : reg_last;
  assign add_s       = (IDX_W+1)'(mux_a_y) + (IDX_W+1)'(mux_b_y); // sign-extending
  assign shr_y       = idx_t'(add_s >>> 1);
  assign lt_y        = data < value;
  assign eq_y        = data == value;
  assign le_y        = reg_first <= reg_last;
  assign addsub_y    = ctrl.sub ? reg_mid - idx_t'(1) : reg_mid + idx_t'(1);
  assign mux_first_y = ctrl.fl_sel_port ? first : addsub_y;
  assign mux_last_y  = ctrl.fl_sel_port ? last  : addsub_y;
  assign mux_out_y   = ctrl.out_sel_nf ? idx_t'(-1) : reg_mid;

  // Registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_mid   <= '0;
      reg_first <= '0;
      reg_last  <= '0;
      reg_out   <= '0;
      reg_c0    <= 1'b0;
      reg_c1    <= 1'b0;
      reg_c2    <= 1'b0;
    end else begin
      if (ctrl.ld_mid)   reg_mid   <= shr_y;
      if (ctrl.ld_first) reg_first <= mux_first_y;
      if (ctrl.ld_last)  reg_last  <= mux_last_y;
      if (ctrl.ld_out)   reg_out   <= mux_out_y;
      if (ctrl.ld_c01) begin
        reg_c0 <= lt_y;
        reg_c1 <= eq_y;
      end
      if (ctrl.ld_c2)    reg_c2    <= le_y;
    end
  end

  assign addr    = reg_mid[ADDR_W-1:0];
  assign out     = reg_out;
  assign stat.c0 = reg_c0;
  assign stat.c1 = reg_c1;
  assign stat.c2 = reg_c2;

  // Monitored bits of each component
  always_comb begin
    taps.mux_a     = '{in_port: first, in_reg: reg_first, sel: ctrl.add_sel_port, y: mux_a_y};
    taps.mux_b     = '{in_port: last,  in_reg: reg_last,  sel: ctrl.add_sel_port, y: mux_b_y};
    taps.add       = '{a: mux_a_y, b: mux_b_y, s: add_s};
    taps.shr       = '{a: add_s, y: shr_y};
    taps.lt        = '{a: data, b: value, y: lt_y};
    taps.eq        = '{a: data, b: value, y: eq_y};
    taps.le        = '{a: reg_first, b: reg_last, y: le_y};
    taps.addsub    = '{a: reg_mid, sub: ctrl.sub, y: addsub_y};
    taps.mux_first = '{in_port: first, in_reg: addsub_y, sel: ctrl.fl_sel_port, y: mux_first_y};
    taps.mux_last  = '{in_port: last,  in_reg: addsub_y, sel: ctrl.fl_sel_port, y: mux_last_y};
    taps.mux_out   = '{a: reg_mid, sel: ctrl.out_sel_nf, y: mux_out_y};
    taps.reg_mid   = '{d: shr_y,       en: ctrl.ld_mid,   q: reg_mid};
    taps.reg_c0    = '{d: lt_y,        en: ctrl.ld_c01,   q: reg_c0};
    taps.reg_c1    = '{d: eq_y,        en: ctrl.ld_c01,   q: reg_c1};
    taps.reg_c2    = '{d: le_y,        en: ctrl.ld_c2,    q: reg_c2};
    taps.reg_first = '{d: mux_first_y, en: ctrl.ld_first, q: reg_first};
    taps.reg_last  = '{d: mux_last_y,  en: ctrl.ld_last,  q: reg_last};
    taps.reg_out   = '{d: mux_out_y,   en: ctrl.ld_out,   q: reg_out};
  end

endmodule
