// pe_pkg: shared widths, types and power-model coefficients of the power-emulation
// example, a binary-search circuit enhanced with per-component power models.
//
// The example circuit searches a sorted array held in an external memory. Indices are
// signed (IDX_W bits) so that "last = mid - 1" may go to -1, "first = mid + 1" may
// reach 2**ADDR_W one past the last word, and "not found" can be
// reported as -1; the memory address is the low ADDR_W bits of the index. All widths
// are this design's choice; the source description gives none.
//
// dp_taps_t / fsm_taps_t bundle, for each RTL component, the input and output bits that
// its power model watches (one struct member per component). pm_coeff() returns the
// per-bit regression coefficients of each power model. Real coefficients come from
// characterizing each component in the target cell library; the values below are
// placeholders with the right structure (one unsigned CW-bit weight per monitored bit)
// and are meant to be replaced.
package pe_pkg;

  localparam int unsigned ADDR_W = 8;          // 256-word search memory
  localparam int unsigned IDX_W  = ADDR_W + 2; // signed index, holds -1 .. 2**ADDR_W
  localparam int unsigned DATA_W = 16;         // unsigned, ascending order

  typedef logic signed [IDX_W-1:0] idx_t;
  typedef logic        [DATA_W-1:0] data_t;

  // Controller states: four cycles per probe (CHK, CMP, UPD, NEXT).
  typedef enum logic [2:0] {
    S_IDLE = 3'd0,
    S_CHK  = 3'd1,
    S_CMP  = 3'd2,
    S_UPD  = 3'd3,
    S_NEXT = 3'd4,
    S_DONE = 3'd5
  } state_t;

  // Control word from the FSM to the datapath.
  typedef struct packed {
    logic add_sel_port; // '+' operand muxes: 1 = ports first/last, 0 = reg_first/reg_last
    logic ld_mid;       // load reg_mid with (a + b) >> 1
    logic fl_sel_port;  // reg_first/reg_last muxes: 1 = ports, 0 = '+/-' result
    logic ld_first;
    logic ld_last;
    logic sub;          // '+/-': 0 = reg_mid + 1, 1 = reg_mid - 1
    logic ld_c2;        // reg_c2 <= reg_first <= reg_last
    logic ld_c01;       // reg_c0 <= data < value, reg_c1 <= data == value
    logic ld_out;       // load reg_out
    logic out_sel_nf;   // reg_out mux: 1 = constant -1, 0 = reg_mid
    logic mem_rd;       // read memory at addr = reg_mid
  } ctrl_t;

  // Status from the datapath to the FSM.
  typedef struct packed {
    logic c2; // reg_c2: first <= last
    logic c1; // reg_c1: data == value
    logic c0; // reg_c0: data <  value
  } stat_t;

  // Monitored bits of each component.
  typedef struct packed { idx_t in_port; idx_t in_reg; logic sel; idx_t y; } mux2_taps_t;
  typedef struct packed { idx_t a; idx_t b; logic signed [IDX_W:0] s; } add_taps_t;
  typedef struct packed { logic signed [IDX_W:0] a; idx_t y; } shr_taps_t;
  typedef struct packed { data_t a; data_t b; logic y; } dcmp_taps_t;
  typedef struct packed { idx_t a; idx_t b; logic y; } icmp_taps_t;
  typedef struct packed { idx_t a; logic sub; idx_t y; } addsub_taps_t;
  typedef struct packed { idx_t a; logic sel; idx_t y; } muxc_taps_t; // other input is constant
  typedef struct packed { idx_t d; logic en; idx_t q; } ireg_taps_t;
  typedef struct packed { logic d; logic en; logic q; } breg_taps_t;

  typedef struct packed {
    mux2_taps_t   mux_a;     // '+' left operand mux
    mux2_taps_t   mux_b;     // '+' right operand mux
    add_taps_t    add;       // '+'
    shr_taps_t    shr;       // '>> 1'
    dcmp_taps_t   lt;        // '<'
    dcmp_taps_t   eq;        // '='
    icmp_taps_t   le;        // '<='
    addsub_taps_t addsub;    // '+/-'
    mux2_taps_t   mux_first; // mux before reg_first
    mux2_taps_t   mux_last;  // mux before reg_last
    muxc_taps_t   mux_out;   // mux before reg_out
    ireg_taps_t   reg_mid;
    breg_taps_t   reg_c0;
    breg_taps_t   reg_c1;
    breg_taps_t   reg_c2;
    ireg_taps_t   reg_first;
    ireg_taps_t   reg_last;
    ireg_taps_t   reg_out;
  } dp_taps_t;

  typedef struct packed { state_t state; ctrl_t ctrl; } fsm_taps_t;

  // Power models, one per RTL component.
  localparam int unsigned NUM_PM = 19;
  localparam int unsigned MAXN   = 40; // widest monitored bundle (33 bits) rounded up
  localparam int unsigned CW     = 8;  // coefficient width
  localparam int unsigned PM_PW  = CW + $clog2(MAXN + 1); // common power-model output width

  // Power model numbering and the width of the bundle each one monitors.
  typedef enum int unsigned {
    PM_MUX_A, PM_MUX_B, PM_ADD, PM_SHR, PM_LT, PM_EQ, PM_LE, PM_ADDSUB,
    PM_MUX_FIRST, PM_MUX_LAST, PM_MUX_OUT,
    PM_REG_MID, PM_REG_C0, PM_REG_C1, PM_REG_C2, PM_REG_FIRST, PM_REG_LAST, PM_REG_OUT,
    PM_FSM
  } pm_id_t;

  localparam int unsigned PM_N [NUM_PM] = '{
    $bits(mux2_taps_t), $bits(mux2_taps_t), $bits(add_taps_t), $bits(shr_taps_t),
    $bits(dcmp_taps_t), $bits(dcmp_taps_t), $bits(icmp_taps_t), $bits(addsub_taps_t),
    $bits(mux2_taps_t), $bits(mux2_taps_t), $bits(muxc_taps_t),
    $bits(ireg_taps_t), $bits(breg_taps_t), $bits(breg_taps_t), $bits(breg_taps_t),
    $bits(ireg_taps_t), $bits(ireg_taps_t), $bits(ireg_taps_t),
    $bits(fsm_taps_t)
  };

  // Placeholder coefficient of bit i (bit 0 = LSB of the monitored bundle) of power
  // model 'id' with 'n' monitored bits: base(id) + 4 * (i mod 3) + (2 if i is among
  // the upper quarter of the bundle). Result is below 2**CW.
  function automatic logic [MAXN*CW-1:0] pm_coeff(int unsigned id, int unsigned n);
    logic [MAXN*CW-1:0] v;
    logic [CW-1:0] c;
    v = '0;
    for (int unsigned i = 0; i < MAXN; i++) begin
      if (i < n) begin
        c = CW'(8 + 3 * (id % 7) + 4 * (i % 3) + ((4 * i >= 3 * n) ? 2 : 0));
        v[i*CW +: CW] = c;
      end
    end
    return v;
  endfunction

endpackage
