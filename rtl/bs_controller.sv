// bs_controller: FSM of the example binary-search circuit.
//
// The example names only an FSM; the states and schedule are this design's own. One
// search runs as follows (one state per cycle):
//   IDLE  wait for 'start'; then load reg_first/reg_last from the ports and reg_mid
//         with (first + last) >> 1, computed from the ports directly.
//   CHK   reg_c2 <= (reg_first <= reg_last); read memory at addr = reg_mid.
//   CMP   range empty (reg_c2 = 0): reg_out <= -1, go to DONE. Otherwise capture
//         reg_c0 <= data < value and reg_c1 <= data == value.
//   UPD   found (reg_c1): reg_out <= reg_mid, go to DONE; data < value (reg_c0):
//         reg_first <= reg_mid + 1; else reg_last <= reg_mid - 1.
//   NEXT  reg_mid <= (reg_first + reg_last) >> 1, back to CHK.
//   DONE  'done' high for one cycle, back to IDLE.
// A probe costs four cycles; a search over n words ends within 4*ceil(log2(n+1)) + 3
// cycles after 'start'. 'busy' is high from the cycle after 'start' to DONE.
module bs_controller
  import pe_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  stat_t  stat,
  output ctrl_t  ctrl,
  output logic   busy,
  output logic   done,
  output state_t state
);

  state_t nxt;

  always_comb begin
    ctrl = '0;
    nxt  = state;
    unique case (state)
      S_IDLE: if (start) begin
        ctrl.add_sel_port = 1'b1;
        ctrl.ld_mid       = 1'b1;
        ctrl.fl_sel_port  = 1'b1;
        ctrl.ld_first     = 1'b1;
        ctrl.ld_last      = 1'b1;
        nxt               = S_CHK;
      end
      S_CHK: begin
        ctrl.ld_c2  = 1'b1;
        ctrl.mem_rd = 1'b1;
        nxt         = S_CMP;
      end
      S_CMP: begin
        if (!stat.c2) begin
          ctrl.ld_out     = 1'b1;
          ctrl.out_sel_nf = 1'b1;
          nxt             = S_DONE;
        end else begin
          ctrl.ld_c01 = 1'b1;
          nxt         = S_UPD;
        end
      end
      S_UPD: begin
        if (stat.c1) begin
          ctrl.ld_out = 1'b1;
          nxt         = S_DONE;
        end else if (stat.c0) begin
          ctrl.ld_first = 1'b1;
          nxt           = S_NEXT;
        end else begin
          ctrl.sub     = 1'b1;
          ctrl.ld_last = 1'b1;
          nxt          = S_NEXT;
        end
      end
      S_NEXT: begin
        ctrl.ld_mid = 1'b1;
        nxt         = S_CHK;
      end
      S_DONE: nxt = S_IDLE;
      default: nxt = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= nxt;
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);

  // 'done' lasts one cycle and returns the FSM to IDLE; a start is taken only in IDLE.
  a_done_then_idle: assert property (@(posedge clk) disable iff (!rst_n) done |=> !busy);
  a_start_loads:    assert property (@(posedge clk) disable iff (!rst_n)
    ctrl.ld_first && ctrl.fl_sel_port |-> (state == S_IDLE) && start);

endmodule
