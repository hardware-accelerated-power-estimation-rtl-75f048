// tb_bs_controller: self-checking test of bs_controller.
//
// Starts searches and answers with random status flags. For every cycle it checks the
// control word against the schedule the controller is specified to follow (see the
// table below, derived from the header of bs_controller), checks busy/done, and counts
// each exit path (empty range, found, go right, go left). Every path must occur.
module tb_bs_controller;
  import pe_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  stat_t stat;
  ctrl_t ctrl;
  logic busy, done;
  state_t state;
  int checks = 0, failures = 0;
  int n_empty = 0, n_found = 0, n_right = 0, n_left = 0, n_searches = 0;

  bs_controller dut (.*);

  always #5 clk = ~clk;

  task automatic expect_ctrl(string what, ctrl_t e);
    checks++;
    if (ctrl !== e) begin failures++; $display("FAIL %s: ctrl %b expected %b", what, ctrl, e); end
  endtask

  initial begin
    ctrl_t e;
    stat = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // idle without start: nothing happens
    @(negedge clk);
    expect_ctrl("idle", '0);
    checks++; if (busy || done) begin failures++; $display("FAIL busy/done in idle"); end
    for (int s = 0; s < 60; s++) begin
      bit fin;
      @(negedge clk);
      start = 1'b1;
      #1;
      e = '0; e.add_sel_port = 1; e.ld_mid = 1; e.fl_sel_port = 1; e.ld_first = 1; e.ld_last = 1;
      expect_ctrl("start", e);
      @(negedge clk);
      start = 1'b0;
      n_searches++;
      fin = 0;
      while (!fin) begin
        // CHK
        #1; e = '0; e.ld_c2 = 1; e.mem_rd = 1; expect_ctrl("chk", e);
        checks++; if (!busy || done) begin failures++; $display("FAIL busy in chk"); end
        @(negedge clk);
        // CMP
        stat = stat_t'($urandom);
        if (s < 4) stat.c2 = 1'b1;       // make the first searches long
        if ($urandom_range(0, 5) == 0) stat.c2 = 1'b0;
        #1;
        e = '0;
        if (!stat.c2) begin e.ld_out = 1; e.out_sel_nf = 1; end else e.ld_c01 = 1;
        expect_ctrl("cmp", e);
        @(negedge clk);
        if (!stat.c2) begin n_empty++; fin = 1; end
        else begin
          // UPD
          stat.c1 = ($urandom_range(0, 3) == 0);
          stat.c0 = ($urandom_range(0, 1) != 0);
          #1;
          e = '0;
          if (stat.c1) begin e.ld_out = 1; n_found++; fin = 1; end
          else if (stat.c0) begin e.ld_first = 1; n_right++; end
          else begin e.sub = 1; e.ld_last = 1; n_left++; end
          expect_ctrl("upd", e);
          @(negedge clk);
          if (!fin) begin
            #1; e = '0; e.ld_mid = 1; expect_ctrl("next", e);
            @(negedge clk);
          end
        end
      end
      // DONE
      #1;
      expect_ctrl("done", '0);
      checks++; if (!done || !busy) begin failures++; $display("FAIL done flag"); end
      @(negedge clk);
      #1;
      checks++; if (done || busy) begin failures++; $display("FAIL not back to idle"); end
    end
    checks += 4;
    if (n_empty == 0) begin failures++; $display("FAIL no empty-range exit"); end
    if (n_found == 0) begin failures++; $display("FAIL no found exit"); end
    if (n_right == 0) begin failures++; $display("FAIL no first=mid+1 step"); end
    if (n_left  == 0) begin failures++; $display("FAIL no last=mid-1 step"); end
    $display("searches=%0d empty=%0d found=%0d right=%0d left=%0d", n_searches, n_empty, n_found, n_right, n_left);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
