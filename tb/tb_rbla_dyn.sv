// tb_rbla_dyn: self-checking test of the RBLA-Dyn threshold unit with its
// default latencies. Each interval gets a random number of migration, DRAM
// read and DRAM write pulses (sometimes in the same cycle, sometimes on the
// tick cycle itself, which must count towards the next interval). After each
// tick the testbench compares the net benefit and the new threshold with its
// own integer evaluation of Cost, Benefit and the hill-climbing rule, and
// counts how often each branch of the rule (negative net benefit, improved,
// not improved) and each bound (0 and 30) was exercised. Some intervals run
// with adaptation disabled (fixed-threshold RBLA): the threshold and the
// climbing direction must then hold while the net benefit is still reported.
module tb_rbla_dyn;
  localparam int unsigned CNT_W = 5;
  localparam longint T_MIG = rbla_pkg::T_MIGRATION;
  localparam longint D_RD  = rbla_pkg::PCM_T_MISS - rbla_pkg::DRAM_T_MISS;
  localparam longint D_WR  = rbla_pkg::PCM_T_WR_MISS - rbla_pkg::DRAM_T_WR_MISS;
  localparam int NINT = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic adapt_en = 1'b1, interval_tick = 1'b0, ev_migration = 1'b0, ev_dram_read = 1'b0, ev_dram_write = 1'b0;
  logic [CNT_W-1:0]   miss_thresh;
  logic signed [47:0] last_net_benefit;
  logic [23:0]        last_migrations;
  logic               thresh_went_up;

  rbla_dyn dut (.*);

  int checks = 0, failures = 0;
  int c_frozen = 0, c_neg = 0, c_better = 0, c_worse = 0, c_top = 0, c_bottom = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (NINT * 400 + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint nm, nr, nw, net, prev;
    int thr, len, j, carry_m, carry_r, carry_w;
    bit up, step;
    thr = rbla_pkg::MISS_THRESH_INIT; up = 1; prev = 0;
    carry_m = 0; carry_r = 0; carry_w = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    check(miss_thresh == CNT_W'(thr), "initial threshold");
    for (int k = 0; k < NINT; k++) begin
      nm = carry_m; nr = carry_r; nw = carry_w;
      // phase A (35 intervals): random, migration-heavy, so net benefit < 0
      // phase B: no migrations and a growing count of DRAM accesses, except
      // one short interval at j == 1 that makes the climb reverse downwards
      j = k % 80 - 35;
      len = (j < 0) ? 20 + ($urandom % 100) : (j == 1) ? 10 : 40 + 3 * j;
      for (int c = 0; c < len; c++) begin
        if (j < 0) begin
          ev_migration  = ($urandom % 3) == 0;
          ev_dram_read  = ($urandom % 2) == 0;
          ev_dram_write = ($urandom % 4) == 0;
        end else begin
          ev_migration  = 1'b0;
          ev_dram_read  = 1'b1;
          ev_dram_write = (c % 4) == 0;
        end
        nm += ev_migration; nr += ev_dram_read; nw += ev_dram_write;
        @(posedge clk);
        #1;
      end
      // tick cycle, with events that belong to the next interval
      interval_tick = 1'b1;
      ev_migration  = ((k + 1) % 80 < 35) ? 1'($urandom % 2) : 1'b0;
      ev_dram_read  = 1'b1;
      ev_dram_write = ((k + 1) % 80 < 35) ? 1'($urandom % 2) : 1'b0;
      carry_m = ev_migration; carry_r = ev_dram_read; carry_w = ev_dram_write;
      net = nr * D_RD + nw * D_WR - nm * T_MIG;
      adapt_en = (k % 7) != 3;
      if (!adapt_en)         begin step = up;  c_frozen++; end
      else if (net < 0)      begin step = 1;   c_neg++;    end
      else if (net > prev)   begin step = up;  c_better++; end
      else                   begin step = !up; c_worse++;  end
      if (adapt_en) begin
        if (step) begin if (thr < 30) thr++; else c_top++; end
        else      begin if (thr > 0)  thr--; else c_bottom++; end
      end
      up = step; prev = net;
      @(posedge clk);
      #1 interval_tick = 1'b0; adapt_en = 1'b1; ev_migration = 0; ev_dram_read = 0; ev_dram_write = 0;
      check(last_net_benefit == 48'(net), $sformatf("int %0d net %0d exp %0d", k, last_net_benefit, net));
      check(last_migrations == 24'(nm), "migration count");
      check(int'(miss_thresh) == thr, $sformatf("int %0d thresh %0d exp %0d", k, miss_thresh, thr));
      check(thresh_went_up == up, "direction");
    end
    $display("frozen intervals %0d", c_frozen);
    $display("branches: negative %0d improved %0d not-improved %0d, at top %0d at bottom %0d",
             c_neg, c_better, c_worse, c_top, c_bottom);
    check(c_frozen > 0 && c_neg > 0 && c_better > 0 && c_worse > 0 && c_top > 0 && c_bottom > 0, "branch coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
