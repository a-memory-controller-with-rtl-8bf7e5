// tb_stats_store: self-checking test of the stats store at its full size
// (16 ways, 128 sets, 5-bit counters).
// A reference model kept as one recency-ordered list per set (front = most
// recent) predicts for every access whether the row has an entry, its miss
// count after the access and whether it triggers; allocation evicts the back
// of the list, a triggering entry leaves the list. Rows are drawn from a few
// sets with many tags so that LRU eviction happens often; the threshold
// changes during the run; periodic clears are issued and must zero every
// count. Timing checks: the reset sweep and every clear keep req_ready low for
// 2*SETS cycles, and each accepted request is answered in the next cycle.
module tb_stats_store;
  localparam int unsigned ROW_W = 34, WAYS = 16, SETS = 128, CNT_W = 5, IDX_W = 7;
  localparam int unsigned NACC = 3000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             req_valid = 1'b0, req_ready, req_rb_miss = 1'b0;
  logic [ROW_W-1:0] req_row = '0;
  logic [CNT_W-1:0] miss_thresh = 5'd4;
  logic             clear = 1'b0, clearing;
  logic             resp_valid, resp_hit, resp_trigger;
  logic [ROW_W-1:0] resp_row;
  logic [CNT_W-1:0] resp_count;

  stats_store #(.ROW_W(ROW_W), .WAYS(WAYS), .SETS(SETS), .CNT_W(CNT_W)) dut (.*);

  // reference: per set, a queue of {row, count}, index 0 = most recent
  typedef struct { logic [ROW_W-1:0] row; int cnt; } ent_t;
  ent_t ref_set [SETS][$];

  int checks = 0, failures = 0;
  int n_evict = 0, n_trig = 0, n_hit = 0, n_clear = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (NACC * 8 + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cycles with req_ready low, measured from a starting edge
  task automatic wait_ready(output int cyc);
    cyc = 0;
    while (!req_ready) begin @(posedge clk); #1; cyc++; end
  endtask

  initial begin
    int cyc, s, pos;
    bit exp_hit, exp_trig;
    int exp_cnt;
    ent_t e;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    wait_ready(cyc);
    check(cyc == 2 * SETS - 1, $sformatf("reset sweep ended %0d cycles after release", cyc + 1));
    #1;
    for (int n = 0; n < NACC; n++) begin
      if (n % 500 == 250) begin
        // periodic reset of all counts
        clear = 1'b1;
        @(posedge clk);
        #1 clear = 1'b0;
        check(!req_ready && clearing, "clear pending");
        wait_ready(cyc);
        check(cyc == 2 * SETS, $sformatf("clear sweep %0d cycles", cyc));
        foreach (ref_set[i]) foreach (ref_set[i][j]) ref_set[i][j].cnt = 0;
        n_clear++;
        #1;
      end
      if (n % 400 == 0) miss_thresh = CNT_W'($urandom_range(0, 6));
      s = $urandom % 3;
      req_row     = {ROW_W'($urandom % 24) << IDX_W} | ROW_W'(s);
      req_rb_miss = ($urandom % 10) < 7;
      // reference prediction
      pos = -1;
      foreach (ref_set[s][j]) if (ref_set[s][j].row == req_row) pos = j;
      exp_hit = (pos >= 0);
      if (exp_hit) begin
        e = ref_set[s][pos];
        ref_set[s].delete(pos);
        if (req_rb_miss && e.cnt < 31) e.cnt++;
        n_hit++;
      end else begin
        if (ref_set[s].size() == WAYS) begin
          void'(ref_set[s].pop_back());
          n_evict++;
        end
        e.row = req_row;
        e.cnt = req_rb_miss ? 1 : 0;
      end
      exp_cnt  = e.cnt;
      exp_trig = e.cnt > int'(miss_thresh);
      if (!exp_trig) ref_set[s].push_front(e);
      else           n_trig++;
      // drive
      req_valid = 1'b1;
      @(posedge clk);
      check(req_ready, "ready when idle");
      #1 req_valid = 1'b0;
      @(posedge clk);
      check(resp_valid, "response one cycle after acceptance");
      check(resp_row == req_row, "resp_row");
      check(resp_hit == exp_hit, $sformatf("acc %0d hit %0d exp %0d", n, resp_hit, exp_hit));
      check(int'(resp_count) == exp_cnt, $sformatf("acc %0d count %0d exp %0d", n, resp_count, exp_cnt));
      check(resp_trigger == exp_trig, $sformatf("acc %0d trigger %0d exp %0d", n, resp_trigger, exp_trig));
      #1;
    end
    check(n_evict > 50 && n_trig > 50 && n_hit > 50 && n_clear >= 5,
          $sformatf("coverage evict %0d trig %0d hit %0d clear %0d", n_evict, n_trig, n_hit, n_clear));
    $display("evictions %0d triggers %0d hits %0d clears %0d", n_evict, n_trig, n_hit, n_clear);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
