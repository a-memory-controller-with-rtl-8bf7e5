// tb_interval_timer: self-checking test of the interval timer at its full
// period of 10 million cycles. It checks that the first tick comes exactly
// PERIOD cycles after reset is released, that the next ones come every PERIOD
// cycles, that each tick lasts one cycle and that the epoch count follows.
// A second instance with a short period is checked the same way over many
// intervals.
module tb_interval_timer;
  localparam int unsigned PERIOD = rbla_pkg::INTERVAL_CYCLES;
  localparam int unsigned SHORT  = 37;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic tick, tick_s;
  logic [15:0] epoch, epoch_s;

  interval_timer                                u_full  (.clk, .rst_n, .tick, .epoch);
  interval_timer #(.PERIOD(SHORT), .EPOCH_W(16)) u_short (.clk, .rst_n, .tick(tick_s), .epoch(epoch_s));

  int checks = 0, failures = 0;
  longint cyc = 0;
  longint last_tick = 0, last_tick_s = 0;
  int nt = 0, nts = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (3 * PERIOD + 100) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // cyc counts clock edges since reset release; a tick sampled at edge cyc
  // ends an interval of cyc - last_tick cycles
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (tick) begin
      check(cyc + 1 - last_tick == PERIOD, $sformatf("interval %0d cycles", cyc + 1 - last_tick));
      check(epoch == 16'(nt), "epoch before tick");
      last_tick <= cyc + 1;
      nt++;
    end
    if (tick_s) begin
      check(cyc + 1 - last_tick_s == SHORT, $sformatf("short interval %0d cycles", cyc + 1 - last_tick_s));
      check(epoch_s == 16'(nts), "short epoch before tick");
      last_tick_s <= cyc + 1;
      nts++;
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (nt == 2);
    @(posedge clk);
    #1;
    check(!tick, "tick lasts one cycle");
    check(epoch == 16'd2, "epoch after two intervals");
    check(nts >= int'(2 * PERIOD / SHORT) - 1, $sformatf("short ticks %0d", nts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
