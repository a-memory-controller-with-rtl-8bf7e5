// interval_timer: marks the end of each fixed-length epoch of the RBLA
// controller.
//
// The row buffer locality-aware policy works on epochs of 10 million cycles:
// at the end of each one all stats store miss counters are cleared and the
// RBLA-Dyn unit re-evaluates the miss threshold. Both uses share this timer
// (the paper gives the same 10-million-cycle figure for both; that they share
// one counter is this design's choice).
//
// Interface: `tick` is high for exactly one cycle every PERIOD cycles, the
// first time PERIOD cycles after reset is released (cycle count PERIOD-1).
// `epoch` counts completed intervals, for observability.
module interval_timer #(
  parameter int unsigned PERIOD  = rbla_pkg::INTERVAL_CYCLES,
  parameter int unsigned EPOCH_W = 16
) (
  input  logic               clk,
  input  logic               rst_n,
  output logic               tick,
  output logic [EPOCH_W-1:0] epoch
);
  localparam int unsigned CW = (PERIOD > 1) ? $clog2(PERIOD) : 1;

  logic [CW-1:0] count;

  assign tick = (count == CW'(PERIOD - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      epoch <= '0;
    end else if (tick) begin
      count <= '0;
      epoch <= epoch + 1'b1;
    end else begin
      count <= count + 1'b1;
    end
  end

  initial assert (PERIOD >= 2) else $error("interval_timer: PERIOD must be at least 2");
endmodule
