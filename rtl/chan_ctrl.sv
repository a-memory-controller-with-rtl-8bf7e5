// chan_ctrl: controller of one memory channel (DRAM or PCM) with open-row
// tracking.
//
// What it does. Both DRAM and PCM banks latch the last activated row in a row
// buffer. An access to the open row of its bank is a row buffer hit and costs
// only the row buffer latency, which is about the same in DRAM and PCM; any
// other access is a row buffer miss: the bank activates the new row, paying
// the array latency, which is much higher in PCM. This controller keeps the
// open row of every bank (open-page policy), classifies each access as hit or
// miss, drives the device command port and answers after the hit or miss
// latency. The hit/miss flag of every answer is what the RBLA policy feeds to
// its stats store. The same module is instantiated as the DRAM controller and
// as the PCM controller with different latencies.
//
// How it works. One request is served at a time. Rows are interleaved over
// banks: bank = low log2(BANKS) bits of the row address. On a miss the first
// busy cycle carries `dev_act` (close the old row, open `dev_row` in
// `dev_bank`); the cycle before the answer carries `dev_rd` or `dev_wr` with
// the column, and read data on `dev_rdata` is captured in that cycle.
//
// Timing: a request accepted on a clock edge is answered (resp_valid high for
// one cycle) exactly T cycles later, T being T_HIT on a row buffer hit and
// T_MISS or T_WR_MISS on a read or write row buffer miss; `req_ready` is high
// only when idle, so back-to-back requests are T+1 cycles apart.
//
// From the paper: row buffers in every bank, hit and miss behaviour, and the
// latencies of its simplified example (hit 200 cycles in DRAM and PCM, miss
// 400 in DRAM and 700 in PCM). This design's choices: one request at a time
// (no scheduler), open-page policy, row-interleaved banks, the device port and
// the write latencies.
module chan_ctrl #(
  parameter int unsigned ROW_W     = rbla_pkg::ROW_W,
  parameter int unsigned COL_W     = rbla_pkg::COL_W,
  parameter int unsigned DATA_W    = rbla_pkg::DATA_W,
  parameter int unsigned BANKS     = 8,
  parameter int unsigned T_HIT     = rbla_pkg::PCM_T_HIT,
  parameter int unsigned T_MISS    = rbla_pkg::PCM_T_MISS,
  parameter int unsigned T_WR_MISS = rbla_pkg::PCM_T_WR_MISS
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // request
  input  logic                      req_valid,
  output logic                      req_ready,
  input  logic                      req_we,
  input  logic [ROW_W-1:0]          req_row,
  input  logic [COL_W-1:0]          req_col,
  input  logic [DATA_W-1:0]         req_wdata,
  // response
  output logic                      resp_valid,
  output logic                      resp_we,
  output logic                      resp_rb_hit,
  output logic [DATA_W-1:0]         resp_rdata,
  // device command port
  output logic                      dev_act,
  output logic                      dev_rd,
  output logic                      dev_wr,
  output logic [$clog2(BANKS)-1:0]  dev_bank,
  output logic [ROW_W-1:0]          dev_row,
  output logic [COL_W-1:0]          dev_col,
  output logic [DATA_W-1:0]         dev_wdata,
  input  logic [DATA_W-1:0]         dev_rdata
);
  localparam int unsigned BK_W  = $clog2(BANKS);
  localparam int unsigned TMAX  = (T_MISS > T_WR_MISS) ? T_MISS : T_WR_MISS;
  localparam int unsigned CNT_W = $clog2(TMAX + 1);

  typedef enum logic [1:0] {C_IDLE, C_BUSY, C_RESP} cstate_e;
  cstate_e state;

  logic [ROW_W-1:0] open_row   [BANKS];
  logic [BANKS-1:0] open_valid;

  logic [CNT_W-1:0]  cnt;
  logic              we_q, hit_q, first_q;
  logic [ROW_W-1:0]  row_q;
  logic [COL_W-1:0]  col_q;
  logic [DATA_W-1:0] wdata_q, rdata_q;

  logic [BK_W-1:0] req_bank;
  logic            req_hit;
  assign req_bank = req_row[BK_W-1:0];
  assign req_hit  = open_valid[req_bank] && (open_row[req_bank] == req_row);

  assign req_ready = (state == C_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= C_IDLE;
      open_valid <= '0;
      cnt        <= '0;
      we_q       <= 1'b0;
      hit_q      <= 1'b0;
      first_q    <= 1'b0;
      row_q      <= '0;
      col_q      <= '0;
      wdata_q    <= '0;
      rdata_q    <= '0;
    end else begin
      first_q <= 1'b0;
      unique case (state)
        C_IDLE: if (req_valid) begin
          state   <= C_BUSY;
          we_q    <= req_we;
          hit_q   <= req_hit;
          first_q <= 1'b1;
          row_q   <= req_row;
          col_q   <= req_col;
          wdata_q <= req_wdata;
          cnt     <= req_hit ? CNT_W'(T_HIT - 1)
                   : req_we  ? CNT_W'(T_WR_MISS - 1) : CNT_W'(T_MISS - 1);
          open_valid[req_bank] <= 1'b1;
        end
        C_BUSY: begin
          cnt <= cnt - 1'b1;
          if (cnt == CNT_W'(1)) begin
            state   <= C_RESP;
            rdata_q <= dev_rdata;
          end
        end
        C_RESP: state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (state == C_IDLE && req_valid) open_row[req_bank] <= req_row;
  end

  assign dev_act   = (state == C_BUSY) && first_q && !hit_q;
  assign dev_rd    = (state == C_BUSY) && (cnt == CNT_W'(1)) && !we_q;
  assign dev_wr    = (state == C_BUSY) && (cnt == CNT_W'(1)) &&  we_q;
  assign dev_bank  = row_q[BK_W-1:0];
  assign dev_row   = row_q;
  assign dev_col   = col_q;
  assign dev_wdata = wdata_q;

  assign resp_valid  = (state == C_RESP);
  assign resp_we     = we_q;
  assign resp_rb_hit = hit_q;
  assign resp_rdata  = rdata_q;

  initial assert (T_HIT >= 2 && T_MISS >= T_HIT && T_WR_MISS >= T_HIT && BANKS >= 2)
    else $error("chan_ctrl: latencies must be at least 2 and misses not faster than hits");
endmodule
