// tb_rbla_hmc_full: the RBLA hybrid memory controller with every parameter
// at its default (34-bit rows, 32 words per row, 1024 DRAM frames, 16-way
// 128-set stats store, 10-million-cycle intervals, device latencies of the
// paper's example: row hit 200 cycles, DRAM miss 400, PCM miss 700).
//
// It replays the motivating example A B C C C A B D D D three times: A and B
// share a PCM bank and always miss in its row buffer, C and D hit. A and B
// must be migrated to DRAM (two migrations of 32 words each), C and D must
// stay in PCM, and every answer must come after the device latency plus one
// cycle. It then idles until the first 10-million-cycle interval ends and
// checks what RBLA-Dyn did with it: two migrations cost more than the few
// DRAM hits saved, so the net benefit is negative and MissThresh goes up by
// one; the stats store counters are cleared.
module tb_rbla_hmc_full;
  import rbla_pkg::*;
  localparam int unsigned ROW_W = 34, COL_W = 5, DATA_W = 64, FI_W = 10;
  localparam int unsigned D_HIT = DRAM_T_HIT, D_MISS = DRAM_T_MISS, P_HIT = PCM_T_HIT, P_MISS = PCM_T_MISS;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    req_valid = 1'b0, req_ready, req_we = 1'b0;
  logic [ROW_W+COL_W-1:0]  req_addr = '0;
  logic [DATA_W-1:0]       req_wdata = '0;
  logic                    resp_valid, resp_rb_hit;
  logic                    dyn_en = 1'b1;
  logic [DATA_W-1:0]       resp_rdata;
  mem_src_e                resp_src;
  logic                    dram_act, dram_rd, dram_wr, pcm_act, pcm_rd, pcm_wr;
  logic [2:0]              dram_bank;
  logic [3:0]              pcm_bank;
  logic [FI_W-1:0]         dram_row;
  logic [ROW_W-1:0]        pcm_row;
  logic [COL_W-1:0]        dram_col, pcm_col;
  logic [DATA_W-1:0]       dram_wdata, dram_rdata, pcm_wdata, pcm_rdata;
  logic [4:0]              miss_thresh;
  logic [15:0]             epoch;
  logic                    migrating;
  logic signed [47:0]      last_net_benefit;
  logic [23:0]             last_migrations;

  rbla_hmc_top dut (.*);

  mem_dev_model #(.ROW_W(FI_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANK_W(3),
                  .SEED(64'hD4A3_0000_0000_0001)) u_dram (
    .clk, .act(dram_act), .rd(dram_rd), .wr(dram_wr), .bank(dram_bank), .row(dram_row),
    .col(dram_col), .wdata(dram_wdata), .rdata(dram_rdata));
  mem_dev_model #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANK_W(4)) u_pcm (
    .clk, .act(pcm_act), .rd(pcm_rd), .wr(pcm_wr), .bank(pcm_bank), .row(pcm_row),
    .col(pcm_col), .wdata(pcm_wdata), .rdata(pcm_rdata));

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] shadow [logic [ROW_W+COL_W-1:0]];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (11_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one request; returns where it was served and its latency
  task automatic access(input logic [ROW_W-1:0] row, input logic [COL_W-1:0] col,
                        input bit we, output mem_src_e src, output int lat, output bit rbhit);
    logic [DATA_W-1:0] exp;
    logic [ROW_W+COL_W-1:0] a;
    a = {row, col};
    exp = shadow.exists(a) ? shadow[a] : u_pcm.init_word(row, col);
    req_addr  = a;
    req_we    = we;
    req_wdata = {$urandom, $urandom};
    req_valid = 1'b1;
    do begin @(posedge clk); #1; end while (int'(dut.state) != 1);   // accepted: H_DISPATCH
    req_valid = 1'b0;
    lat = 0;
    while (!resp_valid) begin @(posedge clk); #1; lat++; end
    src   = resp_src;
    rbhit = resp_rb_hit;
    if (!we) check(resp_rdata == exp, $sformatf("read %h data %h exp %h", a, resp_rdata, exp));
    else     shadow[a] = req_wdata;
    // wait until the controller takes requests again (stats update, migration)
    while (!req_ready) begin @(posedge clk); #1; end
  endtask

  initial begin
    mem_src_e src;
    int lat, exp_lat;
    bit rbhit;
    // rows: bank = low 4 bits. A and B share bank 1, C is alone in bank 2, D in bank 3
    logic [ROW_W-1:0] rA, rB, rC, rD;
    logic [ROW_W-1:0] pat [10];
    bit a_in_dram, b_in_dram, c_in_dram, d_in_dram;
    rA = 34'h011; rB = 34'h021; rC = 34'h032; rD = 34'h043;
    pat = '{rA, rB, rC, rC, rC, rA, rB, rD, rD, rD};
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    #1;
    while (!dut.u_ss.req_ready) begin @(posedge clk); #1; end   // reset sweep
    // ---------------- phase 1: the motivating example ----------------
    a_in_dram = 0; b_in_dram = 0; c_in_dram = 0; d_in_dram = 0;
    for (int rep = 0; rep < 3; rep++) begin
      for (int i = 0; i < 10; i++) begin
        access(pat[i], COL_W'(i), 1'b0, src, lat, rbhit);
        if (src == SRC_DRAM) exp_lat = (rbhit ? D_HIT : D_MISS) + 1;
        else                 exp_lat = (rbhit ? P_HIT : P_MISS) + 1;
        check(lat == exp_lat, $sformatf("latency %0d exp %0d", lat, exp_lat));
        if (rep == 2) begin
          if (pat[i] == rA && src == SRC_DRAM) a_in_dram = 1;
          if (pat[i] == rB && src == SRC_DRAM) b_in_dram = 1;
          if (pat[i] == rC && src == SRC_DRAM) c_in_dram = 1;
          if (pat[i] == rD && src == SRC_DRAM) d_in_dram = 1;
        end
      end
    end
    check(a_in_dram && b_in_dram, "low row buffer locality rows A and B cached in DRAM");
    check(!c_in_dram && !d_in_dram, "high row buffer locality rows C and D left in PCM");
    $display("phase 1: A,B in DRAM %0d%0d  C,D in DRAM %0d%0d", a_in_dram, b_in_dram, c_in_dram, d_in_dram);
    check(dut.u_dyn.n_mig == 24'd2, "two migrations in the first interval");
    check(miss_thresh == 5'd2 && epoch == 16'd0, "threshold unchanged before the interval ends");
    // ---------------- end of the first interval ----------------
    while (epoch == 16'd0) begin @(posedge clk); #1; end
    check(last_migrations == 24'd2, $sformatf("last_migrations %0d", last_migrations));
    check(last_net_benefit < 0, $sformatf("net benefit %0d", last_net_benefit));
    check(miss_thresh == 5'd3, $sformatf("threshold %0d after a costly interval", miss_thresh));
    check(dut.u_ss.clearing, "stats store clear sweep running");
    check(u_pcm.proto_errors == 0 && u_dram.proto_errors == 0, "device protocol");
    $display("interval 1: net benefit %0d, MissThresh now %0d", last_net_benefit, miss_thresh);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
