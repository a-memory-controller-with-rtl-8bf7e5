// tb_rbla_hmc_top: end-to-end test of the RBLA hybrid memory controller at
// reduced size (12-bit rows, 8 words per row, 16 DRAM frames, 8x4 stats store,
// 3000-cycle intervals, short device latencies), with behavioural DRAM and PCM
// models on its device ports.
//
// Phase 1 replays the access pattern of the paper's motivating example:
// rows A and B share a PCM bank and alternate, so every access to them is a
// row buffer miss; rows C and D each have a bank of their own and are
// accessed in bursts, so they mostly hit in the row buffer. The pattern
// A B C C C A B D D D is repeated: A and B must end up cached in DRAM, C and D
// must stay in PCM. Every answer's latency is checked against the device
// latency plus one cycle of directory lookup.
//
// Phase 2 issues random reads and writes over a small address range so that
// migrations evict dirty DRAM rows (write-back), stats store entries are
// evicted, intervals end (counter clears, threshold moves up and down) and
// stats updates have to wait for a clear sweep. For one stretch of it the
// threshold adaptation is switched off (fixed-threshold RBLA): the intervals
// that end then must leave the threshold where it is.
// Throughout, every read must return the last value written to its address,
// or the initial PCM contents, wherever the row lives at that moment. Each
// mechanism is counted and must have happened at least once.
module tb_rbla_hmc_top;
  import rbla_pkg::*;
  localparam int unsigned ROW_W = 12, COL_W = 3, DATA_W = 64, FRAMES = 16, FI_W = 4;
  localparam int unsigned DRAM_BANKS = 8, PCM_BANKS = 16;
  localparam int unsigned D_HIT = 4, D_MISS = 8, P_HIT = 4, P_MISS = 14;
  localparam int unsigned INTERVAL = 3000;
  localparam int unsigned NRAND = 6000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                    req_valid = 1'b0, req_ready, req_we = 1'b0;
  logic [ROW_W+COL_W-1:0]  req_addr = '0;
  logic [DATA_W-1:0]       req_wdata = '0;
  logic                    resp_valid, resp_rb_hit;
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
  logic                    dyn_en = 1'b1;
  logic                    migrating;
  logic signed [47:0]      last_net_benefit;
  logic [23:0]             last_migrations;

  rbla_hmc_top #(
    .ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W), .FRAMES(FRAMES),
    .DRAM_BANKS(DRAM_BANKS), .PCM_BANKS(PCM_BANKS), .SS_WAYS(4), .SS_SETS(8), .CNT_W(5),
    .INTERVAL(INTERVAL), .DRAM_T_HIT(D_HIT), .DRAM_T_MISS(D_MISS), .DRAM_T_WR_MISS(D_MISS),
    .PCM_T_HIT(P_HIT), .PCM_T_MISS(P_MISS), .PCM_T_WR_MISS(P_MISS), .THRESH_INIT(2)
  ) dut (.*);

  mem_dev_model #(.ROW_W(FI_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANK_W(3),
                  .SEED(64'hD4A3_0000_0000_0001)) u_dram (
    .clk, .act(dram_act), .rd(dram_rd), .wr(dram_wr), .bank(dram_bank), .row(dram_row),
    .col(dram_col), .wdata(dram_wdata), .rdata(dram_rdata));
  mem_dev_model #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANK_W(4)) u_pcm (
    .clk, .act(pcm_act), .rd(pcm_rd), .wr(pcm_wr), .bank(pcm_bank), .row(pcm_row),
    .col(pcm_col), .wdata(pcm_wdata), .rdata(pcm_rdata));

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] shadow [logic [ROW_W+COL_W-1:0]];

  // mechanism counters
  int m_dram_hit = 0, m_pcm_rbhit = 0, m_pcm_rbmiss = 0, m_ss_alloc = 0, m_ss_evict = 0;
  int m_migration = 0, m_writeback = 0, m_clear = 0, m_thr_up = 0, m_thr_down = 0;
  int m_dram_write = 0, m_ss_stall = 0, m_static_tick = 0;
  bit static_pending = 0;
  logic [4:0] thr_prev;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_ss.resp_valid && !dut.u_ss.resp_hit) m_ss_alloc++;
    if (dut.u_ss.resp_valid && !dut.u_ss.resp_hit && dut.u_ss.alloc_free == 1'b0) m_ss_evict++;
    if (dut.ev_mig) m_migration++;
    if (int'(dut.state) == 6 && dut.lk_vic_valid && dut.lk_vic_dirty) m_writeback++;
    if (dut.tick) m_clear++;
    // a stats update that has to wait for a clear sweep
    if (int'(dut.state) == 4 && !dut.ss_req_ready) m_ss_stall++;
    if (miss_thresh > thr_prev) m_thr_up++;
    if (miss_thresh < thr_prev) m_thr_down++;
    thr_prev <= miss_thresh;
    // an interval that ended with adaptation off must not move the threshold
    if (static_pending) check(miss_thresh == thr_prev, "fixed threshold held");
    static_pending <= dut.tick && !dyn_en;
    if (dut.tick && !dyn_en) m_static_tick++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2_000_000) @(posedge clk);
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
    if (src == SRC_DRAM) begin
      m_dram_hit++;
      if (we) m_dram_write++;
    end else if (rbhit) m_pcm_rbhit++;
    else                m_pcm_rbmiss++;
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
    rA = 12'h011; rB = 12'h021; rC = 12'h032; rD = 12'h043;
    pat = '{rA, rB, rC, rC, rC, rA, rB, rD, rD, rD};
    thr_prev = 5'd2;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(posedge clk);
    #1;
    while (!dut.u_ss.req_ready) begin @(posedge clk); #1; end   // reset sweep
    // ---------------- phase 1: the motivating example ----------------
    a_in_dram = 0; b_in_dram = 0; c_in_dram = 0; d_in_dram = 0;
    for (int rep = 0; rep < 6; rep++) begin
      for (int i = 0; i < 10; i++) begin
        access(pat[i], COL_W'(i), 1'b0, src, lat, rbhit);
        if (src == SRC_DRAM) exp_lat = (rbhit ? D_HIT : D_MISS) + 1;
        else                 exp_lat = (rbhit ? P_HIT : P_MISS) + 1;
        check(lat == exp_lat, $sformatf("latency %0d exp %0d", lat, exp_lat));
        if (rep == 5) begin
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
    // ---------------- phase 2: random traffic ----------------
    for (int n = 0; n < int'(NRAND); n++) begin
      logic [ROW_W-1:0] r;
      // 48 rows over 4 PCM banks and 16 DRAM frames; some phases hammer few rows
      if ((n / 1000) % 2 == 0) r = ROW_W'(($urandom % 12) * 16 + ($urandom % 4));
      else                     r = ROW_W'(($urandom % 3) * 16 + ($urandom % 2));
      dyn_en = !(n >= 4000 && n < 5000);
      access(r, COL_W'($urandom), ($urandom % 3) == 0, src, lat, rbhit);
    end
    // read back every written word
    foreach (shadow[a]) access(a[ROW_W+COL_W-1:COL_W], a[COL_W-1:0], 1'b0, src, lat, rbhit);
    check(u_pcm.proto_errors == 0 && u_dram.proto_errors == 0, "device protocol");
    $display("mechanisms: dram_hit %0d dram_write %0d pcm_rb_hit %0d pcm_rb_miss %0d ss_alloc %0d ss_evict %0d",
             m_dram_hit, m_dram_write, m_pcm_rbhit, m_pcm_rbmiss, m_ss_alloc, m_ss_evict);
    $display("mechanisms: migration %0d writeback %0d clear %0d stats-stall cycles %0d thr_up %0d thr_down %0d fixed-thr intervals %0d epoch %0d thresh %0d",
             m_migration, m_writeback, m_clear, m_ss_stall, m_thr_up, m_thr_down, m_static_tick, epoch, miss_thresh);
    check(m_dram_hit > 0,   "DRAM cache hit happened");
    check(m_dram_write > 0, "DRAM write happened");
    check(m_pcm_rbhit > 0,  "PCM row buffer hit happened");
    check(m_pcm_rbmiss > 0, "PCM row buffer miss happened");
    check(m_ss_alloc > 0,   "stats store allocation happened");
    check(m_ss_evict > 0,   "stats store LRU eviction happened");
    check(m_migration > 0,  "migration happened");
    check(m_writeback > 0,  "dirty write-back happened");
    check(m_clear > 0,      "periodic clear happened");
    check(m_ss_stall > 0,   "stats update stalled by a clear sweep");
    check(m_thr_up > 0,     "threshold raised");
    check(m_thr_down > 0,   "threshold lowered");
    check(m_static_tick > 0, "interval ended with adaptation off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
