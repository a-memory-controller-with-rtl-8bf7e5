// rbla_hmc_top: row buffer locality-aware (RBLA-Dyn) hybrid DRAM-PCM memory
// controller.
//
// What it does. Main memory is a large PCM with a small DRAM cache in front of
// it, each behind its own channel controller. Every request from the processor
// is looked up in the DRAM cache directory: a resident row is served by DRAM,
// any other by PCM. Each PCM access is reported, with its row buffer hit/miss
// outcome, to the stats store, which counts row buffer misses per recently
// used row. When a row's count exceeds MissThresh the row is migrated into
// DRAM: the dirty occupant of its DRAM frame (if any) is first written back to
// PCM, then the row is copied column by column from PCM to DRAM and the
// directory is updated. Rows that mostly hit in the PCM row buffer never build
// up misses and so stay in PCM, where their hit latency is as good as DRAM's.
// Every 10 million cycles the interval timer clears all miss counters and lets
// RBLA-Dyn pick a new MissThresh from the migration cost and the latency
// saved by DRAM reads and writes in the interval just ended.
//
// How it works. One demand request is handled at a time, in the order:
// directory lookup, channel access, answer to the processor, then (for PCM
// accesses) the stats store update and, if it triggers, the migration, during
// which no new request is accepted. The answer to the processor is sent as
// soon as the channel answers; the stats update and migration come after it.
//
// Interface. Processor side: req_valid/req_ready with a word address
// {row, column}; one answer (resp_valid for one cycle) per request, with the
// data of a read, where it was served (resp_src) and whether it was a row
// buffer hit. `dyn_en` selects RBLA-Dyn (1) or a fixed threshold (0).
// Device side: the DRAM and PCM command ports of the two channel
// controllers (activate / read / write, bank, row, column, data); the DRAM row
// is the DRAM cache frame number. Status: current MissThresh, interval count,
// and a busy flag for migrations.
//
// From the paper: the organisation (processor, DRAM controller and DRAM cache,
// PCM controller and PCM), the stats store and its trigger, the periodic
// reset, RBLA-Dyn's cost/benefit model. This design's choices: serial request
// handling, the direct-mapped row-granularity DRAM cache, write-back of dirty
// victims, migrating one 64-bit word at a time, and answering the triggering
// request before migrating.
module rbla_hmc_top #(
  parameter int unsigned ROW_W      = rbla_pkg::ROW_W,
  parameter int unsigned COL_W      = rbla_pkg::COL_W,
  parameter int unsigned DATA_W     = rbla_pkg::DATA_W,
  parameter int unsigned FRAMES     = 1024,
  parameter int unsigned DRAM_BANKS = 8,
  parameter int unsigned PCM_BANKS  = 16,
  parameter int unsigned SS_WAYS    = rbla_pkg::SS_WAYS,
  parameter int unsigned SS_SETS    = rbla_pkg::SS_SETS,
  parameter int unsigned CNT_W      = rbla_pkg::SS_CNT_W,
  parameter int unsigned INTERVAL   = rbla_pkg::INTERVAL_CYCLES,
  parameter int unsigned DRAM_T_HIT     = rbla_pkg::DRAM_T_HIT,
  parameter int unsigned DRAM_T_MISS    = rbla_pkg::DRAM_T_MISS,
  parameter int unsigned DRAM_T_WR_MISS = rbla_pkg::DRAM_T_WR_MISS,
  parameter int unsigned PCM_T_HIT      = rbla_pkg::PCM_T_HIT,
  parameter int unsigned PCM_T_MISS     = rbla_pkg::PCM_T_MISS,
  parameter int unsigned PCM_T_WR_MISS  = rbla_pkg::PCM_T_WR_MISS,
  parameter int unsigned THRESH_INIT    = rbla_pkg::MISS_THRESH_INIT,
  localparam int unsigned FI_W = $clog2(FRAMES)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // processor request / response
  input  logic                          req_valid,
  output logic                          req_ready,
  input  logic                          req_we,
  input  logic [ROW_W+COL_W-1:0]        req_addr,
  input  logic [DATA_W-1:0]             req_wdata,
  output logic                          resp_valid,
  output logic [DATA_W-1:0]             resp_rdata,
  output rbla_pkg::mem_src_e            resp_src,
  output logic                          resp_rb_hit,
  // DRAM device port
  output logic                          dram_act,
  output logic                          dram_rd,
  output logic                          dram_wr,
  output logic [$clog2(DRAM_BANKS)-1:0] dram_bank,
  output logic [FI_W-1:0]               dram_row,
  output logic [COL_W-1:0]              dram_col,
  output logic [DATA_W-1:0]             dram_wdata,
  input  logic [DATA_W-1:0]             dram_rdata,
  // PCM device port
  output logic                          pcm_act,
  output logic                          pcm_rd,
  output logic                          pcm_wr,
  output logic [$clog2(PCM_BANKS)-1:0]  pcm_bank,
  output logic [ROW_W-1:0]              pcm_row,
  output logic [COL_W-1:0]              pcm_col,
  output logic [DATA_W-1:0]             pcm_wdata,
  input  logic [DATA_W-1:0]             pcm_rdata,
  // configuration: 1 = RBLA-Dyn, 0 = fixed MissThresh (THRESH_INIT)
  input  logic                          dyn_en,
  // status
  output logic [CNT_W-1:0]              miss_thresh,
  output logic [15:0]                   epoch,
  output logic                          migrating,
  output logic signed [47:0]            last_net_benefit, // RBLA-Dyn, last interval
  output logic [23:0]                   last_migrations   // rows migrated, last interval
);
  import rbla_pkg::*;

  localparam int unsigned COLS = 1 << COL_W;
  localparam int unsigned T_MIG_EST =
      PCM_T_MISS + (COLS - 1) * PCM_T_HIT + DRAM_T_WR_MISS + (COLS - 1) * DRAM_T_HIT;

  typedef enum logic [3:0] {
    H_IDLE,      // wait for a processor request
    H_DISPATCH,  // directory lookup, send to DRAM or PCM
    H_WAIT_DRAM, // demand access in DRAM
    H_WAIT_PCM,  // demand access in PCM
    H_STATS_REQ, // report the PCM access to the stats store
    H_STATS_RSP, // trigger?
    H_MIG_START, // look at the victim frame
    H_WB_RD,     // write-back: read a word of the victim from DRAM
    H_WB_WR,     // write-back: write it to PCM
    H_MG_RD,     // migration: read a word of the row from PCM
    H_MG_WR,     // migration: write it to DRAM
    H_MIG_DONE   // install the row in the directory
  } hstate_e;

  hstate_e state;

  // latched demand request
  logic              we_q;
  logic [ROW_W-1:0]  row_q;
  logic [COL_W-1:0]  col_q;
  logic [DATA_W-1:0] wdata_q;
  logic              pcm_rb_miss_q;
  // migration
  logic [ROW_W-1:0]  vic_row_q;
  logic [COL_W-1:0]  mcol;
  logic              issued;      // channel request of this step accepted
  logic [DATA_W-1:0] buf_q;       // one word in flight between the channels

  // ---------------- sub-blocks ----------------
  logic                  tick;
  interval_timer #(.PERIOD(INTERVAL), .EPOCH_W(16)) u_timer (
    .clk, .rst_n, .tick, .epoch);

  // DRAM cache directory
  logic              lk_hit, lk_vic_valid, lk_vic_dirty;
  logic [FI_W-1:0]   lk_frame;
  logic [ROW_W-1:0]  lk_vic_row;
  logic              tag_fill, tag_md;
  dram_cache_tags #(.ROW_W(ROW_W), .FRAMES(FRAMES)) u_tags (
    .clk, .rst_n,
    .lk_row(row_q), .lk_hit, .lk_frame, .lk_vic_valid, .lk_vic_row, .lk_vic_dirty,
    .fill(tag_fill), .fill_row(row_q),
    .mark_dirty(tag_md), .md_row(row_q));

  // stats store
  logic             ss_req_valid, ss_req_ready, ss_clearing;
  logic             ss_resp_valid, ss_resp_hit, ss_resp_trigger;
  logic [ROW_W-1:0] ss_resp_row;
  logic [CNT_W-1:0] ss_resp_count;
  stats_store #(.ROW_W(ROW_W), .WAYS(SS_WAYS), .SETS(SS_SETS), .CNT_W(CNT_W)) u_ss (
    .clk, .rst_n,
    .req_valid(ss_req_valid), .req_ready(ss_req_ready), .req_row(row_q),
    .req_rb_miss(pcm_rb_miss_q), .miss_thresh, .clear(tick), .clearing(ss_clearing),
    .resp_valid(ss_resp_valid), .resp_row(ss_resp_row), .resp_hit(ss_resp_hit),
    .resp_count(ss_resp_count), .resp_trigger(ss_resp_trigger));

  // RBLA-Dyn
  logic ev_mig, ev_drd, ev_dwr;
  logic               thr_up;
  rbla_dyn #(.CNT_W(CNT_W), .EV_W(24), .VAL_W(48), .T_MIGRATION(T_MIG_EST),
             .T_RD_PCM(PCM_T_MISS), .T_RD_DRAM(DRAM_T_MISS),
             .T_WR_PCM(PCM_T_WR_MISS), .T_WR_DRAM(DRAM_T_WR_MISS),
             .THRESH_INIT(THRESH_INIT)) u_dyn (
    .clk, .rst_n, .adapt_en(dyn_en), .interval_tick(tick),
    .ev_migration(ev_mig), .ev_dram_read(ev_drd), .ev_dram_write(ev_dwr),
    .miss_thresh, .last_net_benefit, .last_migrations,
    .thresh_went_up(thr_up));

  // DRAM channel
  logic              d_req_valid, d_req_ready, d_req_we;
  logic [FI_W-1:0]   d_req_row;
  logic [COL_W-1:0]  d_req_col;
  logic [DATA_W-1:0] d_req_wdata, d_resp_rdata;
  logic              d_resp_valid, d_resp_we, d_resp_hit;
  chan_ctrl #(.ROW_W(FI_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANKS(DRAM_BANKS),
              .T_HIT(DRAM_T_HIT), .T_MISS(DRAM_T_MISS), .T_WR_MISS(DRAM_T_WR_MISS)) u_dram_ctrl (
    .clk, .rst_n,
    .req_valid(d_req_valid), .req_ready(d_req_ready), .req_we(d_req_we),
    .req_row(d_req_row), .req_col(d_req_col), .req_wdata(d_req_wdata),
    .resp_valid(d_resp_valid), .resp_we(d_resp_we), .resp_rb_hit(d_resp_hit),
    .resp_rdata(d_resp_rdata),
    .dev_act(dram_act), .dev_rd(dram_rd), .dev_wr(dram_wr), .dev_bank(dram_bank),
    .dev_row(dram_row), .dev_col(dram_col), .dev_wdata(dram_wdata), .dev_rdata(dram_rdata));

  // PCM channel
  logic              p_req_valid, p_req_ready, p_req_we;
  logic [ROW_W-1:0]  p_req_row;
  logic [COL_W-1:0]  p_req_col;
  logic [DATA_W-1:0] p_req_wdata, p_resp_rdata;
  logic              p_resp_valid, p_resp_we, p_resp_hit;
  chan_ctrl #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANKS(PCM_BANKS),
              .T_HIT(PCM_T_HIT), .T_MISS(PCM_T_MISS), .T_WR_MISS(PCM_T_WR_MISS)) u_pcm_ctrl (
    .clk, .rst_n,
    .req_valid(p_req_valid), .req_ready(p_req_ready), .req_we(p_req_we),
    .req_row(p_req_row), .req_col(p_req_col), .req_wdata(p_req_wdata),
    .resp_valid(p_resp_valid), .resp_we(p_resp_we), .resp_rb_hit(p_resp_hit),
    .resp_rdata(p_resp_rdata),
    .dev_act(pcm_act), .dev_rd(pcm_rd), .dev_wr(pcm_wr), .dev_bank(pcm_bank),
    .dev_row(pcm_row), .dev_col(pcm_col), .dev_wdata(pcm_wdata), .dev_rdata(pcm_rdata));

  // ---------------- channel requests ----------------
  always_comb begin
    d_req_valid = 1'b0;
    d_req_we    = 1'b0;
    d_req_row   = lk_frame;
    d_req_col   = col_q;
    d_req_wdata = wdata_q;
    p_req_valid = 1'b0;
    p_req_we    = 1'b0;
    p_req_row   = row_q;
    p_req_col   = col_q;
    p_req_wdata = wdata_q;
    unique case (state)
      H_DISPATCH: begin
        d_req_valid = lk_hit;
        d_req_we    = we_q;
        p_req_valid = !lk_hit;
        p_req_we    = we_q;
      end
      H_WB_RD: begin
        d_req_valid = !issued;
        d_req_col   = mcol;
      end
      H_WB_WR: begin
        p_req_valid = !issued;
        p_req_we    = 1'b1;
        p_req_row   = vic_row_q;
        p_req_col   = mcol;
        p_req_wdata = buf_q;
      end
      H_MG_RD: begin
        p_req_valid = !issued;
        p_req_col   = mcol;
      end
      H_MG_WR: begin
        d_req_valid = !issued;
        d_req_we    = 1'b1;
        d_req_col   = mcol;
        d_req_wdata = buf_q;
      end
      default: ;
    endcase
  end

  // ---------------- control ----------------
  assign req_ready    = (state == H_IDLE);
  assign ss_req_valid = (state == H_STATS_REQ);
  assign tag_fill     = (state == H_MIG_DONE);
  assign tag_md       = (state == H_WAIT_DRAM) && d_resp_valid && d_resp_we;
  assign ev_drd       = (state == H_WAIT_DRAM) && d_resp_valid && !d_resp_we;
  assign ev_dwr       = (state == H_WAIT_DRAM) && d_resp_valid &&  d_resp_we;
  assign ev_mig       = (state == H_MIG_DONE);
  assign migrating    = (state >= H_MIG_START);

  logic d_acc, p_acc;
  assign d_acc = d_req_valid && d_req_ready;
  assign p_acc = p_req_valid && p_req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= H_IDLE;
      we_q          <= 1'b0;
      row_q         <= '0;
      col_q         <= '0;
      wdata_q       <= '0;
      pcm_rb_miss_q <= 1'b0;
      vic_row_q     <= '0;
      mcol          <= '0;
      issued        <= 1'b0;
      buf_q         <= '0;
      resp_valid    <= 1'b0;
      resp_rdata    <= '0;
      resp_src      <= SRC_PCM;
      resp_rb_hit   <= 1'b0;
    end else begin
      resp_valid <= 1'b0;
      if (d_acc || p_acc) issued <= 1'b1;
      unique case (state)
        H_IDLE: if (req_valid) begin
          we_q    <= req_we;
          row_q   <= req_addr[ROW_W+COL_W-1:COL_W];
          col_q   <= req_addr[COL_W-1:0];
          wdata_q <= req_wdata;
          state   <= H_DISPATCH;
        end
        H_DISPATCH: begin
          if (lk_hit && d_req_ready)       state <= H_WAIT_DRAM;
          else if (!lk_hit && p_req_ready) state <= H_WAIT_PCM;
        end
        H_WAIT_DRAM: if (d_resp_valid) begin
          resp_valid  <= 1'b1;
          resp_rdata  <= d_resp_rdata;
          resp_src    <= SRC_DRAM;
          resp_rb_hit <= d_resp_hit;
          state       <= H_IDLE;
        end
        H_WAIT_PCM: if (p_resp_valid) begin
          resp_valid    <= 1'b1;
          resp_rdata    <= p_resp_rdata;
          resp_src      <= SRC_PCM;
          resp_rb_hit   <= p_resp_hit;
          pcm_rb_miss_q <= !p_resp_hit;
          state         <= H_STATS_REQ;
        end
        H_STATS_REQ: if (ss_req_ready) state <= H_STATS_RSP;
        H_STATS_RSP: if (ss_resp_valid) begin
          state <= ss_resp_trigger ? H_MIG_START : H_IDLE;
        end
        H_MIG_START: begin
          vic_row_q <= lk_vic_row;
          mcol      <= '0;
          issued    <= 1'b0;
          state     <= (lk_vic_valid && lk_vic_dirty) ? H_WB_RD : H_MG_RD;
        end
        H_WB_RD: if (d_resp_valid) begin
          buf_q  <= d_resp_rdata;
          issued <= 1'b0;
          state  <= H_WB_WR;
        end
        H_WB_WR: if (p_resp_valid) begin
          issued <= 1'b0;
          mcol   <= mcol + 1'b1;
          state  <= (mcol == COL_W'(COLS - 1)) ? H_MG_RD : H_WB_RD;
        end
        H_MG_RD: if (p_resp_valid) begin
          buf_q  <= p_resp_rdata;
          issued <= 1'b0;
          state  <= H_MG_WR;
        end
        H_MG_WR: if (d_resp_valid) begin
          issued <= 1'b0;
          mcol   <= mcol + 1'b1;
          state  <= (mcol == COL_W'(COLS - 1)) ? H_MIG_DONE : H_MG_RD;
        end
        H_MIG_DONE: state <= H_IDLE;
        default: state <= H_IDLE;
      endcase
    end
  end

  // ---------------- checks ----------------
  // the stats store answers for the row that was reported
  a_ss_row: assert property (@(posedge clk) disable iff (!rst_n)
                             ss_resp_valid |-> ss_resp_row == row_q);
  // a row is only migrated when it is not already in DRAM
  a_mig_miss: assert property (@(posedge clk) disable iff (!rst_n)
                               (state == H_MIG_START) |-> !lk_hit);
  // at most one channel request per cycle from the controller
  a_one_req: assert property (@(posedge clk) disable iff (!rst_n)
                              !(d_req_valid && p_req_valid));

  initial assert (FI_W == $clog2(FRAMES) && FI_W >= $clog2(DRAM_BANKS) && ROW_W > FI_W)
    else $error("rbla_hmc_top: FI_W must not be overridden; FRAMES must cover the DRAM banks");
endmodule
