// stats_store: row buffer miss counters for recently accessed PCM rows, and
// the row caching trigger of the RBLA policy.
//
// What it does. On every PCM access the controller presents the accessed row
// and whether the access was a row buffer miss. The store looks the row up in
// a set-associative table; if the row has no entry one is allocated, evicting
// the least recently used entry of the set. A row buffer miss increments the
// row's miss counter (saturating); a row buffer hit leaves it alone. When the
// updated count exceeds MissThresh the response carries `trigger`, telling the
// controller to cache the row in DRAM. A `clear` pulse (every 10 million
// cycles) zeroes every miss counter so that rows with little reuse cannot
// creep over the threshold over a long time.
//
// How it works. The table is a RAM of SETS words; one word holds all WAYS
// entries of a set: {valid, tag, 4-bit LRU age, 5-bit count}. An access takes
// two cycles: cycle 1 registers the request and reads the set, cycle 2 finds
// the hit or victim way, updates ages and counter, writes the set back and
// presents the response. LRU is exact: the ages of the valid ways of a set are
// always a permutation of 0..k-1, age 0 being the most recent. A clear request
// is held until no access is in flight, then sweeps the sets, one read and one
// write per set (2*SETS cycles), during which `req_ready` is low.
//
// From the paper: 16 ways, 128 sets, LRU replacement, 5-bit counters,
// allocate on every PCM access, increment on row buffer miss only, trigger
// when the count exceeds MissThresh, periodic reset of all counts.
// This design's choices: the 27-bit tag (34-bit row address), which makes an
// entry 37 bits and the whole store 9.25 KB as the paper states; saturating
// counters; invalidating a row's entry when it triggers (the row then lives in
// DRAM and is no longer tracked); the two-cycle access and the swept clear.
//
// Interface: req_valid/req_ready handshake; one response (resp_valid, one
// cycle) two cycles after acceptance. Requests are not accepted while a
// response is pending or a clear sweep is running.
module stats_store #(
  parameter int unsigned ROW_W = rbla_pkg::ROW_W,
  parameter int unsigned WAYS  = rbla_pkg::SS_WAYS,
  parameter int unsigned SETS  = rbla_pkg::SS_SETS,
  parameter int unsigned CNT_W = rbla_pkg::SS_CNT_W
) (
  input  logic             clk,
  input  logic             rst_n,
  // lookup / update request, one per PCM access
  input  logic             req_valid,
  output logic             req_ready,
  input  logic [ROW_W-1:0] req_row,
  input  logic             req_rb_miss,
  // current threshold
  input  logic [CNT_W-1:0] miss_thresh,
  // periodic reset of all counters
  input  logic             clear,
  output logic             clearing,
  // response
  output logic             resp_valid,
  output logic [ROW_W-1:0] resp_row,
  output logic             resp_hit,      // row already had an entry
  output logic [CNT_W-1:0] resp_count,    // miss count after this access
  output logic             resp_trigger   // count exceeds threshold: cache the row
);
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned AGE_W = (WAYS > 1) ? $clog2(WAYS) : 1;
  localparam int unsigned TAG_W = ROW_W - IDX_W;

  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
    logic [AGE_W-1:0] age;
    logic [CNT_W-1:0] cnt;
  } entry_t;

  typedef entry_t [WAYS-1:0] set_t;

  set_t mem [SETS];

  typedef enum logic [1:0] {S_IDLE, S_UPDATE, S_CLR_RD, S_CLR_WR} state_e;
  state_e state;

  logic [ROW_W-1:0] row_q;
  logic             miss_q;
  set_t             set_q;        // set read from the RAM
  logic [IDX_W-1:0] clr_idx;
  logic             clr_pending;

  // RAM port signals
  logic             ram_rd;
  logic [IDX_W-1:0] ram_rd_idx;
  logic             ram_wr;
  logic [IDX_W-1:0] ram_wr_idx;
  set_t             ram_wdata;

  always_ff @(posedge clk) begin
    if (ram_wr) mem[ram_wr_idx] <= ram_wdata;
    if (ram_rd) set_q <= mem[ram_rd_idx];
  end

  // ---------------- update logic (state S_UPDATE) ----------------
  logic [IDX_W-1:0] idx_q;
  logic [TAG_W-1:0] tag_q;
  assign idx_q = row_q[IDX_W-1:0];
  assign tag_q = row_q[ROW_W-1:IDX_W];

  logic             hit;
  logic [AGE_W-1:0] way;        // way hit or allocated
  logic [AGE_W-1:0] old_age;    // its age before this access (promotion bound)
  logic             alloc_free; // allocation into an invalid way
  logic [CNT_W-1:0] new_cnt;
  logic             trig;
  set_t             upd_set;

  always_comb begin
    hit        = 1'b0;
    way        = '0;
    old_age    = '0;
    alloc_free = 1'b0;
    // hit search
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && set_q[w].valid && set_q[w].tag == tag_q) begin
        hit = 1'b1;
        way = AGE_W'(w);
      end
    end
    if (!hit) begin
      // victim: first invalid way, else the way with the largest age (LRU)
      for (int w = WAYS - 1; w >= 0; w--) begin
        if (!set_q[w].valid) begin
          alloc_free = 1'b1;
          way        = AGE_W'(w);
        end
      end
      if (!alloc_free) begin
        for (int w = 0; w < WAYS; w++) begin
          if (set_q[w].age == AGE_W'(WAYS - 1)) way = AGE_W'(w);
        end
      end
    end
    old_age = set_q[way].age;

    // counter value after this access
    if (hit) begin
      if (miss_q && set_q[way].cnt != {CNT_W{1'b1}}) new_cnt = set_q[way].cnt + 1'b1;
      else                                           new_cnt = set_q[way].cnt;
    end else begin
      new_cnt = miss_q ? CNT_W'(1) : '0;
    end
    trig = (new_cnt > miss_thresh);

    // LRU ages and the new entry
    upd_set = set_q;
    for (int w = 0; w < WAYS; w++) begin
      if (AGE_W'(w) != way && set_q[w].valid) begin
        // ways younger than the accessed one age by one; on a fill into a free
        // way every valid way ages (their ages are below the valid count)
        if (alloc_free || set_q[w].age < old_age) upd_set[w].age = set_q[w].age + 1'b1;
        // a triggered entry is dropped: close the gap it leaves at age 0
        if (trig) upd_set[w].age = upd_set[w].age - 1'b1;
      end
    end
    upd_set[way].valid = !trig;
    upd_set[way].tag   = tag_q;
    upd_set[way].age   = '0;
    upd_set[way].cnt   = new_cnt;
  end

  // ---------------- cleared set (state S_CLR_WR) ----------------
  // The reset sweep must also clear valid bits: remember whether this sweep
  // follows reset.
  logic init_sweep;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                                 init_sweep <= 1'b1;
    else if (state == S_CLR_WR && clr_idx == IDX_W'(SETS - 1)) init_sweep <= 1'b0;
  end


  set_t clr_set;
  always_comb begin
    clr_set = set_q;
    for (int w = 0; w < WAYS; w++) begin
      clr_set[w].cnt = '0;
      if (init_sweep) clr_set[w] = '0;
    end
  end

  // ---------------- control ----------------
  assign req_ready = (state == S_IDLE) && !clr_pending && !clear;
  assign clearing  = (state == S_CLR_RD) || (state == S_CLR_WR) || clr_pending;

  always_comb begin
    ram_rd     = 1'b0;
    ram_rd_idx = req_row[IDX_W-1:0];
    ram_wr     = 1'b0;
    ram_wr_idx = idx_q;
    ram_wdata  = upd_set;
    unique case (state)
      S_IDLE: begin
        if (req_valid && req_ready) ram_rd = 1'b1;
      end
      S_UPDATE: begin
        ram_wr = 1'b1;
      end
      S_CLR_RD: begin
        ram_rd     = 1'b1;
        ram_rd_idx = clr_idx;
      end
      S_CLR_WR: begin
        ram_wr     = 1'b1;
        ram_wr_idx = clr_idx;
        ram_wdata  = clr_set;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_CLR_RD;   // the RAM is initialised by a full sweep
      clr_idx     <= '0;
      clr_pending <= 1'b0;
      row_q       <= '0;
      miss_q      <= 1'b0;
    end else begin
      if (clear) clr_pending <= 1'b1;
      unique case (state)
        S_IDLE: begin
          if (clr_pending || clear) begin
            state       <= S_CLR_RD;
            clr_idx     <= '0;
            clr_pending <= 1'b0;
          end else if (req_valid) begin
            state  <= S_UPDATE;
            row_q  <= req_row;
            miss_q <= req_rb_miss;
          end
        end
        S_UPDATE: state <= S_IDLE;
        S_CLR_RD: state <= S_CLR_WR;
        S_CLR_WR: begin
          if (clr_idx == IDX_W'(SETS - 1)) state <= S_IDLE;
          else begin
            clr_idx <= clr_idx + 1'b1;
            state   <= S_CLR_RD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign resp_valid   = (state == S_UPDATE);
  assign resp_row     = row_q;
  assign resp_hit     = hit;
  assign resp_count   = new_cnt;
  assign resp_trigger = trig;

  // an accepted request always sees a response two cycles later
  a_resp: assert property (@(posedge clk) disable iff (!rst_n)
                           (req_valid && req_ready) |=> resp_valid);
  initial assert (TAG_W >= 1 && WAYS == (1 << AGE_W))
    else $error("stats_store: WAYS must be a power of two and ROW_W > log2(SETS)");
endmodule
