// dram_cache_tags: the directory of the DRAM cache, recording which PCM rows
// currently live in DRAM.
//
// In the hybrid memory the DRAM is a small cache in front of a large PCM, at
// the granularity of whole rows. This block answers, for a PCM row address,
// whether the row is cached in DRAM and in which DRAM frame, and it keeps a
// dirty bit per frame so that a modified row is written back to PCM when it is
// replaced. The paper describes the DRAM as a cache of PCM rows but not its
// organisation; this design uses a simple one: direct-mapped with FRAMES
// frames. The tag is the row address above its low log2(FRAMES) bits; the
// frame index is those low bits XORed with the low bits of the tag. The XOR
// matters: the channel controllers select the bank from the low row bits, so
// rows that conflict in one PCM bank (exactly the rows RBLA migrates) would
// otherwise all compete for the same DRAM frame.
//
// Interface and timing: the lookup is combinational (lk_row -> lk_hit,
// lk_frame, and the occupant of that frame: lk_vic_valid, lk_vic_row,
// lk_vic_dirty). `fill` installs a row in its frame (clean), `mark_dirty`
// sets the dirty bit of the frame of `md_row` if that row is resident; both
// take effect at the next clock edge. Reset invalidates all frames.
module dram_cache_tags #(
  parameter int unsigned ROW_W  = rbla_pkg::ROW_W,
  parameter int unsigned FRAMES = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // lookup
  input  logic [ROW_W-1:0]          lk_row,
  output logic                      lk_hit,
  output logic [$clog2(FRAMES)-1:0] lk_frame,
  output logic                      lk_vic_valid,
  output logic [ROW_W-1:0]          lk_vic_row,
  output logic                      lk_vic_dirty,
  // install a row (after migration)
  input  logic                      fill,
  input  logic [ROW_W-1:0]          fill_row,
  // a write was served from DRAM
  input  logic                      mark_dirty,
  input  logic [ROW_W-1:0]          md_row
);
  localparam int unsigned FI_W  = $clog2(FRAMES);
  localparam int unsigned TAG_W = ROW_W - FI_W;

  logic [TAG_W-1:0] tag   [FRAMES];
  logic [FRAMES-1:0] valid;
  logic [FRAMES-1:0] dirty;

  logic [FI_W-1:0]  lk_idx, fill_idx, md_idx;
  logic [TAG_W-1:0] lk_tag, md_tag;

  function automatic logic [FI_W-1:0] frame_of(logic [ROW_W-1:0] r);
    return r[FI_W-1:0] ^ r[2*FI_W-1:FI_W];
  endfunction

  assign lk_idx   = frame_of(lk_row);
  assign lk_tag   = lk_row[ROW_W-1:FI_W];
  assign fill_idx = frame_of(fill_row);
  assign md_idx   = frame_of(md_row);
  assign md_tag   = md_row[ROW_W-1:FI_W];

  assign lk_frame     = lk_idx;
  assign lk_vic_valid = valid[lk_idx];
  assign lk_vic_dirty = dirty[lk_idx];
  // the occupant's low row bits are recovered from its frame and tag
  assign lk_vic_row   = {tag[lk_idx], lk_idx ^ tag[lk_idx][FI_W-1:0]};
  assign lk_hit       = valid[lk_idx] && (tag[lk_idx] == lk_tag);

  always_ff @(posedge clk) begin
    if (fill) tag[fill_idx] <= fill_row[ROW_W-1:FI_W];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      dirty <= '0;
    end else begin
      if (mark_dirty && valid[md_idx] && tag[md_idx] == md_tag) dirty[md_idx] <= 1'b1;
      if (fill) begin
        valid[fill_idx] <= 1'b1;
        dirty[fill_idx] <= 1'b0;
      end
    end
  end

  initial assert (FRAMES >= 2 && FRAMES == (1 << FI_W) && TAG_W >= FI_W)
    else $error("dram_cache_tags: FRAMES must be a power of two, ROW_W at least 2*log2(FRAMES)");
endmodule
