// tb_dram_cache_tags: self-checking test of the DRAM cache directory at its
// default size (1024 frames, 34-bit rows). A reference table per frame
// (valid, resident row, dirty) is updated by random fills and dirty marks;
// every cycle the lookup of a random row is compared with it: hit, frame,
// and the occupant of the frame with its dirty bit. Marks for rows that are
// not resident must change nothing; a fill must leave the frame clean.
module tb_dram_cache_tags;
  localparam int unsigned ROW_W = 34, FRAMES = 1024, FI_W = 10;
  localparam int unsigned NCYC = 20000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [ROW_W-1:0] lk_row = '0, fill_row = '0, md_row = '0;
  logic             lk_hit, lk_vic_valid, lk_vic_dirty;
  logic [FI_W-1:0]  lk_frame;
  logic [ROW_W-1:0] lk_vic_row;
  logic             fill = 1'b0, mark_dirty = 1'b0;

  dram_cache_tags #(.ROW_W(ROW_W), .FRAMES(FRAMES)) dut (.*);

  logic             r_valid [FRAMES];
  logic             r_dirty [FRAMES];
  logic [ROW_W-1:0] r_row   [FRAMES];

  int checks = 0, failures = 0, n_hit = 0, n_dirty_vic = 0, n_fill = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame index: low row bits XOR the next bits up
  function automatic int fidx(logic [ROW_W-1:0] r);
    return int'(r[FI_W-1:0]) ^ int'(r[2*FI_W-1:FI_W]);
  endfunction

  function automatic logic [ROW_W-1:0] rand_row();
    // 16 frames, 4 tags each, so that rows collide in their frames
    return (ROW_W'($urandom % 4) << FI_W) | ROW_W'(($urandom % 16) * 61 % FRAMES) | (ROW_W'($urandom % 2) << 25);
  endfunction

  initial begin
    int f;
    for (int i = 0; i < FRAMES; i++) begin r_valid[i] = 0; r_dirty[i] = 0; r_row[i] = '0; end
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int n = 0; n < int'(NCYC); n++) begin
      lk_row = rand_row();
      #1;
      f = fidx(lk_row);
      check(lk_frame == FI_W'(f), "frame index");
      check(lk_hit == (r_valid[f] && r_row[f] == lk_row), $sformatf("cyc %0d hit %0d", n, lk_hit));
      check(lk_vic_valid == r_valid[f], "occupant valid");
      if (r_valid[f]) begin
        check(lk_vic_row == r_row[f], "occupant row");
        check(lk_vic_dirty == r_dirty[f], $sformatf("cyc %0d occupant dirty %0d", n, lk_vic_dirty));
      end
      if (lk_hit) n_hit++;
      if (lk_vic_valid && lk_vic_dirty) n_dirty_vic++;
      // random update at the next edge
      fill       = ($urandom % 4) == 0;
      fill_row   = rand_row();
      mark_dirty = ($urandom % 2) == 0;
      md_row     = rand_row();
      @(posedge clk);
      #1;
      if (mark_dirty && r_valid[fidx(md_row)] && r_row[fidx(md_row)] == md_row)
        r_dirty[fidx(md_row)] = 1'b1;
      if (fill) begin
        r_valid[fidx(fill_row)] = 1'b1;
        r_row[fidx(fill_row)]   = fill_row;
        r_dirty[fidx(fill_row)] = 1'b0;
        n_fill++;
      end
      fill = 1'b0; mark_dirty = 1'b0;
    end
    check(n_hit > 100 && n_dirty_vic > 100 && n_fill > 100, "coverage");
    $display("hits %0d dirty occupants %0d fills %0d", n_hit, n_dirty_vic, n_fill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
