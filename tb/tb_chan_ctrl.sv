// tb_chan_ctrl: self-checking test of the channel controller with PCM
// latencies (row hit 200 cycles, read miss 700, write miss 700).
// Random reads and writes over a few rows per bank; the testbench keeps its
// own open-row table and shadow memory and checks, for every request, the
// row buffer hit flag, the exact latency from acceptance to answer and the
// read data. At the end the device model must have seen no access to a row
// that was not open, and one activation per row buffer miss.
module tb_chan_ctrl;
  localparam int unsigned ROW_W = 12, COL_W = 5, DATA_W = 64, BANKS = 8, BK_W = 3;
  localparam int unsigned T_HIT = 200, T_MISS = 700, T_WR_MISS = 700;
  localparam int unsigned NREQ = 120;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              req_valid = 1'b0, req_ready, req_we = 1'b0;
  logic [ROW_W-1:0]  req_row = '0;
  logic [COL_W-1:0]  req_col = '0;
  logic [DATA_W-1:0] req_wdata = '0;
  logic              resp_valid, resp_we, resp_rb_hit;
  logic [DATA_W-1:0] resp_rdata;
  logic              dev_act, dev_rd, dev_wr;
  logic [BK_W-1:0]   dev_bank;
  logic [ROW_W-1:0]  dev_row;
  logic [COL_W-1:0]  dev_col;
  logic [DATA_W-1:0] dev_wdata, dev_rdata;

  chan_ctrl #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANKS(BANKS),
              .T_HIT(T_HIT), .T_MISS(T_MISS), .T_WR_MISS(T_WR_MISS)) dut (.*);

  mem_dev_model #(.ROW_W(ROW_W), .COL_W(COL_W), .DATA_W(DATA_W), .BANK_W(BK_W)) u_dev (
    .clk, .act(dev_act), .rd(dev_rd), .wr(dev_wr), .bank(dev_bank), .row(dev_row),
    .col(dev_col), .wdata(dev_wdata), .rdata(dev_rdata));

  int checks = 0, failures = 0, misses = 0;
  logic [DATA_W-1:0] shadow [logic [ROW_W+COL_W-1:0]];
  logic [ROW_W-1:0]  ref_open [BANKS];
  logic              ref_ok   [BANKS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (NREQ * (T_MISS + 10) + 1000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned lat;
    bit exp_hit;
    logic [DATA_W-1:0] exp_data;
    logic [BK_W-1:0] b;
    for (int i = 0; i < BANKS; i++) ref_ok[i] = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    for (int n = 0; n < NREQ; n++) begin
      // rows: bank in the low bits, one of three rows in each of four banks
      req_row   = ROW_W'({2'($urandom % 3), 3'($urandom % 4)});
      req_col   = COL_W'($urandom);
      req_we    = ($urandom % 3) == 0;
      req_wdata = {$urandom, $urandom};
      b = req_row[BK_W-1:0];
      exp_hit = ref_ok[b] && ref_open[b] == req_row;
      ref_ok[b] = 1'b1;
      ref_open[b] = req_row;
      if (!exp_hit) misses++;
      exp_data = shadow.exists({req_row, req_col}) ? shadow[{req_row, req_col}]
                                                   : u_dev.init_word(req_row, req_col);
      if (req_we) shadow[{req_row, req_col}] = req_wdata;
      req_valid = 1'b1;
      do @(posedge clk); while (!req_ready);   // accepted on this edge
      #1 req_valid = 1'b0;
      lat = 0;
      do begin @(posedge clk); lat++; end while (!resp_valid);
      check(resp_rb_hit == exp_hit, $sformatf("req %0d hit flag %0d exp %0d", n, resp_rb_hit, exp_hit));
      check(lat == (exp_hit ? T_HIT : (req_we ? T_WR_MISS : T_MISS)),
            $sformatf("req %0d latency %0d", n, lat));
      check(resp_we == req_we, "resp_we");
      if (!req_we) check(resp_rdata == exp_data,
                         $sformatf("req %0d read data %h exp %h", n, resp_rdata, exp_data));
      #1;
    end
    @(posedge clk);
    check(u_dev.proto_errors == 0, $sformatf("protocol errors %0d", u_dev.proto_errors));
    check(u_dev.acts == misses, $sformatf("activations %0d exp %0d", u_dev.acts, misses));
    check(misses > 10 && misses < int'(NREQ) - 10, "mix of hits and misses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
