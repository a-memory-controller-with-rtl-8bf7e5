// mem_dev_model: behavioural model of the DRAM or PCM chips behind one
// channel, for simulation only (it stores data in an associative array).
//
// It accepts the command port of chan_ctrl: `act` opens `row` in `bank`,
// `rd`/`wr` access word `col` of the open row. Read data is combinational on
// `rdata`. A word never written reads as init_word(row, col), a fixed scramble
// of its address, so a testbench can predict any read. The model keeps its
// own open row per bank and counts protocol errors: a read or write to a bank
// whose open row is not the addressed row.
module mem_dev_model #(
  parameter int unsigned ROW_W  = 34,
  parameter int unsigned COL_W  = 5,
  parameter int unsigned DATA_W = 64,
  parameter int unsigned BANK_W = 3,
  parameter logic [63:0] SEED   = 64'h5EED_0000_0000_0001
) (
  input  logic              clk,
  input  logic              act,
  input  logic              rd,
  input  logic              wr,
  input  logic [BANK_W-1:0] bank,
  input  logic [ROW_W-1:0]  row,
  input  logic [COL_W-1:0]  col,
  input  logic [DATA_W-1:0] wdata,
  output logic [DATA_W-1:0] rdata
);
  logic [DATA_W-1:0] mem [logic [ROW_W+COL_W-1:0]];
  logic [ROW_W-1:0]  open_row [2**BANK_W];
  logic              open_ok  [2**BANK_W];
  int                acts = 0, reads = 0, writes = 0, proto_errors = 0;

  function automatic logic [DATA_W-1:0] init_word(logic [ROW_W-1:0] r, logic [COL_W-1:0] c);
    logic [63:0] x;
    x = SEED ^ (64'(r) << COL_W) ^ 64'(c);
    x = x * 64'h9E37_79B9_7F4A_7C15;
    x = x ^ (x >> 29);
    return DATA_W'(x);
  endfunction

  initial for (int b = 0; b < 2**BANK_W; b++) open_ok[b] = 1'b0;

  // `writes` is read here so that the data is re-evaluated after every write
  always @(*) begin
    if (writes >= 0 && mem.exists({row, col})) rdata = mem[{row, col}];
    else                        rdata = init_word(row, col);
  end

  always @(posedge clk) begin
    if (act) begin
      open_row[bank] <= row;
      open_ok[bank]  <= 1'b1;
      acts++;
    end
    if ((rd || wr) && !act && (!open_ok[bank] || open_row[bank] != row)) proto_errors++;
    if (rd) reads++;
    if (wr) begin
      mem[{row, col}] = wdata;
      writes++;
    end
  end
endmodule
