// skew_transpose: ROWS x COLS matrix buffer of 16-bit elements that is written
// by rows and read by columns, 16 elements per port per cycle.
//
// Write: row wr_row, elements COLS-columns 16*wr_chunk .. 16*wr_chunk+15.
// Read:  column rd_col, elements of rows 16*rd_chunk .. 16*rd_chunk+15
//        (combinational read).
// Element (r, c) lives in bank (r + c) mod 16 at address r*(COLS/16) + c/16.
// The diagonal skew places the 16 elements of a row chunk, and likewise the
// 16 elements of a column chunk, in 16 different banks, so both ports move a
// full beat per cycle from single-ported banks. ROWS and COLS must be
// multiples of 16 and at least 32. This is a helper of kv_cluster and kv_restore; the banking
// scheme is this design's own, the paper only asks for a buffer that makes
// each channel's values contiguous.
module skew_transpose #(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 1024
) (
  input  logic                         clk,
  input  logic                         wr_en,
  input  logic [$clog2(ROWS)-1:0]      wr_row,
  input  logic [$clog2(COLS/16)-1:0]   wr_chunk,
  input  logic [255:0]                 wr_data,
  input  logic [$clog2(COLS)-1:0]      rd_col,
  input  logic [$clog2(ROWS/16)-1:0]   rd_chunk,
  output logic [255:0]                 rd_data
);
  localparam int unsigned DEPTH = ROWS * COLS / 16;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic [15:0] rd_bank [16];

  for (genvar b = 0; b < 16; b++) begin : g_bank
    logic [15:0] mem [DEPTH];
    logic [3:0]  wk, rk;          // which element of the beat this bank serves
    logic [AW-1:0] waddr, raddr;
    logic [$clog2(ROWS)-1:0] rrow;
    // write: element k of row r sits in bank (r + k) mod 16 -> k = b - r
    assign wk    = 4'(b) - 4'(wr_row);
    assign waddr = AW'(wr_row) * AW'(COLS / 16) + AW'(wr_chunk);
    // read: element k (row 16*chunk+k) of column c sits in bank (c + k) mod 16
    assign rk    = 4'(b) - 4'(rd_col);
    assign rrow  = ($clog2(ROWS))'({rd_chunk, rk});
    assign raddr = AW'(rrow) * AW'(COLS / 16) + AW'(rd_col[$clog2(COLS)-1:4]);
    always_ff @(posedge clk)
      if (wr_en) mem[waddr] <= wr_data[wk*16 +: 16];
    assign rd_bank[b] = mem[raddr];
  end

  // Undo the rotation on the read side: element k comes from bank (c + k).
  always_comb
    for (int k = 0; k < 16; k++) rd_data[k*16 +: 16] = rd_bank[4'(k) + rd_col[3:0]];

  if (ROWS < 32 || COLS < 32 || ROWS % 16 != 0 || COLS % 16 != 0) begin : g_size_check
    $error("ROWS and COLS must be multiples of 16 and at least 32");
  end
endmodule
