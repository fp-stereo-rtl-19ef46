// window_line_buffer: K x K neighbourhood of a raster-scanned pixel stream.
//
// A line buffer keeps the last K-1 image rows (one memory per row, MAX_COLS
// words) and a K x K register window holds the current neighbourhood. For
// every accepted pixel at column x the window shifts out its left-most column
// and shifts in a new right-most column made of the K-1 line-buffer words at
// column x plus the incoming pixel; the line buffer then shifts that column
// up by one row, dropping the oldest value and storing the incoming pixel in
// the newest row. This is the reuse scheme of the paper: every pixel crosses
// the interface once and only K-1 rows are stored.
//
// The window is causal: for the pixel at (x, y) it holds rows y-K+1..y and
// columns x-K+1..x, i.e. it is centred on (x-R, y-R) with R = (K-1)/2.
// Positions outside the image (above row 0 or left of column 0) read as zero;
// this zero padding is this design's choice (the paper does not discuss image
// borders) and makes the output independent of what the memories held.
//
// Interface: in_valid with in_px and its coordinates in_x/in_y. One cycle
// later out_valid rises with out_win[r][c] (r = 0 top row, c = 0 left column)
// and the coordinates of the pixel that completed the window. One pixel can be
// accepted every cycle.
module window_line_buffer #(
  parameter int unsigned K        = 7,
  parameter int unsigned PW       = 8,
  parameter int unsigned MAX_COLS = 1242,
  parameter int unsigned MAX_ROWS = 374,
  localparam int unsigned CW = (MAX_COLS < 2) ? 1 : $clog2(MAX_COLS),
  localparam int unsigned RW = (MAX_ROWS < 2) ? 1 : $clog2(MAX_ROWS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic [PW-1:0]       in_px,
  input  logic [CW-1:0]       in_x,
  input  logic [RW-1:0]       in_y,
  output logic                out_valid,
  output logic [PW-1:0]       out_win [K][K],
  output logic [CW-1:0]       out_x,
  output logic [RW-1:0]       out_y
);

  // line_mem[r] holds image row y-(K-1)+r for r = 0..K-2 (r = K-2 newest).
  logic [PW-1:0] line_mem [K-1][MAX_COLS];
  logic [PW-1:0] win      [K][K];       // raw window registers
  logic [PW-1:0] new_col  [K];

  always_comb begin
    for (int r = 0; r < K - 1; r++) begin
      // row y-(K-1)+r exists only when y >= K-1-r
      new_col[r] = (32'(in_y) >= K - 1 - r) ? line_mem[r][in_x] : '0;
    end
    new_col[K-1] = in_px;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < K - 2; r++) line_mem[r][in_x] <= line_mem[r+1][in_x];
      line_mem[K-2][in_x] <= in_px;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++) win[r][c] <= '0;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_y     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int r = 0; r < K; r++) begin
          for (int c = 0; c < K - 1; c++) win[r][c] <= win[r][c+1];
          win[r][K-1] <= new_col[r];
        end
        out_x <= in_x;
        out_y <= in_y;
      end
    end
  end

  // Column c of the window is image column out_x-(K-1)+c; left of the image
  // it reads as zero.
  always_comb begin
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++)
        out_win[r][c] = (32'(out_x) >= K - 1 - c) ? win[r][c] : '0;
  end

endmodule
