// median_filter: K x K median filter on the disparity stream.
//
// Built, like the census stage, on a window/line buffer (window_line_buffer):
// each incoming disparity completes a K x K neighbourhood, and the output is
// the median of its K*K values. The median is found by ranking: each value is
// compared with all others in parallel (ties broken by position), and the one
// with exactly (K*K-1)/2 smaller values is selected. The paper states only that
// a median filter of user-chosen size is built on window and line buffers; the
// ranking network and the default 3 x 3 window are this design's choices.
//
// Like the census window, the window is causal and zero-padded: the output
// for the disparity at (x, y) is the median around (x-R, y-R), R = (K-1)/2.
// Position is tracked internally over a width x height frame.
//
// Interface: in_valid/in_disp in raster order; out_valid/out_disp follow two
// cycles later (one for the window register, one for the output register).
module median_filter #(
  parameter int unsigned K        = 3,
  parameter int unsigned DW       = 7,
  parameter int unsigned MAX_COLS = 1242,
  parameter int unsigned MAX_ROWS = 374,
  localparam int unsigned COLW = (MAX_COLS < 2) ? 1 : $clog2(MAX_COLS),
  localparam int unsigned ROWW = (MAX_ROWS < 2) ? 1 : $clog2(MAX_ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [COLW:0] width,
  input  logic [ROWW:0] height,
  input  logic          in_valid,
  input  logic [DW-1:0] in_disp,
  output logic          out_valid,
  output logic [DW-1:0] out_disp
);

  localparam int unsigned N   = K * K;
  localparam int unsigned MID = (N - 1) / 2;

  logic [COLW-1:0] x;
  logic [ROWW-1:0] y;
  logic            w_valid;
  logic [DW-1:0]   win [K][K];
  logic [DW-1:0]   v [N];
  logic [DW-1:0]   med;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
    end else if (in_valid) begin
      if (32'(x) + 1 >= 32'(width)) begin
        x <= '0;
        y <= (32'(y) + 1 >= 32'(height)) ? '0 : y + 1'b1;
      end else begin
        x <= x + 1'b1;
      end
    end
  end

  window_line_buffer #(
    .K(K), .PW(DW), .MAX_COLS(MAX_COLS), .MAX_ROWS(MAX_ROWS)
  ) u_win (
    .clk(clk), .rst_n(rst_n),
    .in_valid(in_valid), .in_px(in_disp), .in_x(x), .in_y(y),
    .out_valid(w_valid), .out_win(win), .out_x(), .out_y()
  );

  // rank selection
  always_comb begin
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) v[r*K + c] = win[r][c];
    med = '0;
    for (int i = 0; i < N; i++) begin
      int unsigned rank;
      rank = 0;
      for (int j = 0; j < N; j++)
        if (v[j] < v[i] || (v[j] == v[i] && j < i)) rank++;
      if (rank == MID) med = v[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_disp  <= '0;
    end else begin
      out_valid <= w_valid;
      if (w_valid) out_disp <= med;
    end
  end

endmodule
