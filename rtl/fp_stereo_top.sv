// fp_stereo_top: streaming semi-global stereo matching pipeline.
//
// A rectified base (left) / match (right) image pair enters as one pixel pair
// per cycle in raster order; a disparity map leaves in raster order, one
// disparity per pixel. The tasks of the dataflow pipeline are:
//
//   1. census front end (II = 1 pixel/cycle): two window/line buffers and two
//      census transforms give CT_b(p) and CT_m(p) for each pixel;
//   2. a short stream FIFO;
//   3. census_cost: Hamming costs C(p,d), UF disparities per cycle;
//   4. cost_aggregation: 0/45/90/135-degree path costs, summed to S(p,d);
//   5. wta_disparity: D(p) = argmin_d S(p,d);
//   6. median_filter: K x K median of the disparity map.
//
// Tasks 3-5 need NCH = DMAX/UF cycles per pixel, so the sustained rate is one
// pixel every NCH cycles (4 with the default 128 disparities, 32 per cycle),
// which is the paper's latency model Cycle = IL + II*(H*W*DMAX/UF - 1) with
// II = 1. The FIFO lets the front end accept a short burst at one pixel per
// cycle; when the FIFO (with the pixel in flight) would overflow, in_ready
// drops and the source is stalled.
//
// Geometry: both window stages are causal and zero-padded, so the disparity
// output for the k-th input pixel (x, y) belongs to base pixel
// (x - R - Rm, y - R - Rm), R = (WIN-1)/2, Rm = (MED_K-1)/2 (4 pixels with the
// defaults). Disparities for matches that fall left of the image compare with
// earlier pixels of the stream (or with zero after reset). Both are this
// design's choices; the paper does not describe border handling.
//
// Sizes default to the paper's headline configuration (census 7x7, 128
// disparities, 32 per cycle, 1242 x 374 frames, median filter, no left-right
// check); width and height are run-time inputs up to MAX_COLS x MAX_ROWS, as
// in the library's function interface. The output has no ready: the consumer
// (a DMA engine) is assumed always to accept. The match-side window buffer
// runs in lockstep with the base side, so only the base side's valid is used;
// coordinate outputs and the WTA's winning cost are left open (the cost would
// serve a left-right check, which this configuration does not include).
module fp_stereo_top #(
  parameter int unsigned MAX_COLS   = fp_stereo_pkg::MAX_COLS,
  parameter int unsigned MAX_ROWS   = fp_stereo_pkg::MAX_ROWS,
  parameter int unsigned WIN        = fp_stereo_pkg::WIN,
  parameter int unsigned DMAX       = fp_stereo_pkg::DMAX,
  parameter int unsigned UF         = fp_stereo_pkg::UF,
  parameter int unsigned P1         = fp_stereo_pkg::P1,
  parameter int unsigned P2         = fp_stereo_pkg::P2,
  parameter int unsigned MED_K      = fp_stereo_pkg::MED_K,
  parameter int unsigned FIFO_DEPTH = fp_stereo_pkg::FIFO_DEPTH,
  localparam int unsigned PW   = fp_stereo_pkg::PIX_W,
  localparam int unsigned COLW = (MAX_COLS < 2) ? 1 : $clog2(MAX_COLS),
  localparam int unsigned ROWW = (MAX_ROWS < 2) ? 1 : $clog2(MAX_ROWS),
  localparam int unsigned DW   = (DMAX < 2) ? 1 : $clog2(DMAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [COLW:0] width,
  input  logic [ROWW:0] height,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [PW-1:0] in_base,
  input  logic [PW-1:0] in_match,
  output logic          out_valid,
  output logic [DW-1:0] out_disp
);

  localparam int unsigned CB   = fp_stereo_pkg::census_bits(WIN);
  localparam int unsigned CMAX = CB;
  localparam int unsigned CW   = fp_stereo_pkg::census_cost_w(WIN);
  localparam int unsigned SW   = fp_stereo_pkg::sum_cost_w(CMAX, P2, fp_stereo_pkg::NDIR);
  localparam int unsigned NCH  = DMAX / UF;
  localparam int unsigned KW   = (NCH < 2) ? 1 : $clog2(NCH);
  localparam int unsigned FCW  = $clog2(FIFO_DEPTH + 1);

  // ---------------- task 1: census front end ----------------
  logic [COLW-1:0] x;
  logic [ROWW-1:0] y;
  logic            take;
  logic            wb_valid;
  logic [PW-1:0]   win_b [WIN][WIN];
  logic [PW-1:0]   win_m [WIN][WIN];
  logic [CB-1:0]   ct_b, ct_m;
  logic [FCW-1:0]  fifo_count;
  logic            fifo_in_ready;

  // room for the pixel being taken and the one still in the window register
  assign in_ready = (32'(fifo_count) + 32'(wb_valid) < FIFO_DEPTH);
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
    end else if (take) begin
      if (32'(x) + 1 >= 32'(width)) begin
        x <= '0;
        y <= (32'(y) + 1 >= 32'(height)) ? '0 : y + 1'b1;
      end else begin
        x <= x + 1'b1;
      end
    end
  end

  window_line_buffer #(.K(WIN), .PW(PW), .MAX_COLS(MAX_COLS), .MAX_ROWS(MAX_ROWS))
  u_win_base (
    .clk(clk), .rst_n(rst_n), .in_valid(take), .in_px(in_base), .in_x(x), .in_y(y),
    .out_valid(wb_valid), .out_win(win_b), .out_x(), .out_y()
  );

  window_line_buffer #(.K(WIN), .PW(PW), .MAX_COLS(MAX_COLS), .MAX_ROWS(MAX_ROWS))
  u_win_match (
    .clk(clk), .rst_n(rst_n), .in_valid(take), .in_px(in_match), .in_x(x), .in_y(y),
    .out_valid(), .out_win(win_m), .out_x(), .out_y()
  );

  census_transform #(.K(WIN), .PW(PW)) u_ct_base  (.win(win_b), .census(ct_b));
  census_transform #(.K(WIN), .PW(PW)) u_ct_match (.win(win_m), .census(ct_m));

  // ---------------- task 2: FIFO ----------------
  logic            f_valid, f_ready;
  logic [2*CB-1:0] f_data;

  stream_fifo #(.WIDTH(2 * CB), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .in_valid(wb_valid), .in_ready(fifo_in_ready), .in_data({ct_b, ct_m}),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data),
    .count(fifo_count)
  );

  // ---------------- task 3: matching cost ----------------
  logic          c_valid, c_last;
  logic [KW-1:0] c_chunk;
  logic [CW-1:0] c_cost [UF];

  census_cost #(.CB(CB), .DMAX(DMAX), .UF(UF)) u_cost (
    .clk(clk), .rst_n(rst_n),
    .in_valid(f_valid), .in_ready(f_ready),
    .in_ct_b(f_data[2*CB-1:CB]), .in_ct_m(f_data[CB-1:0]),
    .out_valid(c_valid), .out_chunk(c_chunk), .out_last(c_last), .out_cost(c_cost)
  );

  // ---------------- task 4: aggregation ----------------
  logic          a_valid, a_last;
  logic [KW-1:0] a_chunk;
  logic [SW-1:0] a_sum [UF];

  cost_aggregation #(
    .CMAX(CMAX), .P1(P1), .P2(P2), .DMAX(DMAX), .UF(UF),
    .MAX_COLS(MAX_COLS), .MAX_ROWS(MAX_ROWS)
  ) u_agg (
    .clk(clk), .rst_n(rst_n), .width(width), .height(height),
    .in_valid(c_valid), .in_chunk(c_chunk), .in_last(c_last), .in_cost(c_cost),
    .out_valid(a_valid), .out_chunk(a_chunk), .out_last(a_last), .out_sum(a_sum)
  );

  // ---------------- task 5: winner takes all ----------------
  logic          d_valid;
  logic [DW-1:0] d_disp;

  wta_disparity #(.SW(SW), .DMAX(DMAX), .UF(UF)) u_wta (
    .clk(clk), .rst_n(rst_n),
    .in_valid(a_valid), .in_chunk(a_chunk), .in_last(a_last), .in_cost(a_sum),
    .out_valid(d_valid), .out_disp(d_disp), .out_cost()
  );

  // ---------------- task 6: median filter ----------------
  median_filter #(.K(MED_K), .DW(DW), .MAX_COLS(MAX_COLS), .MAX_ROWS(MAX_ROWS)) u_med (
    .clk(clk), .rst_n(rst_n), .width(width), .height(height),
    .in_valid(d_valid), .in_disp(d_disp),
    .out_valid(out_valid), .out_disp(out_disp)
  );

  // The reservation in in_ready guarantees the FIFO never refuses a census pair.
  a_fifo_accepts: assert property (@(posedge clk) disable iff (!rst_n)
                                   wb_valid |-> fifo_in_ready);

endmodule
