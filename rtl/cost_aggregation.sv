// cost_aggregation: four-path semi-global cost aggregation, UF disparities
// per cycle.
//
// For every pixel p and disparity d the path cost along direction r is
//   L_r(p,d) = C(p,d) + min( L_r(p-r,d), L_r(p-r,d-1)+P1, L_r(p-r,d+1)+P1,
//                            min_i L_r(p-r,i)+P2 ) - min_i L_r(p-r,i)
// and the aggregated cost is S(p,d) = sum over r of L_r(p,d). Only the four
// directions whose predecessor has already been seen in raster order are used:
// 0 deg (left neighbour), 45 deg (upper left), 90 deg (up) and 135 deg (upper
// right). The paper's figure draws the three upper neighbours without naming
// which angle is which; the assignment above is this design's.
//
// Storage follows the paper: the 0-degree path costs of the previous pixel are
// kept in registers, and the 45/90/135-degree path costs of the previous row
// are kept in one data-packed line buffer per direction (path_line_buffer).
// Each pixel takes NCH = DMAX/UF cycles; in chunk cycle k the stage
//   * computes L_r for d = k*UF..k*UF+UF-1 in all four directions and their
//     sum, which leaves the stage one cycle later;
//   * writes this row's L_r chunk into the direction's line buffer at the
//     pixel's column, and
//   * reads, for the next pixel in raster order, chunk k of the previous-row
//     path costs at that pixel's predecessor column into a staging register.
// At the pixel's last chunk the staging registers, and the 0-degree result
// just completed, become the predecessor vectors of the next pixel, together
// with their minima, which are accumulated chunk by chunk.
//
// A pixel with no predecessor in a direction (first row, first or last column)
// starts that path: L_r(p,d) = C(p,d). The paper is silent on borders; this is
// the usual SGM convention.
//
// The left-neighbour dependence is resolved within one clock cycle: the
// minimum of the left pixel's 0-degree costs is complete in a register when
// the next pixel's first chunk starts. The paper instead schedules the
// recursion over a multi-cycle HLS pipeline and hides its latency by
// interleaving the two halves of each row; in this RTL no such latency exists,
// so the stage runs at one chunk per cycle without interleaving.
//
// Interface: in_valid with in_chunk (k) and in_last (k = NCH-1) and the UF
// matching costs; chunks of one pixel must arrive in order, pixels in raster
// order over a width x height frame (run-time sizes up to MAX_COLS x MAX_ROWS).
// The frame wraps after the last pixel. Outputs are registered, one cycle
// after the input; there is no back-pressure.
module cost_aggregation #(
  parameter int unsigned CMAX     = 48,   // largest matching cost
  parameter int unsigned P1       = 10,
  parameter int unsigned P2       = 120,
  parameter int unsigned DMAX     = 128,
  parameter int unsigned UF       = 32,
  parameter int unsigned MAX_COLS = 1242,
  parameter int unsigned MAX_ROWS = 374,
  localparam int unsigned CW   = $clog2(CMAX + 1),
  localparam int unsigned LW   = $clog2(CMAX + P2 + 1),
  localparam int unsigned SW   = $clog2(4 * (CMAX + P2) + 1),
  localparam int unsigned NCH  = DMAX / UF,
  localparam int unsigned KW   = (NCH < 2) ? 1 : $clog2(NCH),
  localparam int unsigned COLW = (MAX_COLS < 2) ? 1 : $clog2(MAX_COLS),
  localparam int unsigned ROWW = (MAX_ROWS < 2) ? 1 : $clog2(MAX_ROWS),
  localparam int unsigned AW   = (MAX_COLS * NCH < 2) ? 1 : $clog2(MAX_COLS * NCH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [COLW:0]   width,    // run-time frame size
  input  logic [ROWW:0]   height,
  input  logic            in_valid,
  input  logic [KW-1:0]   in_chunk,
  input  logic            in_last,
  input  logic [CW-1:0]   in_cost [UF],
  output logic            out_valid,
  output logic [KW-1:0]   out_chunk,
  output logic            out_last,
  output logic [SW-1:0]   out_sum [UF]
);
  import fp_stereo_pkg::*;

  localparam int unsigned IW = LW + 2;          // internal headroom
  localparam logic [LW-1:0] LMAX = '1;

  // ---------------- pixel position ----------------
  logic [COLW-1:0] x, xn;
  logic [ROWW-1:0] y, yn;
  logic            x_end;

  assign x_end = (32'(x) + 1 >= 32'(width));
  always_comb begin
    if (x_end) begin
      xn = '0;
      yn = (32'(y) + 1 >= 32'(height)) ? '0 : y + 1'b1;
    end else begin
      xn = x + 1'b1;
      yn = y;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x <= '0;
      y <= '0;
    end else if (in_valid && in_last) begin
      x <= xn;
      y <= yn;
    end
  end

  // ---------------- predecessor state ----------------
  logic [LW-1:0] prev     [NDIR][DMAX];  // L_r(p-r, .)
  logic [LW-1:0] prev_min [NDIR];        // min_i L_r(p-r, i)
  logic          prev_ok  [NDIR];        // predecessor exists
  logic [LW-1:0] stage    [NDIR][DMAX];  // being built for the next pixel
  logic [LW-1:0] run_min  [NDIR];        // running minimum of stage

  logic [LW-1:0] l_new  [NDIR][UF];      // path costs of this chunk
  logic [LW-1:0] feed   [NDIR][UF];      // chunk entering the stage regs
  logic [LW-1:0] feed_min [NDIR];        // running min including feed
  logic          next_ok  [NDIR];

  // line buffer ports, directions 1..3 (the 0-degree path lives in registers)
  logic [AW-1:0] waddr;
  logic [AW-1:0] raddr  [1:NDIR-1];
  logic [LW-1:0] rdata  [1:NDIR-1][UF];

  // ---------------- path cost recursion ----------------
  always_comb begin
    for (int r = 0; r < NDIR; r++) begin
      for (int j = 0; j < UF; j++) begin
        int unsigned d;
        logic [IW-1:0] best, cand;
        d = 32'(in_chunk) * UF + j;
        best = IW'(prev[r][d]);
        if (d > 0) begin
          cand = IW'(prev[r][d-1]) + IW'(P1);
          if (cand < best) best = cand;
        end
        if (d < DMAX - 1) begin
          cand = IW'(prev[r][d+1]) + IW'(P1);
          if (cand < best) best = cand;
        end
        cand = IW'(prev_min[r]) + IW'(P2);
        if (cand < best) best = cand;
        if (prev_ok[r])
          l_new[r][j] = LW'(IW'(in_cost[j]) + best - IW'(prev_min[r]));
        else
          l_new[r][j] = LW'(in_cost[j]);
      end
    end
  end

  // ---------------- line buffers for 45/90/135 degrees ----------------
  assign waddr = AW'(32'(x) * NCH + 32'(in_chunk));

  always_comb begin
    for (int r = 1; r < NDIR; r++) begin
      int col;
      // predecessor column of the next pixel: xn-1, xn, xn+1
      col = int'(xn) + r - 2;
      if (col < 0 || col >= int'(width)) col = 0;
      raddr[r] = AW'(col * int'(NCH) + int'(in_chunk));
    end
    next_ok[DIR_0]   = (xn != '0);
    next_ok[DIR_45]  = (yn != '0) && (xn != '0);
    next_ok[DIR_90]  = (yn != '0);
    next_ok[DIR_135] = (yn != '0) && (32'(xn) + 1 < 32'(width));
  end

  for (genvar r = 1; r < NDIR; r++) begin : g_lb
    path_line_buffer #(
      .LW(LW), .UF(UF), .DMAX(DMAX), .MAX_COLS(MAX_COLS)
    ) u_lb (
      .clk   (clk),
      .we    (in_valid),
      .waddr (waddr),
      .wdata (l_new[r]),
      .raddr (raddr[r]),
      .rdata (rdata[r])
    );
  end

  // chunk entering the staging registers: the new 0-degree costs, and the
  // previous-row costs just read for the other directions
  always_comb begin
    for (int j = 0; j < UF; j++) feed[0][j] = l_new[0][j];
    for (int r = 1; r < NDIR; r++)
      for (int j = 0; j < UF; j++) feed[r][j] = rdata[r][j];
  end

  always_comb begin
    for (int r = 0; r < NDIR; r++) begin
      logic [LW-1:0] m;
      m = (in_chunk == '0) ? LMAX : run_min[r];
      for (int j = 0; j < UF; j++)
        if (feed[r][j] < m) m = feed[r][j];
      feed_min[r] = m;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < NDIR; r++) begin
        for (int j = 0; j < UF; j++) stage[r][32'(in_chunk) * UF + j] <= feed[r][j];
        run_min[r] <= feed_min[r];
        if (in_last) begin
          for (int d = 0; d < DMAX; d++)
            prev[r][d] <= (d / UF == 32'(in_chunk)) ? feed[r][d % UF] : stage[r][d];
          prev_min[r] <= feed_min[r];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NDIR; r++) prev_ok[r] <= 1'b0;
    end else if (in_valid && in_last) begin
      for (int r = 0; r < NDIR; r++) prev_ok[r] <= next_ok[r];
    end
  end

  // ---------------- sum over paths ----------------
  logic [SW-1:0] sum_new [UF];

  always_comb begin
    for (int j = 0; j < UF; j++) begin
      sum_new[j] = '0;
      for (int r = 0; r < NDIR; r++) sum_new[j] = sum_new[j] + SW'(l_new[r][j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_chunk <= '0;
      out_last  <= 1'b0;
      for (int j = 0; j < UF; j++) out_sum[j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_chunk <= in_chunk;
        out_last  <= in_last;
        for (int j = 0; j < UF; j++) out_sum[j] <= sum_new[j];
      end
    end
  end

endmodule
