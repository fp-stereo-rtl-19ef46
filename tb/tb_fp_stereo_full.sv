// tb_fp_stereo_full: the pipeline at its default parameters on one frame of
// the full default size, 1242 x 374 pixels (the KITTI resolution) with 128
// disparities. The synthetic pair has a known disparity per image band; every
// output is compared with the software reference in sgm_ref_pkg, the sustained
// rate of one pixel per DMAX/UF cycles is checked (Eq. 1 of the cycle model),
// and the share of interior pixels that recover the true disparity must be
// high. Input gaps and stalls are exercised as in the small-frame test.
module tb_fp_stereo_full;
  import sgm_ref_pkg::*;

  localparam int W = 1242, H = 374, K = 7, DMAX = 128, UF = 32, MK = 3;
  localparam int P1 = 10, P2 = 120;
  localparam int N = W * H, NCH = DMAX / UF, FRAMES = 1;

  logic clk = 0, rst_n = 0;
  logic [11:0] width = 12'(W);
  logic [9:0]  height = 10'(H);
  logic in_valid = 0, in_ready;
  logic [7:0] in_base = 0, in_match = 0;
  logic out_valid;
  logic [6:0] out_disp;

  fp_stereo_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  img_t base [FRAMES], match [FRAMES], none;
  int disp [], expect_d [FRAMES][];
  int n_stall = 0, n_burst = 0, n_out = 0, n_wrap = 0, n_good = 0, n_inner = 0;
  longint t_first_in = -1, t_last_out = 0, cyc = 0;

  // synthetic pair: random texture, match shifted by a per-band disparity
  function automatic int tex(int f, int x, int y);
    return int'((32'(x) * 32'd2654435761 ^ 32'(y) * 32'd40503 ^ 32'(f) * 32'd977) >> 9) & 255;
  endfunction

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      base[f] = new[N];
      match[f] = new[N];
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int dt;
          dt = (y < H / 2) ? 21 : 57;
          base[f][y*W+x]  = tex(f, x, y);
          match[f][y*W+x] = tex(f, x + dt, y);
        end
      disp = sgm_disparity(base[f], match[f], (f == 0) ? none : match[f-1], W, H, K, DMAX, P1, P2);
      expect_d[f] = new[N];
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) expect_d[f][y*W+x] = median_at(disp, W, x, y, MK);
    end
  end

  always @(posedge clk) cyc++;

  // stimulus: bursts of valid input with random gaps. Inputs change and
  // handshakes are sampled at the falling edge, away from the active edge.
  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++) begin
      for (int i = 0; i < N; i++) begin
        while ($urandom_range(0, 5) == 0) begin
          in_valid = 1'b0;
          @(negedge clk);
        end
        in_valid = 1'b1;
        in_base  = 8'(base[f][i]);
        in_match = 8'(match[f][i]);
        forever begin
          automatic logic acc = in_ready;
          if (t_first_in < 0) t_first_in = cyc;
          @(negedge clk);
          if (acc) break;
          n_stall++;
        end
      end
      if (f + 1 < FRAMES) n_wrap++;
    end
    in_valid = 1'b0;
  end

  // back-to-back acceptance shows the front end running at one pixel/cycle
  logic took_q = 0;
  always @(negedge clk) begin
    if (in_valid && in_ready && took_q) n_burst++;
    took_q <= in_valid && in_ready;
  end

  // output checker
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int f, i;
      f = n_out / N;
      i = n_out % N;
      checks++;
      if (f >= FRAMES || int'(out_disp) != expect_d[f][i]) begin
        failures++;
        if (failures < 10)
          $display("mismatch frame %0d pixel %0d (x=%0d y=%0d): got %0d expected %0d",
                   f, i, i % W, i / W, out_disp, (f < FRAMES) ? expect_d[f][i] : -1);
      end
      if (i % W >= DMAX + 8 && i / W >= 8 &&
          (i / W - 4 - H / 2 > 4 || H / 2 - (i / W - 4) > 4)) begin
        n_inner++;
        if (int'(out_disp) == ((i / W - 4 < H / 2) ? 21 : 57)) n_good++;
      end
      n_out++;
      t_last_out = cyc;
      if (n_out == FRAMES * N) finish_test();
    end
  end

  task automatic finish_test();
    longint span;
    repeat (5) @(negedge clk);
    span = t_last_out - t_first_in;
    $display("pixels=%0d span=%0d cycles (lower bound %0d)", n_out, span, FRAMES * N * NCH);
    // sustained rate: one pixel per NCH cycles plus a short pipeline latency
    checks++;
    if (span < longint'((FRAMES * N - 1) * NCH) || span > longint'(FRAMES * N * NCH + 40)) begin
      failures++;
      $display("throughput check failed");
    end
    $display("mechanisms: stall=%0d burst=%0d restart=%0d same=%0d p1=%0d p2=%0d wrap=%0d",
             n_stall, n_burst, n_restart, n_same, n_p1, n_p2, n_wrap);
    if (n_stall == 0)   begin failures++; $display("no input stall seen"); end
    if (n_burst == 0)   begin failures++; $display("no burst seen"); end
    if (n_restart == 0) begin failures++; $display("no path restart"); end
    if (n_p1 == 0)      begin failures++; $display("P1 term never won"); end
    if (n_p2 == 0)      begin failures++; $display("P2 term never won"); end
    // the known disparity must be recovered on nearly all interior pixels
    $display("accuracy: %0d of %0d interior pixels at the true disparity", n_good, n_inner);
    if (n_good * 100 < n_inner * 95) begin failures++; $display("accuracy too low"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin
    repeat (FRAMES * N * NCH * 3 + 2000) @(posedge clk);
    failures++;
    $display("watchdog: %0d of %0d outputs", n_out, FRAMES * N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
