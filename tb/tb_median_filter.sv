// tb_median_filter: two disparity maps at a runtime frame size smaller than
// the maximum, streamed with random gaps; every output is compared with the
// median of the causal zero-padded 3x3 window of the input map.
module tb_median_filter;
  import sgm_ref_pkg::*;
  localparam int K = 3, W = 17, H = 9, N = W * H;
  logic clk = 0, rst_n = 0;
  logic [11:0] width = 12'(W);
  logic [9:0] height = 10'(H);
  logic in_valid = 0;
  logic [6:0] in_disp = 0;
  logic out_valid;
  logic [6:0] out_disp;

  median_filter #(.K(K), .DW(7), .MAX_COLS(1242), .MAX_ROWS(374)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_out = 0;
  iarr_t m [2];

  initial begin
    for (int f = 0; f < 2; f++) begin
      m[f] = new[N];
      // piecewise-flat map with salt noise, as a disparity map looks
      for (int i = 0; i < N; i++)
        m[f][i] = ($urandom_range(0, 6) == 0) ? $urandom_range(0, 127) : ((i % W) < W / 2 ? 20 : 90);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < N; i++) begin
        while ($urandom_range(0, 3) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_disp = 7'(m[f][i]);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != 2 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    automatic int f = n_out / N, i = n_out % N;
    automatic int e = median_at(m[f], W, i % W, i / W, K);
    checks++;
    if (32'(out_disp) != e) begin
      failures++;
      if (failures < 5) $display("f%0d (%0d,%0d) median %0d exp %0d", f, i % W, i / W, out_disp, e);
    end
    n_out++;
  end

  initial begin
    repeat (20 * N) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
