// tb_window_line_buffer: streams two random frames through a 7x7 window/line
// buffer with random idle cycles and checks every window against the
// zero-padded causal neighbourhood computed directly from the image, plus the
// one-cycle latency and the coordinates carried with the window.
module tb_window_line_buffer;
  localparam int K = 7, W = 23, H = 11, N = W * H;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic [7:0] in_px = 0;
  logic [10:0] in_x = 0;
  logic [8:0] in_y = 0;
  logic out_valid;
  logic [7:0] out_win [K][K];
  logic [10:0] out_x;
  logic [8:0] out_y;

  window_line_buffer #(.K(K), .PW(8), .MAX_COLS(1242), .MAX_ROWS(374)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_out = 0;
  int img [2][N];
  bit sent_q = 0;

  initial begin
    foreach (img[f, i]) img[f][i] = $urandom_range(0, 255);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 2; f++)
      for (int i = 0; i < N; i++) begin
        while ($urandom_range(0, 3) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_px = 8'(img[f][i]);
        in_x = 11'(i % W);
        in_y = 9'(i / W);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (n_out != 2 * N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n) begin
    checks++;
    if (out_valid != sent_q) failures++;
    sent_q <= in_valid;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    int f, i, x, y;
    f = n_out / N;
    i = n_out % N;
    x = i % W;
    y = i / W;
    checks++;
    if (32'(out_x) != x || 32'(out_y) != y) failures++;
    for (int r = 0; r < K; r++)
      for (int c = 0; c < K; c++) begin
        int yy, xx, e;
        yy = y - K + 1 + r;
        xx = x - K + 1 + c;
        e = (yy < 0 || xx < 0) ? 0 : img[f][yy * W + xx];
        checks++;
        if (32'(out_win[r][c]) != e) begin
          failures++;
          if (failures < 5) $display("f%0d (%0d,%0d) win[%0d][%0d]=%0d exp %0d", f, x, y, r, c, out_win[r][c], e);
        end
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
