// tb_cost_aggregation: drives random census-range matching costs, chunk by
// chunk, through the four-path aggregation stage over two small frames and
// compares every aggregated cost S(p,d) with the software recursion in
// sgm_ref_pkg. Random idle cycles are inserted between chunks. Also checks
// the one-cycle latency and that all recursion terms (same disparity, +-1
// with P1, jump with P2, path restart) occurred.
module tb_cost_aggregation;
  import sgm_ref_pkg::*;

  localparam int W = 9, H = 7, DMAX = 128, UF = 32, NCH = DMAX / UF;
  localparam int CMAX = 48, P1 = 10, P2 = 120, N = W * H, FRAMES = 2;

  logic clk = 0, rst_n = 0;
  logic [11:0] width = 12'(W);
  logic [9:0]  height = 10'(H);
  logic in_valid = 0, in_last = 0;
  logic [1:0] in_chunk = 0;
  logic [5:0] in_cost [UF];
  logic out_valid, out_last;
  logic [1:0] out_chunk;
  logic [9:0] out_sum [UF];

  cost_aggregation #(.CMAX(CMAX), .P1(P1), .P2(P2), .DMAX(DMAX), .UF(UF)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cost [FRAMES][], s [FRAMES][];
  int tmp [];
  int n_out = 0;
  bit sent_q = 0;

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      cost[f] = new[N * DMAX];
      // smooth-ish costs with a valley so that every recursion term wins
      for (int i = 0; i < N; i++)
        for (int d = 0; d < DMAX; d++)
          cost[f][i*DMAX + d] = ($urandom_range(0, 3) == 0) ? $urandom_range(0, CMAX)
                                : ((d > 40 + i % 7) ? CMAX / 2 : $urandom_range(0, 6));
      tmp = cost[f];
      s[f] = sgm_aggregate(tmp, W, H, DMAX, P1, P2);
    end
    for (int j = 0; j < UF; j++) in_cost[j] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FRAMES; f++)
      for (int i = 0; i < N; i++)
        for (int k = 0; k < NCH; k++) begin
          while ($urandom_range(0, 4) == 0) begin
            in_valid = 0;
            @(negedge clk);
          end
          in_valid = 1;
          in_chunk = 2'(k);
          in_last  = (k == NCH - 1);
          for (int j = 0; j < UF; j++) in_cost[j] = 6'(cost[f][i*DMAX + k*UF + j]);
          @(negedge clk);
        end
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != FRAMES * N * NCH) begin
      failures++;
      $display("got %0d chunks, expected %0d", n_out, FRAMES * N * NCH);
    end
    $display("mechanisms: restart=%0d same=%0d p1=%0d p2=%0d", n_restart, n_same, n_p1, n_p2);
    checks += 4;
    if (n_restart == 0) failures++;
    if (n_same == 0) failures++;
    if (n_p1 == 0) failures++;
    if (n_p2 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one-cycle latency: out_valid follows in_valid by exactly one cycle
  always @(negedge clk) begin
    if (rst_n) begin
      checks++;
      if (out_valid !== sent_q) failures++;
      sent_q <= in_valid;
    end
  end

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int f, i, k;
      f = n_out / (N * NCH);
      i = (n_out / NCH) % N;
      k = n_out % NCH;
      checks++;
      if (32'(out_chunk) != k || out_last != (k == NCH - 1)) failures++;
      for (int j = 0; j < UF; j++) begin
        checks++;
        if (f >= FRAMES || 32'(out_sum[j]) != s[f][i*DMAX + k*UF + j]) begin
          failures++;
          if (failures < 10)
            $display("frame %0d pixel %0d (x=%0d y=%0d) d=%0d: got %0d expected %0d",
                     f, i, i % W, i / W, k*UF + j, out_sum[j], (f < FRAMES) ? s[f][i*DMAX + k*UF + j] : -1);
        end
      end
      n_out++;
    end
  end

  initial begin
    repeat (FRAMES * N * NCH * 4 + 1000) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
