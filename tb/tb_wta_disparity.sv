// tb_wta_disparity: random aggregated-cost vectors, delivered as NCH chunks
// of UF costs with random gaps, against a scan for the smallest cost; equal
// minima must resolve to the smallest disparity.
module tb_wta_disparity;
  localparam int SW = 10, DMAX = 128, UF = 32, NCH = DMAX / UF, NPIX = 400;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_last = 0;
  logic [1:0] in_chunk = 0;
  logic [SW-1:0] in_cost [UF];
  logic out_valid;
  logic [6:0] out_disp;
  logic [SW-1:0] out_cost;

  wta_disparity #(.SW(SW), .DMAX(DMAX), .UF(UF)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_out = 0, n_ties = 0;
  int cost [NPIX][DMAX];
  int exp_d [NPIX], exp_c [NPIX];

  initial begin
    for (int i = 0; i < NPIX; i++) begin
      int cnt;
      // narrow ranges make ties frequent, including across chunks
      for (int d = 0; d < DMAX; d++)
        cost[i][d] = (i % 3 == 0) ? $urandom_range(5, 12) : $urandom_range(0, 1023);
      if (i % 11 == 0) for (int d = 0; d < DMAX; d++) cost[i][d] = 77;
      exp_c[i] = 1 << 30;
      for (int d = 0; d < DMAX; d++)
        if (cost[i][d] < exp_c[i]) begin
          exp_c[i] = cost[i][d];
          exp_d[i] = d;
        end
      cnt = 0;
      for (int d = 0; d < DMAX; d++) if (cost[i][d] == exp_c[i]) cnt++;
      if (cnt > 1) n_ties++;
    end
    foreach (in_cost[j]) in_cost[j] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NPIX; i++)
      for (int k = 0; k < NCH; k++) begin
        while ($urandom_range(0, 5) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_chunk = 2'(k);
        in_last = (k == NCH - 1);
        for (int j = 0; j < UF; j++) in_cost[j] = SW'(cost[i][k * UF + j]);
        @(negedge clk);
      end
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks += 2;
    if (n_out != NPIX) failures++;
    if (n_ties == 0) failures++;
    $display("ties=%0d", n_ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (32'(out_disp) != exp_d[n_out] || 32'(out_cost) != exp_c[n_out]) begin
      failures++;
      if (failures < 5) $display("pixel %0d disp %0d/%0d exp %0d/%0d", n_out, out_disp, out_cost, exp_d[n_out], exp_c[n_out]);
    end
    n_out++;
  end

  initial begin
    repeat (10 * NPIX * NCH) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
