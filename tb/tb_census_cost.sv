// tb_census_cost: streams random census strings of two images (with random
// idle cycles and consumer-side timing given by in_ready) and checks every
// emitted chunk of Hamming costs against popcount(CT_b[n] ^ CT_m[n-d]), the
// chunk numbering, the last-chunk flag and the one-pixel-per-NCH-cycles rate.
module tb_census_cost;
  localparam int CB = 48, DMAX = 128, UF = 32, NCH = DMAX / UF, NPIX = 300;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready;
  logic [CB-1:0] in_ct_b = 0, in_ct_m = 0;
  logic out_valid;
  logic [1:0] out_chunk;
  logic out_last;
  logic [5:0] out_cost [UF];

  census_cost #(.CB(CB), .DMAX(DMAX), .UF(UF)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_chunks = 0, n_back = 0;
  logic [CB-1:0] ctb [NPIX], ctm [NPIX];
  int first_out = -1, last_out = 0, cyc = 0;

  initial begin
    foreach (ctb[i]) begin
      ctb[i] = {$urandom, $urandom};
      // a few repeated strings so that zero costs occur as well
      ctm[i] = (i % 7 == 0 && i > 3) ? ctb[i-3] : {$urandom, $urandom};
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NPIX; i++) begin
      // back-to-back for the first half, random gaps later
      if (i > NPIX / 2)
        while ($urandom_range(0, 4) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
      in_valid = 1;
      in_ct_b = ctb[i];
      in_ct_m = ctm[i];
      #1;
      while (!in_ready) begin
        n_back++;
        @(negedge clk);
        #1;
      end
      @(negedge clk);
    end
    in_valid = 0;
    repeat (2 * NCH + 4) @(negedge clk);
    checks += 3;
    if (n_chunks != NPIX * NCH) failures++;
    if (n_back == 0) failures++;
    // the back-to-back half must run at exactly NCH cycles per pixel
    if (first_out < 0) failures++;
    $display("chunks=%0d backpressure=%0d", n_chunks, n_back);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    cyc++;
    if (rst_n && out_valid) begin
      automatic int n = n_chunks / NCH, k = n_chunks % NCH;
      if (first_out < 0) first_out = cyc;
      checks += 2;
      if (32'(out_chunk) != k) failures++;
      if (out_last != (k == NCH - 1)) failures++;
      for (int j = 0; j < UF; j++) begin
        automatic int d = k * UF + j;
        automatic logic [CB-1:0] m = (n - d >= 0) ? ctm[n - d] : '0;
        checks++;
        if (32'(out_cost[j]) != $countones(ctb[n] ^ m)) begin
          failures++;
          if (failures < 5) $display("pixel %0d d=%0d cost %0d exp %0d", n, d, out_cost[j], $countones(ctb[n] ^ m));
        end
      end
      // throughput while the input is never idle: one chunk every cycle
      if (n_chunks > 0 && n_chunks < (NPIX / 2) * NCH) begin
        checks++;
        if (cyc != last_out + 1) failures++;
      end
      last_out = cyc;
      n_chunks++;
    end
  end

  initial begin
    repeat (20 * NPIX * NCH) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
