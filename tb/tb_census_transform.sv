// tb_census_transform: random 7x7 windows (including flat and extreme ones)
// against the census definition: bit i set when the centre is larger than
// the i-th neighbour in raster order, centre skipped.
module tb_census_transform;
  localparam int K = 7, CB = K * K - 1;
  logic [7:0] win [K][K];
  logic [CB-1:0] census;

  census_transform #(.K(K), .PW(8)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [CB-1:0] e;
      int i;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          win[r][c] = (t % 5 == 0) ? 8'($urandom_range(0, 3)) : 8'($urandom_range(0, 255));
      #1;
      i = 0;
      e = '0;
      for (int r = 0; r < K; r++)
        for (int c = 0; c < K; c++)
          if (!(r == 3 && c == 3)) begin
            e[i] = (win[3][3] > win[r][c]);
            i++;
          end
      checks++;
      if (census !== e) begin
        failures++;
        if (failures < 5) $display("census %h expected %h", census, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
