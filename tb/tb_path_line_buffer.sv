// tb_path_line_buffer: random writes and reads against an array model; the
// read port is combinational and returns the contents before a same-cycle
// write (read-old-data), which the aggregation relies on.
module tb_path_line_buffer;
  localparam int LW = 8, UF = 32, DMAX = 128, MAX_COLS = 40, WORDS = MAX_COLS * DMAX / UF;
  logic clk = 0, we = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [LW-1:0] wdata [UF], rdata [UF];

  path_line_buffer #(.LW(LW), .UF(UF), .DMAX(DMAX), .MAX_COLS(MAX_COLS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_coll = 0;
  logic [LW-1:0] model [WORDS][UF];
  bit written [WORDS];

  initial begin
    foreach (wdata[j]) wdata[j] = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      we = ($urandom_range(0, 2) != 0);
      waddr = 8'($urandom_range(0, WORDS - 1));
      raddr = (t % 4 == 0) ? waddr : 8'($urandom_range(0, WORDS - 1));
      foreach (wdata[j]) wdata[j] = LW'($urandom);
      #1;
      if (written[raddr]) begin
        checks++;
        if (we && raddr == waddr) n_coll++;
        for (int j = 0; j < UF; j++)
          if (rdata[j] != model[raddr][j]) begin
            failures++;
            break;
          end
      end
      @(posedge clk);
      if (we) begin
        for (int j = 0; j < UF; j++) model[waddr][j] = wdata[j];
        written[waddr] = 1;
      end
    end
    checks++;
    if (n_coll == 0) failures++;
    $display("same-address read/write cycles=%0d", n_coll);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
