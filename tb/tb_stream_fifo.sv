// tb_stream_fifo: random push/pop traffic against a queue model; checks data
// order, count, full (in_ready low) and empty (out_valid low) behaviour.
module tb_stream_fifo;
  localparam int WIDTH = 16, DEPTH = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [WIDTH-1:0] in_data = 0, out_data;
  logic [2:0] count;

  stream_fifo #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [WIDTH-1:0] q [$];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      // phases with a fast or slow consumer so both full and empty occur
      in_valid  = ($urandom_range(0, 99) < ((t / 300) % 2 ? 80 : 30));
      out_ready = ($urandom_range(0, 99) < ((t / 300) % 2 ? 30 : 80));
      in_data   = WIDTH'($urandom);
      #1;
      checks += 3;
      if (32'(count) != q.size()) failures++;
      if (in_ready != (q.size() < DEPTH)) failures++;
      if (out_valid != (q.size() > 0)) failures++;
      if (out_valid) begin
        checks++;
        if (out_data != q[0]) failures++;
      end
      if (!in_ready) n_full++;
      if (!out_valid) n_empty++;
      @(posedge clk);
      if (out_valid && out_ready) void'(q.pop_front());
      if (in_valid && in_ready) q.push_back(in_data);
      @(negedge clk);
    end
    checks += 2;
    if (n_full == 0) failures++;
    if (n_empty == 0) failures++;
    $display("full=%0d empty=%0d", n_full, n_empty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(negedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
