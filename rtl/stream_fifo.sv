// stream_fifo: short synchronous FIFO placed between two pipeline tasks.
//
// In the dataflow pipeline every task runs on its own and talks to the next
// through a stream; the FIFO absorbs rate differences and its depth is kept as
// small as the data path allows. Here it decouples the census front end, which
// takes one pixel per cycle, from the aggregation back end, which needs
// DMAX/UF cycles per pixel; when it fills, the front end is stalled through
// the producer's own flow control.
//
// Interface: valid/ready on both sides. A word is written when in_valid &&
// in_ready and read when out_valid && out_ready. The output is the head of
// the queue (first-word fall-through). count gives the fill level so that a
// producer with data in flight can reserve room. Depth and width are
// parameters; the depth is this design's choice.
module stream_fifo #(
  parameter int unsigned WIDTH = 96,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned AW = (DEPTH < 2) ? 1 : $clog2(DEPTH),
  localparam int unsigned CNTW = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [CNTW-1:0]  count
);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;
  logic             push, pop;

  assign in_ready  = (count != CNTW'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rd_ptr];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + CNTW'(push) - CNTW'(pop);
    end
  end

  // A producer must not offer data to a full FIFO and expect it taken.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= CNTW'(DEPTH));

endmodule
