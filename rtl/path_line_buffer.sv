// path_line_buffer: one image row of SGM path costs, stored data-packed.
//
// A row of path costs L_r(p,d) has MAX_COLS x DMAX entries. Instead of
// splitting it into UF separate memories (one per unrolled copy of the
// computation), the UF costs that are produced and consumed together are
// packed into one wide word, so the row occupies MAX_COLS*DMAX/UF words of
// UF*LW bits in a single memory with one read and one write port. Word
// address = column*NCH + chunk, NCH = DMAX/UF.
//
// Timing: the write is synchronous; the read is combinational (the word is
// available in the cycle its address is applied), and a read of the address
// being written in the same cycle returns the old contents. The aggregation
// stage relies on that to read the previous row of a column while it
// overwrites it with the current row. The combinational read is this design's
// choice; it maps to distributed rather than block RAM.
module path_line_buffer #(
  parameter int unsigned LW       = 8,
  parameter int unsigned UF       = 32,
  parameter int unsigned DMAX     = 128,
  parameter int unsigned MAX_COLS = 1242,
  localparam int unsigned NCH   = DMAX / UF,
  localparam int unsigned WORDS = MAX_COLS * NCH,
  localparam int unsigned AW    = (WORDS < 2) ? 1 : $clog2(WORDS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [LW-1:0] wdata [UF],
  input  logic [AW-1:0] raddr,
  output logic [LW-1:0] rdata [UF]
);

  logic [UF*LW-1:0] mem [WORDS];
  logic [UF*LW-1:0] wpacked, rpacked;

  // pack / unpack: cost j occupies bits j*LW +: LW of the word
  always_comb begin
    for (int j = 0; j < UF; j++) wpacked[j*LW +: LW] = wdata[j];
    rpacked = mem[raddr];
    for (int j = 0; j < UF; j++) rdata[j] = rpacked[j*LW +: LW];
  end

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wpacked;
  end

endmodule
