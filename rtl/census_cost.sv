// census_cost: census matching cost C(p,d) for UF disparities per cycle.
//
// A shift register holds the census strings of the last DMAX match-image
// pixels, the newest at position 0, so position d holds CT_m(p-d) when the
// base pixel p is current. For each accepted pixel the register shifts by one
// and the base string is latched; then, over DMAX/UF cycles, chunk k delivers
// the Hamming distances between CT_b(p) and CT_m(p-d) for
// d = k*UF .. k*UF+UF-1. This is the paper's census cost structure (the match
// values move through a FIFO, d = 0 at the newest end) with the disparity loop
// unrolled by UF.
//
// Interface: in_valid/in_ready take one (base, match) census pair. in_ready is
// high when idle or in the last chunk cycle of the current pixel, so pixels
// follow back to back every DMAX/UF cycles. out_valid marks a cost chunk;
// out_chunk is k and out_last marks k = DMAX/UF-1. Latency: the first chunk
// appears two cycles after the pixel is taken. The shift register resets to
// zero, so disparities that reach before the first pixel of the stream compare
// against an all-zero string.
module census_cost #(
  parameter int unsigned CB   = 48,   // census string bits
  parameter int unsigned DMAX = 128,
  parameter int unsigned UF   = 32,
  localparam int unsigned CW  = $clog2(CB + 1),
  localparam int unsigned NCH = DMAX / UF,
  localparam int unsigned KW  = (NCH < 2) ? 1 : $clog2(NCH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [CB-1:0]  in_ct_b,
  input  logic [CB-1:0]  in_ct_m,
  output logic           out_valid,
  output logic [KW-1:0]  out_chunk,
  output logic           out_last,
  output logic [CW-1:0]  out_cost [UF]
);

  logic [CB-1:0] ct_m_sr [DMAX];
  logic [CB-1:0] ct_b_q;
  logic          busy;
  logic [KW-1:0] k;
  logic          last_k;
  logic          take;

  assign last_k   = (32'(k) == NCH - 1);
  assign in_ready = !busy || last_k;
  assign take     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int d = 0; d < DMAX; d++) ct_m_sr[d] <= '0;
      ct_b_q    <= '0;
      busy      <= 1'b0;
      k         <= '0;
      out_valid <= 1'b0;
      out_chunk <= '0;
      out_last  <= 1'b0;
      for (int j = 0; j < UF; j++) out_cost[j] <= '0;
    end else begin
      // emit one chunk of the current pixel
      out_valid <= busy;
      if (busy) begin
        out_chunk <= k;
        out_last  <= last_k;
        for (int j = 0; j < UF; j++)
          out_cost[j] <= CW'($countones(ct_b_q ^ ct_m_sr[32'(k) * UF + j]));
      end
      // advance the chunk counter / take the next pixel
      if (busy && !last_k) k <= k + 1'b1;
      else begin
        k    <= '0;
        busy <= take;
      end
      if (take) begin
        ct_m_sr[0] <= in_ct_m;
        for (int d = 1; d < DMAX; d++) ct_m_sr[d] <= ct_m_sr[d-1];
        ct_b_q <= in_ct_b;
      end
    end
  end

endmodule
