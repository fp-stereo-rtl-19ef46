// wta_disparity: winner-takes-all disparity selection.
//
// D(p) is the disparity of the smallest aggregated cost S(p,d). The UF costs
// of a chunk are reduced by a multi-level compare-and-select tree (each level
// halves the candidates, keeping the cost and its disparity), then merged with
// the running best of the pixel's earlier chunks. Ties go to the smaller
// disparity, a choice of this design.
//
// Interface: in_valid with in_chunk/in_last and the UF costs of chunk k
// (disparities k*UF..k*UF+UF-1). After the last chunk of a pixel, out_valid
// pulses for one cycle with out_disp and the winning cost out_cost. Output is
// registered: one cycle after the last chunk.
module wta_disparity #(
  parameter int unsigned SW   = 10,
  parameter int unsigned DMAX = 128,
  parameter int unsigned UF   = 32,
  localparam int unsigned NCH = DMAX / UF,
  localparam int unsigned KW  = (NCH < 2) ? 1 : $clog2(NCH),
  localparam int unsigned DW  = (DMAX < 2) ? 1 : $clog2(DMAX),
  localparam int unsigned LVL = (UF < 2) ? 0 : $clog2(UF)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [KW-1:0] in_chunk,
  input  logic          in_last,
  input  logic [SW-1:0] in_cost [UF],
  output logic          out_valid,
  output logic [DW-1:0] out_disp,
  output logic [SW-1:0] out_cost
);

  localparam int unsigned N2 = 1 << LVL;   // UF rounded up to a power of two

  logic [SW-1:0] tc [LVL+1][N2];
  logic [DW-1:0] td [LVL+1][N2];
  logic [SW-1:0] best_c, new_c;
  logic [DW-1:0] best_d, new_d;

  // compare/select tree over the chunk
  always_comb begin
    for (int i = 0; i < N2; i++) begin
      tc[0][i] = (i < UF) ? in_cost[i] : '1;
      td[0][i] = DW'(32'(in_chunk) * UF + i);
    end
    for (int l = 0; l < LVL; l++) begin
      for (int i = 0; i < N2; i++) begin
        if (i < (N2 >> (l + 1))) begin
          if (tc[l][2*i+1] < tc[l][2*i]) begin
            tc[l+1][i] = tc[l][2*i+1];
            td[l+1][i] = td[l][2*i+1];
          end else begin
            tc[l+1][i] = tc[l][2*i];
            td[l+1][i] = td[l][2*i];
          end
        end else begin
          tc[l+1][i] = '1;
          td[l+1][i] = '0;
        end
      end
    end
    // merge with the earlier chunks (strictly smaller wins: lower d on ties)
    if (in_chunk == '0 || tc[LVL][0] < best_c) begin
      new_c = tc[LVL][0];
      new_d = td[LVL][0];
    end else begin
      new_c = best_c;
      new_d = best_d;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_c    <= '1;
      best_d    <= '0;
      out_valid <= 1'b0;
      out_disp  <= '0;
      out_cost  <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        best_c <= new_c;
        best_d <= new_d;
        if (in_last) begin
          out_disp <= new_d;
          out_cost <= new_c;
        end
      end
    end
  end

endmodule
