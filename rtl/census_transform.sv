// census_transform: census bit string of a K x K window.
//
// Every neighbour q of the window centre p is compared with the centre in
// parallel; bit = 1 when I(p) > I(q), as in the paper's definition. The K*K-1
// bits are concatenated in raster order of the window (row 0 first, left to
// right, centre skipped), neighbour number i landing in bit i.
//
// Purely combinational; the caller registers the result.
module census_transform #(
  parameter int unsigned K  = 7,
  parameter int unsigned PW = 8,
  localparam int unsigned CB = K * K - 1
) (
  input  logic [PW-1:0] win [K][K],
  output logic [CB-1:0] census
);
  localparam int unsigned R = (K - 1) / 2;

  always_comb begin
    int unsigned i;
    i = 0;
    census = '0;
    for (int r = 0; r < K; r++) begin
      for (int c = 0; c < K; c++) begin
        if (!(r == R && c == R)) begin
          census[i] = (win[R][R] > win[r][c]);
          i++;
        end
      end
    end
  end

endmodule
