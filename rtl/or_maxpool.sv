// or_maxpool -- 2x2 max pooling with stride 2 on binary feature maps.
//
// Because pooling is placed after binarisation, the maximum of four binary
// values is their OR.  Each of the C maps of H x W bits becomes a map of
// H/2 x W/2 bits; output (c, y, x) is the OR of input (c, 2y..2y+1,
// 2x..2x+1).  H and W must be even.
//
// Map layout: [channel][row][column], row 0 / column 0 at the low index.
// Purely combinational, one 4-input OR per output bit.
module or_maxpool #(
  parameter int unsigned C = 16,
  parameter int unsigned H = 32,
  parameter int unsigned W = 32
) (
  input  logic [C-1:0][H-1:0][W-1:0]     map_i,
  output logic [C-1:0][H/2-1:0][W/2-1:0] map_o
);

  for (genvar c = 0; c < C; c++) begin : g_ch
    for (genvar y = 0; y < H / 2; y++) begin : g_row
      for (genvar x = 0; x < W / 2; x++) begin : g_col
        assign map_o[c][y][x] = map_i[c][2*y][2*x]   | map_i[c][2*y][2*x+1]
                              | map_i[c][2*y+1][2*x] | map_i[c][2*y+1][2*x+1];
      end
    end
  end

endmodule
