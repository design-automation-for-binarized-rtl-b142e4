// tb_or_maxpool -- self-checking test of 2x2 OR pooling.
//
// Three maps of 6 x 8 bits; random maps with varying density plus
// all-zeros and all-ones.  Each output bit is compared with an OR of the
// four input bits of its window, indexed independently from the RTL.
module tb_or_maxpool;
  localparam int unsigned C = 3, H = 6, W = 8;

  logic [C-1:0][H-1:0][W-1:0]     in_map;
  logic [C-1:0][H/2-1:0][W/2-1:0] out_map;
  logic [C*H*W-1:0]               in_flat;
  logic [C*(H/2)*(W/2)-1:0]       out_flat;

  int checks = 0, failures = 0;

  or_maxpool #(.C(C), .H(H), .W(W)) dut (.map_i(in_map), .map_o(out_map));

  assign in_map   = in_flat;
  assign out_flat = out_map;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 200; k++) begin
      for (int i = 0; i < C * H * W; i++) in_flat[i] = ($urandom % 16) < (k % 8);
      if (k == 0) in_flat = '0;
      if (k == 1) in_flat = '1;
      #1;
      for (int c = 0; c < C; c++)
        for (int y = 0; y < H / 2; y++)
          for (int x = 0; x < W / 2; x++) begin
            bit exp;
            exp = 0;
            for (int dy = 0; dy < 2; dy++)
              for (int dx = 0; dx < 2; dx++)
                exp |= in_flat[(c * H + 2 * y + dy) * W + 2 * x + dx];
            checks++;
            if (out_flat[(c * (H / 2) + y) * (W / 2) + x] !== exp) begin
              failures++;
              if (failures < 10) $display("FAIL c=%0d y=%0d x=%0d", c, y, x);
            end
          end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
