// tb_bin_conv_layer -- self-checking test of a binary 3x3 convolutional
// layer with hard-wired filters.
//
// A reduced layer (2 -> 6 maps on a 7 x 5 map, layer index 1) keeps the
// simulation short while exercising every feature: zero padding on all four
// borders, a receptive field spanning two input maps, and all four sign
// codes (six filters).  Random input maps are compared bit for bit with the
// behavioural model of bnn_ref_pkg, which recomputes every neuron with
// loops.  The test fails if some mechanism (each sign mode firing and
// quiet, padded windows) never happened.
module tb_bin_conv_layer;
  import bnn_pkg::*;
  localparam int unsigned IF = 2, OF = 6, H = 7, W = 5, LAYER = 1, SEED = 1;

  logic [IF-1:0][H-1:0][W-1:0] in_map;
  logic [OF-1:0][H-1:0][W-1:0] out_map;
  logic [IF*H*W-1:0]           in_flat;
  logic [OF*H*W-1:0]           out_flat;

  int checks = 0, failures = 0;

  bin_conv_layer #(.IF(IF), .OF(OF), .H(H), .W(W), .LAYER(LAYER), .SEED(SEED)) dut (
    .map_i(in_map), .map_o(out_map)
  );

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
    bit ref_in[], ref_out[];
    bnn_ref_pkg::clear_counters();
    ref_in = new[IF * H * W];
    for (int k = 0; k < 300; k++) begin
      for (int i = 0; i < IF * H * W; i++) begin
        in_flat[i] = ($urandom % 8) < (k % 9);
        ref_in[i]  = in_flat[i];
      end
      #1;
      bnn_ref_pkg::conv(ref_in, IF, OF, H, W, LAYER, SEED, ref_out);
      for (int i = 0; i < OF * H * W; i++) begin
        checks++;
        if (out_flat[i] !== ref_out[i]) begin
          failures++;
          if (failures < 10) $display("FAIL vector %0d bit %0d: got %b expected %b",
                                      k, i, out_flat[i], ref_out[i]);
        end
      end
    end
    $display("mechanisms: ge 1/0=%0d/%0d le 1/0=%0d/%0d const1=%0d const0=%0d padded=%0d ties=%0d",
             bnn_ref_pkg::cnt_ge_fire, bnn_ref_pkg::cnt_ge_quiet,
             bnn_ref_pkg::cnt_le_fire, bnn_ref_pkg::cnt_le_quiet,
             bnn_ref_pkg::cnt_const_one, bnn_ref_pkg::cnt_const_zero,
             bnn_ref_pkg::cnt_padded, bnn_ref_pkg::cnt_ties);
    checks++;
    if (bnn_ref_pkg::cnt_ge_fire == 0 || bnn_ref_pkg::cnt_ge_quiet == 0 ||
        bnn_ref_pkg::cnt_le_fire == 0 || bnn_ref_pkg::cnt_le_quiet == 0 ||
        bnn_ref_pkg::cnt_const_one == 0 || bnn_ref_pkg::cnt_const_zero == 0 ||
        bnn_ref_pkg::cnt_padded == 0 || bnn_ref_pkg::cnt_ties == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
