// tb_bin_fc_layer -- self-checking test of a binary fully connected layer.
//
// A 64 -> 6 layer (the width of the network's last layer, with six neurons
// so that all four sign codes occur).  Random input vectors of varying
// density; both the binary outputs and the popcount scores are compared
// with the loop-based model of bnn_ref_pkg.
module tb_bin_fc_layer;
  import bnn_pkg::*;
  localparam int unsigned NIN = 64, NOUT = 6, LAYER = 5, SEED = 3;
  localparam int unsigned CW  = cnt_width(NIN);

  logic [NIN-1:0]          in_vec;
  logic [NOUT-1:0]         out_vec;
  logic [NOUT-1:0][CW-1:0] score;

  int checks = 0, failures = 0;

  bin_fc_layer #(.NIN(NIN), .NOUT(NOUT), .LAYER(LAYER), .SEED(SEED)) dut (
    .in_i(in_vec), .out_o(out_vec), .score_o(score)
  );

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ref_in[], ref_out[];
    int unsigned ref_score[];
    bnn_ref_pkg::clear_counters();
    ref_in = new[NIN];
    for (int k = 0; k < 500; k++) begin
      for (int i = 0; i < NIN; i++) begin
        in_vec[i] = ($urandom % 16) < (k % 17);
        ref_in[i] = in_vec[i];
      end
      #1;
      bnn_ref_pkg::fc(ref_in, NIN, NOUT, LAYER, SEED, ref_out, ref_score);
      for (int n = 0; n < NOUT; n++) begin
        checks += 2;
        if (out_vec[n] !== ref_out[n] || int'(score[n]) != int'(ref_score[n])) begin
          failures++;
          if (failures < 10) $display("FAIL vector %0d neuron %0d: got %b/%0d expected %b/%0d",
                                      k, n, out_vec[n], score[n], ref_out[n], ref_score[n]);
        end
      end
    end
    checks++;
    if (bnn_ref_pkg::cnt_ge_fire == 0 || bnn_ref_pkg::cnt_ge_quiet == 0 ||
        bnn_ref_pkg::cnt_le_fire == 0 || bnn_ref_pkg::cnt_le_quiet == 0 ||
        bnn_ref_pkg::cnt_const_one == 0 || bnn_ref_pkg::cnt_const_zero == 0) begin
      failures++;
      $display("FAIL: a sign mode was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
