// tb_bin_conv -- self-checking test of one binary neuron.
//
// NRF = 9 (a 3x3 single-map receptive field, 4-bit count and threshold).
// For many weight patterns the test sweeps every receptive field value,
// every threshold 0..15 and all four sign codes and compares out_map_o and
// phi_o with a reference that counts matching bits with a loop and applies
// the four cases (>=, <=, 1, 0) directly.  Combinational: inputs applied,
// outputs read 1 ns later.
module tb_bin_conv;
  import bnn_pkg::*;
  localparam int unsigned NRF = 9;
  localparam int unsigned CW  = cnt_width(NRF);

  logic [NRF-1:0] rf, w;
  logic [CW-1:0]  th;
  sign_sel_e      sg;
  logic           out;
  logic [CW-1:0]  phi;

  int checks = 0, failures = 0;

  bin_conv #(.NRF(NRF)) dut (
    .rec_field_i(rf), .weights_i(w), .thresh_i(th), .sign_i(sg),
    .out_map_o(out), .phi_o(phi)
  );

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int wi = 0; wi < 6; wi++) begin
      w = (wi == 0) ? '0 : (wi == 1) ? '1 : NRF'($urandom);
      for (int unsigned r = 0; r < (1 << NRF); r += 1 + (wi > 1 ? 2 : 0)) begin
        int unsigned m;
        rf = NRF'(r);
        m = 0;
        for (int i = 0; i < NRF; i++) if (rf[i] == w[i]) m++;
        for (int unsigned t = 0; t < (1 << CW); t++) begin
          for (int s = 0; s < 4; s++) begin
            bit exp;
            th = CW'(t);
            sg = sign_sel_e'(s);
            case (s)
              0: exp = (m >= t);
              1: exp = (m <= t);
              2: exp = 1'b1;
              default: exp = 1'b0;
            endcase
            #1;
            checks += 2;
            if (out !== exp || phi !== CW'(m)) begin
              failures++;
              if (failures < 10)
                $display("FAIL rf=%b w=%b th=%0d sg=%0d: out=%b phi=%0d expected %b %0d",
                         rf, w, t, s, out, phi, exp, m);
            end
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
