// bin_fc_layer -- binary fully connected layer with hard-wired parameters.
//
// A fully connected layer is a bin_conv whose receptive field is the whole
// input vector: NOUT neurons each XNOR all NIN input bits with their own
// weights, count the matches, and threshold the count with the 2-bit sign
// selector.  Besides the binary outputs, the popcount of every neuron is
// brought out on score_o; the last layer of the network uses these counts
// as per-class confidence scores.
//
// Neuron n's weights, threshold and sign code are elaboration-time
// constants from bnn_pkg for (SEED, LAYER, n); input bit i meets weight
// bit i.
//
// Interface: in_i [NIN] in, out_o [NOUT] and score_o [NOUT] x
// (floor(log2 NIN)+1) bits out.  Combinational.
module bin_fc_layer
  import bnn_pkg::*;
#(
  parameter int unsigned NIN   = 256,
  parameter int unsigned NOUT  = 64,
  parameter int unsigned LAYER = 4,
  parameter int unsigned SEED  = 1,
  localparam int unsigned CW   = cnt_width(NIN)
) (
  input  logic [NIN-1:0]          in_i,
  output logic [NOUT-1:0]         out_o,
  output logic [NOUT-1:0][CW-1:0] score_o
);

  for (genvar n = 0; n < NOUT; n++) begin : g_neuron
    localparam logic [MAX_NRF-1:0] WFULL = filter_weights(SEED, LAYER, n, NIN);
    localparam logic [CW-1:0]      TH    = CW'(filter_thresh(SEED, LAYER, n, NIN, NOUT));
    localparam sign_sel_e          SG    = filter_sign(SEED, LAYER, n, NOUT);

    bin_conv #(.NRF(NIN)) u_neuron (
      .rec_field_i(in_i),
      .weights_i  (WFULL[NIN-1:0]),
      .thresh_i   (TH),
      .sign_i     (SG),
      .out_map_o  (out_o[n]),
      .phi_o      (score_o[n])
    );
  end

endmodule
