// bnn_top -- purely combinational binarized neural network for a binary
// image sensor (VGG-like, parameters hard-wired at design time).
//
// A single-channel binary image of IMG x IMG pixels enters on pixels_i and
// four class outputs leave, with no clock, no registers and no memories:
// every neuron of every layer is its own bin_conv instance.  The default
// configuration is the 32x32 model:
//   layer 1  bin_conv_layer  1 -> 16 maps, 32x32  + or_maxpool -> 16x16
//   layer 2  bin_conv_layer 16 -> 32 maps, 16x16  + or_maxpool ->  8x8
//   layer 3  bin_conv_layer 32 -> 48 maps,  8x8   + or_maxpool ->  4x4
//   layer 4  bin_conv_layer 48 -> 64 maps,  4x4   + or_maxpool ->  2x2
//   layer 5  bin_fc_layer  256 -> 64
//   layer 6  bin_fc_layer   64 ->  4  (class bits and popcount scores)
// With IMG = 16 and NUM_CONV = 3 the same module is the 16x16 model
// (three conv+pool layers, then FC 192 -> 64 -> 4).
//
// The flattening between the last pooling layer and the first FC layer
// takes the packed [channel][row][column] map as it is: FC input bit
// (c*h + y)*w + x is map c, row y, column x.  That order, the hash-based
// parameters (see bnn_pkg) and the exposure of the class scores are this
// design's choices; the layer list is the paper's.
//
// Interface: pixels_i[row][col] in; class_o[k] (binary output of class k)
// and score_o[k] (its popcount over the 64 hidden neurons, 0..64) out.
// Timing: a combinational path through all six layers.
module bnn_top
  import bnn_pkg::*;
#(
  parameter int unsigned IMG      = 32,
  parameter int unsigned NUM_CONV = 4,
  parameter int unsigned SEED     = 1,
  localparam int unsigned FC_IN   = CONV_CH[NUM_CONV] * (IMG >> NUM_CONV) * (IMG >> NUM_CONV),
  localparam int unsigned SCORE_W = cnt_width(FC_HIDDEN)
) (
  input  logic [IMG-1:0][IMG-1:0]              pixels_i,
  output logic [NUM_CLASSES-1:0]               class_o,
  output logic [NUM_CLASSES-1:0][SCORE_W-1:0]  score_o
);

  // ---- convolutional stages: conv 3x3 + 2x2 OR pooling -------------------
  for (genvar l = 0; l < NUM_CONV; l++) begin : g_conv
    localparam int unsigned CIN  = CONV_CH[l];
    localparam int unsigned COUT = CONV_CH[l+1];
    localparam int unsigned HS   = IMG >> l;

    logic [CIN-1:0][HS-1:0][HS-1:0]       conv_in;
    logic [COUT-1:0][HS-1:0][HS-1:0]      conv_out;
    logic [COUT-1:0][HS/2-1:0][HS/2-1:0]  pool_out;

    if (l == 0) begin : g_src_img
      assign conv_in = pixels_i;
    end else begin : g_src_prev
      assign conv_in = g_conv[l-1].pool_out;
    end

    bin_conv_layer #(
      .IF(CIN), .OF(COUT), .H(HS), .W(HS), .LAYER(l), .SEED(SEED)
    ) u_conv (
      .map_i(conv_in),
      .map_o(conv_out)
    );

    or_maxpool #(.C(COUT), .H(HS), .W(HS)) u_pool (
      .map_i(conv_out),
      .map_o(pool_out)
    );
  end

  // ---- fully connected stages -------------------------------------------
  logic [FC_IN-1:0]                      fc1_in;
  logic [FC_HIDDEN-1:0]                  fc1_out;
  logic [FC_HIDDEN-1:0][cnt_width(FC_IN)-1:0] fc1_score_unused;

  assign fc1_in = g_conv[NUM_CONV-1].pool_out;

  bin_fc_layer #(
    .NIN(FC_IN), .NOUT(FC_HIDDEN), .LAYER(NUM_CONV), .SEED(SEED)
  ) u_fc1 (
    .in_i   (fc1_in),
    .out_o  (fc1_out),
    .score_o(fc1_score_unused)
  );

  bin_fc_layer #(
    .NIN(FC_HIDDEN), .NOUT(NUM_CLASSES), .LAYER(NUM_CONV + 1), .SEED(SEED)
  ) u_fc2 (
    .in_i   (fc1_out),
    .out_o  (class_o),
    .score_o(score_o)
  );

endmodule
