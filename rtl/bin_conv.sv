// bin_conv -- one binary neuron (the binConv element).
//
// Computes one output bit of a binary convolutional or fully connected
// layer.  The NRF bits of the receptive field are XNORed with the NRF filter
// weights, the matches are counted (phi = popcount), phi is compared with the
// integer threshold in both directions, and a 4-way selector driven by the
// 2-bit sign code picks the output:
//   SEL_GE   : phi >= thresh   (batch-norm gamma > 0)
//   SEL_LE   : phi <= thresh   (gamma < 0)
//   SEL_ONE  : 1               (gamma = 0, beta >= 0)
//   SEL_ZERO : 0               (gamma = 0, beta <  0)
// This folds binarisation after batch normalisation into a single integer
// compare.  The XNOR / popcount / two comparators / selector structure and
// the widths (threshold and count: floor(log2 NRF)+1 bits, sign: 2 bits)
// follow the block diagram of the design; the comparisons are the
// inclusive ones of the defining equation.  The selector code assignment
// (order of the four selector inputs as drawn) and the extra phi_o output,
// which the last layer uses as a class confidence score, are this design's
// choices.
//
// Weights, threshold and sign are ports: a layer ties them to constants for
// the hard-wired configuration, and synthesis then reduces the XNORs to
// wires or inverters.  Purely combinational.
module bin_conv
  import bnn_pkg::*;
#(
  parameter int unsigned NRF = 9,
  localparam int unsigned CW = cnt_width(NRF)
) (
  input  logic [NRF-1:0] rec_field_i,  // receptive field recField(x,y)
  input  logic [NRF-1:0] weights_i,    // filter weights(m)
  input  logic [CW-1:0]  thresh_i,     // integer threshold thresh(m)
  input  sign_sel_e      sign_i,       // selector code sign(m)
  output logic           out_map_o,    // output neuron outMap(m,x,y)
  output logic [CW-1:0]  phi_o         // popcount phi(m,x,y)
);

  logic [NRF-1:0] match;
  logic           ge, le;

  assign match = ~(rec_field_i ^ weights_i);

  popcount #(.N(NRF)) u_popcount (
    .bits_i (match),
    .count_o(phi_o)
  );

  assign ge = (phi_o >= thresh_i);
  assign le = (phi_o <= thresh_i);

  always_comb begin
    unique case (sign_i)
      SEL_GE:   out_map_o = ge;
      SEL_LE:   out_map_o = le;
      SEL_ONE:  out_map_o = 1'b1;
      SEL_ZERO: out_map_o = 1'b0;
    endcase
  end

endmodule
