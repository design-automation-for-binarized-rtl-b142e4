// bin_conv_layer -- binary 3x3 convolutional layer with hard-wired filters.
//
// Turns IF binary input maps of H x W pixels into OF binary output maps of
// the same size.  One bin_conv neuron is instantiated for every output
// position (m, y, x); there is no time multiplexing, the whole layer is one
// combinational block.  The receptive field of position (y, x) is the 3x3
// window centred on it in every input map ("same" convolution, which the
// layer sizes of the network require); window pixels that fall outside the
// map read bnn_pkg::PAD_VALUE (0), a choice of this design.
//
// Receptive-field bit order: bit c*9 + ky*3 + kx holds input map c, window
// row ky, column kx (map 0 in the low bits, as in the layer-by-layer
// concatenation of the receptive field).  Filter m's weights, threshold and
// sign code are elaboration-time constants taken from bnn_pkg for
// (SEED, LAYER, m), so each filter's weights are shared by all H*W neurons
// of map m.
//
// Interface: map_i [IF][H][W] in, map_o [OF][H][W] out.  Combinational.
module bin_conv_layer
  import bnn_pkg::*;
#(
  parameter int unsigned IF    = 1,
  parameter int unsigned OF    = 16,
  parameter int unsigned H     = 32,
  parameter int unsigned W     = 32,
  parameter int unsigned LAYER = 0,
  parameter int unsigned SEED  = 1
) (
  input  logic [IF-1:0][H-1:0][W-1:0] map_i,
  output logic [OF-1:0][H-1:0][W-1:0] map_o
);

  localparam int unsigned K   = KSIZE;
  localparam int unsigned NRF = IF * K * K;
  localparam int unsigned CW  = cnt_width(NRF);

  // Parameters of all OF filters, evaluated once per layer.
  typedef logic [OF-1:0][NRF-1:0] weight_mat_t;
  typedef logic [OF-1:0][CW-1:0]  thresh_vec_t;
  typedef sign_sel_e              sign_vec_t [OF];

  function automatic weight_mat_t layer_weights();
    for (int unsigned m = 0; m < OF; m++)
      layer_weights[m] = NRF'(filter_weights(SEED, LAYER, m, NRF));
  endfunction

  function automatic thresh_vec_t layer_thresh();
    for (int unsigned m = 0; m < OF; m++)
      layer_thresh[m] = CW'(filter_thresh(SEED, LAYER, m, NRF, OF));
  endfunction

  function automatic sign_vec_t layer_sign();
    for (int unsigned m = 0; m < OF; m++) layer_sign[m] = filter_sign(SEED, LAYER, m, OF);
  endfunction

  localparam weight_mat_t WGT = layer_weights();
  localparam thresh_vec_t THR = layer_thresh();
  localparam sign_vec_t   SGN = layer_sign();

  // Neuron outputs, collected per bit and packed into map_o at the end.
  logic neuron_out [OF][H][W];

  always_comb begin
    for (int unsigned m = 0; m < OF; m++)
      for (int unsigned y = 0; y < H; y++)
        for (int unsigned x = 0; x < W; x++) map_o[m][y][x] = neuron_out[m][y][x];
  end

  for (genvar y = 0; y < H; y++) begin : g_row
    for (genvar x = 0; x < W; x++) begin : g_col
      logic [NRF-1:0] rec_field;

      // Gather the 3x3 window of every input map, padding at the borders.
      for (genvar c = 0; c < IF; c++) begin : g_in
        for (genvar ky = 0; ky < K; ky++) begin : g_ky
          for (genvar kx = 0; kx < K; kx++) begin : g_kx
            localparam int YY = y + ky - K / 2;
            localparam int XX = x + kx - K / 2;
            if (YY >= 0 && YY < H && XX >= 0 && XX < W) begin : g_in_map
              assign rec_field[c*K*K + ky*K + kx] = map_i[c][YY][XX];
            end else begin : g_pad
              assign rec_field[c*K*K + ky*K + kx] = PAD_VALUE;
            end
          end
        end
      end

      // One neuron per output map at this position.
      for (genvar m = 0; m < OF; m++) begin : g_neuron
        logic [CW-1:0] phi_unused;

        bin_conv #(.NRF(NRF)) u_neuron (
          .rec_field_i(rec_field),
          .weights_i  (WGT[m]),
          .thresh_i   (THR[m]),
          .sign_i     (SGN[m]),
          .out_map_o  (neuron_out[m][y][x]),
          .phi_o      (phi_unused)
        );
      end
    end
  end

endmodule
