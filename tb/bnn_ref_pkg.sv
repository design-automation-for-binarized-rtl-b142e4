// bnn_ref_pkg -- behavioural reference model of the binarized network, for
// the testbenches.
//
// Works on flat bit arrays whose index follows the packed [channel][row]
// [column] layout of the RTL ports: bit (c*H + y)*W + x.  Each function
// recomputes a layer neuron by neuron with plain loops (match counting,
// the four sign cases, zero padding, OR pooling) and uses nothing of the
// RTL except the design-time parameter functions of bnn_pkg, which are the
// network's "trained" values.  It also counts how often each mechanism of
// the design was exercised, so that testbenches can prove coverage.
package bnn_ref_pkg;
  import bnn_pkg::*;

  // Mechanism counters (cumulative).
  int unsigned cnt_ge_fire, cnt_ge_quiet;   // ">=" neurons giving 1 / 0
  int unsigned cnt_le_fire, cnt_le_quiet;   // "<=" neurons giving 1 / 0
  int unsigned cnt_const_one, cnt_const_zero;
  int unsigned cnt_padded;                  // neuron windows that read padding
  int unsigned cnt_pool_mixed;              // pool windows with 1 to 3 ones
  int unsigned cnt_ties;                    // popcount exactly equal to threshold

  function automatic void clear_counters();
    cnt_ge_fire = 0; cnt_ge_quiet = 0; cnt_le_fire = 0; cnt_le_quiet = 0;
    cnt_const_one = 0; cnt_const_zero = 0; cnt_padded = 0; cnt_pool_mixed = 0;
    cnt_ties = 0;
  endfunction

  // Output of one neuron from its match count.
  function automatic bit neuron(input int unsigned phi, input int unsigned th,
                                input sign_sel_e sg);
    bit r;
    if (phi == th && (sg == SEL_GE || sg == SEL_LE)) cnt_ties++;
    case (sg)
      SEL_GE:   begin r = (phi >= th); if (r) cnt_ge_fire++; else cnt_ge_quiet++; end
      SEL_LE:   begin r = (phi <= th); if (r) cnt_le_fire++; else cnt_le_quiet++; end
      SEL_ONE:  begin r = 1'b1; cnt_const_one++; end
      default:  begin r = 1'b0; cnt_const_zero++; end
    endcase
    return r;
  endfunction

  // Threshold as the RTL sees it: truncated to the popcount width.
  function automatic int unsigned hw_thresh(input int unsigned seed, input int unsigned layer,
                                            input int unsigned m, input int unsigned nrf,
                                            input int unsigned nfilt);
    int unsigned t;
    t = filter_thresh(seed, layer, m, nrf, nfilt);
    return t % (1 << cnt_width(nrf));
  endfunction

  // 3x3 "same" convolution with zero padding, IF -> OF maps of H x W.
  function automatic void conv(input bit in_map[], input int unsigned nif,
                               input int unsigned nof, input int unsigned h,
                               input int unsigned w, input int unsigned layer,
                               input int unsigned seed, output bit out_map[]);
    int unsigned nrf;
    logic [MAX_NRF-1:0] wv;
    nrf = nif * 9;
    out_map = new[nof * h * w];
    for (int unsigned m = 0; m < nof; m++) begin
      wv = filter_weights(seed, layer, m, nrf);
      for (int y = 0; y < int'(h); y++) begin
        for (int x = 0; x < int'(w); x++) begin
          int unsigned phi;
          bit padded;
          phi = 0;
          padded = 0;
          for (int c = 0; c < int'(nif); c++) begin
            for (int ky = 0; ky < 3; ky++) begin
              for (int kx = 0; kx < 3; kx++) begin
                int yy, xx;
                bit v;
                yy = y + ky - 1;
                xx = x + kx - 1;
                if (yy < 0 || yy >= int'(h) || xx < 0 || xx >= int'(w)) begin
                  v = 1'b0;
                  padded = 1;
                end else begin
                  int idx;
                  idx = (c * int'(h) + yy) * int'(w) + xx;
                  v = in_map[idx];
                end
                if (v == wv[c * 9 + ky * 3 + kx]) phi++;
              end
            end
          end
          if (padded) cnt_padded++;
          out_map[(m * h + y) * w + x] =
            neuron(phi, hw_thresh(seed, layer, m, nrf, nof), filter_sign(seed, layer, m, nof));
        end
      end
    end
  endfunction

  // 2x2 / stride 2 max pooling of binary maps.
  function automatic void pool(input bit in_map[], input int unsigned nc,
                               input int unsigned h, input int unsigned w,
                               output bit out_map[]);
    out_map = new[nc * (h / 2) * (w / 2)];
    for (int unsigned c = 0; c < nc; c++) begin
      for (int unsigned y = 0; y < h / 2; y++) begin
        for (int unsigned x = 0; x < w / 2; x++) begin
          int unsigned ones;
          ones = 0;
          for (int unsigned dy = 0; dy < 2; dy++)
            for (int unsigned dx = 0; dx < 2; dx++)
              ones += in_map[(c * h + 2 * y + dy) * w + 2 * x + dx];
          if (ones > 0 && ones < 4) cnt_pool_mixed++;
          out_map[(c * (h / 2) + y) * (w / 2) + x] = (ones != 0);
        end
      end
    end
  endfunction

  // Fully connected layer: every output sees all inputs.
  function automatic void fc(input bit in_vec[], input int unsigned nin,
                             input int unsigned nout, input int unsigned layer,
                             input int unsigned seed, output bit out_vec[],
                             output int unsigned score[]);
    logic [MAX_NRF-1:0] wv;
    out_vec = new[nout];
    score = new[nout];
    for (int unsigned n = 0; n < nout; n++) begin
      int unsigned phi;
      wv = filter_weights(seed, layer, n, nin);
      phi = 0;
      for (int unsigned i = 0; i < nin; i++) if (in_vec[i] == wv[i]) phi++;
      score[n] = phi;
      out_vec[n] = neuron(phi, hw_thresh(seed, layer, n, nin, nout),
                          filter_sign(seed, layer, n, nout));
    end
  endfunction

  // Whole network: NUM_CONV conv+pool stages on an img x img image, then
  // FC(.., FC_HIDDEN) and FC(FC_HIDDEN, NUM_CLASSES).
  function automatic void network(input bit image[], input int unsigned img,
                                  input int unsigned nconv, input int unsigned seed,
                                  output bit classes[], output int unsigned score[]);
    bit cur[], nxt[], hid[];
    int unsigned hs, hid_score[];
    cur = image;
    hs = img;
    for (int unsigned l = 0; l < nconv; l++) begin
      conv(cur, CONV_CH[l], CONV_CH[l+1], hs, hs, l, seed, nxt);
      pool(nxt, CONV_CH[l+1], hs, hs, cur);
      hs = hs / 2;
    end
    fc(cur, CONV_CH[nconv] * hs * hs, FC_HIDDEN, nconv, seed, hid, hid_score);
    fc(hid, FC_HIDDEN, NUM_CLASSES, nconv + 1, seed, classes, score);
  endfunction

endpackage
