// tb_bnn_model16 -- the 16x16 workload: the whole network built as the
// 16x16-input model.
//
// Instantiates bnn_top as the paper's smaller model (IMG = 16, three conv+pool
// stages, FC 192 -> 64 -> 4), applies binary images and compares the four
// class bits and the four class scores with the loop-based network model
// of bnn_ref_pkg.  Images are random with a density that varies from image
// to image (0/16 .. 16/16), which includes a blank and a full image.  The
// network has no clock: each image is held for 10 ns and the outputs are
// read at its end.
//
// Every mechanism of the design must occur at least once over the run, or a
// failure is counted: each sign mode both firing and quiet, constant
// neurons, windows that read border padding, pooling windows with mixed
// inputs, and popcounts exactly at the threshold.
module tb_bnn_model16;
  import bnn_pkg::*;
  localparam int unsigned IMG = 16, NUM_CONV = 3, SEED = 1, N_IMAGES = 40;
  localparam int unsigned SW  = cnt_width(FC_HIDDEN);

  logic [IMG-1:0][IMG-1:0]             pixels;
  logic [IMG*IMG-1:0]                  pixels_flat;
  logic [NUM_CLASSES-1:0]              classes;
  logic [NUM_CLASSES-1:0][SW-1:0]      scores;

  int checks = 0, failures = 0;

  bnn_top #(.IMG(IMG), .NUM_CONV(NUM_CONV), .SEED(SEED)) dut (
    .pixels_i(pixels), .class_o(classes), .score_o(scores)
  );

  assign pixels = pixels_flat;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit img[], ref_cls[];
    int unsigned ref_score[];
    int class_hist [NUM_CLASSES];
    bnn_ref_pkg::clear_counters();
    img = new[IMG * IMG];
    for (int k = 0; k < NUM_CLASSES; k++) class_hist[k] = 0;
    for (int n = 0; n < N_IMAGES; n++) begin
      for (int i = 0; i < IMG * IMG; i++) begin
        pixels_flat[i] = ($urandom % 16) < (n % 17);
        img[i] = pixels_flat[i];
      end
      #10;
      bnn_ref_pkg::network(img, IMG, NUM_CONV, SEED, ref_cls, ref_score);
      for (int k = 0; k < NUM_CLASSES; k++) begin
        checks += 2;
        if (classes[k] !== ref_cls[k] || int'(scores[k]) != int'(ref_score[k])) begin
          failures++;
          if (failures < 10) $display("FAIL image %0d class %0d: got %b/%0d expected %b/%0d",
                                      n, k, classes[k], scores[k], ref_cls[k], ref_score[k]);
        end
        class_hist[k] += classes[k];
      end
    end
    $display("class bits set per class: %0d %0d %0d %0d",
             class_hist[0], class_hist[1], class_hist[2], class_hist[3]);
    $display("mechanisms: ge 1/0=%0d/%0d le 1/0=%0d/%0d const1=%0d const0=%0d padded=%0d pool_mixed=%0d ties=%0d",
             bnn_ref_pkg::cnt_ge_fire, bnn_ref_pkg::cnt_ge_quiet,
             bnn_ref_pkg::cnt_le_fire, bnn_ref_pkg::cnt_le_quiet,
             bnn_ref_pkg::cnt_const_one, bnn_ref_pkg::cnt_const_zero,
             bnn_ref_pkg::cnt_padded, bnn_ref_pkg::cnt_pool_mixed, bnn_ref_pkg::cnt_ties);
    checks++;
    if (bnn_ref_pkg::cnt_ge_fire == 0 || bnn_ref_pkg::cnt_ge_quiet == 0 ||
        bnn_ref_pkg::cnt_le_fire == 0 || bnn_ref_pkg::cnt_le_quiet == 0 ||
        bnn_ref_pkg::cnt_const_one == 0 || bnn_ref_pkg::cnt_const_zero == 0 ||
        bnn_ref_pkg::cnt_padded == 0 || bnn_ref_pkg::cnt_pool_mixed == 0 ||
        bnn_ref_pkg::cnt_ties == 0) begin
      failures++;
      $display("FAIL: a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
