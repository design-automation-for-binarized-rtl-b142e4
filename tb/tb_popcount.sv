// tb_popcount -- self-checking test of the popcount adder tree.
//
// Instance A (N = 9, the first-layer receptive field) is checked
// exhaustively over all 512 inputs; instance B (N = 144, a second-layer
// receptive field, not a power of two) and instance C (N = 256) with random
// vectors plus all-zeros and all-ones.  The expected count is a plain loop
// over the bits.  The adder tree is combinational: each vector is applied
// and read 1 ns later.
module tb_popcount;
  localparam int unsigned NA = 9, NB = 144, NC = 256;

  logic [NA-1:0] a_in;  logic [bnn_pkg::cnt_width(NA)-1:0] a_cnt;
  logic [NB-1:0] b_in;  logic [bnn_pkg::cnt_width(NB)-1:0] b_cnt;
  logic [NC-1:0] c_in;  logic [bnn_pkg::cnt_width(NC)-1:0] c_cnt;

  int checks = 0, failures = 0;

  popcount #(.N(NA)) u_a (.bits_i(a_in), .count_o(a_cnt));
  popcount #(.N(NB)) u_b (.bits_i(b_in), .count_o(b_cnt));
  popcount #(.N(NC)) u_c (.bits_i(c_in), .count_o(c_cnt));

  function automatic int unsigned ones(input logic [NC-1:0] v, input int unsigned n);
    int unsigned r = 0;
    for (int unsigned i = 0; i < n; i++) r += v[i];
    return r;
  endfunction

  task automatic check(input int unsigned got, input int unsigned exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int unsigned v = 0; v < (1 << NA); v++) begin
      a_in = NA'(v);
      #1 check(a_cnt, ones(NC'(a_in), NA), "N=9");
    end
    for (int k = 0; k < 300; k++) begin
      for (int unsigned i = 0; i < NC; i++) c_in[i] = ($urandom % 8) < (k % 9);
      if (k == 0) c_in = '0;
      if (k == 1) c_in = '1;
      b_in = c_in[NB-1:0];
      #1;
      check(b_cnt, ones(NC'(b_in), NB), "N=144");
      check(c_cnt, ones(c_in, NC), "N=256");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
