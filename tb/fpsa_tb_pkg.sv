// fpsa_tb_pkg: helpers the testbenches share to build CLB configuration
// words: truth tables for the control functions used here (counter bits,
// compare-with-constant decoders, toggle flip-flops) and the packing of a LUT
// word (table, input selects, output mode, flip-flop init).
package fpsa_tb_pkg;

  // Counter bit k: inputs 0..k are q0..qk; next qk = qk ^ (q0 & .. & q(k-1)).
  function automatic logic [63:0] tbl_count_bit(input int k);
    logic [63:0] t;
    for (int a = 0; a < 64; a++) begin
      bit carry, self;
      carry = 1;
      for (int i = 0; i < k; i++) carry &= a[i];
      self = a[k];
      t[a] = self ^ carry;
    end
    return t;
  endfunction

  // Decoder: inputs 0..n-1 form a number; output 1 when it equals v.
  function automatic logic [63:0] tbl_equals(input int v, input int n);
    logic [63:0] t;
    for (int a = 0; a < 64; a++) t[a] = ((a & ((1 << n) - 1)) == v);
    return t;
  endfunction

  // Toggle: inputs 0..n-2 are enables (all must be 1), input n-1 is self.
  function automatic logic [63:0] tbl_toggle(input int n);
    logic [63:0] t;
    for (int a = 0; a < 64; a++) begin
      bit en;
      en = 1;
      for (int i = 0; i < n - 1; i++) en &= a[i];
      t[a] = a[n-1] ^ en;
    end
    return t;
  endfunction

  // Pack one LUT word. sel[i] < n_in picks a pin, n_in + j the flip-flop of LUT j.
  function automatic logic [255:0] lut_word(input logic [63:0] tbl, input int sel [6],
                                            input int sel_w, input bit reg_out, input bit init);
    logic [255:0] w;
    w = '0;
    w[63:0] = tbl;
    for (int i = 0; i < 6; i++)
      for (int b = 0; b < sel_w; b++) w[64 + i * sel_w + b] = sel[i][b];
    w[64 + 6 * sel_w]     = reg_out;
    w[64 + 6 * sel_w + 1] = init;
    return w;
  endfunction

endpackage
