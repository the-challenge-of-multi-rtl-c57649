// moa_pkg: types, sizes and elaboration-time helpers shared by the
// multi-operand-adder (MOA) dot-product datapath.
//
// Operands are 8 bits wide (the width used for the serialized-MOA
// experiment). Filter weights (theta) are signed 8-bit constants fixed at
// elaboration; a layer's weights are passed as a theta_arr_t of up to
// MAX_TAPS entries, of which a dot product uses the first N_TAPS.
// MAX_TAPS = 4096 covers the largest dot product of AlexNet (conv3: 3*3*256
// = 2304 taps, of which 1774 are non-null on average).
//
// default_theta() provides stand-in weights for simulation and for the
// default build, since no trained filter is part of the design: entry i is
// zero when i mod 19 is 17 or 18, otherwise the byte
// (((i * 2654435761) mod 2^32) >> 11) mod 256 read as signed, replaced by +1
// when it is 0. For the default 363 taps (11x11x3, AlexNet conv1) this yields
// exactly 325 non-null weights, the mean non-null operand count the paper's
// Table 1 lists for conv1.
package moa_pkg;

  localparam int unsigned PIXEL_W  = 8;     // operand (pixel) width
  localparam int unsigned THETA_W  = 8;     // weight width
  localparam int unsigned PROD_W   = PIXEL_W + THETA_W;
  localparam int unsigned MAX_TAPS = 4096;

  typedef logic signed [THETA_W-1:0] theta_t;
  typedef theta_t theta_arr_t [MAX_TAPS];

  // Stand-in weight for tap i (formula in the header comment).
  function automatic theta_t default_theta_at(int unsigned i);
    logic [31:0] h;
    if ((i % 19) >= 17) return '0;
    h = i * 32'd2654435761;
    h = h >> 11;
    if (h[7:0] == 8'd0) return theta_t'(1);
    return theta_t'(h[7:0]);
  endfunction

  function automatic theta_arr_t default_theta();
    theta_arr_t a;
    for (int unsigned i = 0; i < MAX_TAPS; i++) a[i] = default_theta_at(i);
    return a;
  endfunction

  // Number of non-null weights among the first n taps.
  function automatic int unsigned count_nonzero(theta_arr_t th, int unsigned n);
    int unsigned c = 0;
    for (int unsigned i = 0; i < n; i++) if (th[i] != '0) c++;
    return c;
  endfunction

  // Tap index of the k-th (from 0) non-null weight among the first n taps.
  function automatic int unsigned nonzero_index(theta_arr_t th, int unsigned n,
                                                int unsigned k);
    int unsigned c = 0;
    for (int unsigned i = 0; i < n; i++) begin
      if (th[i] != '0) begin
        if (c == k) return i;
        c++;
      end
    end
    return 0;
  endfunction

  // Number of pipelined levels of a binary tree over n operands (at least 1).
  function automatic int unsigned tree_levels(int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

endpackage
