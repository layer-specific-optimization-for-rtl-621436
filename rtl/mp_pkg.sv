// Shared constants and helper functions of the mixed-precision, mixed-data-flow
// CNN accelerator.
//
// Activations are signed 8-bit numbers (the paper's "(1,8)" precision: 1-bit dense
// weights, 8-bit activations and 8-bit sparse weights). Partial sums are kept in a
// 32-bit accumulator; the paper names the accumulator width Q_S but gives no value,
// so 32 bits is this design's choice. The sparse weight entry layout follows the
// paper's sparse weight block format: output channel (clog2 To bits), input channel
// (clog2 Ti bits), position inside the KxK window (clog2 KxK bits) and an 8-bit value.
package mp_pkg;

  localparam int unsigned QA       = 8;   // activation width (paper: 8-bit activations)
  localparam int unsigned QW       = 8;   // sparse high-precision weight width (paper: 8 bits)
  localparam int unsigned QS       = 32;  // partial-sum / accumulator width (assumed)
  localparam int unsigned BN_SW    = 16;  // batch-norm scale width (assumed)
  localparam int unsigned BN_BW    = 16;  // batch-norm bias width (assumed)
  localparam int unsigned CNT_W    = 8;   // "Sparse block info" entry width (paper: 8 bits)

  // Width of an index field; at least one bit so that fields never vanish.
  function automatic int unsigned idx_w(input int unsigned n);
    return (n <= 1) ? 1 : $clog2(n);
  endfunction

  // Width of one sparse weight entry for a Ti x To block of K x K kernels.
  function automatic int unsigned entry_w(input int unsigned ti, input int unsigned to,
                                          input int unsigned kk);
    return idx_w(to) + idx_w(ti) + idx_w(kk) + QW;
  endfunction

  // Number of parameter words one weight-block record occupies: a header word with
  // the sparse count, the dense 1-bit block, then the packed sparse entries.
  function automatic int unsigned dense_words(input int unsigned ti, input int unsigned to,
                                              input int unsigned kk, input int unsigned pw);
    return (ti * to * kk + pw - 1) / pw;
  endfunction

  function automatic int unsigned entries_per_word(input int unsigned ti, input int unsigned to,
                                                   input int unsigned kk, input int unsigned pw);
    return pw / entry_w(ti, to, kk);
  endfunction

  // Saturate a wide signed value to a QA-bit signed activation.
  function automatic logic signed [QA-1:0] sat_act(input logic signed [63:0] v);
    if (v > 64'sd127)       return 8'sd127;
    else if (v < -64'sd128) return -8'sd128;
    else                    return v[QA-1:0];
  endfunction

endpackage
