// ct_pkg: constants and index functions shared by the butterfly corner turner.
//
// The corner turner moves an N x N matrix (N = 2**LOG_N links) from N source
// devices, each holding one row, to N sink devices, each needing one column,
// by cycling a memoryless switch through N permutations p(c,i) = c xor i.
// Links are numbered by an LOG_N-bit address. Two index operations appear
// everywhere:
//   * the perfect (Faro) shuffle, which sends wire j to wire 2j (j < N/2) or
//     2j-N+1 (otherwise), i.e. rotates the address bits one place left;
//   * the controlled xor ("toggle") of the least significant address bits.
//
// Default sizes follow the large example worked out for the design:
// 2**20 links, cables of 2**6 links and 8-bit togglers. The entry width of a
// link (8 bits) is this design's own choice.
package ct_pkg;

  // Number of address bits (network has 2**LOG_N links).
  parameter int unsigned LOG_N_DEF = 20;
  // log2 of the number of links carried by one cable.
  parameter int unsigned K_DEF     = 6;
  // Number of address bits toggled by one xor-toggler layer.
  parameter int unsigned L_DEF     = 8;
  // Bits of one matrix entry carried by a link in one control step.
  parameter int unsigned W_DEF     = 8;

  // Rotate the low `nbits` bits of `x` one place left (perfect shuffle of
  // 2**nbits wires). Bits above `nbits` are returned unchanged.
  function automatic int unsigned rotl_bits(int unsigned x, int unsigned nbits);
    int unsigned mask, low, top_bit;
    if (nbits <= 1) return x;
    mask    = (nbits >= 32) ? 32'hFFFF_FFFF : ((32'd1 << nbits) - 1);
    low     = x & mask;
    top_bit = (low >> (nbits - 1)) & 1;
    return (x & ~mask) | (((low << 1) | top_bit) & mask);
  endfunction

  // Number of toggler layers needed to cover all log_n address bits.
  function automatic int unsigned num_tog_layers(int unsigned log_n, int unsigned l);
    return (log_n + l - 1) / l;
  endfunction

  // Number of perfect-shuffle layers following toggler layer m: l after each
  // full layer, and whatever completes a whole rotation (log_n in total)
  // after the last one, so the data ends up at address (i xor c).
  function automatic int unsigned shuffles_after(int unsigned m, int unsigned log_n,
                                                 int unsigned l);
    int unsigned nl;
    nl = num_tog_layers(log_n, l);
    return (m + 1 < nl) ? l : log_n - (nl - 1) * l;
  endfunction

  // Which control bit drives toggle bit p of layer m (or -1 if that bit is
  // idle). Before layer m the data has been shuffled m*l times, so address
  // position p holds original address bit (p - m*l) mod log_n. A bit is
  // toggled only by the first layer that reaches it.
  function automatic int ctl_source(int unsigned m, int unsigned p,
                                    int unsigned log_n, int unsigned l);
    int unsigned b, pos;
    if (p >= l || p >= log_n) return -1;
    b = (p + log_n * (m + 1) - (m * l) % log_n) % log_n;
    for (int unsigned mm = 0; mm < m; mm++) begin
      pos = (b + mm * l) % log_n;
      if (pos < l) return -1;
    end
    return int'(b);
  endfunction

endpackage
