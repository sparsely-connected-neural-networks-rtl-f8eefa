// snn_pkg: types and constant functions shared by the sparsely-connected
// neuron datapath.
//
// A sparsely-connected layer multiplies its input vector by a weight matrix
// in which a fixed binary mask M zeroes most of the entries. Column j of M is
// never stored: it is regenerated in hardware by a stochastic number
// generator (SNG), an nb-bit LFSR whose value S = state/2^nb is compared with
// the sparsity threshold p, giving M = (S >= p). Only the weights at the 1s of
// the mask are kept in memory.
//
// LFSR convention (taken from the 3-bit example of the architecture, where
// seed 001 runs 0.125, 0.5, 0.25, 0.625, 0.75, 0.875, 0.375): the register
// is drawn as cells c1..cnb from left to right, shifts one cell to the right
// every step and feeds the XOR of its tap cells back into c1. Its value is the
// binary fraction 0.c1c2..cnb, so c1 is the most significant bit. In this RTL
// the state vector s[nb-1:0] holds c1 in s[nb-1] and cnb in s[0]. The 3-bit
// example taps c2 and c3; for other lengths the taps are those of a standard
// maximal-length polynomial (a choice of this design; the architecture only
// says an LFSR is used).
//
// The threshold p is carried as an nb-bit code P = p * 2^nb, so the
// comparison S >= p is the integer comparison state >= P.
package snn_pkg;

  // How a stored weight is applied to an input. Binarized weights are one bit
  // (1 -> +1, 0 -> -1) and ternarized weights two bits (see ternary encoding
  // below); for both the multiplier becomes a multiplexer. WM_FULL stores
  // signed two's complement weights and uses a real multiplier.
  typedef enum logic [1:0] {
    WM_BINARY  = 2'd0,
    WM_TERNARY = 2'd1,
    WM_FULL    = 2'd2
  } weight_mode_e;

  // Ternary weight encoding: 2'b00 -> 0, 2'b01 -> +1, 2'b10/2'b11 -> -1.

  localparam int unsigned MAX_NB = 16;

  // Bit of the state vector that holds cell k (1-based, from the left).
  function automatic int unsigned tap_bit(int unsigned nb, int unsigned k);
    return 32'd1 << (nb - k);
  endfunction

  // Tap mask of a maximal-length nb-bit LFSR, 2 <= nb <= 16.
  function automatic int unsigned lfsr_taps(int unsigned nb);
    case (nb)
      2:       return tap_bit(nb, 2) | tap_bit(nb, 1);
      3:       return tap_bit(nb, 3) | tap_bit(nb, 2);
      4:       return tap_bit(nb, 4) | tap_bit(nb, 3);
      5:       return tap_bit(nb, 5) | tap_bit(nb, 3);
      6:       return tap_bit(nb, 6) | tap_bit(nb, 5);
      7:       return tap_bit(nb, 7) | tap_bit(nb, 6);
      8:       return tap_bit(nb, 8) | tap_bit(nb, 6) | tap_bit(nb, 5) | tap_bit(nb, 4);
      9:       return tap_bit(nb, 9) | tap_bit(nb, 5);
      10:      return tap_bit(nb, 10) | tap_bit(nb, 7);
      11:      return tap_bit(nb, 11) | tap_bit(nb, 9);
      12:      return tap_bit(nb, 12) | tap_bit(nb, 6) | tap_bit(nb, 4) | tap_bit(nb, 1);
      13:      return tap_bit(nb, 13) | tap_bit(nb, 4) | tap_bit(nb, 3) | tap_bit(nb, 1);
      14:      return tap_bit(nb, 14) | tap_bit(nb, 5) | tap_bit(nb, 3) | tap_bit(nb, 1);
      15:      return tap_bit(nb, 15) | tap_bit(nb, 14);
      16:      return tap_bit(nb, 16) | tap_bit(nb, 15) | tap_bit(nb, 13) | tap_bit(nb, 4);
      default: return 0;
    endcase
  endfunction

  // One LFSR step on an nb-bit state held in the low bits of s.
  function automatic int unsigned lfsr_next(int unsigned s, int unsigned nb);
    logic fb;
    fb = ^(s & lfsr_taps(nb));
    return ((s >> 1) | (32'(fb) << (nb - 1))) & ((32'd1 << nb) - 1);
  endfunction

  // Number of 1s the SNG produces over n steps from seed with threshold
  // code p, i.e. the number of weights one neuron must store. When n equals
  // the full 2^nb (the LFSR walks all 2^nb-1 nonzero states and then
  // repeats its seed once) this has a closed form; otherwise it is counted.
  function automatic int unsigned mask_ones(int unsigned seed, int unsigned p,
                                            int unsigned nb, int unsigned n);
    int unsigned s, cnt;
    if (n == (32'd1 << nb)) begin
      cnt = (32'd1 << nb) - ((p == 0) ? 32'd1 : p);
      if (seed >= p) cnt++;
      return cnt;
    end
    s = seed;
    cnt = 0;
    for (int unsigned i = 0; i < n; i++) begin
      if (s >= p) cnt++;
      s = lfsr_next(s, nb);
    end
    return cnt;
  endfunction

  // Width of one stored weight.
  function automatic int unsigned weight_bits(weight_mode_e mode, int unsigned w_w);
    case (mode)
      WM_BINARY:  return 1;
      WM_TERNARY: return 2;
      default:    return w_w;
    endcase
  endfunction

  // Accumulator width that cannot overflow: a product of an x_w-bit input
  // and a weight, summed n times, plus a bias of the same range as one sum.
  function automatic int unsigned acc_bits(weight_mode_e mode, int unsigned x_w,
                                           int unsigned w_w, int unsigned n);
    int unsigned prod_w;
    prod_w = (mode == WM_FULL) ? x_w + w_w : x_w + 1;
    return prod_w + $clog2(n) + 1;
  endfunction

  // Seed of neuron j in a layer: distinct nonzero nb-bit values
  // 1, 2, ..., 2^nb-1, repeating only when a layer has more neurons than
  // an nb-bit LFSR has nonzero states.
  function automatic int unsigned neuron_seed(int unsigned j, int unsigned nb);
    return (j % ((32'd1 << nb) - 1)) + 1;
  endfunction

endpackage
