// dct16_pkg: constants shared by the 16-point approximate DCT datapath.
//
// The transform is the 16x16 matrix T whose entries are 0, +1 or -1. It is
// computed by the factorization T = P2 * M4 * M3 * M2 * P1 * M1, where M1..M4
// are sparse adder stages and P1, P2 are fixed permutations (wiring only).
// The 1-D datapath has five register rows (one after M1, M2 and M4, two in
// M3), so its latency is LAT_1D clocks at a rate of one vector per clock.
// Word widths are not given by the source and are this design's choice: each
// butterfly adds one bit, the 3-term rows of M3 add two, and the whole 1-D
// transform grows by GROWTH_1D bits because no row of T has more than 16
// non-zero entries.
package dct16_pkg;
  localparam int N         = 16;  // transform length
  localparam int LAT_1D    = 5;   // register rows in the 1-D datapath
  localparam int GROWTH_1D = 4;   // log2(16): output bits added by one 1-D pass
  localparam int IDX_W     = $clog2(N);

  // P1 (wiring between M1 and M2): the M2 input at position i is the M1
  // output at position p1_src(i). Identity on 0..8; on 9..15 it is the 7x7
  // permutation block of P1.
  function automatic int p1_src(int i);
    case (i)
      9:  return 11;
      10: return 12;
      11: return 15;
      12: return 14;
      13: return 13;
      14: return 10;
      15: return 9;
      default: return i;
    endcase
  endfunction

  // P2 (wiring at the output): coefficient X[k] is the M4 output at
  // position p2_src(k). Fixed points 0 and 15, cycles (1 8),
  // (2 4 3 11 10 7 12) and (5 9 13 14 6), read as X[a] = wire[b] for a->b.
  function automatic int p2_src(int k);
    case (k)
      1:  return 8;
      8:  return 1;
      2:  return 4;
      4:  return 3;
      3:  return 11;
      11: return 10;
      10: return 7;
      7:  return 12;
      12: return 2;
      5:  return 9;
      9:  return 13;
      13: return 14;
      14: return 6;
      6:  return 5;
      default: return k;
    endcase
  endfunction
endpackage
