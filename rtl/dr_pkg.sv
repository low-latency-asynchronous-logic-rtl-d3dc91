// dr_pkg: shared types for the dual-rail Tsetlin-machine inference datapath.
//
// A dual-rail bit carries its value on two wires, t (positive rail) and f
// (negative rail): value 1 is {t,f} = {1,0}, value 0 is {0,1}. One of the two
// remaining states separates successive codewords (the spacer); the other is
// forbidden. Most of this design uses the all-zero spacer; a few nets (the
// partial clause outputs and the full-adder carries) use the all-one spacer,
// as noted where they occur. The comparator output is a 1-of-3 code, whose
// spacer is all-zero.
package dr_pkg;

  // One dual-rail bit.
  typedef struct packed {
    logic t;  // positive rail
    logic f;  // negative rail
  } dr_t;

  // 1-of-3 comparator result; exactly one wire high in a codeword.
  typedef struct packed {
    logic gt;  // a > b (greater)
    logic eq;  // a == b (equal)
    logic lt;  // a < b (less)
  } cmp3_t;

  localparam dr_t DR_SPACER0 = '{t: 1'b0, f: 1'b0};  // all-zero spacer
  localparam dr_t DR_SPACER1 = '{t: 1'b1, f: 1'b1};  // all-one spacer

  // Encode a single-rail bit as a dual-rail codeword.
  function automatic dr_t dr_enc(input logic v);
    return '{t: v, f: ~v};
  endfunction

  // True when the pair holds a codeword (exactly one rail high).
  function automatic logic dr_valid(input dr_t d);
    return d.t ^ d.f;
  endfunction

endpackage
