// lgrand_pkg: types and helper functions shared by the List-GRAND decoder.
//
// Holds the decoder's phase encoding and the sign-magnitude comparison used to
// decide whether a new candidate codeword is more likely than the kept one.
// The phases are this design's own; the paper gives only the behaviour
// (syndrome check first, then sorting, then the TEP search).
package lgrand_pkg;

  // Controller phases.
  //   PH_IDLE   : waiting for a frame
  //   PH_SORT   : one cycle in which the sorted order of |y| is captured
  //   PH_SEARCH : one schedule step (one TEP group) per cycle
  //   PH_DRAIN  : one cycle so the likelihood of the last candidate is compared
  //   PH_DONE   : result valid for one cycle
  typedef enum logic [2:0] {
    PH_IDLE   = 3'd0,
    PH_SORT   = 3'd1,
    PH_SEARCH = 3'd2,
    PH_DRAIN  = 3'd3,
    PH_DONE   = 3'd4
  } phase_e;

  // Sign-magnitude "a > b" on W-bit words (MSB = sign). A zero magnitude is
  // treated as positive, so +0 and -0 compare equal.
  function automatic logic sm_gt(input logic [31:0] a, input logic [31:0] b, input int unsigned w);
    logic sa, sb;
    logic [31:0] ma, mb, mask;
    mask = (32'h1 << (w - 1)) - 32'h1;
    ma = a & mask;
    mb = b & mask;
    sa = a[w-1] && (ma != 0);
    sb = b[w-1] && (mb != 0);
    if (sa != sb) return sb;          // the positive one is larger
    if (!sa)      return ma > mb;     // both positive
    return ma < mb;                   // both negative
  endfunction

endpackage
