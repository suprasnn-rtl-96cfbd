// supra_pkg -- types and helpers shared by the SupraSNN core.
//
// Every packet that travels down the Multi-Cast (MC) tree carries a 2-bit
// control header. The four header values and their meaning follow the
// packet table of the architecture: invalid filler, spike (the index is a
// neuron that fired in the last timestep), unit select for initialization,
// and initialization data. Two index values are reserved in every index
// field: the end index (all ones), used as a barrier, and the invalid index
// (all ones with the LSB cleared), used for empty slots. Both rules follow
// the architecture description; the helper functions below make them
// width-independent. Saturating addition is this design's own choice for
// all current and potential arithmetic.
package supra_pkg;

  typedef enum logic [1:0] {
    CTRL_INVALID = 2'b00,  // no data, keeps the tree synchronous
    CTRL_SPIKE   = 2'b01,  // index of a neuron that spiked (or the end index)
    CTRL_SELECT  = 2'b10,  // index of the unit to initialize
    CTRL_DATA    = 2'b11   // initialization data for the selected unit
  } mc_ctrl_e;

  // Reserved index values for an index field of W bits.
  function automatic logic [31:0] end_index(input int unsigned w);
    return (32'h1 << w) - 32'h1;
  endfunction

  function automatic logic [31:0] invalid_index(input int unsigned w);
    return (32'h1 << w) - 32'h2;
  endfunction

  // Saturating two's-complement addition of two W-bit values (W <= 32).
  function automatic logic [31:0] sat_add(input logic [31:0] a, input logic [31:0] b,
                                          input int unsigned w);
    logic signed [33:0] sa, sb, s, hi, lo;
    sa = $signed({2'b00, a}) <<< (34 - w);  // move the W-bit value to the top
    sa = sa >>> (34 - w);                   // and sign-extend it back
    sb = $signed({2'b00, b}) <<< (34 - w);
    sb = sb >>> (34 - w);
    s  = sa + sb;
    hi = (34'sd1 <<< (w - 1)) - 34'sd1;
    lo = -(34'sd1 <<< (w - 1));
    if (s > hi) s = hi;
    if (s < lo) s = lo;
    return 32'(s) & ((32'h1 << w) - 32'h1);
  endfunction

endpackage
