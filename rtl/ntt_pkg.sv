// ntt_pkg -- shared types, constants and index functions of the NTT accelerator.
//
// The butterfly mode encoding follows the drawings of the unified butterfly
// (1 = forward NTT, 0 = inverse NTT). The coefficient-to-bank mapping used by
// the coefficient memory and the control unit lives here so both agree on it:
// a coefficient index i of LOGN bits is cut into chunks of LOGB bits
// (LOGB = log2 of the number of banks); the bank is the XOR of all chunks and
// the address inside the bank is i with its lowest chunk removed. Any set of
// coefficients that differ only in LOGB consecutive index bits therefore falls
// into 2**LOGB distinct banks, which is what makes every
// pass of the transform conflict free. This mapping is this design's own
// choice; the accelerator it follows adopts a published conflict-free scheme
// without describing it.
package ntt_pkg;

  // Butterfly operating mode, as printed on the mode multiplexers.
  typedef enum logic {
    MODE_INTT = 1'b0,
    MODE_NTT  = 1'b1
  } mode_e;

  // Latency of one butterfly PE in clock cycles: one cycle for the
  // subtract-before-multiply path, six for the Montgomery multiplier (three
  // DSP levels of two stages) and one for the final add/subtract stage.
  localparam int unsigned PE_LAT   = 8;
  localparam int unsigned MUL_LAT  = 6;
  // Width of one DSP-sized sub-multiplier operand.
  localparam int unsigned DSP_W    = 17;

  // Bank of coefficient index i: XOR of all LOGB-bit chunks of i.
  function automatic int unsigned bank_of(input int unsigned i,
                                          input int unsigned logn,
                                          input int unsigned logb);
    int unsigned b;
    b = 0;
    for (int unsigned s = 0; s < logn; s += logb)
      b ^= (i >> s) & ((1 << logb) - 1);
    return b;
  endfunction

  // Address of coefficient index i inside its bank.
  function automatic int unsigned addr_of(input int unsigned i,
                                          input int unsigned logb);
    return i >> logb;
  endfunction

endpackage
