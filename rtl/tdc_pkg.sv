// tdc_pkg: types, constants and width helpers shared by the TDL TDC encoder.
//
// The encoder splits the sampled taps of a tapped delay line into pieces of
// PIECE_W bits (24 in every example of the design) and counts the ones of
// each piece. A local sum is therefore 5 bits wide (0..24) and its MSB, set
// when the count is 16 or more, is the flag of the piece. The three encoder
// modes follow the three kinds of TDC the method is applied to: a normal
// TDL TDC (one 1-0 transition), a half-length delay line TDC (the first
// transition of either kind, with a type bit) and a wave-union type A TDC
// (several transitions whose positions are added together).
package tdc_pkg;

  // Kind of TDC the encoder serves.
  typedef enum logic [1:0] {
    MODE_NORMAL      = 2'd0,  // step signal, one 1-0 transition
    MODE_HALF_LENGTH = 2'd1,  // square pulse, first transition, either kind
    MODE_WAVE_UNION  = 2'd2   // wave union A, EDGES transitions summed
  } tdc_mode_e;

  // Kind of a transition, as read from the flags of the two selected pieces.
  // The value equals the flag of the first selected piece.
  typedef enum logic {
    TR_RISE_01 = 1'b0,  // 0-1 transition: first piece flag 0, second flag 1
    TR_FALL_10 = 1'b1   // 1-0 transition: first piece flag 1, second flag 0
  } trans_e;

  // Bits of the fine code the encoder delivers in each mode.
  function automatic int unsigned fine_width(input tdc_mode_e mode,
                                             input int unsigned taps,
                                             input int unsigned edges);
    case (mode)
      MODE_HALF_LENGTH: return $clog2(taps + 1) + 1;
      MODE_WAVE_UNION:  return $clog2(edges * taps + 1);
      default:          return $clog2(taps + 1);
    endcase
  endfunction

  // Pipeline latency of the channel, in clock cycles, from the clock edge
  // that samples the taps to the cycle in which the encoder output is valid:
  // one cycle for the pre-encoder, one per back-end stage, one for the final
  // adder/output register.
  function automatic int unsigned encoder_latency(input int unsigned edges);
    return edges + 2;
  endfunction

endpackage
