// htc_pkg: constants and helpers shared by the hybrid temporal computing (HTC)
// blocks.
//
// HTC_N is the operand width. An epoch, the time one multiply-accumulate
// takes, is 2^HTC_N clock cycles, so the default of 8 bits gives 256-cycle
// epochs. lfsr_taps() gives a maximal-length feedback mask for the selector
// LFSR at widths 3..16. Those masks are standard primitive polynomials; which
// LFSR to use is this design's own choice.
package htc_pkg;

  localparam int unsigned HTC_N = 8;  // operand width; epoch = 2**HTC_N cycles
  localparam int unsigned HTC_L = 4;  // multiplier inputs per MAC

  // Feedback mask for a left-shifting Fibonacci LFSR of width w. Bit i of the
  // mask set means state[i] takes part in the XOR feedback.
  function automatic logic [15:0] lfsr_taps(input int unsigned w);
    case (w)
      3:       return 16'h0006;  // x^3+x^2+1
      4:       return 16'h000C;  // x^4+x^3+1
      5:       return 16'h0014;  // x^5+x^3+1
      6:       return 16'h0030;  // x^6+x^5+1
      7:       return 16'h0060;  // x^7+x^6+1
      8:       return 16'h00B8;  // x^8+x^6+x^5+x^4+1
      9:       return 16'h0110;  // x^9+x^5+1
      10:      return 16'h0240;  // x^10+x^7+1
      11:      return 16'h0500;  // x^11+x^9+1
      12:      return 16'h0E08;  // x^12+x^11+x^10+x^4+1
      13:      return 16'h1C80;  // x^13+x^12+x^11+x^8+1
      14:      return 16'h3802;  // x^14+x^13+x^12+x^2+1
      15:      return 16'h6000;  // x^15+x^14+1
      default: return 16'hD008;  // x^16+x^15+x^13+x^4+1
    endcase
  endfunction

endpackage
