// afft_pkg: constants shared by the 8-point multiplierless approximate-FFT
// beamformer.
//
// The transform size (8 antenna elements, 8 beams) and the 16-bit input word
// follow the design description; the pipeline depth of four register levels,
// one per adder level of the signal-flow graph, is this implementation's
// choice. Word growth is one bit per adder level in stages 1 to 3; stage 4
// adds none because no output of the whole transform can exceed eight times
// the input range (see afft_stage4_d2a1a3p).
package afft_pkg;
  localparam int unsigned N        = 8;   // elements in and beams out
  localparam int unsigned IN_W     = 16;  // ADC sample width, I and Q each
  localparam int unsigned GROWTH   = 3;   // log2 of the largest row gain (8)
endpackage
