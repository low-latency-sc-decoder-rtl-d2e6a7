// polar_pkg: constants shared by the look-ahead SC polar decoder.
// N_DEFAULT is the code length of the worked example the decoder is drawn
// for (N = 8).  The LLR word length q is left open by the architecture; six
// bits is this design's choice.  clog2_int is used where a parameter's
// log2 is needed for port widths.
package polar_pkg;
  localparam int unsigned N_DEFAULT = 8;  // code length of the example decoder
  localparam int unsigned Q_DEFAULT = 6;  // LLR quantisation width (design choice)
endpackage
