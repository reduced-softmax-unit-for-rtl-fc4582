// rs_pkg: constants shared by the reduced softmax unit and its testbenches.
//
// The unit picks the predicted class of a classifier as the index of its largest
// output-layer score x_i, since softmax is monotonic and leaves that index unchanged.
// The number of classes defaults to 10, the size of every example set the method is
// illustrated with. The score format, 16-bit signed two's complement, is this design's
// choice: the method only needs the scores to be ordered the way signed integers are
// ordered, so any signed fixed-point format works unchanged (the testbenches read the
// scores as 8.8 fixed point, 8 fraction bits, to turn real values into integers).
package rs_pkg;

  // Default number of classes k.
  localparam int unsigned K_DEFAULT    = 10;
  // Default score width in bits (signed two's complement).
  localparam int unsigned W_DEFAULT    = 16;

  // Width of a class index for k classes (at least one bit).
  function automatic int unsigned idx_width(input int unsigned k);
    return (k > 1) ? $clog2(k) : 1;
  endfunction

endpackage
