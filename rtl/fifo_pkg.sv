// fifo_pkg: sizes shared by the synchronous FIFO and its parts.
//
// The FIFO stores 8-bit words in an 8-entry register array addressed by
// 3-bit read and write pointers; these three numbers are the design's
// paper's specification. Every module takes them as typed parameters whose
// defaults come from here, so a wider or deeper FIFO is one override on the
// top. DEPTH must be a power of two: the pointers wrap by plain binary
// overflow.
package fifo_pkg;

  parameter int unsigned DATA_WIDTH = 8;  // bits per entry
  parameter int unsigned DEPTH      = 8;  // entries in the array
  parameter int unsigned PTR_WIDTH  = $clog2(DEPTH);  // 3-bit pointers

endpackage
