// Shared types and helpers of the FP32 systolic array.
//
// The array multiplies matrices held as blocks in external memory. All data is IEEE-754 single
// precision (32-bit words). A matrix block travels from a loader through the memory-module chain
// as a stream of VEC-wide vectors; each vector carries the tags below, which say where the block
// sits in the output sequence. The tag set is this design's choice: the source description only
// names a "new output sequence" flag (here `first`) and a flush of zeros.
package sa_pkg;

  typedef logic [31:0] fp32_t;

  // Tags carried with every vector of a block.
  typedef struct packed {
    logic first;  // block starts an output sequence (k block 0): accumulators start from zero
    logic last;   // block ends an output sequence (k block K-1): results drain after it
    logic flush;  // block of zeros sent after the job; clears accumulators, produces no output
  } blk_tag_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;

  // ReLU on an FP32 word: negative numbers (sign bit set, not NaN) become +0.
  function automatic fp32_t fp32_relu(fp32_t x);
    if (x[31] && !(x[30:23] == 8'hFF && x[22:0] != '0)) return FP32_ZERO;
    return x;
  endfunction

endpackage
