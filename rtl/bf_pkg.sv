// bf_pkg: types and constants shared by the plane-wave DAS beamformer.
//
// RF samples are 16-bit two's complement, as in the 16-bit quantisation the
// beamformer is sized for. A delay-profile entry is one 16-bit word: bit 15 is
// an aperture-enable flag and bits 14:0 are the fast-time row index (after the
// x2 interpolation) that the entry points at. Packing the enable into the top
// bit is this design's choice; it is how the depth-dependent subaperture
// (fixed F-number) is expressed without a separate table.
package bf_pkg;
  localparam int unsigned SAMPLE_W = 16;
  localparam int unsigned IDX_W    = 15;

  typedef logic signed [SAMPLE_W-1:0] sample_t;

  typedef struct packed {
    logic             en;   // entry inside the active subaperture
    logic [IDX_W-1:0] idx;  // interpolated fast-time row index
  } delay_t;

  // Width of a sum of n samples.
  function automatic int unsigned sum_w(input int unsigned n);
    return SAMPLE_W + $clog2(n);
  endfunction
endpackage
