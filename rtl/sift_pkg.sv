// sift_pkg: constants and types shared by the SIFT descriptor matching core.
//
// A descriptor is 128 unsigned 16-bit fixed-point elements plus a 32-bit
// image location, 2080 bits in all, as the paper gives it. Element values lie
// in [0,1]; this design stores them as unsigned Q1.15 (1.0 = 16'h8000), a
// choice of its own since the paper only says "16-bit fixed-point".
// Bit layout of a packed descriptor (own choice): element i sits in
// bits [16*i+15 : 16*i], the location {x[15:0], y[15:0]} in bits [2079:2048].
//
// Pipeline latencies (10, 52, 1, 3) and the cache depth (33) are the paper's.
// Angles are unsigned Q1.15 radians, so [0, pi/2] maps to [0, 51472]; the
// "empty" minimum value 16'hFFFF is therefore larger than any angle.
package sift_pkg;

  localparam int unsigned N_ELEM     = 128;  // elements per descriptor
  localparam int unsigned ELEM_W     = 16;   // bits per element
  localparam int unsigned COORD_W    = 32;   // (x,y) location bits
  localparam int unsigned VEC_W      = N_ELEM * ELEM_W;   // 2048
  localparam int unsigned DESC_W     = VEC_W + COORD_W;   // 2080
  localparam int unsigned DOT_W      = 32;   // Dot_Product output width
  localparam int unsigned ANGLE_W    = 16;   // Cosine_Inverse output width
  localparam int unsigned BEAT_W     = 64;   // external memory beat (8 bytes)
  localparam int unsigned BLOCK_MAX  = 33;   // DES_MEM / MIN_MEM depth

  localparam int unsigned LAT_DOT    = 10;   // Dot_Product pipeline stages
  localparam int unsigned LAT_ACOS   = 52;   // Cosine_Inverse pipeline stages
  localparam int unsigned LAT_MIN    = 1;    // MIN_FIND pipeline stages
  localparam int unsigned LAT_CHECK  = 3;    // Match_Check pipeline stages

  // One entry of the minimum(s) cache: 64 bits as printed in Fig. 2.
  typedef struct packed {
    logic [ANGLE_W-1:0] min;
    logic [ANGLE_W-1:0] sec_min;
    logic [COORD_W-1:0] coord;
  } min_entry_t;

  localparam min_entry_t MIN_EMPTY = '1;   // 2^64-1: flush constant

  // Control tag that travels beside the data through the pipeline.
  typedef struct packed {
    logic       valid;   // a real dot product occupies this slot
    logic [5:0] aidx;    // DES_MEM / MIN_MEM slot of the alpha descriptor
    logic       first;   // first beta descriptor of this block: flush MIN_MEM
    logic       last;    // last beta descriptor of this block: result is final
  } tag_t;

endpackage
