// gs_pkg: types, encodings and the k-mer hash shared by the seeding kernel.
//
// Read batches hold one 4-bit code per base, packed little-endian into the
// read channel's words (base i of a word sits in bits [4i+3:4i]). The codes
// for A, C, G, T follow the usual 2-bit order so that the 2-bit k-mer value is
// the low two bits of the code; N marks an unknown base and E ends a read.
// The paper names the alphabet (A, C, G, T, N and the separator E) but not an
// encoding; this packing is this design's choice.
//
// The hash is the invertible integer hash used by minimizer-based mappers of
// the minimap2 family, restricted to 2k bits by a mask. The paper only says
// that seeds are chosen with a "hash and compare" minimizer heuristic; the
// exact function is this design's choice and must match the host's index.
//
// An anchor is one 64-bit word in the anchor buffer: the delta value
// (L_ref - L_read, 32-bit two's complement), the read location, the strand
// and an end-of-read flag. A word with the end-of-read flag set carries no
// anchor; it tells the host where the anchors of one read end.
package gs_pkg;

  typedef enum logic [3:0] {
    BASE_A = 4'd0,
    BASE_C = 4'd1,
    BASE_G = 4'd2,
    BASE_T = 4'd3,
    BASE_N = 4'd4,
    BASE_E = 4'd5
  } base_e;

  localparam int unsigned LOC_W     = 32;  // reference and read locations
  localparam int unsigned RDLOC_W   = 30;  // read location stored in an anchor
  localparam int unsigned PTR_W     = 32;  // map-array entry: index into the key array
  localparam int unsigned KEY_DW    = 64;  // key-array entry
  localparam int unsigned ANCHOR_DW = 64;  // anchor-buffer entry
  localparam int unsigned ADDR_W    = 40;  // word address on every memory channel

  // One key-array entry: a reference location and the strand of the
  // reference minimizer (1 = reverse complement was the smaller k-mer).
  typedef struct packed {
    logic [30:0]      unused;
    logic             str;
    logic [LOC_W-1:0] loc;
  } key_entry_t;

  typedef struct packed {
    logic               eor;    // end-of-read marker, no anchor
    logic               str;    // read strand XOR reference strand
    logic [RDLOC_W-1:0] rd_loc; // location of the seed in the read
    logic [LOC_W-1:0]   delta;  // L_ref - L_read
  } anchor_t;

  // Invertible 64-bit integer hash, evaluated modulo mask+1 (mask = 2^(2k)-1).
  function automatic logic [63:0] hash64(input logic [63:0] key_in,
                                         input logic [63:0] mask);
    logic [63:0] key;
    key = (~key_in + (key_in << 21)) & mask;
    key = key ^ (key >> 24);
    key = ((key + (key << 3)) + (key << 8)) & mask;
    key = key ^ (key >> 14);
    key = ((key + (key << 2)) + (key << 4)) & mask;
    key = key ^ (key >> 28);
    key = (key + (key << 31)) & mask;
    return key;
  endfunction

endpackage
