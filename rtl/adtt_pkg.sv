// adtt_pkg -- constants and types shared by the approximate 8-point
// discrete Tchebichef transform (DTT) datapath.
//
// The transform matrix T8* has entries in {0, +-1, +-2}. The largest L1 norm
// of any of its rows is 12 and of any of its columns is 9, so one 1-D pass,
// forward or inverse, grows a word by at most 4 bits (12 < 16). Every node of
// the flow graphs stays inside that bound too, so each 1-D stage works at a
// single width of input width + GROWTH and can never overflow. The growth
// figure is this design's own derivation; the paper gives no word lengths.
//
// blk_tag_t is the side band that travels with a vector through the 2-D
// pipeline: the kernel that processes the block (forward or inverse) and the
// index of the vector inside its 8x8 block.
package adtt_pkg;

  localparam int N      = 8;   // transform length (8-point approximation)
  localparam int IDX_W  = 3;   // bits to index one of N vectors
  localparam int GROWTH = 4;   // word growth of one 1-D pass

  typedef struct packed {
    logic              inv;    // 1: near-inverse (T8*)^T, 0: forward T8*
    logic [IDX_W-1:0]  idx;    // row or column index inside the 8x8 block
  } blk_tag_t;

endpackage
