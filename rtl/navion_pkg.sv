// navion_pkg: types and constants shared by the Navion RTL.
// It holds the sizes of the compressed image format (5-bit pixels coded in 4x4
// blocks of 26 bits), the layout of one vision-factor observation (5-bit keyframe
// ID plus three double-precision coordinates) and the IEEE-754 double fields
// used by the backend arithmetic. The 5-bit / 4x4 / 26-bit format, the 5-bit KF ID
// and the use of double precision come from the paper; the bit order inside the
// 26-bit word and inside an observation is this design's choice.
package navion_pkg;

  // ---- compressed frame format ----
  localparam int unsigned PIX_BITS = 5;   // pixels truncated to 5 bits
  localparam int unsigned BLK      = 4;   // 4x4 blocks

  typedef struct packed {
    logic [BLK*BLK-1:0]  flags;   // 1 = pixel at or above the threshold, index row*4+col
    logic [PIX_BITS-1:0] thr;     // threshold, halfway between min and max
    logic [PIX_BITS-1:0] mn;      // minimum of the block
  } cblock_t;                      // 16 + 5 + 5 = 26 bits

  // ---- vision factor observation ----
  localparam int unsigned KFID_W = 5;
  typedef struct packed {
    logic [KFID_W-1:0] kf_id;
    logic [63:0]       u;         // three double-precision coordinates
    logic [63:0]       v;
    logic [63:0]       w;
  } obs_t;                         // 197 bits

  // ---- IEEE-754 double ----
  typedef struct packed {
    logic        s;
    logic [10:0] e;
    logic [51:0] m;
  } f64_t;

endpackage
