// eventor_pkg: sizes, fixed-point formats and record types shared by the
// event back-projection / ray-counting accelerator.
//
// Number formats (all two's complement):
//   coord_t  Q9.7  16 bit  event coordinates (x_k, y_k) and x(Z0), y(Z0)
//   param_t  Q11.21 32 bit homography entries and proportional parameters
//   score_t  16-bit unsigned integer DSI score
//   vox8_t   8-bit unsigned integer voxel column/row x(Zi), y(Zi)
// These widths follow the paper's quantisation table. Signedness of the
// coordinates, the layout of a phi record and all widths not in that table
// are choices of this design.
// Lint note: a module that uses only some of these constants makes the
// linter report the others as unused parameters; that is expected for a
// shared package.
package eventor_pkg;

  // ---- sizes --------------------------------------------------------------
  localparam int unsigned IMG_W       = 240;   // DAVIS sensor width
  localparam int unsigned IMG_H       = 180;   // DAVIS sensor height
  localparam int unsigned NZ          = 100;   // depth planes (design choice)
  localparam int unsigned NPE         = 2;     // PE_Zi count of the prototype
  localparam int unsigned MAX_EVENTS  = 1024;  // events per event frame
  localparam int unsigned VBUF_DEPTH  = 512;   // vote addresses per Buf_V bank

  // ---- fixed-point formats -------------------------------------------------
  localparam int unsigned COORD_W    = 16;
  localparam int unsigned COORD_FRAC = 7;
  localparam int unsigned PARAM_W    = 32;
  localparam int unsigned PARAM_FRAC = 21;
  localparam int unsigned SCORE_W    = 16;
  localparam int unsigned VOX_W      = 8;
  // product of a coordinate and a parameter: Q20.28 in 48 bits
  localparam int unsigned PROD_W     = COORD_W + PARAM_W;
  localparam int unsigned PROD_FRAC  = COORD_FRAC + PARAM_FRAC;

  typedef logic signed [COORD_W-1:0] coord_t;
  typedef logic signed [PARAM_W-1:0] param_t;
  typedef logic        [SCORE_W-1:0] score_t;
  typedef logic        [VOX_W-1:0]   vox8_t;

  // one event (or one canonical-plane point) as a 32-bit bus word:
  // y in bits [31:16], x in bits [15:0]
  typedef struct packed {
    coord_t y;
    coord_t x;
  } point_t;

  // proportional back-projection parameters of one depth plane:
  //   x(Zi) = a * x(Z0) + bx,  y(Zi) = a * y(Z0) + by
  typedef struct packed {
    param_t by;
    param_t bx;
    param_t a;
  } phi_t;

  // AXI-Stream destination codes used by the DMA words
  typedef enum logic [1:0] {
    DEST_H = 2'd0,   // nine homography words, row-major
    DEST_E = 2'd1,   // event words, TLAST on the last event of the frame
    DEST_P = 2'd2    // PHI_WORDS*NZ phi words: a, bx, by of plane 0, then plane 1...
  } dest_e;

endpackage
