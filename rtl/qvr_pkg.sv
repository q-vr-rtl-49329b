// qvr_pkg: types, constants and small functions shared by the Q-VR units.
//
// The LIWC (workload controller) works on latencies in whole microseconds and
// keeps its learned latency-gradient offsets as IEEE half-precision (FP16)
// numbers, as the table size of 2^15 x 16 bit implies. The helpers
// fp16_from_int / fp16_to_int convert between the stored FP16 form and the
// signed integer form the arithmetic uses (truncation toward zero, saturation
// at +/-65504, subnormals read as zero).
//
// The UCA (unified composition and ATW) side shares the tile geometry, the
// texel-fetch request and pixel-write structs, and the tile classification
// (fovea only, periphery only, or border tile that needs both layers).
// The constants that come from the paper: 32x32 tiles, delta-e1 tags -5..+5,
// 6 movement bits + 4 eye bits of motion index, e1 between 5 and 90 degrees
// (the smallest and largest values of the paper's eccentricity table), start
// value e1 = 5. The rest is this design's own choice and is marked so.
package qvr_pkg;

  // ---------------- LIWC ----------------
  localparam int MOTION_W  = 10;          // 6 movement bits + 4 eye bits (paper)
  localparam int TAG_W     = 5;           // tag field of the table address (own choice: 2^15 depth)
  localparam int N_TAGS    = 11;          // delta e1 = -5 .. +5 degrees (paper)
  localparam int DTAG_MIN  = -5;
  localparam int E_W       = 8;           // eccentricity in whole degrees
  localparam int E1_MIN    = 5;           // smallest e1 of the paper's table / classic fovea
  localparam int E1_MAX    = 90;          // largest e1 of the paper's table
  localparam int E1_INIT   = 5;           // start value used in the paper's evaluation
  localparam int LAT_W     = 32;          // latency in microseconds, signed where it is a difference
  localparam int FP16_MAXI = 65504;

  typedef logic [MOTION_W-1:0] motion_idx_t;
  typedef logic [15:0]         fp16_t;

  // signed integer -> FP16 (truncating, saturating)
  function automatic fp16_t fp16_from_int(input logic signed [31:0] v);
    logic        s;
    logic [31:0] mag;
    logic [4:0]  p;
    logic [31:0] norm;
    fp16_t       r;
    s   = v[31];
    mag = s ? 32'(-v) : 32'(v);
    if (mag > 32'(FP16_MAXI)) mag = 32'(FP16_MAXI);
    p = '0;
    for (int i = 0; i < 16; i++) if (mag[i]) p = 5'(i);
    if (mag == 0) begin
      r = '0;
    end else begin
      if (p >= 10) norm = mag >> (p - 5'd10);
      else         norm = mag << (5'd10 - p);
      r = {s, 5'(p + 5'd15), norm[9:0]};
    end
    return r;
  endfunction

  // FP16 -> signed integer (truncating toward zero)
  function automatic logic signed [31:0] fp16_to_int(input fp16_t h);
    logic [4:0]  e;
    logic [31:0] val;
    logic signed [31:0] r;
    e   = h[14:10];
    val = {21'd0, 1'b1, h[9:0]};
    if (e == 5'd31)      val = 32'(FP16_MAXI);
    else if (e < 5'd15)  val = '0;
    else if (e >= 5'd25) val = val << (e - 5'd25);
    else                 val = val >> (5'd25 - e);
    r = h[15] ? -$signed(val) : $signed(val);
    return r;
  endfunction

  // ---------------- UCA ----------------
  localparam int TILE    = 32;            // 32x32 tiles (paper)
  localparam int CRD_W   = 12;            // pixel coordinate width (up to 4095)

  typedef logic [31:0] rgba_t;            // 4 x 8-bit channels: one SIMD4 word

  typedef enum logic [1:0] {
    MODE_FOVEA  = 2'd0,                   // tile wholly inside the fovea circle
    MODE_PERI   = 2'd1,                   // tile wholly outside it
    MODE_BORDER = 2'd2                    // tile crossed by the layer border
  } tile_mode_e;

  typedef struct packed {
    logic             prev;               // 1: previous frame's layers (dropped frame)
    logic             layer;              // 0: fovea layer, 1: periphery layer
    logic [CRD_W-1:0] x;
    logic [CRD_W-1:0] y;
  } texel_req_t;

  typedef struct packed {
    logic [CRD_W-1:0] x;
    logic [CRD_W-1:0] y;
    rgba_t            rgba;
  } pix_wr_t;

  typedef struct packed {
    logic [CRD_W-1:0] tx;                 // tile column
    logic [CRD_W-1:0] ty;                 // tile row
    logic             use_prev;           // rebuild from previous frame's layers
  } tile_cmd_t;

  // Classify tile (tx,ty) against the fovea circle of centre (cx,cy) and
  // radius r, all in pixels: nearest and farthest tile point from the centre.
  function automatic tile_mode_e tile_mode(input logic [CRD_W-1:0] tx, input logic [CRD_W-1:0] ty,
                                           input logic [CRD_W-1:0] cx, input logic [CRD_W-1:0] cy,
                                           input logic [CRD_W:0] r);
    int x0, y0, x1, y1, nx, ny, fx, fy;
    longint dmin, dmax, rr;
    x0 = int'(tx) * TILE;  x1 = x0 + TILE - 1;
    y0 = int'(ty) * TILE;  y1 = y0 + TILE - 1;
    nx = (int'(cx) < x0) ? x0 - int'(cx) : (int'(cx) > x1) ? int'(cx) - x1 : 0;
    ny = (int'(cy) < y0) ? y0 - int'(cy) : (int'(cy) > y1) ? int'(cy) - y1 : 0;
    fx = (int'(cx) - x0 > x1 - int'(cx)) ? int'(cx) - x0 : x1 - int'(cx);
    fy = (int'(cy) - y0 > y1 - int'(cy)) ? int'(cy) - y0 : y1 - int'(cy);
    dmin = longint'(nx) * nx + longint'(ny) * ny;
    dmax = longint'(fx) * fx + longint'(fy) * fy;
    rr   = longint'(r) * longint'(r);
    if (dmax <= rr)     return MODE_FOVEA;
    else if (dmin > rr) return MODE_PERI;
    else                return MODE_BORDER;
  endfunction

endpackage
