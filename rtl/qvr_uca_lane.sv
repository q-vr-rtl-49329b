// qvr_uca_lane: one SIMD4 lane of the UCA: coordinate mapping and filtering.
//
// The UCA has 8 SIMD4 units for "coordination mapping and filtering"; this is
// one of them. A SIMD4 word is one RGBA pixel (4 x 8-bit channels). The lane
// handles the pixels LANE, LANE+LANES, LANE+2*LANES, ... of a 32x32 tile.
//
// Coordinate mapping: the source coordinate of tile pixel (i,j) is the
// bilinear blend of the four lens-distorted, reprojected tile corners
// c00 (0,0), c10 (32,0), c01 (0,32), c11 (32,32), in pixels with 8 fraction
// bits (Q.8): u = sum(corner * weight) / 1024.
//
// Filtering (paper Eq. 3 and 4): one texel is fetched per cycle and
// multiplied into all four channels at once.
//   MODE_FOVEA / MODE_PERI: bilinear filtering of one layer, 4 taps,
//     weights (1-fx or fx)*(1-fy or fy) in Q0.16, result = sum >> 16.
//   MODE_BORDER: the same 4 taps from the fovea layer and from the periphery
//     layer, summed and halved: the "trilinear" filter that replaces
//     composition (average of the layers) followed by ATW (bilinear), with a
//     single pass over the inputs: Y = 1/(MN) sum_j sum_i w_i * S_ij.
// The periphery layer is stored at 1/2^PS of the resolution per axis, so its
// coordinate is (u, v) >> PS. Texel coordinates are clamped to the layer.
// Fixed point in place of the paper's FPUs, the tap order, the results
// truncated rather than rounded and the half-resolution periphery are this
// design's choices.
//
// Timing: start (one cycle) latches the tile; the lane then issues one texel
// request per cycle (req_valid); the texel arrives on rsp the next cycle.
// A pixel is written (wr_valid) the cycle after its last tap, if it lies in
// the frame. Per tile: (1024/LANES) * taps cycles + 3, i.e. 515 cycles
// bilinear and 1027 cycles trilinear with 8 lanes, from start until done
// (high when idle and the last pixel has been written).
module qvr_uca_lane
  import qvr_pkg::*;
#(
  parameter int LANE    = 0,
  parameter int LANES   = 8,       // paper: 8 SIMD4 units
  parameter int FRAME_W = 1920,
  parameter int FRAME_H = 2160,
  parameter int PS      = 1        // periphery layer down-scale shift (own choice)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic [CRD_W-1:0]         x0,          // tile origin, pixels
  input  logic [CRD_W-1:0]         y0,
  input  tile_mode_e               mode,
  input  logic                     use_prev,
  input  logic signed [23:0]       cx [4],      // corner source x, Q.8: c00,c10,c01,c11
  input  logic signed [23:0]       cy [4],
  output logic                     done,
  output logic                     req_valid,
  output texel_req_t               req,
  input  rgba_t                    rsp,
  output logic                     wr_valid,
  output pix_wr_t                  wr
);

  localparam int NPIX = TILE * TILE / LANES;
  localparam int KW   = $clog2(NPIX) + 1;
  localparam int LW0  = FRAME_W, LH0 = FRAME_H;
  localparam int LW1  = FRAME_W >> PS, LH1 = FRAME_H >> PS;

  logic                 busy;
  logic [KW-1:0]        k;          // pixel counter within this lane
  logic [2:0]           tap;        // 0..3 (bilinear) or 0..7 (trilinear)
  logic [CRD_W-1:0]     x0_r, y0_r;
  tile_mode_e           mode_r;
  logic                 prev_r;
  logic signed [23:0]   cx_r [4];
  logic signed [23:0]   cy_r [4];

  // ---- coordinate mapping for the current pixel ----
  logic [9:0]         p;
  logic [5:0]         pi, pj;
  logic signed [23:0] u, v;
  always_comb begin
    logic signed [47:0] su, sv;
    logic signed [12:0] w00, w10, w01, w11;
    p   = 10'(int'(k) * LANES + LANE);
    pi  = {1'b0, p[4:0]};
    pj  = {1'b0, p[9:5]};
    w00 = 13'((32 - int'(pi)) * (32 - int'(pj)));
    w10 = 13'(int'(pi) * (32 - int'(pj)));
    w01 = 13'((32 - int'(pi)) * int'(pj));
    w11 = 13'(int'(pi) * int'(pj));
    su  = 48'(cx_r[0]) * 48'(w00) + 48'(cx_r[1]) * 48'(w10) + 48'(cx_r[2]) * 48'(w01) + 48'(cx_r[3]) * 48'(w11);
    sv  = 48'(cy_r[0]) * 48'(w00) + 48'(cy_r[1]) * 48'(w10) + 48'(cy_r[2]) * 48'(w01) + 48'(cy_r[3]) * 48'(w11);
    u   = 24'(su >>> 10);
    v   = 24'(sv >>> 10);
  end

  // ---- tap address and weight ----
  logic               layer_c, last_c;
  logic [CRD_W-1:0]   tx_c, ty_c;
  logic [16:0]        w_c;
  always_comb begin
    logic signed [23:0] lu, lv;
    logic signed [23:0] ix, iy;
    logic [8:0]         wx, wy;
    int                 lw, lh;
    layer_c = (mode_r == MODE_PERI) || (mode_r == MODE_BORDER && tap[2]);
    lu = layer_c ? (u >>> PS) : u;
    lv = layer_c ? (v >>> PS) : v;
    lw = layer_c ? LW1 : LW0;
    lh = layer_c ? LH1 : LH0;
    ix = (lu >>> 8) + $signed({23'd0, tap[0]});
    iy = (lv >>> 8) + $signed({23'd0, tap[1]});
    if (ix < 0) ix = 0; else if (ix > $signed(24'(lw - 1))) ix = $signed(24'(lw - 1));
    if (iy < 0) iy = 0; else if (iy > $signed(24'(lh - 1))) iy = $signed(24'(lh - 1));
    tx_c = CRD_W'(ix);
    ty_c = CRD_W'(iy);
    wx   = tap[0] ? {1'b0, lu[7:0]} : 9'd256 - {1'b0, lu[7:0]};
    wy   = tap[1] ? {1'b0, lv[7:0]} : 9'd256 - {1'b0, lv[7:0]};
    w_c  = 17'(18'(wx) * 18'(wy));
    last_c = (mode_r == MODE_BORDER) ? (tap == 3'd7) : (tap == 3'd3);
  end

  // ---- issue ----
  assign req_valid = busy;
  assign req       = '{prev: prev_r, layer: layer_c, x: tx_c, y: ty_c};

  // ---- accumulate (one cycle behind issue) ----
  logic               vq, lastq;
  logic [16:0]        wq;
  logic [CRD_W-1:0]   pxq, pyq;
  logic               borderq;
  logic [27:0]        acc [4];
  logic [27:0]        accn [4];
  assign done = !busy && !vq && !wr_valid;
  always_comb begin
    for (int c = 0; c < 4; c++)
      accn[c] = acc[c] + 28'(25'(wq) * 25'(rsp[8*c +: 8]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      k       <= '0;
      tap     <= '0;
      x0_r    <= '0;
      y0_r    <= '0;
      mode_r  <= MODE_FOVEA;
      prev_r  <= 1'b0;
      for (int i = 0; i < 4; i++) begin cx_r[i] <= '0; cy_r[i] <= '0; acc[i] <= '0; end
      vq      <= 1'b0;
      lastq   <= 1'b0;
      wq      <= '0;
      pxq     <= '0;
      pyq     <= '0;
      borderq <= 1'b0;
      wr_valid <= 1'b0;
      wr      <= '0;
    end else begin
      wr_valid <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        k      <= '0;
        tap    <= '0;
        x0_r   <= x0;
        y0_r   <= y0;
        mode_r <= mode;
        prev_r <= use_prev;
        cx_r   <= cx;
        cy_r   <= cy;
      end else if (busy) begin
        if (last_c) begin
          tap <= '0;
          if (int'(k) == NPIX - 1) busy <= 1'b0;
          k <= k + 1'b1;
        end else begin
          tap <= tap + 1'b1;
        end
      end
      // pipeline register for the returning texel
      vq      <= busy;
      lastq   <= last_c;
      wq      <= w_c;
      pxq     <= x0_r + CRD_W'(pi);
      pyq     <= y0_r + CRD_W'(pj);
      borderq <= (mode_r == MODE_BORDER);
      if (vq) begin
        if (lastq) begin
          for (int c = 0; c < 4; c++) begin
            acc[c] <= '0;
            wr.rgba[8*c +: 8] <= borderq ? 8'(accn[c] >> 17) : 8'(accn[c] >> 16);
          end
          wr.x     <= pxq;
          wr.y     <= pyq;
          wr_valid <= (int'(pxq) < FRAME_W) && (int'(pyq) < FRAME_H);
        end else begin
          acc <= accn;
        end
      end
    end
  end

endmodule
