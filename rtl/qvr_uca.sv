// qvr_uca: Unified Composition and ATW unit (one per eye).
//
// Replaces the two GPU passes "compose fovea and periphery layers" and
// "asynchronous timewarp" by one pass over 32x32 output tiles, on a unit of
// its own beside the GPU. For each tile command it
//   1. samples the latest head-motion reprojection offset (the "sensor" input)
//      and runs the four tile corners through the lens-distortion unit
//      (4 multipliers), giving the source coordinate of each corner;
//   2. checks the tile against the border of the fovea circle ("Bound?"):
//      border tiles are filtered trilinearly from both layers, which performs
//      composition and ATW filtering in one sampling pass (paper Eq. 4); other
//      tiles are filtered bilinearly from the one layer they lie in;
//   3. lets its LANES SIMD4 lanes map the tile's pixels to source coordinates
//      and filter them, writing finished pixels to the frame buffer.
// Lens distortion, coordinate mapping, the bound test and the two filters are
// the paper's (Fig. 11); doing the distortion only at the tile corners and
// interpolating inside the tile, the polynomial, the fixed-point formats and
// the command handshake are this design's choices. The fovea circle (cx, cy,
// radius r in pixels), the distortion constants and the lens centre at the
// frame centre are inputs / parameters.
//
// Timing: a command is taken when cmd_valid && cmd_ready. A bilinear tile
// takes 526 cycles from acceptance to tile_done (paper: "as low as 532
// cycles" per 32x32 block), a border (trilinear) tile 1038 cycles.
// Texel requests are answered one cycle later on rsp (fixed-latency memory).
module qvr_uca
  import qvr_pkg::*;
#(
  parameter int LANES   = 8,       // paper: 8 SIMD4 units
  parameter int FRAME_W = 1920,    // paper: 1920x2160 per eye
  parameter int FRAME_H = 2160,
  parameter int PS      = 1,       // periphery down-scale shift (own choice)
  parameter int NORM_SH = 10       // lens radius normalisation: 1.0 = 1024 px (own choice)
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile commands
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  tile_cmd_t          cmd,
  // frame state
  input  logic [CRD_W-1:0]   fov_cx,
  input  logic [CRD_W-1:0]   fov_cy,
  input  logic [CRD_W:0]     fov_r,
  input  logic signed [17:0] k1,
  input  logic signed [17:0] k2,
  input  logic signed [23:0] reproj_dx,   // head-motion reprojection, Q.8 pixels
  input  logic signed [23:0] reproj_dy,
  // texel fetch, one port per lane
  output logic               req_valid [LANES],
  output texel_req_t         req       [LANES],
  input  rgba_t              rsp       [LANES],
  // pixel write-back, one port per lane
  output logic               wr_valid  [LANES],
  output pix_wr_t            wr        [LANES],
  // status
  output logic               tile_done,
  output tile_mode_e         tile_mode_o
);

  localparam int CX0 = FRAME_W / 2;
  localparam int CY0 = FRAME_H / 2;
  localparam int NSH = 15 - NORM_SH;     // pixel -> Q.15 normalised
  localparam int BSH = NORM_SH + 8 - 15; // Q.15 normalised -> Q.8 pixel

  typedef enum logic [1:0] {U_IDLE, U_LENS, U_RUN, U_DONE} ustate_e;
  ustate_e st;

  tile_cmd_t          cmd_r;
  tile_mode_e         mode_r;
  logic signed [23:0] rdx_r, rdy_r;
  logic [2:0]         n_in, n_out;       // corners fed / returned
  logic signed [23:0] ccx [4];
  logic signed [23:0] ccy [4];
  logic               lanes_start;
  logic [LANES-1:0]   lane_done;

  // ---- lens distortion of the tile corners ----
  logic               ld_in_valid, ld_in_ready, ld_out_valid;
  logic signed [17:0] ld_x, ld_y;
  logic signed [23:0] ld_xo, ld_yo;
  always_comb begin
    int px, py;
    px = int'(cmd_r.tx) * TILE + (n_in[0] ? TILE : 0);
    py = int'(cmd_r.ty) * TILE + (n_in[1] ? TILE : 0);
    ld_x = 18'((px - CX0) <<< NSH);
    ld_y = 18'((py - CY0) <<< NSH);
  end
  assign ld_in_valid = (st == U_LENS) && (n_in < 3'd4);

  qvr_lens_distortion u_lens (
    .clk, .rst_n, .k1, .k2,
    .in_valid(ld_in_valid), .in_ready(ld_in_ready), .x_in(ld_x), .y_in(ld_y),
    .out_valid(ld_out_valid), .x_out(ld_xo), .y_out(ld_yo));

  // ---- lanes ----
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    qvr_uca_lane #(.LANE(l), .LANES(LANES), .FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PS(PS)) u_lane (
      .clk, .rst_n, .start(lanes_start),
      .x0(CRD_W'(int'(cmd_r.tx) * TILE)), .y0(CRD_W'(int'(cmd_r.ty) * TILE)),
      .mode(mode_r), .use_prev(cmd_r.use_prev), .cx(ccx), .cy(ccy),
      .done(lane_done[l]), .req_valid(req_valid[l]), .req(req[l]), .rsp(rsp[l]),
      .wr_valid(wr_valid[l]), .wr(wr[l]));
  end

  assign cmd_ready   = (st == U_IDLE);
  assign tile_mode_o = mode_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= U_IDLE;
      cmd_r       <= '0;
      mode_r      <= MODE_FOVEA;
      rdx_r       <= '0;
      rdy_r       <= '0;
      n_in        <= '0;
      n_out       <= '0;
      for (int i = 0; i < 4; i++) begin ccx[i] <= '0; ccy[i] <= '0; end
      lanes_start <= 1'b0;
      tile_done   <= 1'b0;
    end else begin
      lanes_start <= 1'b0;
      tile_done   <= 1'b0;
      unique case (st)
        U_IDLE: if (cmd_valid) begin
          cmd_r  <= cmd;
          mode_r <= tile_mode(cmd.tx, cmd.ty, fov_cx, fov_cy, fov_r);
          rdx_r  <= reproj_dx;
          rdy_r  <= reproj_dy;
          n_in   <= '0;
          n_out  <= '0;
          st     <= U_LENS;
        end
        U_LENS: begin
          if (ld_in_valid && ld_in_ready) n_in <= n_in + 1'b1;
          if (ld_out_valid) begin
            ccx[n_out[1:0]] <= 24'(CX0 * 256) + (ld_xo <<< BSH) + rdx_r;
            ccy[n_out[1:0]] <= 24'(CY0 * 256) + (ld_yo <<< BSH) + rdy_r;
            n_out <= n_out + 1'b1;
            if (n_out == 3'd3) begin
              lanes_start <= 1'b1;
              st          <= U_RUN;
            end
          end
        end
        U_RUN: if (!lanes_start && (&lane_done)) begin
          tile_done <= 1'b1;
          st        <= U_DONE;
        end
        U_DONE: st <= U_IDLE;
        default: st <= U_IDLE;
      endcase
    end
  end

  // the tile command stays put while it is offered
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && !cmd_ready |=> cmd_valid);

endmodule
