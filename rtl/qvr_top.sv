// qvr_top: the Q-VR hardware of a mobile VR SoC.
//
// Two new units sit beside the CPU, GPU, network interface and video decoder:
//   * one LIWC, which chooses each frame's fovea eccentricity e1 from head and
//     eye motion, the snooped triangle count and the periphery data size, so
//     that local fovea rendering and remote periphery rendering finish
//     together, and learns from the measured latencies;
//   * two UCAs (one per eye, Table 2 "Count 2"), each fed by a tile
//     scheduler, which compose the fovea and periphery layers and apply
//     timewarp/lens distortion in one filtering pass, tile by tile, as soon as
//     the layers a tile needs are in memory.
// The e1 chosen by the LIWC sets the radius of the fovea circle the UCAs use
// to classify tiles (radius = e1 * PPD pixels, around the gaze point).
// The memory (DRAM frame buffer / video stream), the GPU, the network and the
// sensors are not part of this RTL: their signals are ports. Texel requests
// expect the texel on rsp one cycle later; pixel writes go to the frame buffer.
//
// Timing: frame_start begins the LIWC decision for a frame (ecc_valid about
// 57 cycles later); comp_go begins composition of both eyes with the current
// e1 and gaze, which ends with frame_done per eye, one cycle after the
// eye's last tile is written.
module qvr_top
  import qvr_pkg::*;
#(
  parameter int FRAME_W = 1920,    // paper: 1920x2160 per eye
  parameter int FRAME_H = 2160,
  parameter int LANES   = 8,       // paper: 8 SIMD4 units per UCA
  parameter int N_UCA   = 2,       // paper: 2 UCAs
  parameter int PPD     = 20,      // pixels per degree (own choice)
  parameter int DEPTH   = 32768,   // paper: 2^15-entry table
  parameter int PS      = 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // ---- LIWC ----
  output logic               liwc_ready,
  input  logic               frame_start,
  input  logic signed [15:0] pose [6],
  input  logic [CRD_W-1:0]   eye_x,
  input  logic [CRD_W-1:0]   eye_y,
  input  logic [31:0]        num_tri,
  input  logic [31:0]        data_size,
  output logic               ecc_valid,
  output logic [E_W-1:0]     e1,
  output logic signed [3:0]  de1,
  output logic [LAT_W-1:0]   pred_local,
  output logic [LAT_W-1:0]   pred_remote,
  input  logic               meas_valid,
  input  logic [LAT_W-1:0]   meas_local,
  input  logic [LAT_W-1:0]   meas_remote,
  output logic               upd_done,
  // ---- composition and ATW ----
  input  logic               comp_go,
  input  logic               fovea_ready  [N_UCA],
  input  logic               periph_ready [N_UCA],
  input  logic               deadline,
  input  logic signed [17:0] k1,
  input  logic signed [17:0] k2,
  input  logic signed [23:0] reproj_dx,
  input  logic signed [23:0] reproj_dy,
  output logic               req_valid [N_UCA][LANES],
  output texel_req_t         req       [N_UCA][LANES],
  input  rgba_t              rsp       [N_UCA][LANES],
  output logic               wr_valid  [N_UCA][LANES],
  output pix_wr_t            wr        [N_UCA][LANES],
  output logic               tile_done [N_UCA],
  output tile_mode_e         tile_mode_o [N_UCA],
  output logic               frame_done [N_UCA],
  output logic [31:0]        n_deferred [N_UCA],
  output logic [31:0]        n_prev     [N_UCA]
);

  qvr_liwc #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PPD(PPD), .DEPTH(DEPTH)) u_liwc (
    .clk, .rst_n, .ready(liwc_ready), .frame_start, .pose, .eye_x, .eye_y, .num_tri, .data_size,
    .ecc_valid, .e1, .de1, .pred_local, .pred_remote,
    .meas_valid, .meas_local, .meas_remote, .upd_done);

  // fovea circle of the frame being composed
  logic [CRD_W-1:0] cx_r, cy_r;
  logic [CRD_W:0]   r_r;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cx_r <= '0;
      cy_r <= '0;
      r_r  <= '0;
    end else if (comp_go) begin
      cx_r <= eye_x;
      cy_r <= eye_y;
      r_r  <= (CRD_W+1)'(int'(e1) * PPD);
    end
  end
  logic [CRD_W:0] r_now;
  assign r_now = (CRD_W+1)'(int'(e1) * PPD);

  for (genvar u = 0; u < N_UCA; u++) begin : g_eye
    logic      cmd_valid, cmd_ready, busy, all_issued, last_pending;
    tile_cmd_t cmd;

    qvr_tile_scheduler #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H)) u_sched (
      .clk, .rst_n, .frame_go(comp_go), .fov_cx(eye_x), .fov_cy(eye_y), .fov_r(r_now),
      .fovea_ready(fovea_ready[u]), .periph_ready(periph_ready[u]), .deadline,
      .cmd_valid, .cmd_ready, .cmd, .busy, .frame_done(all_issued),
      .n_deferred(n_deferred[u]), .n_prev(n_prev[u]));

    qvr_uca #(.LANES(LANES), .FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PS(PS)) u_uca (
      .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
      .fov_cx(cx_r), .fov_cy(cy_r), .fov_r(r_r), .k1, .k2, .reproj_dx, .reproj_dy,
      .req_valid(req_valid[u]), .req(req[u]), .rsp(rsp[u]),
      .wr_valid(wr_valid[u]), .wr(wr[u]),
      .tile_done(tile_done[u]), .tile_mode_o(tile_mode_o[u]));

    // the eye's frame is finished when the UCA completes the last issued tile
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        last_pending  <= 1'b0;
        frame_done[u] <= 1'b0;
      end else begin
        frame_done[u] <= 1'b0;
        if (all_issued) last_pending <= 1'b1;
        else if (last_pending && tile_done[u]) begin
          last_pending  <= 1'b0;
          frame_done[u] <= 1'b1;
        end
      end
    end
  end

endmodule
