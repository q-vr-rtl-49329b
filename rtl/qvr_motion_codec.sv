// qvr_motion_codec: motion codec of the LIWC.
//
// Turns the change of user motion between two frames into the 10-bit index of
// the motion-to-eccentricity table: 6 "movement bits", one per degree of
// freedom of the HMD pose (x, y, z, yaw, pitch, roll), and 4 "eye bits" for the
// movement of the fovea centre. Bit counts and the split follow the paper; the
// coding inside them is this design's own choice, since the paper gives only
// the field sizes:
//   movement bit i = |pose_i(now) - pose_i(previous frame)| >= POSE_THRESH
//   eye bits       = {x moved, x moved left, y moved, y moved up}, where an
//                    axis "moved" when |delta| >= EYE_THRESH pixels.
// Index layout: {movement[5:0], eye[3:0]}.
//
// Timing: on a cycle with frame_valid high the pose and gaze are sampled; the
// index appears on idx, with idx_valid high, one cycle later. The first frame
// after reset has no predecessor and codes as "no motion".
module qvr_motion_codec
  import qvr_pkg::*;
#(
  parameter int POSE_W      = 16,   // signed pose sample width (own choice)
  parameter int POSE_THRESH = 64,   // pose change counted as movement (own choice)
  parameter int EYE_THRESH  = 8     // gaze change in pixels counted as movement (own choice)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     frame_valid,
  input  logic signed [POSE_W-1:0] pose [6],
  input  logic [CRD_W-1:0]         eye_x,
  input  logic [CRD_W-1:0]         eye_y,
  output motion_idx_t              idx,
  output logic                     idx_valid
);

  logic signed [POSE_W-1:0] prev_pose [6];
  logic [CRD_W-1:0]         prev_x, prev_y;
  logic                     have_prev;

  logic [5:0] mov;
  logic [3:0] eye;

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      logic signed [POSE_W:0] d;
      d = $signed({pose[i][POSE_W-1], pose[i]}) - $signed({prev_pose[i][POSE_W-1], prev_pose[i]});
      mov[i] = have_prev && ((d >= 0) ? (d >= (POSE_W+1)'(POSE_THRESH)) : (-d >= (POSE_W+1)'(POSE_THRESH)));
    end
    begin
      logic signed [CRD_W:0] dx, dy;
      dx = $signed({1'b0, eye_x}) - $signed({1'b0, prev_x});
      dy = $signed({1'b0, eye_y}) - $signed({1'b0, prev_y});
      eye[3] = have_prev && ((dx >= 0) ? (dx >= (CRD_W+1)'(EYE_THRESH)) : (-dx >= (CRD_W+1)'(EYE_THRESH)));
      eye[2] = eye[3] && (dx < 0);
      eye[1] = have_prev && ((dy >= 0) ? (dy >= (CRD_W+1)'(EYE_THRESH)) : (-dy >= (CRD_W+1)'(EYE_THRESH)));
      eye[0] = eye[1] && (dy < 0);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_prev <= 1'b0;
      prev_x    <= '0;
      prev_y    <= '0;
      for (int i = 0; i < 6; i++) prev_pose[i] <= '0;
      idx       <= '0;
      idx_valid <= 1'b0;
    end else begin
      idx_valid <= frame_valid;
      if (frame_valid) begin
        idx       <= {mov, eye};
        prev_pose <= pose;
        prev_x    <= eye_x;
        prev_y    <= eye_y;
        have_prev <= 1'b1;
      end
    end
  end

endmodule
