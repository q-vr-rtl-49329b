// tb_qvr_motion_codec: self-checking test of the LIWC motion codec.
// Drives a sequence of random poses and gaze points (some frames nearly still,
// some with large moves) and compares each 10-bit index, one cycle after the
// frame strobe, with a reference computed here from the previous frame.
module tb_qvr_motion_codec;
  import qvr_pkg::*;

  localparam int PT = 64, ET = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frame_valid = 0;
  logic signed [15:0] pose [6];
  logic [CRD_W-1:0] eye_x, eye_y;
  motion_idx_t idx;
  logic idx_valid;

  qvr_motion_codec #(.POSE_W(16), .POSE_THRESH(PT), .EYE_THRESH(ET)) dut (.*);

  int checks = 0, failures = 0;
  int pp [6];
  int pex, pey;
  bit have = 0;

  function automatic int iabs(int a); return a < 0 ? -a : a; endfunction

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 6; i++) pose[i] = '0;
    eye_x = 0; eye_y = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 400; f++) begin
      logic [9:0] exp_idx;
      int big;
      big = (f % 3 == 0) ? 400 : 40;
      @(negedge clk);
      for (int i = 0; i < 6; i++) pose[i] = pose[i] + 16'($signed($urandom_range(2*big, 0)) - big);
      eye_x = CRD_W'($urandom_range(1919, 0));
      eye_y = (f % 2) ? eye_y : CRD_W'($urandom_range(2159, 0));
      // reference
      exp_idx = '0;
      if (have) begin
        for (int i = 0; i < 6; i++) exp_idx[4+i] = iabs(int'(pose[i]) - pp[i]) >= PT;
        exp_idx[3] = iabs(int'(eye_x) - pex) >= ET;
        exp_idx[2] = exp_idx[3] && (int'(eye_x) < pex);
        exp_idx[1] = iabs(int'(eye_y) - pey) >= ET;
        exp_idx[0] = exp_idx[1] && (int'(eye_y) < pey);
      end
      for (int i = 0; i < 6; i++) pp[i] = int'(pose[i]);
      pex = int'(eye_x); pey = int'(eye_y); have = 1;
      frame_valid = 1;
      @(negedge clk);
      frame_valid = 0;
      checks++;
      if (!idx_valid || idx !== exp_idx) begin
        failures++;
        if (failures < 10) $display("frame %0d: idx %b valid %b expected %b", f, idx, idx_valid, exp_idx);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
