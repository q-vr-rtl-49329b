// tb_qvr_top: end-to-end test of the Q-VR hardware at a reduced frame size.
// Per frame: the LIWC picks e1 from the motion, triangle count and periphery
// data size; both eyes are then composed by their UCAs from behavioural frame
// buffers, with the fovea layer arriving before the periphery layer; the
// measured latencies of a simple environment model are fed back to the LIWC.
// Every written pixel of both eyes is checked against the reference filter
// (tile class from the e1 the LIWC chose, corners from the reference lens
// model), every pixel must be written exactly once per frame, and e1 must
// move toward the local/remote balance. In one frame the periphery layer
// never arrives: at the deadline the tiles still waiting are rebuilt from the
// previous frame's layers, and their pixels are checked against that.
// Mechanisms counted (each must happen): eccentricity decisions, learning
// updates, fovea / periphery / border tiles, tiles issued before the
// periphery layer was ready, deferred tiles, previous-frame tiles, head-turn
// frames (motion index change).
module tb_qvr_top;
  import qvr_pkg::*;
  import tb_qvr_ref_pkg::*;

  localparam int W = 256, H = 256, LANES = 8, NU = 2, PPD = 2, PS = 1;
  localparam int NFRAMES = 16;
  localparam int TXN = (W + 31) / 32, TYN = (H + 31) / 32;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic liwc_ready, frame_start = 0, ecc_valid, meas_valid = 0, upd_done;
  logic signed [15:0] pose [6];
  logic [CRD_W-1:0] eye_x, eye_y;
  logic [31:0] num_tri, data_size;
  logic [E_W-1:0] e1;
  logic signed [3:0] de1;
  logic [LAT_W-1:0] pred_local, pred_remote, meas_local, meas_remote;
  logic comp_go = 0, deadline = 0;
  logic fovea_ready [NU];
  logic periph_ready [NU];
  logic signed [17:0] k1, k2;
  logic signed [23:0] reproj_dx, reproj_dy;
  logic req_valid [NU][LANES];
  texel_req_t req [NU][LANES];
  rgba_t rsp [NU][LANES];
  logic wr_valid [NU][LANES];
  pix_wr_t wr [NU][LANES];
  logic tile_done [NU];
  tile_mode_e tile_mode_o [NU];
  logic frame_done [NU];
  logic [31:0] n_deferred [NU];
  logic [31:0] n_prev [NU];

  qvr_top #(.FRAME_W(W), .FRAME_H(H), .LANES(LANES), .N_UCA(NU), .PPD(PPD), .PS(PS)) dut (.*);

  // behavioural frame buffers (one per eye), one-cycle latency
  always @(posedge clk)
    for (int u = 0; u < NU; u++)
      for (int l = 0; l < LANES; l++)
        rsp[u][l] <= req_valid[u][l] ? texel(req[u][l].prev, req[u][l].layer, int'(req[u][l].x), int'(req[u][l].y)) : 32'h0;

  int checks = 0, failures = 0;
  int cnt_decide = 0, cnt_update = 0, cnt_turn = 0, cnt_prev_tiles = 0;
  int cnt_mode [3] = '{0, 0, 0};
  int cnt_early = 0;
  int written [NU][W*H];
  longint fcx [NU][TXN*TYN][4];
  longint fcy [NU][TXN*TYN][4];
  int fmode [TXN*TYN];
  bit tprev [NU][TXN*TYN];   // tile was issued from the previous frame
  int cur_r;

  function automatic int classify(int tx, int ty, int cx, int cy, int r);
    int nin = 0;
    for (int y = ty * 32; y < ty * 32 + 32; y++)
      for (int x = tx * 32; x < tx * 32 + 32; x++)
        if ((x - cx) * (x - cx) + (y - cy) * (y - cy) <= r * r) nin++;
    return (nin == 1024) ? 0 : (nin == 0) ? 1 : 2;
  endfunction

  // corners of every tile for the current head-motion offset and lens constants
  task automatic prepare_tiles();
    for (int t = 0; t < TXN * TYN; t++) begin
      int tx, ty;
      tx = t % TXN; ty = t / TXN;
      fmode[t] = classify(tx, ty, int'(eye_x), int'(eye_y), cur_r);
      for (int c = 0; c < 4; c++) begin
        longint xo, yo;
        ref_lens(longint'(k1), longint'(k2),
                 longint'(tx * 32 + ((c & 1) ? 32 : 0) - W / 2) * 32,
                 longint'(ty * 32 + ((c & 2) ? 32 : 0) - H / 2) * 32, xo, yo);
        for (int u = 0; u < NU; u++) begin
          fcx[u][t][c] = longint'(W / 2) * 256 + xo * 8 + longint'(reproj_dx);
          fcy[u][t][c] = longint'(H / 2) * 256 + yo * 8 + longint'(reproj_dy);
        end
      end
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (ecc_valid) cnt_decide++;
    if (upd_done) cnt_update++;
    for (int u = 0; u < NU; u++) begin
      if (tile_done[u]) begin
        cnt_mode[int'(tile_mode_o[u])]++;
      end
      // record which frame each issued tile is rebuilt from
      if (u == 0 && dut.g_eye[0].cmd_valid && dut.g_eye[0].cmd_ready)
        tprev[0][int'(dut.g_eye[0].cmd.ty) * TXN + int'(dut.g_eye[0].cmd.tx)] = dut.g_eye[0].cmd.use_prev;
      if (u == 1 && dut.g_eye[1].cmd_valid && dut.g_eye[1].cmd_ready)
        tprev[1][int'(dut.g_eye[1].cmd.ty) * TXN + int'(dut.g_eye[1].cmd.tx)] = dut.g_eye[1].cmd.use_prev;
      for (int l = 0; l < LANES; l++) if (wr_valid[u][l]) begin
        int x, y, t;
        logic [31:0] e;
        x = int'(wr[u][l].x); y = int'(wr[u][l].y);
        t = (y / 32) * TXN + x / 32;
        written[u][y * W + x]++;
        e = ref_pixel(fmode[t], tprev[u][t], fcx[u][t], fcy[u][t], x % 32, y % 32, W, H, PS);
        checks++;
        if (wr[u][l].rgba !== e) begin
          failures++;
          if (failures < 10) $display("eye %0d pixel (%0d,%0d) mode %0d: %h expected %h", u, x, y, fmode[t], wr[u][l].rgba, e);
        end
      end
    end
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // environment: local latency grows with the fovea area, remote falls
  function automatic int env_local(int e);  return 300 + 2 * e * e; endfunction
  function automatic int env_remote(int e); return 30000 - 250 * e; endfunction

  initial begin
    int cyc, first_imb, last_imb, e_prev;
    for (int i = 0; i < 6; i++) pose[i] = 0;
    eye_x = W / 2; eye_y = H / 2; num_tri = 0; data_size = 0;
    meas_local = 0; meas_remote = 0;
    k1 = 18'sd7209; k2 = 18'sd7864; reproj_dx = 0; reproj_dy = 0;
    for (int u = 0; u < NU; u++) begin fovea_ready[u] = 0; periph_ready[u] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (!liwc_ready) @(negedge clk);
    first_imb = env_remote(5) - env_local(5);
    for (int f = 0; f < NFRAMES; f++) begin
      bit drop;
      drop = (f == NFRAMES - 2);
      // ---- LIWC decision ----
      @(negedge clk);
      if (f % 3 == 2) begin pose[4] = pose[4] + 16'sd300; cnt_turn++; end
      eye_x = CRD_W'(W / 2 + (f % 2) * 20); eye_y = CRD_W'(H / 2 - (f % 3) * 10);
      num_tri = 2_000_000; data_size = env_remote(int'(e1)) * 25;
      e_prev = int'(e1);
      frame_start = 1;
      @(negedge clk);
      frame_start = 0;
      cyc = 0;
      while (!ecc_valid && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc > 60) begin failures++; $display("decision took %0d cycles", cyc); end
      checks++;
      if (int'(e1) != e_prev + int'(de1) && int'(e1) != E1_MAX && int'(e1) != E1_MIN) begin
        failures++; $display("e1 %0d after %0d plus %0d", e1, e_prev, de1);
      end
      // ---- composition of both eyes ----
      reproj_dx = 24'($signed($urandom_range(3000, 0)) - 1500);
      reproj_dy = 24'($signed($urandom_range(3000, 0)) - 1500);
      cur_r = int'(e1) * PPD;
      prepare_tiles();
      for (int u = 0; u < NU; u++) for (int p = 0; p < W * H; p++) written[u][p] = 0;
      for (int u = 0; u < NU; u++) begin fovea_ready[u] = 1; periph_ready[u] = 0; end
      @(negedge clk);
      comp_go = 1;
      @(negedge clk);
      comp_go = 0;
      repeat (3000) @(negedge clk);
      cnt_early += cnt_mode[0];
      if (drop) begin
        deadline = 1;
        @(negedge clk);
        deadline = 0;
      end else begin
        for (int u = 0; u < NU; u++) periph_ready[u] = 1;
      end
      cyc = 0;
      while (!(dut.g_eye[0].u_sched.busy == 0 && dut.g_eye[1].u_sched.busy == 0
               && dut.g_eye[0].u_uca.cmd_ready && dut.g_eye[1].u_uca.cmd_ready) && cyc < 400000) begin
        @(negedge clk); cyc++;
      end
      repeat (5) @(negedge clk);
      begin
        int bad = 0;
        for (int u = 0; u < NU; u++) for (int p = 0; p < W * H; p++) if (written[u][p] != 1) bad++;
        checks++;
        if (bad != 0) begin failures++; $display("frame %0d: %0d pixels not written exactly once", f, bad); end
      end
      // ---- measurement back to the LIWC ----
      meas_local = env_local(int'(e1)); meas_remote = env_remote(int'(e1));
      meas_valid = 1;
      @(negedge clk);
      meas_valid = 0;
      cyc = 0;
      while (!upd_done && cyc < 1000) begin @(negedge clk); cyc++; end
      last_imb = env_remote(int'(e1)) - env_local(int'(e1));
      $display("frame %0d: e1 %0d, imbalance %0d us", f, e1, last_imb);
    end
    repeat (5) @(negedge clk);
    cnt_prev_tiles = int'(n_prev[0]) + int'(n_prev[1]);
    checks++;
    if (last_imb * 4 > first_imb) begin failures++; $display("e1 did not move toward balance"); end
    $display("decisions %0d updates %0d head turns %0d | tiles fovea %0d periphery %0d border %0d | early %0d deferred %0d previous-frame %0d",
             cnt_decide, cnt_update, cnt_turn, cnt_mode[0], cnt_mode[1], cnt_mode[2], cnt_early,
             n_deferred[0] + n_deferred[1], cnt_prev_tiles);
    checks += 9;
    if (cnt_decide != NFRAMES) failures++;
    if (cnt_update != NFRAMES) failures++;
    if (cnt_turn == 0) failures++;
    if (cnt_mode[0] == 0) failures++;
    if (cnt_mode[1] == 0) failures++;
    if (cnt_mode[2] == 0) failures++;
    if (cnt_early == 0) failures++;
    if (n_deferred[0] + n_deferred[1] == 0) failures++;
    if (cnt_prev_tiles == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
