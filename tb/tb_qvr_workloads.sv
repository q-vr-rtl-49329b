// tb_qvr_workloads: the evaluated configurations of the Q-VR hardware.
//
// Part A: the eccentricity controller (at its default size) is run in a
// closed loop against a latency environment for each network of the
// evaluation (Wi-Fi 200, 4G LTE 100 and early 5G 500 Mbit/s, i.e. 25, 12.5
// and 62.5 bytes/us) at a 500 MHz GPU, and for Wi-Fi at a 300 MHz GPU.
// Environment per frame, with f = covered share of the frame for the chosen e1:
//     T_local  = N * f / P          N = 2 M triangles, P = 50 tri/us * MHz/500
//     T_remote = (B * (1 - f) + C) / throughput     B = 600 KB, C = 50 KB
// After 40 frames the mean e1 of the last 10 must lie near the e1 at which
// the two latencies are equal (worked out here), and the order of the means
// must follow the evaluation's trend: 5G < Wi-Fi at 300 MHz < Wi-Fi at
// 500 MHz < LTE (a slower network or faster GPU moves work to the headset).
// The environment numbers are this testbench's own; only the network rates
// and GPU frequencies come from the evaluation.
//
// Part B: a 1280x1600 frame (the low-resolution Doom3-L / HL2-L benchmarks)
// is composed for both eyes by a top instance built for that size: every
// pixel must be written exactly once and match the reference filter, and all
// 2000 tiles per eye must be done.
module tb_qvr_workloads;
  import qvr_pkg::*;
  import tb_qvr_ref_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;
  bit done_a = 0, done_b = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------------
  // Part A: eccentricity under the evaluated networks and GPU clocks
  // ------------------------------------------------------------------
  localparam int W = 1920, H = 2160, PPD = 20;
  logic rst_a = 0;
  logic ready, frame_start = 0, ecc_valid, meas_valid = 0, upd_done;
  logic signed [15:0] pose [6];
  logic [CRD_W-1:0] eye_x = 960, eye_y = 1080;
  logic [31:0] num_tri, data_size;
  logic [E_W-1:0] e1;
  logic signed [3:0] de1;
  logic [LAT_W-1:0] pred_local, pred_remote, meas_local, meas_remote;

  qvr_liwc u_liwc (.clk, .rst_n(rst_a), .ready, .frame_start, .pose, .eye_x, .eye_y,
                   .num_tri, .data_size, .ecc_valid, .e1, .de1, .pred_local, .pred_remote,
                   .meas_valid, .meas_local, .meas_remote, .upd_done);

  function automatic real share(int e);
    real r, f;
    r = real'(e * PPD);
    f = 3.14159265358979 * r * r / (real'(W) * real'(H));
    return (f > 1.0) ? 1.0 : f;
  endfunction
  function automatic int t_local(int e, real p);  return int'(2.0e6 * share(e) / p); endfunction
  function automatic int bytes(int e);             return int'(600000.0 * (1.0 - share(e)) + 50000.0); endfunction
  function automatic int t_remote(int e, real tp); return int'(real'(bytes(e)) / tp); endfunction

  // e1 at which the two latencies are closest
  function automatic int iabs(int v); return (v < 0) ? -v : v; endfunction
  function automatic int balance(real p, real tp);
    int best = 5;
    for (int e = 5; e <= 90; e++)
      if (iabs(t_local(e, p) - t_remote(e, tp)) < iabs(t_local(best, p) - t_remote(best, tp))) best = e;
    return best;
  endfunction

  task automatic run_config(string name, real mhz, real tput, output real mean_e1);
    real p;
    int sum = 0, bal;
    p = 50.0 * mhz / 500.0;
    rst_a = 0;
    repeat (3) @(negedge clk);
    rst_a = 1;
    while (!ready) @(negedge clk);
    for (int f = 0; f < 40; f++) begin
      int cyc;
      @(negedge clk);
      for (int i = 0; i < 6; i++) pose[i] = 16'(f * 37 * (i + 1) % 50);
      num_tri = 2_000_000;
      data_size = bytes(int'(e1));
      frame_start = 1;
      @(negedge clk);
      frame_start = 0;
      cyc = 0;
      while (!ecc_valid && cyc < 200) begin @(negedge clk); cyc++; end
      meas_local = t_local(int'(e1), p);
      meas_remote = t_remote(int'(e1), tput);
      meas_valid = 1;
      @(negedge clk);
      meas_valid = 0;
      cyc = 0;
      while (!upd_done && cyc < 200) begin @(negedge clk); cyc++; end
      if (f >= 30) sum += int'(e1);
    end
    mean_e1 = real'(sum) / 10.0;
    bal = balance(p, tput);
    checks++;
    if (mean_e1 < real'(bal) - 6.0 || mean_e1 > real'(bal) + 6.0) begin
      failures++;
      $display("%s: mean e1 %0.1f far from balance %0d", name, mean_e1, bal);
    end
    $display("%s: mean e1 %0.1f (balance at %0d), last T_local %0d us, T_remote %0d us",
             name, mean_e1, bal, meas_local, meas_remote);
  endtask

  initial begin
    real e_wifi, e_lte, e_5g, e_wifi300;
    for (int i = 0; i < 6; i++) pose[i] = 0;
    num_tri = 0; data_size = 0; meas_local = 0; meas_remote = 0;
    run_config("500 MHz Wi-Fi   ", 500.0, 25.0, e_wifi);
    run_config("500 MHz 4G LTE  ", 500.0, 12.5, e_lte);
    run_config("500 MHz early 5G", 500.0, 62.5, e_5g);
    run_config("300 MHz Wi-Fi   ", 300.0, 25.0, e_wifi300);
    checks += 3;
    if (!(e_5g < e_wifi300)) begin failures++; $display("5G should give a smaller e1 than Wi-Fi at 300 MHz"); end
    if (!(e_wifi300 < e_wifi)) begin failures++; $display("a slower GPU should give a smaller e1"); end
    if (!(e_wifi < e_lte)) begin failures++; $display("LTE should give a larger e1 than Wi-Fi"); end
    done_a = 1;
  end

  // ------------------------------------------------------------------
  // Part B: one 1280x1600 frame of both eyes
  // ------------------------------------------------------------------
  localparam int BW = 1280, BH = 1600, LANES = 8, NU = 2, PS = 1;
  localparam int TXN = BW / 32, TYN = BH / 32, NT = TXN * TYN;
  logic rst_b = 0;
  logic b_ready, b_start = 0, b_ecc, b_mv = 0, b_upd;
  logic signed [15:0] b_pose [6];
  logic [CRD_W-1:0] b_ex = 600, b_ey = 820;
  logic [31:0] b_tri = 500_000, b_size = 300_000;
  logic [E_W-1:0] b_e1;
  logic signed [3:0] b_de1;
  logic [LAT_W-1:0] b_pl, b_pr, b_ml = 0, b_mr = 0;
  logic comp_go = 0, deadline = 0;
  logic fovea_ready [NU];
  logic periph_ready [NU];
  logic signed [17:0] k1 = 18'sd7209, k2 = 18'sd7864;
  logic signed [23:0] reproj_dx = -24'sd300, reproj_dy = 24'sd900;
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

  qvr_top #(.FRAME_W(BW), .FRAME_H(BH)) u_top (
    .clk, .rst_n(rst_b), .liwc_ready(b_ready), .frame_start(b_start), .pose(b_pose),
    .eye_x(b_ex), .eye_y(b_ey), .num_tri(b_tri), .data_size(b_size), .ecc_valid(b_ecc),
    .e1(b_e1), .de1(b_de1), .pred_local(b_pl), .pred_remote(b_pr), .meas_valid(b_mv),
    .meas_local(b_ml), .meas_remote(b_mr), .upd_done(b_upd), .comp_go, .fovea_ready,
    .periph_ready, .deadline, .k1, .k2, .reproj_dx, .reproj_dy, .req_valid, .req, .rsp,
    .wr_valid, .wr, .tile_done, .tile_mode_o, .frame_done, .n_deferred, .n_prev);

  always @(posedge clk)
    for (int u = 0; u < NU; u++)
      for (int l = 0; l < LANES; l++)
        rsp[u][l] <= req_valid[u][l] ? texel(req[u][l].prev, req[u][l].layer, int'(req[u][l].x), int'(req[u][l].y)) : 32'h0;

  byte written [NU][BW*BH];
  longint fcx [NT][4];
  longint fcy [NT][4];
  int fmode [NT];
  int n_tiles = 0, n_fdone = 0;

  function automatic int classify(int tx, int ty, int cx, int cy, int r);
    int nin = 0;
    for (int y = ty * 32; y < ty * 32 + 32; y++)
      for (int x = tx * 32; x < tx * 32 + 32; x++)
        if ((x - cx) * (x - cx) + (y - cy) * (y - cy) <= r * r) nin++;
    return (nin == 1024) ? 0 : (nin == 0) ? 1 : 2;
  endfunction

  always @(posedge clk) if (rst_b) begin
    for (int u = 0; u < NU; u++) begin
      if (tile_done[u]) n_tiles++;
      if (frame_done[u]) n_fdone++;
      for (int l = 0; l < LANES; l++) if (wr_valid[u][l]) begin
        int x, y, t;
        logic [31:0] e;
        x = int'(wr[u][l].x); y = int'(wr[u][l].y);
        t = (y / 32) * TXN + x / 32;
        written[u][y * BW + x]++;
        e = ref_pixel(fmode[t], 1'b0, fcx[t], fcy[t], x % 32, y % 32, BW, BH, PS);
        checks++;
        if (wr[u][l].rgba !== e) begin
          failures++;
          if (failures < 10) $display("1280x1600 eye %0d pixel (%0d,%0d): %h expected %h", u, x, y, wr[u][l].rgba, e);
        end
      end
    end
  end

  initial begin
    int cyc, bad;
    for (int i = 0; i < 6; i++) b_pose[i] = 0;
    for (int u = 0; u < NU; u++) begin fovea_ready[u] = 0; periph_ready[u] = 0; end
    for (int u = 0; u < NU; u++) for (int p = 0; p < BW * BH; p++) written[u][p] = 0;
    repeat (3) @(negedge clk);
    rst_b = 1;
    while (!b_ready) @(negedge clk);
    b_start = 1;
    @(negedge clk);
    b_start = 0;
    while (!b_ecc) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      int tx, ty;
      tx = t % TXN; ty = t / TXN;
      fmode[t] = classify(tx, ty, int'(b_ex), int'(b_ey), int'(b_e1) * 20);
      for (int c = 0; c < 4; c++) begin
        longint xo, yo;
        ref_lens(longint'(k1), longint'(k2),
                 longint'(tx * 32 + ((c & 1) ? 32 : 0) - BW / 2) * 32,
                 longint'(ty * 32 + ((c & 2) ? 32 : 0) - BH / 2) * 32, xo, yo);
        fcx[t][c] = longint'(BW / 2) * 256 + xo * 8 + longint'(reproj_dx);
        fcy[t][c] = longint'(BH / 2) * 256 + yo * 8 + longint'(reproj_dy);
      end
    end
    for (int u = 0; u < NU; u++) begin fovea_ready[u] = 1; periph_ready[u] = 1; end
    @(negedge clk);
    comp_go = 1;
    @(negedge clk);
    comp_go = 0;
    cyc = 0;
    while (n_fdone < NU && cyc < 2000000) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    bad = 0;
    for (int u = 0; u < NU; u++) for (int p = 0; p < BW * BH; p++) if (written[u][p] != 1) bad++;
    checks += 2;
    if (bad != 0) begin failures++; $display("1280x1600: %0d pixels not written exactly once", bad); end
    if (n_tiles != NU * NT) begin failures++; $display("1280x1600: %0d tiles", n_tiles); end
    $display("1280x1600 frame (e1 %0d): %0d tiles per eye in %0d cycles", b_e1, n_tiles / NU, cyc);
    done_b = 1;
  end

  initial begin
    wait (done_a && done_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
