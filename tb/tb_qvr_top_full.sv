// tb_qvr_top_full: one complete frame of the Q-VR hardware at its default
// size (1920x2160 per eye, 8 lanes per UCA, two UCAs, 2^15-entry table).
// After the table has filled itself at reset, the LIWC makes one eccentricity
// decision from a head turn, the triangle count and the periphery data size.
// Both eyes are then composed with the fovea layer ready first and the
// periphery layer some time later, so fovea tiles go out early and the rest
// wait. All 4080 tiles of each eye must be issued, every pixel of both eyes
// must be written exactly once and match the reference filter, and the
// measured latencies must produce one learning update. The tile time of the
// frame is printed against the paper's 532 cycles per 32x32 bilinear block.
module tb_qvr_top_full;
  import qvr_pkg::*;
  import tb_qvr_ref_pkg::*;

  localparam int W = 1920, H = 2160, LANES = 8, NU = 2, PPD = 20, PS = 1;
  localparam int TXN = (W + 31) / 32, TYN = (H + 31) / 32, NT = TXN * TYN;

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

  qvr_top dut (.*);

  // behavioural frame buffers (one per eye), one-cycle latency
  always @(posedge clk)
    for (int u = 0; u < NU; u++)
      for (int l = 0; l < LANES; l++)
        rsp[u][l] <= req_valid[u][l] ? texel(req[u][l].prev, req[u][l].layer, int'(req[u][l].x), int'(req[u][l].y)) : 32'h0;

  int checks = 0, failures = 0;
  int cnt_mode [3] = '{0, 0, 0};
  int cnt_done [NU] = '{0, 0};
  byte written [NU][W*H];
  longint fcx [NT][4];
  longint fcy [NT][4];
  int fmode [NT];

  // tile class by pixel centres: 0 inside the circle, 1 outside, 2 border
  function automatic int classify(int tx, int ty, int cx, int cy, int r);
    int nin = 0;
    longint dc;
    dc = longint'(tx * 32 + 16 - cx) ** 2 + longint'(ty * 32 + 16 - cy) ** 2;
    if (dc > longint'(r + 48) ** 2) return 1;
    if (r > 48 && dc < longint'(r - 48) ** 2) return 0;
    for (int y = ty * 32; y < ty * 32 + 32; y++)
      for (int x = tx * 32; x < tx * 32 + 32; x++)
        if ((x - cx) * (x - cx) + (y - cy) * (y - cy) <= r * r) nin++;
    return (nin == 1024) ? 0 : (nin == 0) ? 1 : 2;
  endfunction

  always @(posedge clk) if (rst_n) begin
    for (int u = 0; u < NU; u++) begin
      if (tile_done[u]) cnt_mode[int'(tile_mode_o[u])]++;
      if (frame_done[u]) cnt_done[u]++;
      for (int l = 0; l < LANES; l++) if (wr_valid[u][l]) begin
        int x, y, t;
        logic [31:0] e;
        x = int'(wr[u][l].x); y = int'(wr[u][l].y);
        t = (y / 32) * TXN + x / 32;
        written[u][y * W + x]++;
        e = ref_pixel(fmode[t], 1'b0, fcx[t], fcy[t], x % 32, y % 32, W, H, PS);
        checks++;
        if (wr[u][l].rgba !== e) begin
          failures++;
          if (failures < 10) $display("eye %0d pixel (%0d,%0d) mode %0d: %h expected %h", u, x, y, fmode[t], wr[u][l].rgba, e);
        end
      end
    end
  end

  initial begin
    repeat (4000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, comp_cyc, r;
    for (int i = 0; i < 6; i++) pose[i] = 0;
    eye_x = 900; eye_y = 1150; num_tri = 0; data_size = 0;
    meas_local = 0; meas_remote = 0;
    k1 = 18'sd7209; k2 = 18'sd7864; reproj_dx = 24'sd700; reproj_dy = -24'sd450;
    for (int u = 0; u < NU; u++) begin fovea_ready[u] = 0; periph_ready[u] = 0; end
    for (int u = 0; u < NU; u++) for (int p = 0; p < W * H; p++) written[u][p] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!liwc_ready) begin @(negedge clk); cyc++; end
    $display("mapping table filled in %0d cycles", cyc);
    // ---- one eccentricity decision ----
    @(negedge clk);
    pose[3] = 16'sd400;  // head turn
    num_tri = 1_500_000; data_size = 600_000;
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    cyc = 0;
    while (!ecc_valid && cyc < 1000) begin @(negedge clk); cyc++; end
    checks += 2;
    if (!ecc_valid) begin failures++; $display("no eccentricity decision"); end
    if (int'(e1) < E1_MIN || int'(e1) > E1_MAX) begin failures++; $display("e1 %0d out of range", e1); end
    $display("decision after %0d cycles: e1 %0d (delta %0d), predicted local %0d us remote %0d us",
             cyc, e1, de1, pred_local, pred_remote);
    // ---- reference for the frame ----
    r = int'(e1) * PPD;
    for (int t = 0; t < NT; t++) begin
      int tx, ty;
      tx = t % TXN; ty = t / TXN;
      fmode[t] = classify(tx, ty, int'(eye_x), int'(eye_y), r);
      for (int c = 0; c < 4; c++) begin
        longint xo, yo;
        ref_lens(longint'(k1), longint'(k2),
                 longint'(tx * 32 + ((c & 1) ? 32 : 0) - W / 2) * 32,
                 longint'(ty * 32 + ((c & 2) ? 32 : 0) - H / 2) * 32, xo, yo);
        fcx[t][c] = longint'(W / 2) * 256 + xo * 8 + longint'(reproj_dx);
        fcy[t][c] = longint'(H / 2) * 256 + yo * 8 + longint'(reproj_dy);
      end
    end
    // ---- composition of both eyes ----
    for (int u = 0; u < NU; u++) fovea_ready[u] = 1;
    @(negedge clk);
    comp_go = 1;
    @(negedge clk);
    comp_go = 0;
    repeat (20000) @(negedge clk);
    $display("fovea tiles done before the periphery layer arrived: %0d", cnt_mode[0]);
    checks++;
    if (cnt_mode[0] == 0) begin failures++; $display("no fovea tile went out early"); end
    for (int u = 0; u < NU; u++) periph_ready[u] = 1;
    comp_cyc = 20001;
    while (!(cnt_done[0] == 1 && cnt_done[1] == 1) && comp_cyc < 3000000) begin @(negedge clk); comp_cyc++; end
    repeat (5) @(negedge clk);
    $display("frame composed in %0d cycles: fovea %0d periphery %0d border %0d tiles, %0d deferred looks",
             comp_cyc, cnt_mode[0], cnt_mode[1], cnt_mode[2], n_deferred[0] + n_deferred[1]);
    $display("mean cycles per tile per eye: %0d (paper: 532 per bilinear 32x32 block)", comp_cyc / NT);
    begin
      int bad = 0;
      for (int u = 0; u < NU; u++) for (int p = 0; p < W * H; p++) if (written[u][p] != 1) bad++;
      checks += 5;
      if (bad != 0) begin failures++; $display("%0d pixels not written exactly once", bad); end
      if (cnt_mode[0] + cnt_mode[1] + cnt_mode[2] != NU * NT) begin failures++; $display("tile count wrong"); end
      if (cnt_mode[2] == 0) begin failures++; $display("no border tile"); end
      if (n_deferred[0] + n_deferred[1] == 0) begin failures++; $display("no tile deferred"); end
      if (n_prev[0] + n_prev[1] != 0) begin failures++; $display("previous-frame tiles without a deadline"); end
    end
    // ---- measurement back to the LIWC ----
    meas_local = 9000; meas_remote = 15000;
    meas_valid = 1;
    @(negedge clk);
    meas_valid = 0;
    cyc = 0;
    while (!upd_done && cyc < 1000) begin @(negedge clk); cyc++; end
    checks++;
    if (!upd_done) begin failures++; $display("no learning update"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
