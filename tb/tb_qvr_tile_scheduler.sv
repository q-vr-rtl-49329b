// tb_qvr_tile_scheduler: self-checking test of the per-eye tile scheduler.
// A model UCA takes commands after a random delay. Frame 1: the fovea layer
// is ready first and the periphery layer later, so fovea tiles must go out
// early and no tile may go out before the layers it needs are ready
// (classification worked out here per pixel). Frame 2: the periphery layer
// never arrives and the display deadline comes, so the rest of the tiles must
// go out at once marked "previous frame". Every tile must be issued exactly
// once per frame and frame_done must pulse once.
module tb_qvr_tile_scheduler;
  import qvr_pkg::*;

  localparam int W = 1920, H = 2160, TX = 60, TY = 68, NT = TX * TY;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic frame_go = 0, fovea_ready = 0, periph_ready = 0, deadline = 0;
  logic [CRD_W-1:0] fov_cx = 800, fov_cy = 1200;
  logic [CRD_W:0] fov_r = 400;
  logic cmd_valid, cmd_ready = 0, busy, frame_done;
  tile_cmd_t cmd;
  logic [31:0] n_deferred, n_prev;

  qvr_tile_scheduler #(.FRAME_W(W), .FRAME_H(H)) dut (.*);

  int checks = 0, failures = 0;
  int seen [NT];
  int cls [NT];
  int n_issued = 0, n_early_fovea = 0, n_prev_seen = 0, n_done = 0;

  // classification by pixels: 0 inside, 1 outside, 2 border
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

  // model UCA: accept after a random delay
  always @(negedge clk) cmd_ready <= ($urandom_range(3, 0) == 0);

  always @(posedge clk) if (rst_n) begin
    if (frame_done) n_done++;
    if (cmd_valid && cmd_ready) begin
      int t, c;
      t = int'(cmd.ty) * TX + int'(cmd.tx);
      c = cls[t];
      seen[t]++;
      n_issued++;
      checks++;
      if (!cmd.use_prev) begin
        if ((c == 0 && !fovea_ready) || (c == 1 && !periph_ready) || (c == 2 && !(fovea_ready && periph_ready))) begin
          failures++; $display("tile %0d (class %0d) issued before its layers", t, c);
        end
        if (c == 0 && !periph_ready) n_early_fovea++;
      end else n_prev_seen++;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic start_frame();
    for (int t = 0; t < NT; t++) begin
      seen[t] = 0;
      cls[t] = classify(t % TX, t / TX, int'(fov_cx), int'(fov_cy), int'(fov_r));
    end
    n_issued = 0; n_done = 0;
    @(negedge clk); frame_go = 1;
    @(negedge clk); frame_go = 0;
  endtask

  task automatic check_frame(string name);
    int bad = 0;
    for (int t = 0; t < NT; t++) if (seen[t] != 1) bad++;
    checks += 2;
    if (bad != 0) begin failures++; $display("%s: %0d tiles not issued exactly once", name, bad); end
    if (n_done != 1) begin failures++; $display("%s: frame_done %0d times", name, n_done); end
  endtask

  initial begin
    int cyc, prev_before;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // frame 1: fovea layer first, periphery later
    fovea_ready = 1;
    start_frame();
    repeat (20000) @(negedge clk);
    periph_ready = 1;
    cyc = 0;
    while (busy && cyc < 100000) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    check_frame("frame 1");
    checks += 2;
    if (n_early_fovea == 0) begin failures++; $display("no fovea tile went out early"); end
    if (n_deferred == 0) begin failures++; $display("no tile was deferred"); end
    $display("frame 1: %0d fovea tiles before the periphery was ready, %0d deferred looks", n_early_fovea, n_deferred);
    // frame 2: periphery missing, deadline reached
    fovea_ready = 0; periph_ready = 0; fov_r = 700;
    prev_before = n_prev_seen;
    start_frame();
    repeat (5000) @(negedge clk);
    checks++;
    if (n_issued != 0) begin failures++; $display("tiles issued with no layer ready"); end
    fovea_ready = 1;
    repeat (5000) @(negedge clk);
    deadline = 1;
    @(negedge clk);
    deadline = 0;
    cyc = 0;
    while (busy && cyc < 100000) begin @(negedge clk); cyc++; end
    repeat (3) @(negedge clk);
    check_frame("frame 2");
    checks += 2;
    if (n_prev_seen - prev_before == 0) begin failures++; $display("no previous-frame tiles"); end
    if (int'(n_prev) != n_prev_seen) begin failures++; $display("n_prev %0d vs %0d", n_prev, n_prev_seen); end
    $display("frame 2: %0d tiles rebuilt from the previous frame", n_prev_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
