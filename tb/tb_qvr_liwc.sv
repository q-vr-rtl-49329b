// tb_qvr_liwc: closed-loop test of the workload controller.
// A simple environment model gives, for each e1, a local latency that grows
// with the fovea area and a remote latency that falls with it. Each frame the
// testbench
//   * checks the delta e1 and new e1 against a reference controller kept here
//     (its own copy of the table with FP16 truncation, closest-gradient pick,
//     reward update), using the DUT's predicted latencies as the imbalance;
//   * checks the decision latency (<= 60 cycles, i.e. ~120 ns at 500 MHz);
//   * returns the "measured" latencies and checks the update completes.
// It also checks that the loop moves e1 from the start value 5 toward the
// balance point, that e1 reaches its upper clamp in a second phase with a
// fast network, and that a frame whose measurements never came is skipped.
module tb_qvr_liwc;
  import qvr_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic ready, frame_start = 0, ecc_valid, meas_valid = 0, upd_done;
  logic signed [15:0] pose [6];
  logic [CRD_W-1:0] eye_x, eye_y;
  logic [31:0] num_tri, data_size;
  logic [E_W-1:0] e1;
  logic signed [3:0] de1;
  logic [LAT_W-1:0] pred_local, pred_remote, meas_local, meas_remote;

  qvr_liwc dut (.*);

  int checks = 0, failures = 0;
  int n_clamp = 0, n_skip = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // independent FP16 truncation (11 significant bits, saturate at 65504)
  function automatic int f16t(int v);
    int a, p, step;
    a = v < 0 ? -v : v;
    if (a > 65504) a = 65504;
    if (a == 0) return 0;
    p = 0;
    while ((a >> (p + 1)) != 0) p++;
    step = (p > 10) ? (1 << (p - 10)) : 1;
    a = (a / step) * step;
    return v < 0 ? -a : a;
  endfunction

  // environment model
  int remote_base = 30000;
  function automatic int env_local(int e);  return 300 + 2 * e * e; endfunction
  function automatic int env_remote(int e); return remote_base - 250 * e; endfunction

  int tbl [int];          // reference table: only words touched
  function automatic int tget(int a);
    if (tbl.exists(a)) return tbl[a];
    return ((a & 31) - 5) * 1000;
  endfunction

  int ref_e1 = 5, prev_imb = 0;
  bit have_prev = 0;
  int first_imb, last_imb;

  task automatic frame(int f, bit send_meas);
    int cyc, d, best, bestd, bt, mot, a, ml, mr, imb, g, gn;
    @(negedge clk);
    // a still head most frames, a head turn now and then
    if (f % 10 == 9) pose[3] = pose[3] + 16'sd500;
    num_tri = 2_000_000; data_size = env_remote(ref_e1) * 25;
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    cyc = 1;
    while (!ecc_valid && cyc < 200) begin @(negedge clk); cyc++; end
    checks++; if (cyc > 60) begin failures++; $display("decision took %0d cycles", cyc); end
    // reference selection
    mot = (f % 10 == 9 && f > 0) ? (1 << 3) << 4 : 0;   // yaw bit set on head-turn frames
    d = int'(pred_remote) - int'(pred_local);
    bestd = 32'h7fffffff; bt = 0;
    for (int t = 0; t < N_TAGS; t++) begin
      g = tget((mot << 5) | t);
      if ((g > d ? g - d : d - g) < bestd) begin bestd = (g > d ? g - d : d - g); bt = t; end
    end
    check("de1", de1, bt - 5);
    if (ref_e1 + bt - 5 > E1_MAX) n_clamp++;
    ref_e1 = ref_e1 + bt - 5;
    if (ref_e1 < E1_MIN) ref_e1 = E1_MIN;
    if (ref_e1 > E1_MAX) ref_e1 = E1_MAX;
    check("e1", e1, ref_e1);
    a = (mot << 5) | bt;
    if (!send_meas) begin n_skip++; return; end
    // measurement of the frame just configured
    ml = env_local(ref_e1); mr = env_remote(ref_e1);
    repeat (3) @(negedge clk);
    meas_local = ml; meas_remote = mr; meas_valid = 1;
    @(negedge clk);
    meas_valid = 0;
    cyc = 1;
    while (!upd_done && cyc < 200) begin @(negedge clk); cyc++; end
    checks++; if (cyc > 50) begin failures++; $display("update took %0d", cyc); end
    imb = ml - mr;
    if (have_prev) begin
      g  = tget(a);
      gn = g + (((imb - prev_imb) - g) * 64 >>> 8);
      tbl[a] = f16t(gn);
    end
    prev_imb = imb; have_prev = 1;
    last_imb = imb < 0 ? -imb : imb;
    @(negedge clk);
  endtask

  initial begin
    int cyc;
    for (int i = 0; i < 6; i++) pose[i] = 0;
    eye_x = 960; eye_y = 1080; num_tri = 0; data_size = 0; meas_local = 0; meas_remote = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (!ready) begin @(posedge clk); cyc++; end
    checks++; if (cyc < 32768) begin failures++; $display("ready too early"); end
    check("e1 start", e1, 5);
    first_imb = env_remote(5) - env_local(5);
    for (int f = 0; f < 40; f++) frame(f, 1);
    $display("imbalance: start %0d us, after 40 frames %0d us, e1 %0d", first_imb, last_imb, e1);
    checks++; if (last_imb * 4 > first_imb) begin failures++; $display("no convergence"); end
    // a frame whose measurement never arrives: the next frame starts directly
    frame(40, 0);
    frame(41, 1);
    // much faster network: the balance moves beyond the largest e1
    remote_base = 60000;
    for (int f = 42; f < 80; f++) frame(f, 1);
    check("e1 at clamp", e1, E1_MAX);
    checks++; if (n_clamp == 0) begin failures++; $display("clamp never hit"); end
    checks++; if (n_skip == 0) begin failures++; end
    $display("clamps %0d skips %0d", n_clamp, n_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
