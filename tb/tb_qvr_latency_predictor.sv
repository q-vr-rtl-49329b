// tb_qvr_latency_predictor: self-checking test of Eq. 2 latency prediction.
// Random triangle counts, data sizes, e1, GPU rates and network throughputs
// (including the paper's 100/200/500 Mbit/s links); each result is compared
// with T_local = tri*%fovea/P and T_remote = size/throughput worked out here,
// and the time from start to done is checked against the 44-cycle budget.
module tb_qvr_latency_predictor;
  import qvr_pkg::*;

  localparam int W = 1920, H = 2160, PPD = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0;
  logic [E_W-1:0] e1;
  logic [31:0] num_tri, data_size, gpu_perf_q8, net_tput_q8;
  logic done, remote_slower;
  logic [31:0] fovea_tri;
  logic [LAT_W-1:0] t_local, t_remote;
  logic signed [LAT_W-1:0] diff;

  qvr_latency_predictor #(.FRAME_W(W), .FRAME_H(H), .PPD(PPD)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
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

  initial begin
    e1 = 5; num_tri = 0; data_size = 0; gpu_perf_q8 = 256; net_tput_q8 = 256;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < 300; n++) begin
      longint r, frac, ftri, tl, tr, kq;
      int cyc;
      e1          = E_W'($urandom_range(90, 5));
      num_tri     = $urandom_range(4_000_000, 1000);
      data_size   = $urandom_range(900_000, 10_000);
      gpu_perf_q8 = $urandom_range(2000 * 256, 50 * 256);
      case (n % 4)
        0: net_tput_q8 = 25 * 256;          // 200 Mbit/s
        1: net_tput_q8 = 12 * 256 + 128;    // 100 Mbit/s
        2: net_tput_q8 = 62 * 256 + 128;    // 500 Mbit/s
        default: net_tput_q8 = $urandom_range(100 * 256, 256);
      endcase
      // reference: circle area share, Q0.16
      kq   = longint'(3.14159265358979 * 4294967296.0 / (real'(W) * real'(H)));
      r    = longint'(e1) * PPD;
      frac = (r * r * kq) >> 16;
      if (frac > 65536) frac = 65536;
      ftri = (longint'(num_tri) * frac) >> 16;
      tl   = (ftri * 256) / longint'(gpu_perf_q8);
      tr   = (longint'(data_size) * 256) / longint'(net_tput_q8);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 200) begin @(negedge clk); cyc++; end
      check("t_local", t_local, tl);
      check("t_remote", t_remote, tr);
      check("diff", diff, tr - tl);
      check("fovea_tri", fovea_tri, ftri);
      check("remote_slower", remote_slower, tr > tl);
      checks++;
      if (cyc > 44) begin failures++; $display("latency %0d cycles", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
