// tb_qvr_runtime_updater: self-checking test of the LIWC runtime updater.
// Sends a series of measured frames. For each it works out here the reward
// update gradient = (1-a)*gradient' + a*dlatency (dlatency = change of
// T_local - T_remote since the previous frame), the FP16 word written back,
// and the re-estimated GPU rate and network throughput, and compares them.
// The first frame must not write (no previous measurement); done must come
// within 46 cycles.
module tb_qvr_runtime_updater;
  import qvr_pkg::*;

  localparam int ALPHA = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, learn = 0;
  logic [14:0] grad_addr;
  fp16_t grad_old;
  logic [LAT_W-1:0] meas_local, meas_remote;
  logic [31:0] fovea_tri, data_size;
  logic done, wr_en;
  logic [14:0] wr_addr;
  fp16_t wr_data;
  logic [31:0] gpu_perf_q8, net_tput_q8;

  qvr_runtime_updater #(.ALPHA_Q8(ALPHA), .AW(15)) dut (.*);

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

  // reference FP16 encoder / decoder written independently with reals
  function automatic int fp16_val(fp16_t h);
    real m; int e;
    e = int'(h[14:10]);
    if (e == 0) return 0;
    m = (1.0 + real'(h[9:0]) / 1024.0) * (2.0 ** (e - 15));
    return h[15] ? -int'($floor(m)) : int'($floor(m));
  endfunction

  initial begin
    int prev_imb;
    bit have;
    learn = 0; grad_addr = 0; grad_old = 0; meas_local = 0; meas_remote = 0;
    fovea_tri = 0; data_size = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // parameter start values
    @(negedge clk);
    check("perf0", gpu_perf_q8, 600 * 256);
    check("tput0", net_tput_q8, 25 * 256);
    have = 0;
    for (int n = 0; n < 300; n++) begin
      int ml, mr, imb, dlat, g0, gn, cyc, gval;
      longint perf, tput;
      fp16_t gw;
      ml = $urandom_range(40000, 500);
      mr = $urandom_range(40000, 500);
      g0 = int'($urandom_range(20000, 0)) - 10000;
      gw = fp16_from_int(g0);           // stored form of the old gradient
      gval = fp16_val(gw);
      learn = 1; grad_addr = 15'($urandom); grad_old = gw;
      meas_local = ml; meas_remote = mr;
      fovea_tri = $urandom_range(3_000_000, 1000); data_size = $urandom_range(900_000, 1000);
      imb  = ml - mr;
      dlat = imb - prev_imb;
      gn   = gval + ((dlat - gval) * ALPHA >>> 8);
      perf = (longint'(fovea_tri) * 256) / ml;
      tput = (longint'(data_size) * 256) / mr;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 200) begin
        checks++; if (wr_en) begin failures++; $display("early write"); end
        @(negedge clk); cyc++;
      end
      checks++; if (cyc > 46) begin failures++; $display("slow %0d", cyc); end
      check("wr_en", wr_en, have);
      if (have) begin
        check("wr_addr", wr_addr, grad_addr);
        // the stored value is within FP16 precision of the exact update
        checks++;
        if ((fp16_val(wr_data) - gn) > 16 || (gn - fp16_val(wr_data)) > 16) begin
          failures++; $display("grad %0d vs %0d", fp16_val(wr_data), gn);
        end
      end
      @(negedge clk);
      check("perf", gpu_perf_q8, perf);
      check("tput", net_tput_q8, tput);
      prev_imb = imb; have = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
