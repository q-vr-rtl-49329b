// tb_qvr_lens_distortion: self-checking test of the 4-multiplier lens unit.
// Streams random normalised coordinates and distortion constants, keeping
// in_valid high, and compares every output with the radial model
// f = 1 + k1 r^2 + k2 r^4 worked out here in real arithmetic (tolerance of a
// few LSBs for the fixed-point truncations). Also checks the rate (one
// coordinate per 2 cycles) and the latency (out_valid 2 cycles after accept).
module tb_qvr_lens_distortion;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic signed [17:0] k1, k2, x_in, y_in;
  logic in_valid = 0, in_ready, out_valid;
  logic signed [23:0] x_out, y_out;

  qvr_lens_distortion dut (.*);

  int checks = 0, failures = 0;
  real qx [$], qy [$];
  int  qt [$];
  int  cycle = 0, n_acc = 0, first_acc = -1, last_acc = 0;

  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real fx(real v); return v / 32768.0; endfunction

  // scoreboard: expected values queued at acceptance
  always @(posedge clk) begin
    if (rst_n && in_valid && in_ready) begin
      real x, y, r2, f;
      x = fx(x_in); y = fx(y_in);
      r2 = x * x + y * y;
      f  = 1.0 + fx(k1) * r2 + fx(k2) * r2 * r2;
      qx.push_back(x * f); qy.push_back(y * f); qt.push_back(cycle);
      if (first_acc < 0) first_acc = cycle;
      last_acc = cycle;
      n_acc++;
    end
    if (rst_n && out_valid) begin
      real ex, ey; int t;
      ex = qx.pop_front(); ey = qy.pop_front(); t = qt.pop_front();
      checks += 3;
      if ((fx(x_out) - ex) > 0.001 || (ex - fx(x_out)) > 0.001) begin
        failures++; if (failures < 10) $display("x %f expected %f", fx(x_out), ex);
      end
      if ((fx(y_out) - ey) > 0.001 || (ey - fx(y_out)) > 0.001) begin
        failures++; if (failures < 10) $display("y %f expected %f", fx(y_out), ey);
      end
      if (cycle - t != 2) begin failures++; $display("latency %0d", cycle - t); end
    end
  end

  initial begin
    k1 = 18'sd7209; k2 = 18'sd7864;      // 0.22, 0.24
    x_in = 0; y_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    in_valid = 1;
    for (int n = 0; n < 500; n++) begin
      // present a new coordinate in a cycle where it is taken (phase A);
      // the constants change only then, never under a coordinate in flight
      while (!in_ready) @(negedge clk);
      x_in = 18'($signed($urandom_range(70000, 0)) - 35000);
      y_in = 18'($signed($urandom_range(70000, 0)) - 35000);
      if (n % 50 == 49) begin
        k1 = 18'($signed($urandom_range(16000, 0)) - 4000);
        k2 = 18'($signed($urandom_range(16000, 0)) - 4000);
      end
      @(negedge clk);
    end
    while (!in_ready) @(negedge clk);
    in_valid = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (qx.size() != 0) begin failures++; $display("outputs missing"); end
    checks++;
    if ((last_acc - first_acc) != 2 * (n_acc - 1)) begin
      failures++; $display("rate: %0d accepts over %0d cycles", n_acc, last_acc - first_acc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
