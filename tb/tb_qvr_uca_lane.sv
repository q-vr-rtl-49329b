// tb_qvr_uca_lane: self-checking test of one SIMD4 mapping/filtering lane.
// For tiles in all three modes (fovea bilinear, periphery bilinear, border
// trilinear), with random corner coordinates (some off the frame edge, to hit
// the clamp) and current or previous frame, a behavioural frame buffer answers
// every texel request one cycle later. Each written pixel is compared with
// the reference filter, the number of pixels per tile is checked, and so is
// the cycle count (515 bilinear, 1027 trilinear with 8 lanes).
module tb_qvr_uca_lane;
  import qvr_pkg::*;
  import tb_qvr_ref_pkg::*;

  localparam int LANE = 3, LANES = 8, W = 1920, H = 2160, PS = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, done, req_valid, wr_valid, use_prev;
  logic [CRD_W-1:0] x0, y0;
  tile_mode_e mode;
  logic signed [23:0] cx [4];
  logic signed [23:0] cy [4];
  texel_req_t req;
  rgba_t rsp;
  pix_wr_t wr;

  qvr_uca_lane #(.LANE(LANE), .LANES(LANES), .FRAME_W(W), .FRAME_H(H), .PS(PS)) dut (.*);

  // behavioural frame buffer, one-cycle read latency
  always @(posedge clk) rsp <= req_valid ? texel(req.prev, req.layer, int'(req.x), int'(req.y)) : 32'h0;

  int checks = 0, failures = 0, npix = 0;
  longint lcx [4], lcy [4];
  int m_int;

  always @(posedge clk) if (rst_n && wr_valid) begin
    int i, j;
    logic [31:0] e;
    i = int'(wr.x) - int'(x0); j = int'(wr.y) - int'(y0);
    e = ref_pixel(m_int, use_prev, lcx, lcy, i, j, W, H, PS);
    checks++;
    npix++;
    if (((j * 32 + i) % LANES) != LANE || wr.rgba !== e) begin
      failures++;
      if (failures < 10) $display("pixel (%0d,%0d) mode %0d: %h expected %h", i, j, m_int, wr.rgba, e);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x0 = 0; y0 = 0; mode = MODE_FOVEA; use_prev = 0;
    for (int c = 0; c < 4; c++) begin cx[c] = 0; cy[c] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 24; n++) begin
      int cyc, tx, ty;
      tx = (n == 5) ? 59 : (n == 6) ? 0 : $urandom_range(59, 0);
      ty = (n == 5) ? 67 : (n == 6) ? 0 : $urandom_range(67, 0);
      x0 = CRD_W'(tx * 32); y0 = CRD_W'(ty * 32);
      m_int = n % 3;
      mode = tile_mode_e'(m_int);
      use_prev = (n % 4 == 3);
      for (int c = 0; c < 4; c++) begin
        lcx[c] = longint'(tx * 32 + ((c & 1) ? 32 : 0)) * 256 + longint'($urandom_range(6000, 0)) - 3000;
        lcy[c] = longint'(ty * 32 + ((c & 2) ? 32 : 0)) * 256 + longint'($urandom_range(6000, 0)) - 3000;
        cx[c] = 24'(lcx[c]); cy[c] = 24'(lcy[c]);
      end
      npix = 0;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done && cyc < 5000) begin @(negedge clk); cyc++; end
      checks += 2;
      // one cycle less when the tile's last pixel lies off the frame
      if (cyc != ((m_int == 2) ? 1027 : 515) - ((ty == 67) ? 1 : 0)) begin failures++; $display("mode %0d took %0d cycles", m_int, cyc); end
      if (npix != ((ty == 67) ? 64 : 128)) begin failures++; $display("%0d pixels", npix); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
