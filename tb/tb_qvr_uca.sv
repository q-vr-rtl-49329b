// tb_qvr_uca: self-checking test of one Unified Composition and ATW unit.
// Sends tile commands around a fovea circle so that fovea-only, periphery-only
// and border tiles all occur, with changing head-motion offsets and lens
// constants, and some tiles rebuilt from the previous frame. For every tile it
//   * classifies the tile here by testing all 1024 pixel centres against the
//     circle and compares with the unit's choice;
//   * computes the four corner source coordinates with the reference lens
//     model and checks all 1024 written pixels against the reference filter;
//   * checks the tile time: a bilinear tile within the paper's 532 cycles.
module tb_qvr_uca;
  import qvr_pkg::*;
  import tb_qvr_ref_pkg::*;

  localparam int LANES = 8, W = 1920, H = 2160, PS = 1;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cmd_valid = 0, cmd_ready, tile_done;
  tile_cmd_t cmd;
  logic [CRD_W-1:0] fov_cx, fov_cy;
  logic [CRD_W:0] fov_r;
  logic signed [17:0] k1, k2;
  logic signed [23:0] reproj_dx, reproj_dy;
  logic req_valid [LANES];
  texel_req_t req [LANES];
  rgba_t rsp [LANES];
  logic wr_valid [LANES];
  pix_wr_t wr [LANES];
  tile_mode_e tile_mode_o;

  qvr_uca #(.LANES(LANES), .FRAME_W(W), .FRAME_H(H), .PS(PS)) dut (.*);

  always @(posedge clk)
    for (int l = 0; l < LANES; l++)
      rsp[l] <= req_valid[l] ? texel(req[l].prev, req[l].layer, int'(req[l].x), int'(req[l].y)) : 32'h0;

  int checks = 0, failures = 0, npix = 0;
  int n_mode [3] = '{0, 0, 0};
  longint lcx [4], lcy [4];
  int m_exp, tx0, ty0;
  bit prev_exp;

  always @(posedge clk) if (rst_n) for (int l = 0; l < LANES; l++) if (wr_valid[l]) begin
    int i, j;
    logic [31:0] e;
    i = int'(wr[l].x) - tx0 * 32; j = int'(wr[l].y) - ty0 * 32;
    e = ref_pixel(m_exp, prev_exp, lcx, lcy, i, j, W, H, PS);
    checks++;
    npix++;
    if (wr[l].rgba !== e || i < 0 || i > 31 || j < 0 || j > 31) begin
      failures++;
      if (failures < 10) $display("tile (%0d,%0d) pixel (%0d,%0d): %h expected %h", tx0, ty0, i, j, wr[l].rgba, e);
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int classify(int tx, int ty, int cx, int cy, int r);
    int nin = 0;
    for (int y = ty * 32; y < ty * 32 + 32; y++)
      for (int x = tx * 32; x < tx * 32 + 32; x++)
        if ((x - cx) * (x - cx) + (y - cy) * (y - cy) <= r * r) nin++;
    return (nin == 1024) ? 0 : (nin == 0) ? 1 : 2;
  endfunction

  initial begin
    k1 = 18'sd7209; k2 = 18'sd7864;
    fov_cx = 900; fov_cy = 1100; fov_r = 300;
    reproj_dx = 0; reproj_dy = 0; cmd = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) begin
      int cyc;
      // tiles near the circle's edge, inside it and far outside
      case (n % 4)
        0: begin tx0 = 28; ty0 = 34; end                            // centre: fovea
        1: begin tx0 = $urandom_range(59, 0); ty0 = $urandom_range(5, 0); end
        default: begin tx0 = 28 + $urandom_range(20, 0) - 10; ty0 = 34 + $urandom_range(20, 0) - 10; end
      endcase
      if (n == 20) begin fov_r = 600; k1 = 18'sd3000; k2 = -18'sd1000; end
      reproj_dx = 24'($signed($urandom_range(8000, 0)) - 4000);
      reproj_dy = 24'($signed($urandom_range(8000, 0)) - 4000);
      prev_exp = (n % 5 == 4);
      m_exp = classify(tx0, ty0, int'(fov_cx), int'(fov_cy), int'(fov_r));
      n_mode[m_exp]++;
      for (int c = 0; c < 4; c++) begin
        longint xo, yo;
        ref_lens(longint'(k1), longint'(k2),
                 longint'(tx0 * 32 + ((c & 1) ? 32 : 0) - W / 2) * 32,
                 longint'(ty0 * 32 + ((c & 2) ? 32 : 0) - H / 2) * 32, xo, yo);
        lcx[c] = longint'(W / 2) * 256 + xo * 8 + longint'(reproj_dx);
        lcy[c] = longint'(H / 2) * 256 + yo * 8 + longint'(reproj_dy);
      end
      npix = 0;
      @(negedge clk);
      cmd = '{tx: CRD_W'(tx0), ty: CRD_W'(ty0), use_prev: prev_exp};
      cmd_valid = 1;
      while (!cmd_ready) @(negedge clk);
      @(negedge clk);
      cmd_valid = 0;
      cyc = 1;
      while (!tile_done && cyc < 5000) begin @(negedge clk); cyc++; end
      checks += 3;
      if (int'(tile_mode_o) != m_exp) begin failures++; $display("tile (%0d,%0d) mode %0d expected %0d", tx0, ty0, tile_mode_o, m_exp); end
      if (npix != 1024) begin failures++; $display("tile (%0d,%0d): %0d pixels", tx0, ty0, npix); end
      if (m_exp != 2 ? (cyc > 532) : (cyc > 1044)) begin failures++; $display("mode %0d tile took %0d cycles", m_exp, cyc); end
      if (n < 4) $display("mode %0d tile: %0d cycles", m_exp, cyc);
    end
    for (int m = 0; m < 3; m++) begin
      checks++;
      if (n_mode[m] == 0) begin failures++; $display("mode %0d never exercised", m); end
    end
    $display("tiles per mode: fovea %0d periphery %0d border %0d", n_mode[0], n_mode[1], n_mode[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
