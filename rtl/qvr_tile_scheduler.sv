// qvr_tile_scheduler: hands the tiles of one eye's frame to its UCA.
//
// The UCA works asynchronously across tiles and may start before rendering is
// complete: a tile that lies wholly in the fovea needs only the locally
// rendered fovea layer, one wholly outside needs only the decoded periphery
// layer, and only border tiles need both. The scheduler watches the two
// "layer ready" signals (frame-buffer and video-stream status) and, sweeping
// round the tiles, issues every tile whose layers are ready, deferring the
// others to a later sweep. If the display deadline comes while tiles are left
// (a dropped frame), the remaining tiles are issued at once with use_prev set,
// so the UCA rebuilds them from the previous frame's layers with the new head
// position. The early start and the use of the previous frame are the
// paper's; the sweep order and the handshake are this design's.
//
// Timing: frame_go (one cycle) starts a frame and latches the fovea circle.
// One tile is looked at per cycle; an issued command is held on cmd until
// cmd_ready. frame_done pulses once all tiles are issued. Counters report
// deferred looks (a tile skipped because its layer was not ready) and tiles
// issued from the previous frame.
module qvr_tile_scheduler
  import qvr_pkg::*;
#(
  parameter int FRAME_W = 1920,
  parameter int FRAME_H = 2160
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             frame_go,
  input  logic [CRD_W-1:0] fov_cx,
  input  logic [CRD_W-1:0] fov_cy,
  input  logic [CRD_W:0]   fov_r,
  input  logic             fovea_ready,    // local fovea layer complete in DRAM
  input  logic             periph_ready,   // periphery layers decoded into DRAM
  input  logic             deadline,       // display deadline: drop to previous frame
  output logic             cmd_valid,
  input  logic             cmd_ready,
  output tile_cmd_t        cmd,
  output logic             busy,
  output logic             frame_done,
  output logic [31:0]      n_deferred,
  output logic [31:0]      n_prev
);

  localparam int TX = (FRAME_W + TILE - 1) / TILE;
  localparam int TY = (FRAME_H + TILE - 1) / TILE;
  localparam int NT = TX * TY;
  localparam int PW = $clog2(NT + 1);

  logic [NT-1:0]    issued;
  logic [PW-1:0]    ptr, n_issued;
  logic [CRD_W-1:0] ptx, pty;            // tile coordinates of ptr
  logic [CRD_W-1:0] cx_r, cy_r;
  logic [CRD_W:0]   r_r;
  logic             drop;

  tile_mode_e m_c;
  logic       ok_c;
  always_comb begin
    m_c  = tile_mode(ptx, pty, cx_r, cy_r, r_r);
    unique case (m_c)
      MODE_FOVEA: ok_c = fovea_ready;
      MODE_PERI:  ok_c = periph_ready;
      default:    ok_c = fovea_ready && periph_ready;
    endcase
    ok_c = ok_c || drop || deadline;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      issued     <= '0;
      ptr        <= '0;
      ptx        <= '0;
      pty        <= '0;
      n_issued   <= '0;
      cx_r       <= '0;
      cy_r       <= '0;
      r_r        <= '0;
      drop       <= 1'b0;
      busy       <= 1'b0;
      cmd_valid  <= 1'b0;
      cmd        <= '0;
      frame_done <= 1'b0;
      n_deferred <= '0;
      n_prev     <= '0;
    end else begin
      frame_done <= 1'b0;
      if (frame_go && !busy) begin
        issued   <= '0;
        ptr      <= '0;
        ptx      <= '0;
        pty      <= '0;
        n_issued <= '0;
        cx_r     <= fov_cx;
        cy_r     <= fov_cy;
        r_r      <= fov_r;
        drop     <= 1'b0;
        busy     <= 1'b1;
      end else if (busy) begin
        if (deadline) drop <= 1'b1;
        if (cmd_valid) begin
          if (cmd_ready) begin
            cmd_valid <= 1'b0;
            n_issued  <= n_issued + 1'b1;
            if (cmd.use_prev) n_prev <= n_prev + 1;
            if (n_issued == PW'(NT - 1)) begin
              busy       <= 1'b0;
              frame_done <= 1'b1;
            end
          end
        end else begin
          if (!issued[ptr] && ok_c) begin
            cmd_valid   <= 1'b1;
            cmd         <= '{tx: ptx, ty: pty, use_prev: drop || deadline};
            issued[ptr] <= 1'b1;
          end else if (!issued[ptr]) begin
            n_deferred <= n_deferred + 1;
          end
          // advance the sweep
          if (ptr == PW'(NT - 1)) begin
            ptr <= '0; ptx <= '0; pty <= '0;
          end else begin
            ptr <= ptr + 1'b1;
            if (ptx == CRD_W'(TX - 1)) begin ptx <= '0; pty <= pty + 1'b1; end
            else ptx <= ptx + 1'b1;
          end
        end
      end
    end
  end

  // a command is never withdrawn before it is taken
  assert property (@(posedge clk) disable iff (!rst_n) cmd_valid && !cmd_ready |=> cmd_valid && $stable(cmd));

endmodule
