// qvr_latency_predictor: latency prediction of the LIWC (paper Eq. 2).
//
//   T_local  = #Triangles * %fovea / P(GPU)
//   T_remote = DataSize(M+O)      / Throughput
//
// The triangle count is the one the LIWC snoops from rendering setup and the
// data size the one of the periphery (middle + outer) layers seen on the
// network; both equations are the paper's. This design's own choices:
//   * %fovea is the share of the eye's frame covered by the fovea circle of
//     radius e1 * PPD pixels, pi*r^2 / (FRAME_W*FRAME_H), capped at 1, in Q0.16.
//   * P(GPU) is given in triangles per microsecond and Throughput in bytes per
//     microsecond, both unsigned Q24.8, so latencies come out in microseconds.
//   * Both divisions run on two sequential dividers in parallel.
// The outputs also give the difference T_remote - T_local and the comparison
// "remote slower" (the '>' comparator drawn in the LIWC diagram).
//
// Timing: start samples all inputs; done pulses DIV_W + 4 cycles later
// (44 cycles at defaults), and the outputs hold until the next start.
module qvr_latency_predictor
  import qvr_pkg::*;
#(
  parameter int FRAME_W = 1920,   // per-eye resolution (paper, Table 3)
  parameter int FRAME_H = 2160,
  parameter int PPD     = 20      // pixels per degree of eccentricity (own choice)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic [E_W-1:0]          e1,
  input  logic [31:0]             num_tri,
  input  logic [31:0]             data_size,
  input  logic [31:0]             gpu_perf_q8,
  input  logic [31:0]             net_tput_q8,
  output logic                    done,
  output logic [31:0]             fovea_tri,
  output logic [LAT_W-1:0]        t_local,
  output logic [LAT_W-1:0]        t_remote,
  output logic signed [LAT_W-1:0] diff,
  output logic                    remote_slower
);

  localparam int DIV_W = 40;
  // pi * 2^32 / (FRAME_W*FRAME_H): %fovea_q16 = (r^2 * K) >> 16
  localparam longint K_Q32 = longint'(3.14159265358979 * 4294967296.0 / (real'(FRAME_W) * real'(FRAME_H)));

  // fovea share of the frame, Q0.16 (65536 = whole frame)
  function automatic logic [16:0] fovea_frac(input logic [E_W-1:0] e);
    longint r, f;
    r = longint'(e) * PPD;
    f = (r * r * K_Q32) >>> 16;
    if (f > 65536) f = 65536;
    return 17'(f);
  endfunction

  logic [31:0] ftri_c;
  always_comb ftri_c = 32'((64'(num_tri) * 64'(fovea_frac(e1))) >> 16);

  logic st_q;
  logic dl_done, dr_done, dl_busy, dr_busy;
  logic [DIV_W-1:0] ql, qr;
  logic got_l, got_r;
  logic [31:0] ftri_reg, size_reg, perf_reg, tput_reg;

  qvr_seq_div #(.W(DIV_W)) u_div_local (
    .clk, .rst_n, .start(st_q),
    .num({ftri_reg, 8'd0}), .den({8'd0, perf_reg}),
    .busy(dl_busy), .done(dl_done), .quot(ql));

  qvr_seq_div #(.W(DIV_W)) u_div_remote (
    .clk, .rst_n, .start(st_q),
    .num({size_reg, 8'd0}), .den({8'd0, tput_reg}),
    .busy(dr_busy), .done(dr_done), .quot(qr));


  function automatic logic [LAT_W-1:0] sat(input logic [DIV_W-1:0] q);
    return (q > DIV_W'(32'h7fff_ffff)) ? LAT_W'(32'h7fff_ffff) : LAT_W'(q);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= 1'b0;
      ftri_reg <= '0;
      size_reg <= '0;
      perf_reg <= '0;
      tput_reg <= '0;
      got_l    <= 1'b0;
      got_r    <= 1'b0;
      done     <= 1'b0;
      fovea_tri <= '0;
      t_local  <= '0;
      t_remote <= '0;
      diff     <= '0;
      remote_slower <= 1'b0;
    end else begin
      st_q <= start;
      done <= 1'b0;
      if (start) begin
        ftri_reg <= ftri_c;
        size_reg <= data_size;
        perf_reg <= gpu_perf_q8;
        tput_reg <= net_tput_q8;
        got_l    <= 1'b0;
        got_r    <= 1'b0;
      end
      if (dl_done) begin t_local  <= sat(ql); got_l <= 1'b1; end
      if (dr_done) begin t_remote <= sat(qr); got_r <= 1'b1; end
      if (got_l && got_r) begin
        got_l <= 1'b0;
        got_r <= 1'b0;
        done  <= 1'b1;
        fovea_tri     <= ftri_reg;
        diff          <= $signed(t_remote) - $signed(t_local);
        remote_slower <= t_remote > t_local;
      end
    end
  end

endmodule
