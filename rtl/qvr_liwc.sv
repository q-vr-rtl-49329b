// qvr_liwc: Lightweight Interaction-aware Workload Controller.
//
// Chooses, once per frame, the fovea eccentricity e1 that balances local
// (fovea) rendering against remote (periphery) rendering plus transmission.
// It joins the four parts the paper names: the motion codec, the latency
// predictor, the motion-to-eccentricity mapping table (SRAM) and the runtime
// updater, in a small Q-learning-like loop:
//
//   frame_start  -> motion codec indexes the head/eye motion since the last
//                   frame; the predictor estimates T_local, T_remote from the
//                   snooped triangle count and periphery data size (Eq. 2).
//   select       -> the 11 words {motion, delta e1 = -5..+5} are read; the
//                   delta whose gradient offset is closest to the predicted
//                   imbalance D = T_remote - T_local is taken, and
//                   e1 <= clamp(e1 + delta, 5, 90). ecc_valid pulses.
//   meas_valid   -> the measured latencies of that frame come back; the
//                   updater rewrites the chosen word with the reward equation
//                   and refreshes P(GPU) and Throughput.
// The paper gives the four parts, the 10-bit motion index, the -5..+5 delta
// tags, the closest-gradient look-up and the reward equation. The state
// machine, the meaning of a gradient (expected change of T_local - T_remote
// for that delta), the tie rule (first, i.e. most negative, delta wins) and
// the e1 limits 5..90 (the range of the paper's eccentricity table) are this
// design's own reading.
//
// Timing: after reset the table fills for DEPTH cycles (ready low). From
// frame_start to ecc_valid takes 57 cycles at defaults (114 ns at 500 MHz);
// an update takes 45 cycles. frame_start is taken when ready is high; if it
// comes while the controller still waits for measurements, that frame's
// learning step is skipped.
module qvr_liwc
  import qvr_pkg::*;
#(
  parameter int FRAME_W   = 1920,
  parameter int FRAME_H   = 2160,
  parameter int PPD       = 20,
  parameter int DEPTH     = 32768,
  parameter int ALPHA_Q8  = 64,
  parameter int INIT_GRAD = 1000
) (
  input  logic                    clk,
  input  logic                    rst_n,
  output logic                    ready,
  // user input and snooped hardware information
  input  logic                    frame_start,
  input  logic signed [15:0]      pose [6],
  input  logic [CRD_W-1:0]        eye_x,
  input  logic [CRD_W-1:0]        eye_y,
  input  logic [31:0]             num_tri,
  input  logic [31:0]             data_size,
  // eccentricity out
  output logic                    ecc_valid,
  output logic [E_W-1:0]          e1,
  output logic signed [3:0]       de1,
  output logic [LAT_W-1:0]        pred_local,
  output logic [LAT_W-1:0]        pred_remote,
  // monitored latency in
  input  logic                    meas_valid,
  input  logic [LAT_W-1:0]        meas_local,
  input  logic [LAT_W-1:0]        meas_remote,
  output logic                    upd_done
);

  localparam int AW = $clog2(DEPTH);

  typedef enum logic [2:0] {S_INIT, S_IDLE, S_PRED, S_SCAN, S_APPLY, S_WAIT_MEAS, S_UPDATE} state_e;
  state_e st;

  // ---- sub-blocks ----
  motion_idx_t midx;
  logic        midx_valid;
  qvr_motion_codec u_codec (
    .clk, .rst_n, .frame_valid(frame_start && ready), .pose, .eye_x, .eye_y,
    .idx(midx), .idx_valid(midx_valid));

  logic        pred_done, pred_rs;
  logic [31:0] pred_ftri;
  logic signed [LAT_W-1:0] pred_diff;
  logic [31:0] gpu_perf_q8, net_tput_q8;
  qvr_latency_predictor #(.FRAME_W(FRAME_W), .FRAME_H(FRAME_H), .PPD(PPD)) u_pred (
    .clk, .rst_n, .start(frame_start && ready), .e1, .num_tri, .data_size,
    .gpu_perf_q8, .net_tput_q8, .done(pred_done), .fovea_tri(pred_ftri),
    .t_local(pred_local), .t_remote(pred_remote), .diff(pred_diff), .remote_slower(pred_rs));

  logic          tbl_init, rd_en, wr_en;
  logic [AW-1:0] rd_addr, wr_addr;
  fp16_t         rd_data, wr_data;
  qvr_mapping_table #(.DEPTH(DEPTH), .WIDTH(16), .INIT_GRAD(INIT_GRAD)) u_table (
    .clk, .rst_n, .init_busy(tbl_init), .rd_en, .rd_addr, .rd_data,
    .wr_en, .wr_addr, .wr_data);

  logic upd_start;
  assign upd_start = (st == S_WAIT_MEAS) && meas_valid && !frame_start;
  logic [AW-1:0] sel_addr;
  fp16_t         sel_g;
  logic [31:0]   sel_ftri, sel_size;
  logic          sel_learn;
  qvr_runtime_updater #(.ALPHA_Q8(ALPHA_Q8), .AW(AW)) u_upd (
    .clk, .rst_n, .start(upd_start), .learn(sel_learn), .grad_addr(sel_addr), .grad_old(sel_g),
    .meas_local, .meas_remote, .fovea_tri(sel_ftri), .data_size(sel_size),
    .done(upd_done), .wr_en, .wr_addr, .wr_data, .gpu_perf_q8, .net_tput_q8);

  // ---- selection scan ----
  motion_idx_t        idx_r;
  logic [3:0]         tag_issue, tag_ret;
  logic               ret_valid;
  logic signed [31:0] best_dist;
  logic [3:0]         best_tag;
  fp16_t              best_g;
  logic signed [LAT_W-1:0] d_r;
  logic [31:0]        size_r;

  assign ready = (st == S_IDLE) || (st == S_WAIT_MEAS);
  assign rd_en   = (st == S_SCAN) && (tag_issue < 4'(N_TAGS));
  assign rd_addr = AW'({idx_r, 1'b0, tag_issue});

  logic signed [31:0] dist_c;
  always_comb begin
    logic signed [31:0] g;
    g = fp16_to_int(rd_data);
    dist_c = (g > d_r) ? g - d_r : d_r - g;
  end

  // clamp of e1 + delta
  function automatic logic [E_W-1:0] clamp_e1(input logic [E_W-1:0] e, input logic [3:0] t);
    int v;
    v = int'(e) + int'(t) + DTAG_MIN;
    if (v < E1_MIN) v = E1_MIN;
    if (v > E1_MAX) v = E1_MAX;
    return E_W'(v);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_INIT;
      e1        <= E_W'(E1_INIT);
      de1       <= '0;
      ecc_valid <= 1'b0;
      idx_r     <= '0;
      tag_issue <= '0;
      tag_ret   <= '0;
      ret_valid <= 1'b0;
      best_dist <= '0;
      best_tag  <= '0;
      best_g    <= '0;
      d_r       <= '0;
      size_r    <= '0;
      sel_addr  <= '0;
      sel_g     <= '0;
      sel_ftri  <= '0;
      sel_size  <= '0;
      sel_learn <= 1'b0;
    end else begin
      ecc_valid <= 1'b0;
      ret_valid <= rd_en;
      tag_ret   <= tag_issue;
      if (frame_start && ready) size_r <= data_size;
      if (midx_valid) idx_r <= midx;
      unique case (st)
        S_INIT: if (!tbl_init) st <= S_IDLE;
        S_IDLE: if (frame_start) st <= S_PRED;
        S_PRED: if (pred_done) begin
          d_r       <= pred_diff;
          tag_issue <= '0;
          best_dist <= 32'h7fff_ffff;
          st        <= S_SCAN;
        end
        S_SCAN: begin
          if (tag_issue < 4'(N_TAGS)) tag_issue <= tag_issue + 1'b1;
          if (ret_valid && dist_c < best_dist) begin
            best_dist <= dist_c;
            best_tag  <= tag_ret;
            best_g    <= rd_data;
          end
          if (ret_valid && tag_ret == 4'(N_TAGS - 1)) st <= S_APPLY;
        end
        S_APPLY: begin
          e1        <= clamp_e1(e1, best_tag);
          de1       <= 4'(int'(best_tag) + DTAG_MIN);
          ecc_valid <= 1'b1;
          sel_addr  <= AW'({idx_r, 1'b0, best_tag});
          sel_g     <= best_g;
          sel_ftri  <= pred_ftri;
          sel_size  <= size_r;
          sel_learn <= 1'b1;
          st        <= S_WAIT_MEAS;
        end
        S_WAIT_MEAS: begin
          if (frame_start) st <= S_PRED;          // measurements missed: no learning
          else if (meas_valid) begin
            st        <= S_UPDATE;
          end
        end
        S_UPDATE: if (upd_done) st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // a choice is only made from the 11 defined tags
  assert property (@(posedge clk) disable iff (!rst_n) ecc_valid |-> (de1 >= -4'sd5 && de1 <= 4'sd5));
  assert property (@(posedge clk) disable iff (!rst_n) (e1 >= E_W'(E1_MIN) && e1 <= E_W'(E1_MAX)));

endmodule
