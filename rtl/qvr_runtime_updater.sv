// qvr_runtime_updater: runtime updater of the LIWC.
//
// After a frame has been shown, the measured local and remote latencies come
// back ("monitor latency"). The updater then
//   1. learns: the table word that chose this frame's delta e1 holds the
//      expected change of the imbalance T_local - T_remote caused by that
//      choice. With dlatency the measured change of that imbalance since the
//      previous frame it writes back
//         gradient = (1 - alpha) * gradient' + alpha * dlatency      (paper)
//      computed as g' + alpha*(dlatency - g') with alpha = ALPHA_Q8/256;
//   2. re-estimates the latency-model parameters ("update the latency
//      parameter"): P(GPU) = fovea triangles / T_local and
//      Throughput = DataSize(M+O) / T_remote, both Q24.8 per microsecond.
// The reward equation and the two re-estimated parameters are the paper's;
// what dlatency measures, alpha, the fixed-point formats and the start values
// of P and Throughput are this design's own choices. The FPS change the paper
// also mentions is not used: it follows from the same two latencies.
//
// Timing: start samples the inputs; done pulses 43 cycles later, after the
// two dividers, with wr_en (if learn was set) in the same cycle. The
// parameter outputs change only then.
module qvr_runtime_updater
  import qvr_pkg::*;
#(
  parameter int ALPHA_Q8      = 64,         // alpha = 0.25 (own choice)
  parameter int AW            = 15,
  parameter int PERF_INIT_Q8  = 600 * 256,  // triangles per us at start (own choice)
  parameter int TPUT_INIT_Q8  = 25 * 256    // bytes per us at start: 200 Mbit/s Wi-Fi (paper default)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    start,
  input  logic                    learn,        // a delta e1 was taken from grad_addr
  input  logic [AW-1:0]           grad_addr,
  input  fp16_t                   grad_old,     // word at grad_addr
  input  logic [LAT_W-1:0]        meas_local,   // measured T_local, us
  input  logic [LAT_W-1:0]        meas_remote,  // measured T_remote, us
  input  logic [31:0]             fovea_tri,
  input  logic [31:0]             data_size,
  output logic                    done,
  output logic                    wr_en,
  output logic [AW-1:0]           wr_addr,
  output fp16_t                   wr_data,
  output logic [31:0]             gpu_perf_q8,
  output logic [31:0]             net_tput_q8
);

  localparam int DIV_W = 40;

  logic                    have_prev;
  logic signed [LAT_W-1:0] imb_prev;
  logic signed [LAT_W-1:0] imb_now_r, dlat_r;
  logic                    learn_r;
  logic [AW-1:0]           addr_r;
  fp16_t                   gold_r;
  logic [LAT_W-1:0]        ml_r, mr_r;
  logic [31:0]             ftri_r, size_r;
  logic                    st_q, got_l, got_r;
  logic                    dl_done, dr_done, dl_busy, dr_busy;
  logic [DIV_W-1:0]        ql, qr;

  qvr_seq_div #(.W(DIV_W)) u_div_perf (
    .clk, .rst_n, .start(st_q), .num({ftri_r, 8'd0}), .den({8'd0, ml_r}),
    .busy(dl_busy), .done(dl_done), .quot(ql));
  qvr_seq_div #(.W(DIV_W)) u_div_tput (
    .clk, .rst_n, .start(st_q), .num({size_r, 8'd0}), .den({8'd0, mr_r}),
    .busy(dr_busy), .done(dr_done), .quot(qr));

  // reward update in integer microseconds
  logic signed [31:0] g_int, g_new;
  logic signed [47:0] step;
  always_comb begin
    g_int = fp16_to_int(gold_r);
    step  = 48'(dlat_r - g_int) * 48'(ALPHA_Q8);
    g_new = g_int + 32'(step >>> 8);
  end

  function automatic logic [31:0] sat32(input logic [DIV_W-1:0] q);
    return (q > DIV_W'(32'hffff_ffff)) ? 32'hffff_ffff : q[31:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_prev   <= 1'b0;
      imb_prev    <= '0;
      imb_now_r   <= '0;
      dlat_r      <= '0;
      learn_r     <= 1'b0;
      addr_r      <= '0;
      gold_r      <= '0;
      ml_r        <= '0;
      mr_r        <= '0;
      ftri_r      <= '0;
      size_r      <= '0;
      st_q        <= 1'b0;
      got_l       <= 1'b0;
      got_r       <= 1'b0;
      done        <= 1'b0;
      wr_en       <= 1'b0;
      wr_addr     <= '0;
      wr_data     <= '0;
      gpu_perf_q8 <= 32'(PERF_INIT_Q8);
      net_tput_q8 <= 32'(TPUT_INIT_Q8);
    end else begin
      st_q  <= start;
      done  <= 1'b0;
      wr_en <= 1'b0;
      if (start) begin
        imb_now_r <= $signed(meas_local) - $signed(meas_remote);
        dlat_r    <= ($signed(meas_local) - $signed(meas_remote)) - imb_prev;
        learn_r   <= learn && have_prev;
        addr_r    <= grad_addr;
        gold_r    <= grad_old;
        ml_r      <= meas_local;
        mr_r      <= meas_remote;
        ftri_r    <= fovea_tri;
        size_r    <= data_size;
        got_l     <= 1'b0;
        got_r     <= 1'b0;
      end
      if (dl_done) got_l <= 1'b1;
      if (dr_done) got_r <= 1'b1;
      if (dl_done && ml_r != 0) gpu_perf_q8 <= sat32(ql);
      if (dr_done && mr_r != 0) net_tput_q8 <= sat32(qr);
      if (got_l && got_r) begin
        got_l     <= 1'b0;
        got_r     <= 1'b0;
        done      <= 1'b1;
        wr_en     <= learn_r;
        wr_addr   <= addr_r;
        wr_data   <= fp16_from_int(g_new);
        imb_prev  <= imb_now_r;
        have_prev <= 1'b1;
      end
    end
  end

endmodule
