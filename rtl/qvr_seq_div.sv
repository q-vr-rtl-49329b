// qvr_seq_div: unsigned restoring divider, one quotient bit per cycle.
//
// Helper of the latency predictor and the runtime updater, which both divide
// (work / rate, or work / measured time). A start pulse loads numerator and
// denominator; W cycles later done pulses for one cycle with quot = num / den.
// Division by zero returns all ones (saturated latency / rate).
// start while busy is ignored.
module qvr_seq_div #(
  parameter int W = 40
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] num,
  input  logic [W-1:0] den,
  output logic         busy,
  output logic         done,
  output logic [W-1:0] quot
);

  logic [W-1:0]       q, d;
  logic [W:0]         rem;
  logic [$clog2(W+1)-1:0] cnt;

  logic [W:0] rem_sh, rem_sub;
  always_comb begin
    rem_sh  = {rem[W-1:0], q[W-1]};
    rem_sub = rem_sh - {1'b0, d};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
      d    <= '0;
      rem  <= '0;
      cnt  <= '0;
      quot <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          q    <= num;
          d    <= den;
          rem  <= '0;
          cnt  <= '0;
        end
      end else begin
        if (rem_sub[W]) begin            // negative: restore
          rem <= rem_sh;
          q   <= {q[W-2:0], 1'b0};
        end else begin
          rem <= rem_sub;
          q   <= {q[W-2:0], 1'b1};
        end
        cnt <= cnt + 1'b1;
        if (cnt == ($clog2(W+1))'(W - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
          if (d == '0) quot <= '1;
          else if (rem_sub[W]) quot <= {q[W-2:0], 1'b0};
          else                 quot <= {q[W-2:0], 1'b1};
        end
      end
    end
  end

endmodule
