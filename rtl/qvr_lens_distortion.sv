// qvr_lens_distortion: lens-distortion translation of the UCA, on 4 multipliers.
//
// Maps a display coordinate (relative to the lens centre, normalised) to the
// coordinate that has to be sampled in the rendered image, with the usual
// radial polynomial of HMD lenses:
//     r2 = x^2 + y^2,   f = 1 + k1*r2 + k2*r2^2,   (x', y') = f * (x, y)
// The paper gives only that the UCA spends "4 MULs for lens distortion"; the
// polynomial and the schedule are this design's. The four multipliers are
// explicit and shared over two phases:
//   phase A: MUL0 = x*x, MUL1 = y*y, MUL2 = r2*r2, MUL3 = k1*r2
//   phase B: MUL0 = k2*r4, MUL1 = x*f, MUL2 = y*f          (MUL3 idle)
// Numbers are signed fixed point with 15 fraction bits (Q2.15 in, wider out).
//
// Timing: a coordinate is accepted when in_valid and in_ready are high;
// in_ready is high every other cycle, so the rate is one coordinate per two
// cycles. out_valid pulses two cycles after acceptance with x_out, y_out.
module qvr_lens_distortion #(
  parameter int IW = 18,    // input width, Q2.15
  parameter int OW = 24     // output width, Q8.15
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic signed [17:0]   k1,        // Q2.15
  input  logic signed [17:0]   k2,        // Q2.15
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [IW-1:0] x_in,
  input  logic signed [IW-1:0] y_in,
  output logic                 out_valid,
  output logic signed [OW-1:0] x_out,
  output logic signed [OW-1:0] y_out
);

  logic                 phase_b;      // second phase of a coordinate
  logic signed [IW-1:0] xr, yr;
  logic signed [31:0]   fpart_r, r4_r;

  // the four multipliers and their operand multiplexers
  logic signed [31:0] ma [4];
  logic signed [31:0] mb [4];
  logic signed [63:0] mp [4];
  logic signed [31:0] r2_c, f_c;

  always_comb begin
    // phase A operands from the input port
    ma[0] = 32'(x_in); mb[0] = 32'(x_in);
    ma[1] = 32'(y_in); mb[1] = 32'(y_in);
    mp[0] = ma[0] * mb[0];
    mp[1] = ma[1] * mb[1];
    r2_c  = 32'((mp[0] + mp[1]) >>> 15);
    ma[2] = r2_c;      mb[2] = r2_c;
    ma[3] = 32'(k1);   mb[3] = r2_c;
    f_c   = '0;
    if (phase_b) begin
      ma[0] = 32'(k2);  mb[0] = r4_r;
      mp[0] = ma[0] * mb[0];
      f_c   = fpart_r + 32'(mp[0] >>> 15);
      ma[1] = 32'(xr);  mb[1] = f_c;
      ma[2] = 32'(yr);  mb[2] = f_c;
      ma[3] = '0;       mb[3] = '0;
      mp[1] = ma[1] * mb[1];
    end
    mp[2] = ma[2] * mb[2];
    mp[3] = ma[3] * mb[3];
  end

  assign in_ready = !phase_b;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_b   <= 1'b0;
      xr        <= '0;
      yr        <= '0;
      fpart_r   <= '0;
      r4_r      <= '0;
      out_valid <= 1'b0;
      x_out     <= '0;
      y_out     <= '0;
    end else begin
      out_valid <= 1'b0;
      if (!phase_b) begin
        if (in_valid) begin
          xr      <= x_in;
          yr      <= y_in;
          r4_r    <= 32'(mp[2] >>> 15);
          fpart_r <= 32'sd32768 + 32'(mp[3] >>> 15);
          phase_b <= 1'b1;
        end
      end else begin
        x_out     <= OW'(mp[1] >>> 15);
        y_out     <= OW'(mp[2] >>> 15);
        out_valid <= 1'b1;
        phase_b   <= 1'b0;
      end
    end
  end

endmodule
