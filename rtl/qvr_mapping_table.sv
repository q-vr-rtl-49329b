// qvr_mapping_table: the motion-to-eccentricity mapping table of the LIWC.
//
// An SRAM of DEPTH words of WIDTH bits; each word is the learned latency
// gradient offset, an FP16 number of microseconds, for one pair (motion index,
// delta-e1 tag). Depth 2^15 and 16-bit FP16 words (64 KB) are the paper's.
// Address layout (own choice): {motion index[9:0], tag[4:0]}, tag t standing
// for delta e1 = t - 5 degrees, t = 0..10; tags 11..31 are unused.
//
// After reset the table fills itself, one word per cycle, with the prior
// gradient (t - 5) * INIT_GRAD microseconds: "one degree more fovea moves the
// local/remote balance by INIT_GRAD". The paper does not say how the table
// starts; this prior is this design's choice. init_busy is high during the
// DEPTH-cycle fill and the ports are ignored meanwhile.
//
// Ports: one synchronous read port (data one cycle after rd_en) and one write
// port. A read and a write of the same address in one cycle return the old word.
module qvr_mapping_table
  import qvr_pkg::*;
#(
  parameter int DEPTH     = 32768,   // paper: 2^15
  parameter int WIDTH     = 16,      // paper: FP16
  parameter int INIT_GRAD = 1000     // prior gradient, microseconds per degree (own choice)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  output logic                     init_busy,
  input  logic                     rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [WIDTH-1:0]         rd_data,
  input  logic                     wr_en,
  input  logic [$clog2(DEPTH)-1:0] wr_addr,
  input  logic [WIDTH-1:0]         wr_data
);

  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    init_addr;

  // prior gradient of the word at address a
  function automatic logic [WIDTH-1:0] prior(input logic [AW-1:0] a);
    int t;
    t = int'(a[TAG_W-1:0]);
    if (t >= N_TAGS) return WIDTH'(16'h7bff);           // unused slot: +max
    return WIDTH'(fp16_from_int(32'((t + DTAG_MIN) * INIT_GRAD)));
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_busy <= 1'b1;
      init_addr <= '0;
    end else if (init_busy) begin
      init_addr <= init_addr + 1'b1;
      if (init_addr == AW'(DEPTH - 1)) init_busy <= 1'b0;
    end
  end

  // memory array: no reset, written by the fill sweep or the write port
  always_ff @(posedge clk) begin
    if (init_busy) mem[init_addr] <= prior(init_addr);
    else if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en && !init_busy) rd_data <= mem[rd_addr];
  end

endmodule
