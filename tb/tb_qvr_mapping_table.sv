// tb_qvr_mapping_table: self-checking test of the LIWC mapping-table SRAM.
// Checks the reset fill (prior gradient (t-5)*INIT_GRAD as FP16, with values
// worked out here in FP16 by hand for a few tags), then random writes and
// read-backs against a shadow copy, read-during-write returning the old word,
// and the fill time of DEPTH cycles.
module tb_qvr_mapping_table;
  import qvr_pkg::*;

  localparam int DEPTH = 32768, AW = 15;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic init_busy, rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [15:0] rd_data, wr_data = 0;

  qvr_mapping_table #(.DEPTH(DEPTH), .WIDTH(16), .INIT_GRAD(1000)) dut (.*);

  int checks = 0, failures = 0;
  logic [15:0] shadow [int];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(string what, logic [15:0] got, logic [15:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic rd(input logic [AW-1:0] a, output logic [15:0] d);
    @(negedge clk); rd_en = 1; rd_addr = a;
    @(negedge clk); rd_en = 0; d = rd_data;
  endtask

  // FP16 of the priors, by hand: -5000 = ece2, -1000 = e3d0 (1.953125*2^9),
  // 0 = 0000, 1000 = 63d0, 2000 = 67d0, 5000 = 6ce2
  initial begin
    int cyc;
    logic [15:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    cyc = 0;
    while (init_busy) begin @(posedge clk); cyc++; end
    checks++;
    if (cyc < DEPTH - 2 || cyc > DEPTH + 2) begin failures++; $display("fill took %0d", cyc); end
    for (int m = 0; m < 1024; m += 37) begin
      rd(AW'({m[9:0], 5'd0}), d);  chk("tag0", d, 16'hecE2);
      rd(AW'({m[9:0], 5'd4}), d);  chk("tag4", d, 16'hE3D0);
      rd(AW'({m[9:0], 5'd5}), d);  chk("tag5", d, 16'h0000);
      rd(AW'({m[9:0], 5'd6}), d);  chk("tag6", d, 16'h63D0);
      rd(AW'({m[9:0], 5'd7}), d);  chk("tag7", d, 16'h67D0);
      rd(AW'({m[9:0], 5'd10}), d); chk("tag10", d, 16'h6CE2);
    end
    // random writes / reads
    for (int n = 0; n < 2000; n++) begin
      logic [AW-1:0] a;
      a = AW'($urandom);
      @(negedge clk); wr_en = 1; wr_addr = a; wr_data = 16'($urandom); shadow[int'(a)] = wr_data;
      @(negedge clk); wr_en = 0;
    end
    foreach (shadow[a]) begin
      rd(AW'(a), d); chk("readback", d, shadow[a]);
    end
    // read during write returns the old word
    @(negedge clk); wr_en = 1; wr_addr = 15'h1234; wr_data = 16'haaaa;
    @(negedge clk); wr_en = 1; wr_data = 16'h5555; rd_en = 1; rd_addr = 15'h1234;
    @(negedge clk); wr_en = 0; rd_en = 0; chk("rdw", rd_data, 16'haaaa);
    rd(15'h1234, d); chk("after", d, 16'h5555);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
