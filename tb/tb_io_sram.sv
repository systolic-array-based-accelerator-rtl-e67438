// tb_io_sram: writes random words to random addresses of a reduced-depth I/O
// SRAM, then reads them back while new writes go on in parallel, checking the
// one-cycle read latency and that a read returns the last value written.
module tb_io_sram;
  localparam int W = 32, DEPTH = 256, AW = 8;
  logic clk = 0, rd_en = 0, wr_en = 0;
  logic [AW-1:0] rd_addr = 0, wr_addr = 0;
  logic [W-1:0]  rd_data, wr_data = 0;
  logic [W-1:0]  shadow [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  io_sram #(.W(W), .DEPTH(DEPTH), .AW(AW)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1; wr_addr = AW'(i); wr_data = $urandom; shadow[i] = wr_data; @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < 600; i++) begin
      logic [AW-1:0] ra, wa; logic [W-1:0] exp;
      ra = AW'($urandom); wa = ra + 1'b1;
      rd_en = 1; rd_addr = ra; exp = shadow[ra];
      wr_en = 1; wr_addr = wa; wr_data = $urandom;
      @(negedge clk);
      shadow[wa] = wr_data;
      rd_en = 0; wr_en = 0;
      checks++;
      if (rd_data !== exp) begin failures++; $display("FAIL addr %0d got %h exp %h", ra, rd_data, exp); end
      // read data holds while rd_en is low
      @(negedge clk);
      checks++;
      if (rd_data !== exp) begin failures++; $display("FAIL hold addr %0d", ra); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
