// tb_lima_stat_buf: checks the stationary/control buffer: loads only with the
// Load enable, holds otherwise, forwards the moving operand in TOS mode on the
// Compute enable only, and is zeroed by clear_all and reset.
module tb_lima_stat_buf;
  logic clk = 0, rst_n = 0, clear_all = 0, load_en = 0, comp_en = 0;
  logic [31:0] stat_in, stat_q;
  logic [2:0] ctrl_in, ctrl_q;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lima_stat_buf #(.W(32)) dut (.*);

  task automatic expect_q(logic [31:0] s, logic [2:0] c, string what);
    checks++;
    if (stat_q !== s || ctrl_q !== c) begin
      failures++; $display("FAIL %s: got %h/%0d exp %h/%0d", what, stat_q, ctrl_q, s, c);
    end
  endtask

  initial begin
    repeat (1000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    stat_in = 0; ctrl_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    expect_q(0, 0, "reset");
    for (int i = 0; i < 20; i++) begin
      logic [31:0] s; logic [2:0] c;
      s = $urandom; c = 3'($urandom_range(0, 6));
      @(negedge clk); stat_in = s; ctrl_in = c; load_en = 1; comp_en = 0;
      @(negedge clk); load_en = 0; expect_q(s, c, "load");
      stat_in = ~s; ctrl_in = ~c;
      comp_en = 1;
      @(negedge clk); comp_en = 0;
      if (c == 3'b100) expect_q(~s, c, "tos forward");
      else expect_q(s, c, "hold");
    end
    @(negedge clk); stat_in = 32'h1234; ctrl_in = 3'b100; load_en = 1;
    @(negedge clk); load_en = 0; clear_all = 1;
    @(negedge clk); clear_all = 0; expect_q(0, 0, "clear_all");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
