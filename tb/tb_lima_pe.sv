// tb_lima_pe: checks one LIMA-PE as a whole: Pre-Load through the west port
// (and forwarding to the east port), no MAC while load is high, the FRI and
// TRI recurrences over several cycles, BWS, pass-through, Sleep (no update,
// zero outputs), clear_state (state cleared, weight kept) and clear_all.
module tb_lima_pe;
  localparam int W = 32, FRAC = 16;
  logic clk = 0, rst_n = 0, load = 0, clear_state = 0, clear_all = 0, readout = 0, cplx = 0;
  logic [W-1:0] stat_in = 0, stat_out, data_in = 0, data_out, res_in = 0, res_out;
  logic [2:0] ctrl_in = 0, ctrl_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lima_pe #(.W(W), .FRAC(FRAC)) dut (.*);

  function automatic logic [W-1:0] fx(real v); return W'($rtoi(v * 65536.0)); endfunction
  function automatic logic [W-1:0] rmul(logic [W-1:0] x, logic [W-1:0] y);
    return W'((longint'(signed'(x)) * longint'(signed'(y))) >>> FRAC);
  endfunction

  task automatic chk(logic [W-1:0] got, logic [W-1:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  task automatic do_load(logic [2:0] m, logic [W-1:0] w);
    // called right after a falling edge
    load = 1; ctrl_in = m; stat_in = w; data_in = 32'h5555; res_in = 32'h7777;
    @(negedge clk); load = 0; ctrl_in = 0; stat_in = 0;
    chk(W'(ctrl_out), W'(m), "ctrl_out after load"); chk(stat_out, w, "stat_out after load");
  endtask

  initial begin
    repeat (2000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [W-1:0] a, bu, x, x0;
    repeat (2) @(negedge clk); rst_n = 1;
    // FRI: x <= bu + a*x
    a = fx(0.75); x = 0;
    do_load(3'b010, a);
    chk(data_out, 0, "no MAC during load");
    for (int t = 0; t < 8; t++) begin
      bu = fx(0.125 * (t + 1));
      res_in = bu;
      @(negedge clk);
      x = bu + rmul(a, x);
      chk(data_out, x, "FRI state");
    end
    // clear_state keeps the weight
    clear_state = 1; @(negedge clk); clear_state = 0;
    chk(data_out, 0, "clear_state zeroes state"); chk(stat_out, a, "clear_state keeps weight");
    // TRI: x <= bu + (a+bu)*x
    do_load(3'b011, a); x = 0;
    for (int t = 0; t < 8; t++) begin
      bu = fx(-0.0625 * (t + 1));
      res_in = bu;
      @(negedge clk);
      x = bu + rmul(a + bu, x);
      chk(data_out, x, "TRI state");
    end
    // Sleep: state frozen, outputs zero
    x0 = x;
    do_load(3'b111, a);
    for (int t = 0; t < 3; t++) begin
      res_in = $urandom; data_in = $urandom; @(negedge clk);
      chk(data_out, 0, "sleep data_out"); chk(res_out, 0, "sleep res_out");
    end
    // BWS: result = res_in + w*data_in, registered
    do_load(3'b001, fx(2.0));
    data_in = fx(1.5); res_in = fx(0.25); @(negedge clk);
    chk(res_out, fx(3.25), "BWS result");
    // pass-through: both paths delayed one cycle, unchanged
    do_load(3'b000, fx(9.0));
    data_in = 32'hCAFE_0001; res_in = 32'hBEEF_0002; @(negedge clk);
    chk(data_out, 32'hCAFE_0001, "pass data"); chk(res_out, 32'hBEEF_0002, "pass result");
    // clear_all
    clear_all = 1; @(negedge clk); clear_all = 0;
    chk(stat_out, 0, "clear_all weight"); chk(W'(ctrl_out), 0, "clear_all ctrl");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
