// tb_layer_norm: feeds random vectors (and a constant vector, variance zero)
// to the layer-normalisation unit and compares every output element with an
// integer reference model of the same formula (truncating mean, variance,
// floor square root, truncating reciprocal), checks that in_ready drops while
// a vector is being processed and the processing time of one vector.
module tb_layer_norm;
  localparam int LEN = 8, W = 32, FRAC = 16;
  localparam int EXP_CYC = 1 + LEN + (2 * W / 2 + 1) + (2 * FRAC + W + 1) + LEN + 1;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready, out_valid;
  logic [LEN-1:0][W-1:0] in_vec = '0, out_vec;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  layer_norm #(.LEN(LEN), .W(W), .FRAC(FRAC)) dut (.*);

  function automatic longint isqrt(longint n);
    longint r;
    r = longint'($floor($sqrt(real'(n))));
    while (r * r > n) r--;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction

  task automatic run_vec(int mag, logic constant);
    longint x[LEN], d[LEN], sum, mean, acc, root, inv, e;
    int cyc;
    sum = 0;
    for (int i = 0; i < LEN; i++) begin
      x[i] = constant ? 12345 : longint'($urandom_range(0, 2 * mag)) - mag;
      in_vec[i] = W'(x[i]); sum += x[i];
    end
    mean = sum / LEN;
    acc = 0;
    for (int i = 0; i < LEN; i++) begin d[i] = x[i] - mean; acc += (d[i] * d[i]) >>> FRAC; end
    root = isqrt(((acc / LEN) + 1) << FRAC);
    inv = (longint'(1) << (2 * FRAC)) / root;
    @(negedge clk); in_valid = 1;
    @(negedge clk); in_valid = 0; cyc = 1;
    checks++; if (in_ready) begin failures++; $display("FAIL ready while busy"); end
    while (!out_valid) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != EXP_CYC) begin failures++; $display("FAIL took %0d cycles, expected %0d", cyc, EXP_CYC); end
    for (int i = 0; i < LEN; i++) begin
      e = (d[i] * inv) >>> FRAC;
      checks++;
      if (out_vec[i] !== W'(e)) begin
        failures++; $display("FAIL elem %0d got %0d exp %0d", i, signed'(out_vec[i]), e);
      end
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int k = 0; k < 30; k++) run_vec((k % 3 == 0) ? 1000 : (1 << 19), 1'b0);
    run_vec(0, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
