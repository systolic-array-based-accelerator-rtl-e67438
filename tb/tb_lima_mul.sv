// tb_lima_mul: self-checking test of the unified real/complex multiplier.
// Random and corner operands in both formats are compared with a reference
// computed from full-width signed products of the whole words (real) or of the
// separate real/imaginary halves (complex).
module tb_lima_mul;
  localparam int W = 32, FRAC = 16, H = 16;
  logic [W-1:0] a, b, p;
  logic cplx;
  int checks = 0, failures = 0;

  lima_mul #(.W(W), .FRAC(FRAC)) dut (.a(a), .b(b), .cplx(cplx), .p(p));

  function automatic logic [W-1:0] ref_mul(logic [W-1:0] x, logic [W-1:0] y, logic c);
    longint xr, xi, yr, yi, re, im, full;
    if (!c) begin
      full = longint'(signed'(x)) * longint'(signed'(y));
      return W'(full >>> FRAC);
    end
    xr = longint'(signed'(x[W-1:H])); xi = longint'(signed'(x[H-1:0]));
    yr = longint'(signed'(y[W-1:H])); yi = longint'(signed'(y[H-1:0]));
    re = (xr * yr - xi * yi) >>> (FRAC/2);
    im = (xr * yi + xi * yr) >>> (FRAC/2);
    return {re[H-1:0], im[H-1:0]};
  endfunction

  task automatic check(logic [W-1:0] x, logic [W-1:0] y, logic c);
    a = x; b = y; cplx = c; #1;
    checks++;
    if (p !== ref_mul(x, y, c)) begin
      failures++;
      $display("FAIL cplx=%0b a=%h b=%h got %h exp %h", c, x, y, p, ref_mul(x, y, c));
    end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    check(32'h0001_0000, 32'h0001_0000, 0);   // 1.0 * 1.0
    check(32'hFFFF_0000, 32'h0002_8000, 0);   // -1.0 * 2.5
    check(32'h8000_0000, 32'h8000_0000, 0);
    check(32'h0100_0000, 32'hFF00_0000, 1);   // (1+0j)*(-1+0j)
    check(32'h0000_0100, 32'h0000_0100, 1);   // j*j = -1
    check(32'h8000_8000, 32'h7FFF_8000, 1);
    for (int i = 0; i < 2000; i++) check($urandom, $urandom, i[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
