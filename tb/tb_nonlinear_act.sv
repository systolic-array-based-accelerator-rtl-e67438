// tb_nonlinear_act: drives the activation unit with sweeps and random words
// and compares each registered output, one cycle later, with the function
// definitions (ReLU, hard sigmoid, hard tanh, x*hard sigmoid, identity)
// evaluated in real arithmetic in the testbench.
module tb_nonlinear_act;
  localparam int W = 32, FRAC = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] func = 0;
  logic [W-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  nonlinear_act #(.W(W), .FRAC(FRAC)) dut (.*);

  function automatic real ref_f(int f, real x);
    real s;
    s = x / 4.0 + 0.5; if (s < 0.0) s = 0.0; if (s > 1.0) s = 1.0;
    case (f)
      1: return (x < 0.0) ? 0.0 : x;
      2: return s;
      3: return (x < -1.0) ? -1.0 : (x > 1.0) ? 1.0 : x;
      4: return x * s;
      default: return x;
    endcase
  endfunction

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real x, e, g;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int f = 0; f < 5; f++)
      for (int i = 0; i < 400; i++) begin
        int v;
        v = (i < 200) ? (i - 100) * 4096 : int'($urandom_range(0, 1 << 20)) - (1 << 19);
        func = 3'(f); in_valid = 1; in_data = W'(v);
        x = real'(v) / 65536.0;
        @(negedge clk);
        e = ref_f(f, x); g = real'(signed'(out_data)) / 65536.0;
        checks++;
        if (!out_valid || (g - e > 0.0001) || (e - g > 0.0001)) begin
          failures++; $display("FAIL f=%0d x=%f got %f exp %f", f, x, g, e);
        end
      end
    in_valid = 0; @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
