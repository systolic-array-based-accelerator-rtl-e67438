// nonlinear_act: on-chip non-linear activation unit at the array output.
//
// Applies one of ReLU, Sigmoid, TanH or SiLU (or nothing) to a W-bit real
// fixed-point word with FRAC fraction bits, one word per cycle, result
// registered (latency one cycle). The paper names these functions but not how
// they are computed; here they are the usual piecewise-linear "hard"
// approximations, chosen for their small logic:
//   sigmoid(x) ~ clamp(x/4 + 1/2, 0, 1)
//   tanh(x)    ~ clamp(x, -1, 1)
//   silu(x)    ~ x * sigmoid(x)   (with the sigmoid above)
module nonlinear_act #(
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [2:0]   func,     // 0 none, 1 ReLU, 2 sigmoid, 3 tanh, 4 SiLU
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         out_valid,
  output logic [W-1:0] out_data
);
  localparam logic signed [W-1:0] ONE  = W'(1) <<< FRAC;
  localparam logic signed [W-1:0] HALF = W'(1) <<< (FRAC - 1);

  logic signed [W-1:0]   x, hs, ht, y;
  logic signed [2*W-1:0] prod;

  always_comb begin
    x  = signed'(in_data);
    hs = (x >>> 2) + HALF;
    if (hs < 0)   hs = '0;
    if (hs > ONE) hs = ONE;
    ht = x;
    if (ht < -ONE) ht = -ONE;
    if (ht > ONE)  ht = ONE;
    prod = (2*W)'(x) * (2*W)'(hs);
    unique case (func)
      3'd1:    y = (x < 0) ? '0 : x;
      3'd2:    y = hs;
      3'd3:    y = ht;
      3'd4:    y = W'(prod >>> FRAC);
      default: y = x;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= in_valid;
      out_data  <= y;
    end
  end
endmodule
