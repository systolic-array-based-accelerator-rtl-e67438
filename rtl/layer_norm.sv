// layer_norm: layer-normalisation unit for one vector of LEN real fixed-point
// words (W bits, FRAC fraction bits), for instance one row of a GEMM result.
//
//   mean = sum(x) / LEN
//   var  = sum((x - mean)^2) / LEN
//   y_i  = (x_i - mean) / sqrt(var + eps),   eps = one LSB
//
// The paper only names an on-chip layer-normalisation unit; this
// implementation is this design's own and uses one multiplier and small
// sequential units to stay small:
//   cycle 0        : the vector is captured (in_valid && in_ready) and the mean
//                    is formed by an adder tree and a constant division
//   LEN cycles     : squared deviations are accumulated, one element per cycle
//   RW/2 cycles    : bit-serial integer square root of the variance
//   2*FRAC+W cycles: restoring division giving 1/std
//   LEN cycles     : one element scaled per cycle
// then out_valid is high for one cycle with the whole vector. A new vector is
// accepted only while in_ready is high (idle). The learned scale and shift of
// a trained layer norm are left out (not described). Divisions and shifts
// truncate.
module layer_norm #(
  parameter int unsigned LEN  = 64,
  parameter int unsigned W    = 32,
  parameter int unsigned FRAC = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [LEN-1:0][W-1:0] in_vec,
  output logic                  out_valid,
  output logic [LEN-1:0][W-1:0] out_vec
);
  localparam int unsigned IW  = $clog2(LEN) + 1;
  localparam int unsigned AW  = 2 * W + IW;        // accumulator width
  localparam int unsigned RW  = 2 * W;             // square-root radicand width
  localparam int unsigned QW  = 2 * FRAC + W;      // dividend width for 1/std

  typedef enum logic [2:0] {L_IDLE, L_VAR, L_SQRT, L_DIV, L_SCALE, L_OUT} lstate_e;
  lstate_e st;

  logic [LEN-1:0][W-1:0] dev;        // x - mean
  logic [IW-1:0]         idx;
  logic [AW-1:0]         acc;
  logic [RW-1:0]         rad, root, rem_s;
  logic [6:0]            it;
  logic [QW-1:0]         quo, rem_d;
  logic [W-1:0]          den;

  // mean by adder tree
  logic signed [W+IW-1:0] sum_all;
  logic signed [W-1:0]    mean;
  always_comb begin
    sum_all = '0;
    for (int i = 0; i < LEN; i++) sum_all += (W+IW)'(signed'(in_vec[i]));
    mean = W'(sum_all / signed'((W+IW)'(LEN)));
  end

  // shared multiplier
  logic signed [W-1:0]   mul_a, mul_b;
  logic signed [2*W-1:0] mul_p;
  assign mul_p = (2*W)'(mul_a) * (2*W)'(mul_b);
  always_comb begin
    mul_a = signed'(dev[idx[IW-2:0]]);
    mul_b = (st == L_SCALE) ? signed'(quo[W-1:0]) : signed'(dev[idx[IW-2:0]]);
  end

  // bit-serial square root step (radicand rad, partial root, remainder)
  logic [RW-1:0] trial;
  logic [RW+1:0] rem_next;
  always_comb begin
    rem_next = {rem_s, rad[RW-1:RW-2]};
    trial    = {root[RW-3:0], 2'b01};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= L_IDLE; dev <= '0; idx <= '0; acc <= '0; rad <= '0; root <= '0; rem_s <= '0;
      it <= '0; quo <= '0; rem_d <= '0; den <= '0; out_vec <= '0; out_valid <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      unique case (st)
        L_IDLE: if (in_valid) begin
          for (int i = 0; i < LEN; i++) dev[i] <= in_vec[i] - mean;
          idx <= '0; acc <= '0; st <= L_VAR;
        end
        L_VAR: begin
          // squared deviation in FRAC fraction bits
          acc <= acc + AW'(unsigned'(mul_p >>> FRAC));
          idx <= idx + 1'b1;
          if (idx == IW'(LEN - 1)) begin
            idx <= '0; st <= L_SQRT;
          end
        end
        L_SQRT: begin
          if (it == 0) begin
            // var + eps, scaled by 2^FRAC so that the root keeps FRAC bits
            rad   <= RW'(((acc / AW'(LEN)) + 1'b1) << FRAC);
            root  <= '0;
            rem_s <= '0;
            it    <= 7'd1;
          end else begin
            rad <= rad << 2;
            if (rem_next >= (RW+2)'(trial)) begin
              rem_s <= RW'(rem_next - (RW+2)'(trial));
              root  <= {root[RW-2:0], 1'b1};
            end else begin
              rem_s <= RW'(rem_next);
              root  <= {root[RW-2:0], 1'b0};
            end
            if (it == 7'(RW / 2)) begin
              it <= '0; st <= L_DIV;
            end else it <= it + 1'b1;
          end
        end
        L_DIV: begin
          // 1/std with FRAC fraction bits: (1 << 2*FRAC) / std, restoring division
          if (it == 0) begin
            den   <= root[W-1:0];
            quo   <= QW'(1) << (2 * FRAC);
            rem_d <= '0;
            it    <= 7'd1;
          end else begin
            if ({rem_d[QW-2:0], quo[QW-1]} >= QW'(den)) begin
              rem_d <= {rem_d[QW-2:0], quo[QW-1]} - QW'(den);
              quo   <= {quo[QW-2:0], 1'b1};
            end else begin
              rem_d <= {rem_d[QW-2:0], quo[QW-1]};
              quo   <= {quo[QW-2:0], 1'b0};
            end
            if (it == 7'(QW)) begin
              it <= '0; idx <= '0; st <= L_SCALE;
            end else it <= it + 1'b1;
          end
        end
        L_SCALE: begin
          out_vec[idx[IW-2:0]] <= W'(mul_p >>> FRAC);
          idx <= idx + 1'b1;
          if (idx == IW'(LEN - 1)) begin
            idx <= '0; st <= L_OUT;
          end
        end
        L_OUT: begin
          out_valid <= 1'b1;
          st <= L_IDLE;
        end
        default: st <= L_IDLE;
      endcase
    end
  end

  assign in_ready = (st == L_IDLE);
endmodule
