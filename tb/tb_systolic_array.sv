// tb_systolic_array: end-to-end checks of the LIMA-PE array with the mappings
// of the paper, on a (N+2) x (N+1) array with N = 3:
//   1. S4 layer (BWS row, FRI row, BWS/pass/sleep output rows, real data)
//   2. Liquid-S4 layer (TRI row) in complex arithmetic, after clear_state
//   3. GEMM, output-stationary (all PEs TOS), with readout
// Weights and mode words are shifted in through the west edge (Pre-Load).
// Outputs are compared with a reference recurrence / matrix product computed
// in the testbench with the same fixed-point rounding, and the first SSM output
// is checked to appear exactly N+2 cycles after the first input.
module tb_systolic_array;
  localparam int N = 3, ROWS = N + 2, COLS = N + 1, W = 32, FRAC = 16, H = 16;
  localparam int T = 24, K = 6;
  logic clk = 0, rst_n = 0, load = 0, clear_state = 0, clear_all = 0, readout = 0, cplx = 0;
  logic [ROWS-1:0][W-1:0] stat_in;
  logic [ROWS-1:0][2:0]   ctrl_in;
  logic [COLS-1:0][W-1:0] data_in, res_in, res_out;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  systolic_array #(.ROWS(ROWS), .COLS(COLS), .W(W), .FRAC(FRAC)) dut (.*);

  function automatic logic [W-1:0] rmul(logic [W-1:0] x, logic [W-1:0] y, logic c);
    longint xr, xi, yr, yi, re, im;
    if (!c) return W'((longint'(signed'(x)) * longint'(signed'(y))) >>> FRAC);
    xr = longint'(signed'(x[W-1:H])); xi = longint'(signed'(x[H-1:0]));
    yr = longint'(signed'(y[W-1:H])); yi = longint'(signed'(y[H-1:0]));
    re = (xr * yr - xi * yi) >>> (FRAC/2);
    im = (xr * yi + xi * yr) >>> (FRAC/2);
    return {re[H-1:0], im[H-1:0]};
  endfunction
  function automatic logic [W-1:0] radd(logic [W-1:0] x, logic [W-1:0] y, logic c);
    logic [H-1:0] hi, lo;
    if (!c) return x + y;
    hi = x[W-1:H] + y[W-1:H]; lo = x[H-1:0] + y[H-1:0];
    return {hi, lo};
  endfunction

  // per-PE preload image
  logic [2:0]   pm [ROWS][COLS];
  logic [W-1:0] pw [ROWS][COLS];

  task automatic preload();
    for (int k = 0; k < COLS; k++) begin
      @(negedge clk);
      load = 1;
      for (int r = 0; r < ROWS; r++) begin
        ctrl_in[r] = pm[r][COLS-1-k];
        stat_in[r] = pw[r][COLS-1-k];
      end
    end
    @(negedge clk); load = 0; stat_in = '0; ctrl_in = '0;
  endtask

  // S4 / Liquid-S4 mapping of the paper's Figure 7b
  task automatic map_ssm(logic tri_mode, logic [W-1:0] a[N+1], logic [W-1:0] b[N+1],
                         logic [W-1:0] cc[N+1]);
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        pm[r][c] = 3'b111; pw[r][c] = '0;
        if (r == 0 && c >= 1) begin pm[r][c] = 3'b001; pw[r][c] = b[c]; end
        if (r == 1 && c >= 1) begin pm[r][c] = tri_mode ? 3'b011 : 3'b010; pw[r][c] = a[c]; end
        if (r >= 2 && c == 0) begin pm[r][c] = 3'b001; pw[r][c] = cc[r-1]; end
        if (r >= 2 && c >= 1 && c <= N + 1 - r) pm[r][c] = 3'b000;
      end
  endtask

  function automatic logic [W-1:0] rnd_coef(logic c);
    logic [W-1:0] v;
    if (!c) begin v = W'($urandom_range(0, 60000)); if ($urandom_range(0, 1) == 1) v = -v; end
    else begin
      logic [H-1:0] re, im;
      re = H'($urandom_range(0, 200)); im = H'($urandom_range(0, 200));
      if ($urandom_range(0, 1) == 1) re = -re;
      if ($urandom_range(0, 1) == 1) im = -im;
      v = {re, im};
    end
    return v;
  endfunction

  task automatic run_ssm(logic tri_mode, logic cx);
    logic [W-1:0] a[N+1], b[N+1], cc[N+1], x[N+1], u[T], y[T], bu;
    int first_out;
    cplx = cx;
    for (int j = 1; j <= N; j++) begin
      a[j] = rnd_coef(cx); b[j] = rnd_coef(cx); cc[j] = rnd_coef(cx); x[j] = '0;
    end
    a[0] = '0; b[0] = '0; cc[0] = '0; x[0] = '0;
    map_ssm(tri_mode, a, b, cc);
    preload();
    for (int t = 0; t < T; t++) begin
      u[t] = rnd_coef(cx);
      y[t] = '0;
      for (int j = 1; j <= N; j++) begin
        bu = rmul(u[t], b[j], cx);
        x[j] = radd(bu, rmul(x[j], tri_mode ? radd(a[j], bu, cx) : a[j], cx), cx);
        y[t] = radd(y[t], rmul(x[j], cc[j], cx), cx);
      end
    end
    first_out = -1;
    fork
      begin
        for (int t = 0; t < T; t++) begin
          @(negedge clk); data_in = {COLS{u[t]}};
        end
        @(negedge clk); data_in = '0;
      end
      begin
        // cycle index 0 is the cycle in which u[0] is on data_in
        @(negedge clk);
        for (int cyc = 0; cyc < T + ROWS + 2; cyc++) begin
          @(negedge clk); #1;
          if (cyc + 1 >= ROWS && cyc + 1 - ROWS < T) begin
            checks++;
            if (res_out[0] !== y[cyc + 1 - ROWS]) begin
              failures++;
              $display("FAIL ssm tri=%0b cplx=%0b t=%0d got %h exp %h", tri_mode, cx,
                       cyc + 1 - ROWS, res_out[0], y[cyc + 1 - ROWS]);
            end
            if (first_out < 0) first_out = cyc + 1;
          end
        end
      end
    join
    checks++;
    if (first_out != N + 2) begin
      failures++; $display("FAIL first output after %0d cycles, expected %0d", first_out, N + 2);
    end
    // state reset between sequences, weights kept
    @(negedge clk); clear_state = 1;
    @(negedge clk); clear_state = 0;
  endtask

  task automatic run_gemm();
    logic [W-1:0] A[ROWS][K], B[K][COLS], C[ROWS][COLS];
    cplx = 0;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      pm[r][c] = 3'b100; pw[r][c] = '0; C[r][c] = '0;
    end
    @(negedge clk); clear_all = 1;
    @(negedge clk); clear_all = 0;
    preload();
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) A[r][k] = rnd_coef(0);
    for (int k = 0; k < K; k++) for (int c = 0; c < COLS; c++) B[k][c] = rnd_coef(0);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
      for (int k = 0; k < K; k++) C[r][c] = radd(C[r][c], rmul(A[r][k], B[k][c], 0), 0);
    for (int s = 0; s < K + ROWS + COLS - 2; s++) begin
      @(negedge clk);
      for (int r = 0; r < ROWS; r++) stat_in[r] = (s - r >= 0 && s - r < K) ? A[r][s-r] : '0;
      for (int c = 0; c < COLS; c++) res_in[c] = (s - c >= 0 && s - c < K) ? B[s-c][c] : '0;
    end
    @(negedge clk); stat_in = '0; res_in = '0; readout = 1;
    for (int j = 0; j < ROWS; j++) begin
      #1;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (res_out[c] !== C[ROWS-1-j][c]) begin
          failures++; $display("FAIL gemm C[%0d][%0d] got %h exp %h", ROWS-1-j, c, res_out[c],
                               C[ROWS-1-j][c]);
        end
      end
      @(negedge clk);
    end
    readout = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    stat_in = '0; ctrl_in = '0; data_in = '0; res_in = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run_ssm(0, 0);      // S4, real
    run_ssm(0, 1);      // S4, complex (same weights buffer reloaded)
    run_ssm(1, 1);      // Liquid-S4, complex
    run_ssm(1, 0);      // Liquid-S4, real
    run_gemm();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
