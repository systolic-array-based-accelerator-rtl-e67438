// Shared body of the end-to-end testbenches of epochcore_top. The including
// module declares ROWS, COLS, W, FRAC, IO_DEPTH, W_DEPTH, T, K and instantiates
// the core as "dut" on the signals declared here.
//
// Sequence: the host fills the weight SRAM with an S4 mapping (Figure 7b
// layout for N = min(ROWS-2, COLS-1)), a Liquid-S4 mapping and an all-TOS GEMM
// mapping, fills the I/O SRAM with input sequences, then runs
//   1. S4, real, two sequences, ReLU activation
//   2. Liquid-S4, complex, one sequence, no activation
//   3. GEMM (output stationary) with skewed edge operands and readout
//   4. the same GEMM with layer-normalised result rows (readout stalls)
// and compares every output with a reference model in the testbench. It also
// checks the latency of the first result (ROWS cycles through the array, plus
// the SRAM read and the activation register), one result per cycle afterwards,
// and that each mechanism occurred: preload, sleep and pass-through PEs, FRI and
// TRI recurrences, complex mode, clear_state between sequences, ReLU clipping,
// GEMM readout, layer normalisation and readout stalls.
  localparam int H = W / 2;
  localparam int WW = ROWS * (W + 3);
  localparam int IAW = $clog2(IO_DEPTH), WAW = $clog2(W_DEPTH);
  localparam int N = (ROWS - 2 < COLS - 1) ? ROWS - 2 : COLS - 1;

  logic clk = 0, rst_n = 0, start = 0, cmd_gemm = 0, cmd_cplx = 0;
  logic [2:0] cmd_act = 0;
  logic cmd_ln = 0;
  logic [WAW-1:0] cmd_w_base = 0;
  logic [IAW-1:0] cmd_in_base = 0, cmd_out_base = 0, cmd_len = 0;
  logic [15:0] cmd_n_seq = 0;
  logic busy, done;
  logic host_w_we = 0, host_io_we = 0, host_io_re = 0;
  logic [WAW-1:0] host_w_addr = 0;
  logic [WW-1:0]  host_w_wdata = 0;
  logic [IAW-1:0] host_io_addr = 0;
  logic [W-1:0]   host_io_wdata = 0, host_io_rdata;
  logic gemm_step, gemm_res_valid;
  logic [ROWS-1:0][W-1:0] gemm_a = '0;
  logic [COLS-1:0][W-1:0] gemm_b = '0, gemm_res;
  int checks = 0, failures = 0;
  int ev_preload = 0, ev_sleep = 0, ev_pass = 0, ev_fri = 0, ev_tri = 0, ev_cplx = 0;
  int ev_clear_state = 0, ev_relu = 0, ev_readout = 0, ev_ln = 0, ev_stall = 0;
  always #5 clk = ~clk;

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
  function automatic logic [W-1:0] rnd_val(logic c);
    logic [W-1:0] v;
    logic [H-1:0] re, im;
    if (!c) begin v = W'($urandom_range(0, 60000)); if ($urandom_range(0, 1) == 1) v = -v; end
    else begin
      re = H'($urandom_range(0, 200)); im = H'($urandom_range(0, 200));
      if ($urandom_range(0, 1) == 1) re = -re;
      if ($urandom_range(0, 1) == 1) im = -im;
      v = {re, im};
    end
    return v;
  endfunction

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  logic [2:0]   pm [ROWS][COLS];
  logic [W-1:0] pw [ROWS][COLS];

  // weight SRAM words: word base+k holds array column COLS-1-k
  task automatic write_mapping(int base);
    logic [WW-1:0] word;
    for (int k = 0; k < COLS; k++) begin
      word = '0;
      for (int r = 0; r < ROWS; r++) begin
        word[r*(W+3) +: W]   = pw[r][COLS-1-k];
        word[r*(W+3)+W +: 3] = pm[r][COLS-1-k];
      end
      @(negedge clk); host_w_we = 1; host_w_addr = WAW'(base + k); host_w_wdata = word;
    end
    @(negedge clk); host_w_we = 0;
  endtask

  logic [W-1:0] ca [2][N+1], cb [2][N+1], ccf [2][N+1];

  task automatic map_ssm(int which, logic tri_mode, logic cx);
    for (int j = 0; j <= N; j++) begin
      ca[which][j] = rnd_val(cx); cb[which][j] = rnd_val(cx); ccf[which][j] = rnd_val(cx);
    end
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++) begin
        pm[r][c] = 3'b111; pw[r][c] = '0;
        if (r == 0 && c >= 1 && c <= N) begin pm[r][c] = 3'b001; pw[r][c] = cb[which][c]; end
        if (r == 1 && c >= 1 && c <= N) begin
          pm[r][c] = tri_mode ? 3'b011 : 3'b010; pw[r][c] = ca[which][c];
        end
        if (r >= 2 && r <= N + 1 && c == 0) begin pm[r][c] = 3'b001; pw[r][c] = ccf[which][r-1]; end
        if (r > N + 1 && c == 0) pm[r][c] = 3'b000;
        if (r >= 2 && c >= 1 && c <= N + 1 - r) pm[r][c] = 3'b000;
      end
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      if (pm[r][c] == 3'b111) ev_sleep++;
      if (pm[r][c] == 3'b000) ev_pass++;
    end
  endtask

  task automatic host_write_io(int addr, logic [W-1:0] v);
    @(negedge clk); host_io_we = 1; host_io_addr = IAW'(addr); host_io_wdata = v;
    @(negedge clk); host_io_we = 0;
  endtask
  task automatic host_read_io(int addr, output logic [W-1:0] v);
    @(negedge clk); host_io_re = 1; host_io_addr = IAW'(addr);
    @(negedge clk); host_io_re = 0; v = host_io_rdata;
  endtask

  // latency / throughput probes
  int cyc = 0, first_rd = -1, first_wr = -1, last_wr = -1, n_wr = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (dut.u_ctrl.io_rd_en && first_rd < 0) first_rd <= cyc;
    if (dut.act_valid) begin
      if (first_wr < 0) first_wr <= cyc;
      last_wr <= cyc; n_wr <= n_wr + 1;
    end
    // counted only after reset (registers start at arbitrary values)
    if (rst_n) begin
      if (dut.sa_clear_state) ev_clear_state++;
      if (dut.sa_load) ev_preload++;
      if (gemm_res_valid) ev_readout++;
      if (dut.ro_stall) ev_stall++;
    end
  end

  // reference layer normalisation of one row (same integer formula as the unit)
  function automatic longint isqrt(longint n);
    longint r;
    r = longint'($floor($sqrt(real'(n))));
    while (r * r > n) r--;
    while ((r + 1) * (r + 1) <= n) r++;
    return r;
  endfunction

  task automatic ref_ln(ref logic [W-1:0] row[COLS]);
    longint x, d[COLS], sum, mean, acc, root, inv;
    sum = 0;
    for (int i = 0; i < COLS; i++) sum += longint'(signed'(row[i]));
    mean = sum / longint'(COLS);
    acc = 0;
    for (int i = 0; i < COLS; i++) begin
      x = longint'(signed'(row[i])); d[i] = x - mean; acc += (d[i] * d[i]) >>> FRAC;
    end
    root = isqrt(((acc / longint'(COLS)) + 1) << FRAC);
    inv = (longint'(1) << (2 * FRAC)) / root;
    for (int i = 0; i < COLS; i++) row[i] = W'((d[i] * inv) >>> FRAC);
  endtask

  task automatic run_ssm(int which, logic tri_mode, logic cx, logic [2:0] act, int nseq);
    logic [W-1:0] u, bu, y, got, x[N+1];
    int in_base, out_base;
    in_base = 16; out_base = 16 + 2 * T;
    // inputs
    for (int s = 0; s < nseq; s++) for (int t = 0; t < T; t++)
      host_write_io(in_base + s * T + t, rnd_val(cx));
    first_rd = -1; first_wr = -1; n_wr = 0;
    @(negedge clk);
    cmd_gemm = 0; cmd_cplx = cx; cmd_act = act; cmd_w_base = WAW'(which * COLS);
    cmd_in_base = IAW'(in_base); cmd_out_base = IAW'(out_base); cmd_len = IAW'(T);
    cmd_n_seq = 16'(nseq); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk(first_wr - first_rd == ROWS + 2, $sformatf("first result latency %0d", first_wr - first_rd));
    chk(n_wr == nseq * T, "result count");
    if (nseq == 1) chk(last_wr - first_wr == T - 1, "one result per cycle");
    // reference
    for (int s = 0; s < nseq; s++) begin
      for (int j = 0; j <= N; j++) x[j] = '0;
      for (int t = 0; t < T; t++) begin
        host_read_io(in_base + s * T + t, u);
        y = '0;
        for (int j = 1; j <= N; j++) begin
          bu = rmul(u, cb[which][j], cx);
          x[j] = radd(bu, rmul(x[j], tri_mode ? radd(ca[which][j], bu, cx) : ca[which][j], cx), cx);
          y = radd(y, rmul(x[j], ccf[which][j], cx), cx);
        end
        if (act == 3'd1 && signed'(y) < 0) begin y = '0; ev_relu++; end
        host_read_io(out_base + s * T + t, got);
        chk(got === y, $sformatf("ssm seq %0d t %0d got %h exp %h", s, t, got, y));
      end
    end
    if (tri_mode) ev_tri++; else ev_fri++;
    if (cx) ev_cplx++;
  endtask

  task automatic run_gemm(int base, logic ln);
    logic [W-1:0] A[ROWS][K], B[K][COLS], C[ROWS][COLS], row[COLS];
    int s, j;
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++) begin
      pm[r][c] = 3'b100; pw[r][c] = '0; C[r][c] = '0;
    end
    write_mapping(base);
    for (int r = 0; r < ROWS; r++) for (int k = 0; k < K; k++) A[r][k] = rnd_val(0);
    for (int k = 0; k < K; k++) for (int c = 0; c < COLS; c++) B[k][c] = rnd_val(0);
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < COLS; c++)
      for (int k = 0; k < K; k++) C[r][c] = radd(C[r][c], rmul(A[r][k], B[k][c], 0), 0);
    if (ln) for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) row[c] = C[r][c];
      ref_ln(row);
      for (int c = 0; c < COLS; c++) C[r][c] = row[c];
    end
    @(negedge clk);
    cmd_gemm = 1; cmd_cplx = 0; cmd_act = 0; cmd_ln = ln; cmd_w_base = WAW'(base); cmd_len = IAW'(K);
    start = 1;
    @(negedge clk); start = 0;
    s = 0; j = 0;
    while (!done) begin
      // operands for step s are presented in the cycle in which gemm_step is high
      for (int r = 0; r < ROWS; r++) gemm_a[r] = (s - r >= 0 && s - r < K) ? A[r][s-r] : '0;
      for (int c = 0; c < COLS; c++) gemm_b[c] = (s - c >= 0 && s - c < K) ? B[s-c][c] : '0;
      #1;
      if (gemm_step) s++;
      if (gemm_res_valid) begin
        for (int c = 0; c < COLS; c++)
          chk(gemm_res[c] === C[ROWS-1-j][c], $sformatf("gemm C[%0d][%0d]", ROWS-1-j, c));
        j++;
      end
      @(negedge clk);
    end
    chk(s == K + ROWS + COLS - 2, "gemm steps");
    chk(j == ROWS, "gemm rows read out");
    if (ln) ev_ln += j;
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    map_ssm(0, 0, 0); write_mapping(0);
    map_ssm(1, 1, 1); write_mapping(COLS);
    run_ssm(0, 0, 0, 3'd1, 2);   // S4, real, ReLU, two sequences
    run_ssm(1, 1, 1, 3'd0, 1);   // Liquid-S4, complex
    run_gemm(2 * COLS, 1'b0);    // GEMM, output stationary
    run_gemm(2 * COLS, 1'b1);    // GEMM with layer-normalised result rows
    chk(ev_preload == 4 * COLS, "preload cycles");
    chk(ev_sleep > 0, "sleep PEs used");
    chk(ev_pass > 0, "pass-through PEs used");
    chk(ev_fri > 0 && ev_tri > 0, "FRI and TRI runs");
    chk(ev_cplx > 0, "complex run");
    chk(ev_clear_state >= 3, "clear_state between sequences");
    chk(ev_relu > 0, "ReLU clipped");
    chk(ev_readout == 2 * ROWS, "readout rows");
    chk(ev_ln == ROWS, "layer-normalised rows");
    chk(ev_stall > 0, "readout held back by layer norm");
    $display("events: preload=%0d sleepPE=%0d passPE=%0d fri=%0d tri=%0d cplx=%0d clear_state=%0d relu=%0d readout=%0d ln=%0d stall=%0d",
             ev_preload, ev_sleep, ev_pass, ev_fri, ev_tri, ev_cplx, ev_clear_state, ev_relu, ev_readout,
             ev_ln, ev_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
