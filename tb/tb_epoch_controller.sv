// tb_epoch_controller: runs an SSM command (two sequences) and a GEMM command
// through the controller with a small array size, emulating the array's
// result latency, and checks the phase order and lengths: one Reset cycle,
// COLS weight reads at consecutive addresses with load one cycle later, one
// input read per cycle at consecutive addresses, the clear_state between
// sequences, write addresses, the GEMM step count and the readout length,
// with the readout randomly held back by ro_ready.
module tb_epoch_controller;
  localparam int ROWS = 4, COLS = 3, IAW = 10, WAW = 6, LAT = ROWS + 1;
  logic clk = 0, rst_n = 0, start = 0, cmd_gemm = 0, cmd_cplx = 0;
  logic [WAW-1:0] cmd_w_base = 0;
  logic [IAW-1:0] cmd_in_base = 0, cmd_out_base = 0, cmd_len = 0;
  logic [15:0] cmd_n_seq = 0;
  logic busy, done, sa_load, sa_clear_state, sa_clear_all, sa_readout, sa_cplx, gemm_step;
  logic w_rd_en, io_rd_en, in_valid, res_valid, ssm_mode, ro_ready = 1, ro_stall;
  int n_stall;
  logic [WAW-1:0] w_rd_addr;
  logic [IAW-1:0] io_rd_addr, io_wr_addr;
  logic [LAT-1:0] pipe = 0;
  int checks = 0, failures = 0;
  int n_clr_all, n_wrd, n_load, n_rd, n_clr_state, n_wr, n_step, n_ro, n_done;
  int exp_w, exp_rd, exp_wr, load_lag;
  logic prev_wrd;
  always #5 clk = ~clk;

  epoch_controller #(.ROWS(ROWS), .COLS(COLS), .IAW(IAW), .WAW(WAW)) dut (.*);

  // result valid LAT cycles after an input is at the array
  always_ff @(posedge clk) pipe <= {pipe[LAT-2:0], in_valid};
  assign res_valid = pipe[LAT-1];

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(negedge clk) if (rst_n) begin
    if (sa_clear_all) n_clr_all++;
    if (sa_clear_state) n_clr_state++;
    if (w_rd_en) begin
      chk(w_rd_addr == WAW'(exp_w), "weight address"); exp_w++; n_wrd++;
    end
    if (sa_load) begin
      chk(prev_wrd, "load follows a weight read"); n_load++;
    end
    prev_wrd = w_rd_en;
    if (io_rd_en) begin chk(io_rd_addr == IAW'(exp_rd), "input address"); exp_rd++; n_rd++; end
    if (res_valid) begin chk(io_wr_addr == IAW'(exp_wr), "output address"); exp_wr++; n_wr++; end
    if (gemm_step) n_step++;
    if (sa_readout) n_ro++;
    if (ro_stall) begin n_stall++; chk(!sa_readout, "no readout while stalled"); end
    ro_ready = ($urandom_range(0, 2) != 0);
    if (done) n_done++;
    if (sa_load) chk(!io_rd_en && !gemm_step, "load exclusive");
  end

  task automatic clear_counts();
    n_clr_all = 0; n_wrd = 0; n_load = 0; n_rd = 0; n_clr_state = 0; n_wr = 0; n_step = 0;
    n_ro = 0; n_done = 0; n_stall = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    prev_wrd = 0;
    clear_counts();
    repeat (2) @(negedge clk); rst_n = 1;
    // SSM: 2 sequences of 7
    exp_w = 5; exp_rd = 100; exp_wr = 300;
    cmd_gemm = 0; cmd_cplx = 1; cmd_w_base = 5; cmd_in_base = 100; cmd_out_base = 300;
    cmd_len = 7; cmd_n_seq = 2; start = 1;
    @(negedge clk); start = 0;
    chk(busy, "busy after start");
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(n_clr_all == 1, "one reset cycle");
    chk(n_wrd == COLS && n_load == COLS, "COLS preload cycles");
    chk(n_rd == 14, "inputs read");
    chk(n_wr == 14, "outputs written");
    chk(n_clr_state == 2, "clear_state after each sequence");
    chk(n_done == 1 && !busy, "done once, idle");
    chk(sa_cplx == 1, "complex flag");
    // GEMM with depth 5
    clear_counts(); exp_w = 0;
    cmd_gemm = 1; cmd_cplx = 0; cmd_w_base = 0; cmd_len = 5; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
    chk(n_step == 5 + ROWS + COLS - 2, "GEMM step count");
    chk(n_ro == ROWS, "readout length");
    chk(n_stall > 0, "readout stalled at least once");
    chk(n_rd == 0 && n_wrd == COLS, "GEMM preload only");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
