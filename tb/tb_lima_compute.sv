// tb_lima_compute: cycle-by-cycle comparison of the PE compute unit with a
// reference model written from the MAC equations (FRI, TRI, BWS, TOS with
// readout, pass-through, sleep, clear), in real and complex arithmetic, under
// random operands and random mode changes. Also checks that each MAC result
// appears on its output one cycle after its operands (single-cycle MAC).
module tb_lima_compute;
  localparam int W = 32, FRAC = 16, H = 16;
  logic clk = 0, rst_n = 0, comp_en, clear_state, readout, cplx;
  logic [2:0] mode;
  logic [W-1:0] stat_buf, stat_in, data_in, res_in, data_out, res_out;
  int checks = 0, failures = 0;
  int mode_seen[8];
  always #5 clk = ~clk;

  lima_compute #(.W(W), .FRAC(FRAC)) dut (.*);

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

  // reference state
  logic [W-1:0] m_ps, m_fd, m_fr;

  task automatic step_model();
    logic [W-1:0] nps;
    nps = m_ps;
    if (clear_state) begin m_ps = 0; m_fd = 0; m_fr = 0; return; end
    if (!comp_en) return;
    case (mode)
      3'b001: nps = radd(res_in, rmul(data_in, stat_buf, cplx), cplx);                       // BWS
      3'b010: nps = radd(res_in, rmul(m_ps, stat_buf, cplx), cplx);                          // FRI
      3'b011: nps = radd(res_in, rmul(m_ps, radd(stat_buf, res_in, cplx), cplx), cplx);      // TRI
      3'b100: nps = readout ? res_in : radd(m_ps, rmul(stat_in, res_in, cplx), cplx);        // TOS
      default: ;
    endcase
    m_ps = nps; m_fd = data_in; m_fr = res_in;
  endtask

  task automatic check_out();
    logic [W-1:0] ed, er;
    if (mode == 3'b111) begin ed = 0; er = 0; end
    else begin
      ed = (mode == 3'b010 || mode == 3'b011) ? m_ps : m_fd;
      er = (mode == 3'b001 || (mode == 3'b100 && readout)) ? m_ps : m_fr;
    end
    checks++;
    if (data_out !== ed || res_out !== er) begin
      failures++;
      if (failures < 10)
        $display("FAIL t=%0t en=%0b clr=%0b mode=%0d cplx=%0b ro=%0b data %h/%h res %h/%h",
                 $time, comp_en, clear_state, mode, cplx, readout, data_out, ed, res_out, er);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    comp_en = 0; clear_state = 0; readout = 0; cplx = 0; mode = 0;
    stat_buf = 0; stat_in = 0; data_in = 0; res_in = 0;
    m_ps = 0; m_fd = 0; m_fr = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int blk = 0; blk < 300; blk++) begin
      logic [2:0] md; logic cx;
      md = 3'($urandom_range(0, 7)); cx = 1'($urandom);
      mode_seen[md]++;
      for (int k = 0; k < 12; k++) begin
        @(negedge clk);
        if (k == 0) begin
          stat_buf = $urandom >> 12;  // small coefficients keep the recurrences bounded
          if ($urandom_range(0, 1) == 1) stat_buf = -stat_buf;
        end
        mode = md; cplx = cx;
        comp_en = ($urandom_range(0, 9) != 0) && (md != 3'b111);
        clear_state = ($urandom_range(0, 40) == 0);
        readout = (md == 3'b100) && (k >= 8);
        data_in = $urandom; res_in = $urandom; stat_in = $urandom;
        #1 check_out();
        @(posedge clk); step_model();
      end
    end
    @(negedge clk); #1 check_out();
    for (int m = 0; m < 8; m++) if (mode_seen[m] == 0) begin
      failures++; $display("FAIL mode %0d never exercised", m);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
