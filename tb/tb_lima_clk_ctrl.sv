// tb_lima_clk_ctrl: exhaustive check of the PE clock controller over all
// load / control-word combinations against the rules: Load enable follows
// load, Compute enable only outside Pre-Load and not asleep, Sleep decoded
// from the all-ones control word, the two enables never both on.
module tb_lima_clk_ctrl;
  logic load, load_en, comp_en, sleep;
  logic [2:0] ctrl;
  int checks = 0, failures = 0;

  lima_clk_ctrl dut (.load(load), .ctrl_q(ctrl), .load_en(load_en), .comp_en(comp_en),
                     .sleep(sleep));

  initial begin
    #10000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int l = 0; l < 2; l++)
      for (int c = 0; c < 8; c++) begin
        load = l[0]; ctrl = c[2:0]; #1;
        checks += 4;
        if (sleep   !== (c == 7))            begin failures++; $display("FAIL sleep l=%0d c=%0d", l, c); end
        if (load_en !== l[0])                begin failures++; $display("FAIL load_en l=%0d c=%0d", l, c); end
        if (comp_en !== (l == 0 && c != 7))  begin failures++; $display("FAIL comp_en l=%0d c=%0d", l, c); end
        if (load_en && comp_en)              begin failures++; $display("FAIL both l=%0d c=%0d", l, c); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
