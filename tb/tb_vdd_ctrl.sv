// tb_vdd_ctrl: supply sequencing for reconfiguration (T_WRITE = 7,
// ENDURANCE = 3 to keep it short).
//
// Checked, cycle by cycle against a counter kept here: a raise request
// without licence leaves the supply at V_WORK; with licence the supply is at
// V_R and the cores halted from the next cycle; fe_wr pulses exactly once,
// T_WRITE cycles after V_R was reached; an early release aborts with no
// write; the supply stays at V_R after the write until the request drops;
// after ENDURANCE writes worn_out rises and no further fe_wr is given.
module tb_vdd_ctrl;
  localparam int unsigned TW = 7, EN = 3;

  logic clk = 1'b0, rst_n = 1'b1, raise_req = 1'b0, licence_ok = 1'b0;
  logic vdd_at_vr, core_en, fe_wr, worn_out;
  int checks = 0, failures = 0;

  vdd_ctrl #(.T_WRITE(TW), .ENDURANCE(EN)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // hold the request for `hold` cycles; return how many fe_wr pulses were
  // seen and the cycle (counted from the first at V_R) of the first one
  task automatic raise(int hold, output int pulses, output int at);
    int vr_cycle;
    pulses = 0; at = -1; vr_cycle = -1;
    @(negedge clk); raise_req = 1'b1;
    for (int c = 0; c < hold; c++) begin
      @(negedge clk);
      if (vdd_at_vr && vr_cycle < 0) vr_cycle = c;
      check(vdd_at_vr == !core_en, "cores halted exactly while at V_R");
      if (fe_wr) begin
        pulses++;
        if (at < 0) at = c - vr_cycle;
      end
    end
    raise_req = 1'b0;
    @(negedge clk);
    check(!vdd_at_vr && core_en, "back at V_WORK after release");
  endtask

  initial begin
    int p, at;
    rst_n = 1'b0; #1; rst_n = 1'b1;
    check(!vdd_at_vr && core_en && !fe_wr && !worn_out, "reset state");
    // no licence
    raise(20, p, at);
    check(p == 0, "no write without licence");
    licence_ok = 1'b1;
    // first cycle at V_R
    @(negedge clk); raise_req = 1'b1;
    @(negedge clk); check(vdd_at_vr && !core_en, "V_R one cycle after request");
    raise_req = 1'b0; @(negedge clk); @(negedge clk);
    // abort before the write time
    raise(TW - 2, p, at);
    check(p == 0, "aborted raise does not write");
    // full writes
    for (int n = 0; n < EN; n++) begin
      check(!worn_out, "not worn yet");
      raise(TW + 10, p, at);
      check(p == 1, $sformatf("one write per raise (%0d)", p));
      check(at == TW - 1, $sformatf("write after T_WRITE cycles at V_R (%0d)", at + 1));
    end
    check(worn_out, "worn out after ENDURANCE writes");
    raise(TW + 10, p, at);
    check(p == 0, "no write once worn out");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
