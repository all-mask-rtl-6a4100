// tb_rgate: exhaustive test of both rGate types.
//
// For each type and each key level the gate is written (wr strobe), then all
// four input pairs are applied and the output compared with the expected
// truth table: type-1 gives F' after key 1 and (FG)' after key 0, type-2
// gives (F+G)' after key 1 and F' after key 0.  With wr low, changes on the
// key line must not change the function (non-volatile state, computing
// mode).  The paper's waveform example, the gate {B'/(AB)'} with F=B, G=A,
// is replayed with its printed input and output sequences.
module tb_rgate;
  import allmask_pkg::*;

  logic clk = 1'b0;
  logic wr = 1'b0, k = 1'b0, f = 1'b0, g = 1'b0;
  logic y1, y2;
  int checks = 0, failures = 0;

  rgate #(.TYPE(RG_TYPE1)) dut1 (.clk, .wr, .k, .f, .g, .y_n(y1));
  rgate #(.TYPE(RG_TYPE2)) dut2 (.clk, .wr, .k, .f, .g, .y_n(y2));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic write(logic key);
    @(negedge clk); k = key; wr = 1'b1;
    @(negedge clk); wr = 1'b0;
  endtask

  task automatic sweep(logic key);
    for (int v = 0; v < 4; v++) begin
      {f, g} = 2'(v);
      #1;
      check(y1 == (key ? !f : !(f && g)), $sformatf("type-1 key=%0d f=%0d g=%0d", key, f, g));
      check(y2 == (key ? !(f || g) : !f), $sformatf("type-2 key=%0d f=%0d g=%0d", key, f, g));
    end
  endtask

  initial begin
    for (int rep = 0; rep < 2; rep++) begin
      write(1'b1); sweep(1'b1);
      // key line toggling without a write: function unchanged
      k = 1'b0; repeat (3) @(posedge clk); sweep(1'b1);
      write(1'b0); sweep(1'b0);
      k = 1'b1; repeat (3) @(posedge clk); sweep(1'b0);
    end
    // waveform example: A = 0011, B = 0101 -> B' = 1010; then (AB)'
    begin
      logic [3:0] a_seq, b_seq, b2_seq, exp1, exp2;
      a_seq = 4'b0011; b_seq = 4'b0101; b2_seq = 4'b0110;
      exp1 = 4'b1010; exp2 = 4'b1101;
      write(1'b1);
      for (int i = 3; i >= 0; i--) begin
        g = a_seq[i]; f = b_seq[i]; #1;
        check(y1 == exp1[i], "waveform B'");
      end
      write(1'b0);
      for (int i = 3; i >= 0; i--) begin
        g = a_seq[i]; f = b2_seq[i]; #1;
        check(y1 == exp2[i], "waveform (AB)'");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
