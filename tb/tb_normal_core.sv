// tb_normal_core: key generation by the normal core.
//
// The core runs the paper's 12-instruction example sequence.  Every cycle
// its key output is compared with the key nodes read from the reference
// model's registers (K1..K8 = $v0[0] $t1[0] $a0[1] $t2[3] $a0[3] $a2[0]
// $t0[2] $v1[0]).  The key must be 0 out of reset, must reach the example
// key 0000_1001 exactly when the tenth executed instruction (sltu) retires,
// i.e. 10 cycles after reset with one instruction per cycle, and must then
// stay there while the core spins in its final loop.  A random sequence
// must keep the key consistent with the model, and with en low the key
// must not move.
module tb_normal_core;
  import allmask_pkg::*;
  import tb_mips_pkg::*;

  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1;
  logic [7:0]  imem_addr, dmem_addr;
  logic [31:0] imem_rdata, dmem_wdata, dmem_rdata;
  logic        dmem_we;
  logic [7:0]  key;
  logic [31:0] prog [256];
  logic [31:0] dm   [256];
  int checks = 0, failures = 0;

  normal_core dut (.*);

  always #5 clk = ~clk;
  assign imem_rdata = prog[imem_addr];
  assign dmem_rdata = dm[dmem_addr];
  always @(posedge clk) if (dmem_we) dm[dmem_addr] <= dmem_wdata;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  iss model = new(8);

  function automatic logic [7:0] model_key();
    return {model.r[2][0], model.r[9][0], model.r[4][1], model.r[10][3],
            model.r[4][3], model.r[6][0], model.r[8][2], model.r[3][0]};
  endfunction

  task automatic step_and_check(output logic [7:0] k_now);
    logic st; logic [31:0] sa, sd;
    model.step(prog[model.pc[9:2]], st, sa, sd);
    @(posedge clk); #1;
    check(key == model_key(), $sformatf("key %b vs model %b", key, model_key()));
    k_now = key;
  endtask

  initial begin
    logic [7:0] k;
    int first_hit;
    foreach (dm[i]) begin dm[i] = '0; model.mem[i] = '0; end
    fig11_prog(prog);
    model.reset();
    rst_n = 1'b0;
    #1; check(key == 8'h00, "reset key");
    @(negedge clk); rst_n = 1'b1;
    first_hit = -1;
    for (int c = 1; c <= 30; c++) begin
      step_and_check(k);
      if (k == 8'b0000_1001 && first_hit < 0) first_hit = c;
    end
    check(first_hit == 10, $sformatf("example key first reached at cycle %0d", first_hit));
    check(key == 8'b0000_1001, "example key held in the loop");

    // en low: key nodes frozen
    en = 1'b0;
    repeat (4) @(posedge clk);
    #1 check(key == 8'b0000_1001, "key frozen while halted");
    en = 1'b1;

    // random sequences
    for (int t = 0; t < 10; t++) begin
      foreach (prog[i])
        prog[i] = ($urandom_range(0, 1) != 0)
                  ? enc_i(6'h08, 5'($urandom_range(2, 10)), 5'($urandom_range(0, 10)),
                          int'($urandom_range(0, 65535)))
                  : enc_r(6'h00 | 6'($urandom_range(0, 3) == 0 ? 6'h03 : 6'h20),
                          5'($urandom_range(2, 10)), 5'($urandom_range(0, 10)),
                          5'($urandom_range(0, 10)), 5'($urandom));
      model.reset();
      @(negedge clk); rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
      for (int c = 0; c < 100; c++) step_and_check(k);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
