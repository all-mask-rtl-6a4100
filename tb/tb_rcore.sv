// tb_rcore: the rCore computes correctly only under the correct key.
//
// The testbench plays the role of the key routing and of the supply
// controller: it drives site_key and pulses fe_wr.  The correct site keys,
// from the replacement policies A B A B C B A D, are 0 0 0 0 1 0 0 1
// (site 0 first).  After each write the core is reset and runs the lock-site
// program in lockstep with the reference model, whose obfuscation mask is
// set to the sites whose key is wrong; PC and store bus are compared every
// cycle.  Checked: the correct key; each single wrong bit, which must also
// change the stored results; random wrong keys; that the configuration
// survives reset (non-volatile); that the key lines are ignored without
// fe_wr; and that with en low the core is halted.
module tb_rcore;
  import tb_mips_pkg::*;

  localparam logic [7:0] GOOD = 8'b1001_0000;

  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1, fe_wr = 1'b0;
  logic [7:0]  site_key = '0;
  logic [7:0]  imem_addr, dmem_addr;
  logic [31:0] imem_rdata, dmem_wdata, dmem_rdata, pc;
  logic        dmem_we;
  logic [31:0] prog [256];
  logic [31:0] dm   [256];
  logic [31:0] good_dm [12];
  int checks = 0, failures = 0;

  rcore dut (.*);

  always #5 clk = ~clk;
  assign imem_rdata = prog[imem_addr];
  assign dmem_rdata = dm[dmem_addr];
  always @(posedge clk) if (dmem_we) dm[dmem_addr] <= dmem_wdata;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  iss model = new(8);

  task automatic write_key(logic [7:0] k);
    @(negedge clk); site_key = k; fe_wr = 1'b1;
    @(negedge clk); fe_wr = 1'b0; site_key = ~k;   // lines move afterwards
  endtask

  // reset the core and run the program against the model with mask obf
  task automatic run_prog(logic [7:0] obf, int n);
    logic st; logic [31:0] sa, sd;
    foreach (dm[i]) begin dm[i] = '0; model.mem[i] = '0; end
    model.obf = obf;
    model.reset();
    @(negedge clk); rst_n = 1'b0;
    @(negedge clk); rst_n = 1'b1;
    for (int c = 0; c < n; c++) begin
      #1;
      check(pc == model.pc, $sformatf("pc, mask %b", obf));
      model.step(prog[model.pc[9:2]], st, sa, sd);
      check(dmem_we == st && (!st || (dmem_addr == sa[9:2] && dmem_wdata == sd)),
            $sformatf("store, mask %b", obf));
      @(negedge clk);
    end
  endtask

  function automatic bit results_differ();
    for (int i = 0; i < 12; i++) if (dm[i] != good_dm[i]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    key_test_prog(prog);
    // correct key
    write_key(GOOD);
    run_prog(8'h00, 40);
    for (int i = 0; i < 12; i++) good_dm[i] = dm[i];
    check(good_dm[1] == 32'h1298 && good_dm[10] == 32'd1, "unlocked results");
    // survives reset and ignores key lines without fe_wr
    site_key = 8'h5A;
    repeat (3) @(posedge clk);
    run_prog(8'h00, 40);
    check(!results_differ(), "configuration kept");
    // single wrong bits
    for (int s = 0; s < 8; s++) begin
      write_key(GOOD ^ 8'(1 << s));
      run_prog(8'(1 << s), 40);
      check(results_differ(), $sformatf("wrong key bit %0d changes the results", s));
    end
    // random wrong keys
    for (int t = 0; t < 20; t++) begin
      logic [7:0] k;
      k = 8'($urandom);
      write_key(k);
      run_prog(k ^ GOOD, 40);
    end
    // halt
    write_key(GOOD);
    run_prog(8'h00, 5);
    en = 1'b0;
    begin
      logic [31:0] pc_hold;
      pc_hold = pc;
      repeat (4) @(posedge clk);
      #1 check(pc == pc_hold && !dmem_we, "halted");
    end
    en = 1'b1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
