// tb_mips_core: self-checking test of the single-cycle core.
//
// The lock sites are closed here by hand-written gates, either the original
// gate or, per an obfuscation mask, the obfuscated one.  The core runs in
// lockstep with the reference model of tb_mips_pkg: every cycle the PC and
// the store bus are compared before the clock edge and all 32 registers
// after it.  Programs: the paper's key-generation sequence (final register
// values also checked against hand-computed numbers), the lock-site program
// under every single-site obfuscation, and random programs under random
// masks.  A stall with en low must freeze the PC and registers; one
// instruction per cycle is checked by the lockstep itself.
module tb_mips_core;
  import tb_mips_pkg::*;

  localparam int unsigned IAW = 8, DAW = 8;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  logic [IAW-1:0] imem_addr;
  logic [31:0]    imem_rdata;
  logic           dmem_we;
  logic [DAW-1:0] dmem_addr;
  logic [31:0]    dmem_wdata, dmem_rdata;
  logic [7:0]     site_f, site_g, site_y;
  logic [31:0]    pc_o;
  logic [31:0]    regs_o [32];

  logic [31:0] prog [256];
  logic [31:0] dm   [256];
  logic [7:0]  obf;
  int checks = 0, failures = 0;

  mips_core #(.IAW(IAW), .DAW(DAW)) dut (.*);

  always #5 clk = ~clk;

  assign imem_rdata = prog[imem_addr];
  assign dmem_rdata = dm[dmem_addr];
  always @(posedge clk) if (dmem_we) dm[dmem_addr] <= dmem_wdata;

  // site gates: A B A B C B A D (original / obfuscated)
  always_comb begin
    site_y[0] = obf[0] ? site_f[0] : (site_f[0] & site_g[0]);            // A
    site_y[1] = obf[1] ? (site_f[1] | site_g[1]) : site_f[1];            // B
    site_y[2] = obf[2] ? site_f[2] : (site_f[2] & site_g[2]);            // A
    site_y[3] = obf[3] ? (site_f[3] | site_g[3]) : site_f[3];            // B
    site_y[4] = obf[4] ? (site_f[4] & site_g[4]) : site_f[4];            // C
    site_y[5] = obf[5] ? (site_f[5] | site_g[5]) : site_f[5];            // B
    site_y[6] = obf[6] ? site_f[6] : (site_f[6] & site_g[6]);            // A
    site_y[7] = obf[7] ? site_f[7] : (site_f[7] | site_g[7]);            // D
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  iss model = new(DAW);

  task automatic start(logic [7:0] mask);
    obf = mask;
    model.obf = mask;
    model.reset();
    foreach (dm[i]) begin dm[i] = '0; model.mem[i] = '0; end
    rst_n = 1'b0;
    @(posedge clk); #1;
    rst_n = 1'b1;
  endtask

  task automatic run(int n);
    logic st; logic [31:0] sa, sd;
    for (int c = 0; c < n; c++) begin
      @(negedge clk);
      check(pc_o == model.pc, $sformatf("pc %h vs %h", pc_o, model.pc));
      model.step(prog[model.pc[IAW+1:2]], st, sa, sd);
      check(dmem_we == st, "store enable");
      if (st) check(dmem_addr == sa[DAW+1:2] && dmem_wdata == sd, "store address/data");
      @(posedge clk); #1;
      begin
        bit same = 1'b1;
        for (int i = 0; i < 32; i++) if (regs_o[i] != model.r[i]) same = 1'b0;
        check(same, $sformatf("register file, cycle %0d", c));
      end
    end
  endtask

  function automatic logic [31:0] rand_instr();
    logic [4:0] rs = 5'($urandom_range(0, 7)), rt = 5'($urandom_range(0, 7)),
                rd = 5'($urandom_range(0, 7)), sh = 5'($urandom);
    int sel = $urandom_range(0, 25);
    logic [5:0] fns [13] = '{6'h00, 6'h02, 6'h03, 6'h20, 6'h21, 6'h22, 6'h23,
                             6'h24, 6'h25, 6'h26, 6'h27, 6'h2a, 6'h2b};
    logic [5:0] ops [8]  = '{6'h08, 6'h09, 6'h0a, 6'h0b, 6'h0c, 6'h0d, 6'h0e, 6'h0f};
    int imm = int'($urandom_range(0, 65535));
    if (sel < 13) return enc_r(fns[sel], rd, rs, rt, sh);
    if (sel < 21) return enc_i(ops[sel-13], rt, rs, imm);
    if (sel == 21) return enc_i(6'h2b, rt, 5'd0, 4 * $urandom_range(0, 15));
    if (sel == 22) return enc_i(6'h23, rt, 5'd0, 4 * $urandom_range(0, 15));
    if (sel == 23) return enc_i(6'h04, rt, rs, $urandom_range(0, 3));
    if (sel == 24) return enc_i(6'h05, rt, rs, $urandom_range(0, 3));
    return enc_i(6'h08, rt, rs, int'($urandom_range(0, 40)) - 20);
  endfunction

  initial begin
    obf = '0;
    // 1. the paper's key-generation sequence
    fig11_prog(prog);
    start(8'h00);
    run(16);
    check(regs_o[A0] == 32'h0000_3039, "a0");
    check(regs_o[A1] == 32'hFFFF_CFC7, "a1");
    check(regs_o[A2] == 32'hCFC7_0000, "a2");
    check(regs_o[A3] == 32'hFFFF_CFC7, "a3");
    check(regs_o[T0] == 32'hCFC7_3039, "t0");
    check(regs_o[T1] == 32'hFFCF_C730, "t1");
    check(regs_o[T2] == 32'hFFFF_CFC7, "t2");
    check(regs_o[V0] == 32'd0, "v0");
    check(regs_o[V1] == 32'd1, "v1");
    check(pc_o == 32'd44, "loop pc");

    // 2. stall: en low freezes the core
    start(8'h00);
    run(3);
    en = 1'b0;
    begin
      logic [31:0] pc_hold, r1_hold;
      pc_hold = pc_o;
      r1_hold = regs_o[A0];
      repeat (5) @(posedge clk);
      #1 check(pc_o == pc_hold && regs_o[A0] == r1_hold && !dmem_we, "stall");
    end
    en = 1'b1;
    run(10);

    // 3. lock-site program, original and each single obfuscated site
    key_test_prog(prog);
    for (int s = -1; s < 8; s++) begin
      start(s < 0 ? 8'h00 : 8'(1 << s));
      run(40);
    end
    start(8'h00);
    run(30);
    check(dm[1] == 32'h1298 && dm[2] == 32'h8001 && dm[3] == 32'hFFFF_FFD0 &&
          dm[4] == 32'h00FF_FFFF && dm[5] == 32'hFFFF_FFFE && dm[6] == 32'd77 &&
          dm[8] == 32'h1234 && dm[9] == 32'h1234 && dm[10] == 32'd1 &&
          dm[11] == 32'hFFFF_FF9C, "lock-site program results");

    // 4. random programs under random masks
    for (int t = 0; t < 40; t++) begin
      foreach (prog[i]) prog[i] = rand_instr();
      start(t < 20 ? 8'h00 : 8'($urandom));
      run(150);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
