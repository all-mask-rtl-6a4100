// tb_allmask_rcpu: end-to-end lock and unlock of the multicore chip
// (T_WRITE = 20, ENDURANCE = 4; everything else at its default).
//
// The normal core (core 0) is loaded with the paper's key-generation
// sequence, the three rCores with the lock-site program.  The expected store
// sequence of each rCore is computed by the reference model with, as its
// obfuscation mask, the sites whose routed key bit is wrong; the key itself
// is predicted from the model of the normal core, the routing from an
// independent copy of the entanglement table.  Scenarios, each counted:
//   licence denied  raise without PUF licence: supply never leaves V_WORK
//   failed unlock   supply raised 3 cycles after reset, before the sequence
//                   has formed the key: rCores compute wrong results
//   aborted raise   request dropped before the write time: nothing written
//   stall           cores halted (no store, PC frozen) while at V_R
//   unlock          supply raised after the sequence: all rCores correct
//   wear-out        after ENDURANCE writes a wrong-key write has no effect
// A scenario that never happened counts as a failure.
module tb_allmask_rcpu;
  import tb_mips_pkg::*;

  localparam int unsigned TW = 20, ENDUR = 4, NR = 3;

  logic clk = 1'b0, rst_n = 1'b1, por_n = 1'b1;
  logic prog_we = 1'b0;
  logic [1:0] prog_core = '0;
  logic [7:0] prog_addr = '0;
  logic [31:0] prog_data = '0;
  logic raise_req = 1'b0, licence_ok = 1'b0;
  logic vdd_at_vr, worn_out;
  logic        out_we   [NR+1];
  logic [7:0]  out_addr [NR+1];
  logic [31:0] out_data [NR+1];
  int checks = 0, failures = 0;
  int n_denied = 0, n_fail_unlock = 0, n_abort = 0, n_stall = 0, n_unlock = 0, n_worn = 0;

  allmask_rcpu #(.T_WRITE(TW), .ENDURANCE(ENDUR)) dut (.*);

  always #5 clk = ~clk;

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

  // ------------------------------------------------------ store monitor
  logic [39:0] seen [NR+1][$];
  always @(posedge clk)
    for (int c = 0; c <= NR; c++)
      if (rst_n && out_we[c]) seen[c].push_back({out_addr[c], out_data[c]});

  // -------------------------------------------------- reference values
  // K number driving site s of rCore r (copy of the design's routing)
  int kmap [NR][8] = '{'{1, 2, 3, 4, 5, 6, 7, 8},
                       '{2, 3, 4, 6, 8, 7, 1, 5},
                       '{3, 4, 6, 7, 5, 1, 2, 8}};
  logic [7:0] site_good = 8'b1001_0000;      // site 7 .. site 0

  logic [31:0] p_key [256], p_test [256];
  iss model = new(8);

  // key K1..K8 (K1 first) after n instructions of the key sequence
  function automatic logic [7:0] key_after(int n);
    logic st; logic [31:0] sa, sd;
    model.obf = '0; model.reset();
    for (int i = 0; i < n; i++) model.step(p_key[model.pc[9:2]], st, sa, sd);
    return {model.r[2][0], model.r[9][0], model.r[4][1], model.r[10][3],
            model.r[4][3], model.r[6][0], model.r[8][2], model.r[3][0]};
  endfunction

  function automatic logic [7:0] mask_for(int r, logic [7:0] key);
    logic [7:0] m;
    for (int s = 0; s < 8; s++) m[s] = key[8 - kmap[r][s]] != site_good[s];
    return m;
  endfunction

  // expected stores of the lock-site program in n cycles under mask m
  task automatic expect_stores(logic [7:0] m, int n, ref logic [39:0] q [$]);
    logic st; logic [31:0] sa, sd;
    q = {};
    model.obf = m; model.reset();
    foreach (model.mem[i]) model.mem[i] = '0;
    for (int i = 0; i < n; i++) begin
      model.step(p_test[model.pc[9:2]], st, sa, sd);
      if (st) q.push_back({sa[9:2], sd});
    end
  endtask

  // --------------------------------------------------------- sequences
  task automatic load();
    key_test_prog(p_test);
    fig11_prog(p_key);
    for (int c = 0; c <= NR; c++)
      for (int a = 0; a < 64; a++) begin
        @(negedge clk);
        prog_we = 1'b1; prog_core = 2'(c); prog_addr = 8'(a);
        prog_data = (c == 0) ? p_key[a] : p_test[a];
      end
    @(negedge clk); prog_we = 1'b0;
  endtask

  task automatic restart();
    @(negedge clk); rst_n = 1'b0;
    for (int c = 0; c <= NR; c++) seen[c] = {};
    @(negedge clk); rst_n = 1'b1;
  endtask

  // raise for `hold` cycles; check the halt and count stalled cycles
  task automatic raise(int hold);
    logic [31:0] pc0;
    @(negedge clk); raise_req = 1'b1;
    @(negedge clk);
    pc0 = dut.g_rcore[0].u_rcore.pc;
    for (int c = 1; c < hold; c++) begin
      @(negedge clk);
      if (vdd_at_vr) begin
        bit quiet = 1'b1;
        for (int k = 0; k <= NR; k++) if (out_we[k]) quiet = 1'b0;
        check(quiet && dut.g_rcore[0].u_rcore.pc == pc0, "cores halted at V_R");
        n_stall++;
      end
    end
    raise_req = 1'b0;
    @(negedge clk);
  endtask

  // run the rCores from reset for n cycles; compare with masks for `key`
  // returns 1 if every rCore produced the unlocked results
  task automatic run_and_compare(logic [7:0] key, int n, output bit all_good);
    logic [39:0] exp_q [$], good_q [$];
    restart();
    repeat (n) @(negedge clk);
    expect_stores(8'h00, n, good_q);
    all_good = 1'b1;
    for (int r = 0; r < NR; r++) begin
      expect_stores(mask_for(r, key), n, exp_q);
      check(seen[r+1] == exp_q, $sformatf("rCore %0d stores match model", r));
      if (seen[r+1] != good_q) all_good = 1'b0;
    end
  endtask

  initial begin
    bit ok;
    logic [7:0] k_early, k_full;
    por_n = 1'b0; #1 por_n = 1'b1;
    load();
    k_full  = key_after(30);
    k_early = key_after(3);
    check(k_full == 8'b0000_1001, "model key");

    // licence denied
    restart();
    repeat (30) @(negedge clk);
    raise(TW + 10);
    check(!vdd_at_vr, "still at V_WORK");
    begin
      bit ever;
      ever = 1'b0;
      // raise() counts stall cycles only at V_R: none expected here
      if (n_stall == 0) n_denied++; else ever = 1'b1;
      check(!ever, "no V_R without licence");
    end
    licence_ok = 1'b1;

    // failed unlock: raise 3 instructions after reset
    restart();
    raise(TW + 5);     // first request cycle retires instruction 3
    run_and_compare(k_early, 60, ok);
    check(!ok, "early key leaves the rCores locked");
    if (!ok) n_fail_unlock++;

    // aborted raise: nothing written, rCores still locked
    restart();
    repeat (30) @(negedge clk);
    raise(TW / 2);
    run_and_compare(k_early, 60, ok);
    check(!ok, "aborted raise wrote nothing");
    if (!ok) n_abort++;

    // unlock
    restart();
    repeat (30) @(negedge clk);
    raise(TW + 5);
    run_and_compare(k_full, 60, ok);
    check(ok, "unlocked");
    if (ok) n_unlock++;
    // check the normal core's own results are unaffected: no stores
    check(seen[0].size() == 0, "key sequence stores nothing");

    // wear-out: two more good writes reach ENDURANCE = 4
    repeat (2) begin
      restart(); repeat (30) @(negedge clk); raise(TW + 5);
    end
    check(worn_out, "worn out");
    restart();
    raise(TW + 5);                     // would write the early key
    run_and_compare(k_full, 60, ok);
    check(ok, "worn-out devices keep their last state");
    if (ok && worn_out) n_worn++;

    $display("mechanisms: denied=%0d failed_unlock=%0d abort=%0d stall_cycles=%0d unlock=%0d worn=%0d",
             n_denied, n_fail_unlock, n_abort, n_stall, n_unlock, n_worn);
    check(n_denied > 0, "licence denial exercised");
    check(n_fail_unlock > 0, "failed unlock exercised");
    check(n_abort > 0, "aborted raise exercised");
    check(n_stall > 0, "stall exercised");
    check(n_unlock > 0, "unlock exercised");
    check(n_worn > 0, "wear-out exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
