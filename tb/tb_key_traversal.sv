// tb_key_traversal: brute-force key search by random instruction sequences.
//
// An attacker without the designed sequence can only feed instructions to
// the normal core and hope that its key nodes pass through the right state.
// This testbench feeds the normal core one random ALU instruction per cycle
// (register fields over $0..$15, random immediates and shift amounts) for
// 200,000 cycles.  For every prefix length m = 1..8 it counts the cycles in
// which K1..Km equal the first m bits of the example key 0000_1001, and the
// cycle of the first such hit, and prints them: the frequency falls roughly
// geometrically with m, the trend of the paper's key-length experiment.
// It also records how many of the 2^m patterns of K1..Km were seen and the
// cycle at which all of them had been, the cost of traversing the key space
// through instructions, against 2^m cycles with a directly driven key port.
// Checked: the key equals the reference model's key nodes in every cycle,
// and the short prefixes (m <= 3) are reached at least once.
module tb_key_traversal;
  import tb_mips_pkg::*;

  localparam int NCYC = 200000;
  localparam logic [7:0] TARGET = 8'b0000_1001;

  logic clk = 1'b0, rst_n = 1'b1, en = 1'b1;
  logic [7:0]  imem_addr, dmem_addr;
  logic [31:0] imem_rdata, dmem_wdata;
  logic [31:0] dmem_rdata = '0;
  logic        dmem_we;
  logic [7:0]  key;
  int checks = 0, failures = 0, key_errors = 0;
  int hits [9];
  int first [9];
  bit seen [9][256];
  int n_seen [9];
  int all_seen [9];

  normal_core dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (NCYC + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  iss model = new(8);

  function automatic logic [31:0] rand_alu();
    logic [5:0] fns [11] = '{6'h00, 6'h02, 6'h03, 6'h20, 6'h21, 6'h22, 6'h24,
                             6'h25, 6'h26, 6'h2a, 6'h2b};
    logic [5:0] ops [7]  = '{6'h08, 6'h09, 6'h0a, 6'h0b, 6'h0c, 6'h0d, 6'h0f};
    logic [4:0] rs = 5'($urandom_range(0, 15)), rt = 5'($urandom_range(0, 15)),
                rd = 5'($urandom_range(0, 15));
    if ($urandom_range(0, 1) == 0)
      return enc_r(fns[$urandom_range(0, 10)], rd, rs, rt, 5'($urandom));
    return enc_i(ops[$urandom_range(0, 6)], rt, rs, int'($urandom_range(0, 65535)));
  endfunction

  initial begin
    logic st; logic [31:0] sa, sd;
    logic [7:0] mk;
    foreach (hits[m]) begin
      hits[m] = 0; first[m] = -1; n_seen[m] = 0; all_seen[m] = -1;
      foreach (seen[m][v]) seen[m][v] = 1'b0;
    end
    model.reset();
    rst_n = 1'b0; #1 rst_n = 1'b1;
    for (int c = 1; c <= NCYC; c++) begin
      @(negedge clk);
      imem_rdata = rand_alu();
      model.step(imem_rdata, st, sa, sd);
      @(posedge clk); #1;
      mk = {model.r[2][0], model.r[9][0], model.r[4][1], model.r[10][3],
            model.r[4][3], model.r[6][0], model.r[8][2], model.r[3][0]};
      if (key != mk) key_errors++;
      for (int m = 1; m <= 8; m++) begin
        int v;
        v = int'(key >> (8 - m));
        if (v == int'(TARGET >> (8 - m))) begin
          hits[m]++;
          if (first[m] < 0) first[m] = c;
        end
        if (!seen[m][v]) begin
          seen[m][v] = 1'b1;
          n_seen[m]++;
          if (n_seen[m] == (1 << m)) all_seen[m] = c;
        end
      end
    end
    checks++;
    if (key_errors != 0) begin
      failures++;
      $display("FAIL key differs from the model in %0d cycles", key_errors);
    end
    $display(" m  cycles matching K1..Km  frequency   first hit  patterns seen  all 2^m seen at");
    for (int m = 1; m <= 8; m++)
      $display("%2d  %10d            %.2e   %9d  %6d/%0d  %0d", m, hits[m],
               real'(hits[m]) / NCYC, first[m], n_seen[m], 1 << m, all_seen[m]);
    for (int m = 1; m <= 3; m++) begin
      checks++;
      if (hits[m] == 0) begin failures++; $display("FAIL prefix %0d never reached", m); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
