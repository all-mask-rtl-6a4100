// tb_mips_pkg: test support shared by the core-level testbenches.
//
// * enc_r / enc_i / enc_j assemble MIPS instructions.
// * iss is an instruction-set reference model of the core, written from the
//   MIPS architecture, not from the RTL.  Its `obf` mask makes it behave as
//   the core does when lock site s computes its obfuscated function instead
//   of the original one (what each site does wrong is described next to obf).
// * fig11_prog is the 12-instruction key-generation sequence of the paper's
//   8-bit example; key_test_prog is a program that uses every lock site,
//   storing its results to data memory.
package tb_mips_pkg;

  function automatic logic [31:0] enc_r(logic [5:0] fn, logic [4:0] rd, logic [4:0] rs,
                                        logic [4:0] rt, logic [4:0] sh = 5'd0);
    return {6'h00, rs, rt, rd, sh, fn};
  endfunction

  function automatic logic [31:0] enc_i(logic [5:0] op, logic [4:0] rt, logic [4:0] rs,
                                        int imm);
    return {op, rs, rt, 16'(imm)};
  endfunction

  function automatic logic [31:0] enc_j(int unsigned word_target);
    return {6'h02, 26'(word_target)};
  endfunction

  // register numbers
  localparam logic [4:0] ZERO = 5'd0, V0 = 5'd2, V1 = 5'd3, A0 = 5'd4, A1 = 5'd5,
                         A2 = 5'd6, A3 = 5'd7, T0 = 5'd8, T1 = 5'd9, T2 = 5'd10;

  // Paper's example IIS (instruction [k] at word k-1)
  function automatic void fig11_prog(ref logic [31:0] p [256]);
    foreach (p[i]) p[i] = 32'h0000_0000;
    p[0]  = enc_i(6'h08, A0, ZERO, 12345);          // addi  $a0,$0,12345
    p[1]  = enc_i(6'h09, A1, ZERO, -12345);         // addiu $a1,$0,-12345
    p[2]  = enc_r(6'h00, A2, ZERO, A1, 5'd16);      // sll   $a2,$a1,16
    p[3]  = enc_r(6'h03, A3, ZERO, A2, 5'd16);      // sra   $a3,$a2,16
    p[4]  = enc_i(6'h04, A1, A3, 1);                // beq   $a3,$a1,L1
    p[5]  = enc_i(6'h0f, A0, ZERO, -11111);         // lui   $a0,-11111
    p[6]  = enc_r(6'h20, T0, A2, A0);               // L1: add $t0,$a2,$a0
    p[7]  = enc_r(6'h03, T1, ZERO, T0, 5'd8);       // sra   $t1,$t0,8
    p[8]  = enc_i(6'h08, T2, ZERO, -12345);         // addi  $t2,$0,-12345
    p[9]  = enc_r(6'h2a, V0, A0, T2);               // slt   $v0,$a0,$t2
    p[10] = enc_r(6'h2b, V1, A0, T2);               // sltu  $v1,$a0,$t2
    p[11] = enc_j(11);                              // Loop: j Loop
  endfunction

  // Program touching every lock site; results are stored at words 0..10.
  function automatic void key_test_prog(ref logic [31:0] p [256]);
    foreach (p[i]) p[i] = 32'h0000_0000;
    p[0]  = enc_i(6'h08, 5'd1, 5'd0, 32'h1234);     // addi  r1 = 0x1234
    p[1]  = enc_i(6'h08, 5'd2, 5'd0, -3);           // addi  r2 = -3
    p[2]  = enc_i(6'h09, 5'd3, 5'd1, 100);          // addiu r3 = r1+100    (site 3)
    p[3]  = enc_i(6'h0d, 5'd4, 5'd0, 32'h8001);     // ori   r4 = 0x8001    (site 2)
    p[4]  = enc_r(6'h00, 5'd5, 5'd0, 5'd2, 5'd4);   // sll   r5 = r2<<4     (site 4)
    p[5]  = enc_r(6'h02, 5'd6, 5'd0, 5'd2, 5'd8);   // srl   r6 = r2>>8     (site 6)
    p[6]  = enc_r(6'h03, 5'd7, 5'd0, 5'd2, 5'd1);   // sra   r7 = r2>>>1    (site 7)
    p[7]  = enc_i(6'h2b, 5'd1, 5'd0, 0);            // sw    r1 -> [0]      (site 1)
    p[8]  = enc_i(6'h04, 5'd2, 5'd1, 1);            // beq   r1,r2 (not taken, site 0)
    p[9]  = enc_i(6'h08, 5'd8, 5'd0, 77);           // addi  r8 = 77
    p[10] = enc_i(6'h04, 5'd3, 5'd3, 1);            // beq   r3,r3 (taken, site 5)
    p[11] = enc_i(6'h08, 5'd8, 5'd8, 1);            // addi  r8 += 1 (skipped)
    p[12] = enc_i(6'h23, 5'd9, 5'd0, 0);            // lw    r9 <- [0]
    p[13] = enc_i(6'h2b, 5'd3, 5'd0, 4);            // sw    r3 -> [1]
    p[14] = enc_i(6'h2b, 5'd4, 5'd0, 8);
    p[15] = enc_i(6'h2b, 5'd5, 5'd0, 12);
    p[16] = enc_i(6'h2b, 5'd6, 5'd0, 16);
    p[17] = enc_i(6'h2b, 5'd7, 5'd0, 20);
    p[18] = enc_i(6'h2b, 5'd8, 5'd0, 24);
    p[19] = enc_i(6'h2b, 5'd2, 5'd0, 28);
    p[20] = enc_i(6'h2b, 5'd1, 5'd0, 32);
    p[21] = enc_i(6'h2b, 5'd9, 5'd0, 36);
    p[22] = enc_r(6'h2a, 5'd10, 5'd2, 5'd1);        // slt   r10 = r2 < r1
    p[23] = enc_r(6'h22, 5'd11, 5'd1, 5'd3);        // sub   r11 = r1 - r3
    p[24] = enc_i(6'h2b, 5'd10, 5'd0, 40);
    p[25] = enc_i(6'h2b, 5'd11, 5'd0, 44);
    p[26] = enc_j(26);                              // loop
  endfunction

  // Reference model.  obf[s] = 1 makes lock site s compute its obfuscated
  // function:
  //   0 beq always taken          1 sw also writes rt with the address
  //   2 andi/ori/xori sign-extend 3 addiu subtracts
  //   4 shifts write rt, not rd   5 beq/bne compare rs with the immediate
  //   6 srl fills with rt[31]     7 sra is not a shift (rd = rs + rt)
  class iss;
    logic [31:0] r [32];
    logic [31:0] pc;
    logic [31:0] mem [256];
    logic [7:0]  obf;
    int unsigned daw;

    function new(int unsigned daw_bits = 8);
      daw = daw_bits;
      reset();
      obf = '0;
    endfunction

    function void reset();
      foreach (r[i]) r[i] = '0;
      pc = '0;
    endfunction

    // Execute one instruction.  st/st_addr/st_data describe a store.
    function void step(logic [31:0] ins, output logic st,
                       output logic [31:0] st_addr, output logic [31:0] st_data);
      logic [5:0]  op, fn;
      logic [4:0]  rs, rt, rd, sh, dst;
      logic [31:0] simm, zimm, limm, a, b, res, pcn, cmpb, addr;
      logic        wr, taken, fill;
      op = ins[31:26]; rs = ins[25:21]; rt = ins[20:16]; rd = ins[15:11];
      sh = ins[10:6]; fn = ins[5:0];
      simm = {{16{ins[15]}}, ins[15:0]};
      zimm = {16'h0, ins[15:0]};
      limm = obf[2] ? simm : zimm;
      a = r[rs]; b = r[rt];
      pcn = pc + 4;
      wr = 1'b0; dst = rt; res = '0; taken = 1'b0;
      st = 1'b0; st_addr = '0; st_data = '0;
      case (op)
        6'h00: begin
          wr = 1'b1;
          dst = rd;
          case (fn)
            6'h00: res = b << sh;
            6'h02: begin
              fill = obf[6] ? b[31] : 1'b0;
              res = 32'(({{32{fill}}, b}) >> sh);
            end
            6'h03: res = obf[7] ? a + b : 32'($signed(b) >>> sh);
            6'h20, 6'h21: res = a + b;
            6'h22, 6'h23: res = a - b;
            6'h24: res = a & b;
            6'h25: res = a | b;
            6'h26: res = a ^ b;
            6'h27: res = ~(a | b);
            6'h2a: res = {31'd0, $signed(a) < $signed(b)};
            6'h2b: res = {31'd0, a < b};
            default: res = a + b;
          endcase
          if (obf[4] && (fn == 6'h00 || fn == 6'h02 || fn == 6'h03)) dst = rt;
        end
        6'h08: begin wr = 1'b1; res = a + simm; end
        6'h09: begin wr = 1'b1; res = obf[3] ? a - simm : a + simm; end
        6'h0a: begin wr = 1'b1; res = {31'd0, $signed(a) < $signed(simm)}; end
        6'h0b: begin wr = 1'b1; res = {31'd0, a < simm}; end
        6'h0c: begin wr = 1'b1; res = a & limm; end
        6'h0d: begin wr = 1'b1; res = a | limm; end
        6'h0e: begin wr = 1'b1; res = a ^ limm; end
        6'h0f: begin wr = 1'b1; res = {ins[15:0], 16'h0}; end
        6'h23: begin
          wr = 1'b1;
          addr = a + simm;
          res = mem[addr[9:2] & 8'((1 << daw) - 1)];
        end
        6'h2b: begin
          addr = a + simm;
          st = 1'b1; st_addr = addr; st_data = b;
          mem[addr[9:2] & 8'((1 << daw) - 1)] = b;
          if (obf[1]) begin wr = 1'b1; res = addr; end
        end
        6'h04, 6'h05: begin
          cmpb = obf[5] ? simm : b;
          if (op == 6'h04) taken = obf[0] ? 1'b1 : (a == cmpb);
          else             taken = (a != cmpb);
        end
        default: ;
      endcase
      if (wr && dst != 5'd0) r[dst] = res;
      if (op == 6'h02)  pc = {pcn[31:28], ins[25:0], 2'b00};
      else if (taken)   pc = pcn + {simm[29:0], 2'b00};
      else              pc = pcn;
    endfunction
  endclass

endpackage
