// allmask_pkg: shared types and constants of the ALL-MASK multicore lock.
//
// The chip holds one normal core (no reconfigurable gates) and several
// rCores.  Each rCore has N_SITES of its AND/OR gates replaced by FeFET
// reconfigurable gates (rGates).  The key that configures them is never
// stored: it is K_BITS internal nodes of the normal core, read live while
// the supply is raised.  This package gathers:
//   * the MIPS opcodes and function codes the cores execute,
//   * the two rGate structures (type-1: F'/(FG)', type-2: F'/(F+G)') and the
//     four replacement policies A..D of an AND/OR gate,
//   * the lock sites of the core: which gate each is, and its policy,
//   * the key nodes tapped in the normal core,
//   * the wire-entanglement table that routes key bits to rCore sites.
// Key bits are numbered K1..K8 as in the paper's 8-bit example; in a vector
// K1 is the most significant bit, so the example key reads 8'b0000_1001.
// The choice of sites, key nodes and routing is this design's own: the paper
// states that nodes and gate positions are chosen by the designer and gives
// only the replacement rules and the 8-bit example.
package allmask_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned K_BITS  = 8;  // key length of the paper's example
  localparam int unsigned N_SITES = 8;  // rGates per rCore (one per key bit)

  // ------------------------------------------------------------ MIPS ISA
  localparam logic [5:0] OP_RTYPE = 6'h00;
  localparam logic [5:0] OP_J     = 6'h02;
  localparam logic [5:0] OP_BEQ   = 6'h04;
  localparam logic [5:0] OP_BNE   = 6'h05;
  localparam logic [5:0] OP_ADDI  = 6'h08;
  localparam logic [5:0] OP_ADDIU = 6'h09;
  localparam logic [5:0] OP_SLTI  = 6'h0a;
  localparam logic [5:0] OP_SLTIU = 6'h0b;
  localparam logic [5:0] OP_ANDI  = 6'h0c;
  localparam logic [5:0] OP_ORI   = 6'h0d;
  localparam logic [5:0] OP_XORI  = 6'h0e;
  localparam logic [5:0] OP_LUI   = 6'h0f;
  localparam logic [5:0] OP_LW    = 6'h23;
  localparam logic [5:0] OP_SW    = 6'h2b;

  localparam logic [5:0] FN_SLL  = 6'h00;
  localparam logic [5:0] FN_SRL  = 6'h02;
  localparam logic [5:0] FN_SRA  = 6'h03;
  // add (6'h20) and addu (6'h21) are the ALU's default operation
  localparam logic [5:0] FN_SUB  = 6'h22;
  localparam logic [5:0] FN_SUBU = 6'h23;
  localparam logic [5:0] FN_AND  = 6'h24;
  localparam logic [5:0] FN_OR   = 6'h25;
  localparam logic [5:0] FN_XOR  = 6'h26;
  localparam logic [5:0] FN_NOR  = 6'h27;
  localparam logic [5:0] FN_SLT  = 6'h2a;
  localparam logic [5:0] FN_SLTU = 6'h2b;

  typedef enum logic [3:0] {
    ALU_ADD, ALU_SUB, ALU_AND, ALU_OR, ALU_XOR, ALU_NOR,
    ALU_SLT, ALU_SLTU, ALU_SLL, ALU_SRL, ALU_SRA, ALU_LUI
  } alu_op_e;

  // ------------------------------------------------------------- rGates
  // Type-1: pull-down F in series with G, G shorted by an n-FeFET.
  //   polarization 1 (n-FeFET LVT, always on)  -> F'
  //   polarization 0 (n-FeFET HVT, always off) -> (FG)'
  // Type-2: pull-down G in parallel with F through an n-FeFET.
  //   polarization 1 -> (F+G)'      polarization 0 -> F'
  typedef enum logic {RG_TYPE1 = 1'b0, RG_TYPE2 = 1'b1} rgate_type_e;

  // Replacement policy of an AND/OR gate (paper's types A..D).
  //   A: AND, cut     original F&G (key 0), obfuscated F     (key 1)
  //   B: OR,  expand  original F   (key 0), obfuscated F|G   (key 1)
  //   C: AND, expand  original F   (key 1), obfuscated F&G   (key 0)
  //   D: OR,  cut     original F|G (key 1), obfuscated F     (key 0)
  typedef enum logic [1:0] {REPL_A, REPL_B, REPL_C, REPL_D} repl_e;

  function automatic rgate_type_e repl_rgate_type(repl_e r);
    return (r == REPL_A || r == REPL_C) ? RG_TYPE1 : RG_TYPE2;
  endfunction

  // Key value under which a site computes its original gate.
  function automatic logic repl_correct_key(repl_e r);
    return (r == REPL_C || r == REPL_D);
  endfunction

  // Original (unlocked) gate of a site, used by the normal core.
  function automatic logic repl_original(repl_e r, logic f, logic g);
    case (r)
      REPL_A:  return f & g;
      REPL_D:  return f | g;
      default: return f;          // B and C: G is the added literal
    endcase
  endfunction

  // Lock sites of the core, gates of the decoder and ALU control.  Most sit
  // on decode paths that are shorter than register file -> ALU -> write-back;
  // sites 0 and 6 take a data bit (ALU zero, rt[31]) and sit at the end of a
  // data path, so their timing slack would need checking in a real flow.
  //   0 beq taken     = is_beq & eq             (A)
  //   1 reg write     = wr_base [| is_sw]        (B)
  //   2 sign extend   = is_itype & ~is_logic_imm (A)
  //   3 ALU subtract  = sub_base [| is_addiu]    (B)
  //   4 dest = rd     = is_rtype [& ~is_shift]   (C)
  //   5 ALU B = imm   = imm_base [| is_branch]   (B)
  //   6 shift fill    = rt[31] & is_sra          (A)
  //   7 shift op      = (is_sll|is_srl) | is_sra (D)
  typedef repl_e site_repl_t [N_SITES];
  localparam site_repl_t SITE_REPL = '{REPL_A, REPL_B, REPL_A, REPL_B,
                                       REPL_C, REPL_B, REPL_A, REPL_D};

  // ------------------------------------------------------ key nodes
  // K1..K8 are single register-file bits of the normal core.  With the
  // paper's 12-instruction example sequence they settle to 0000_1001.
  typedef logic [4:0] node_reg_t [K_BITS];
  typedef logic [4:0] node_bit_t [K_BITS];
  //                                    K1 K2 K3  K4 K5 K6 K7 K8
  localparam node_reg_t NODE_REG = '{5'd2, 5'd9, 5'd4, 5'd10, 5'd4, 5'd6, 5'd8, 5'd3};
  localparam node_bit_t NODE_BIT = '{5'd0, 5'd0, 5'd1, 5'd3,  5'd3, 5'd0, 5'd2, 5'd0};

  // ------------------------------------------------ wire entanglement
  // KEY_MAP[r][s] = number (1..K_BITS) of the key bit that drives site s of
  // rCore r.  Each rCore sees a different routing; every key bit drives at
  // least one rGate in every rCore.
  localparam int unsigned MAX_RCORES = 3;
  typedef logic [3:0] key_map_t [MAX_RCORES][N_SITES];
  localparam key_map_t KEY_MAP = '{
    '{4'd1, 4'd2, 4'd3, 4'd4, 4'd5, 4'd6, 4'd7, 4'd8},
    '{4'd2, 4'd3, 4'd4, 4'd6, 4'd8, 4'd7, 4'd1, 4'd5},
    '{4'd3, 4'd4, 4'd6, 4'd7, 4'd5, 4'd1, 4'd2, 4'd8}
  };

  // ---------------------------------------------------- supply control
  typedef enum logic [1:0] {VDD_WORK, VDD_WRITE, VDD_HOLD} vdd_state_e;

endpackage
