// mips_core: single-cycle 32-bit MIPS core with its lockable gates exposed.
//
// Every instruction completes in the clock cycle in which it is fetched
// (CPI = 1): instruction memory and data memory are read combinationally and
// the register file, data memory and PC are written at the rising edge.
// Implemented: add addu sub subu and or xor nor slt sltu sll srl sra,
// addi addiu slti sltiu andi ori xori lui lw sw beq bne j.  There are no
// exceptions: add/addi do not trap on overflow.
//
// Eight AND/OR gates of the decoder and ALU control are not built here but
// brought out as lock sites: for site s the core drives the two operands
// site_f[s], site_g[s] and uses site_y[s] as the gate's result.  A normal
// core closes each site with its original gate; an rCore closes it with a
// reconfigurable gate, so that a wrong key alters what the core computes.
// The sites and their original gates are listed in allmask_pkg.
//
// `en` is a clock enable: while it is low no state changes (the cores are
// halted while the supply is raised for reconfiguration).  regs_o shows the
// register file so that a wrapper can tap internal nodes as key bits.
//
// The paper runs its experiments on a MIPS single-cycle CPU and lists the
// instruction sequence of its key example; the rest of this core, its
// instruction subset, the 256-word memories and the choice of lock sites are
// this design's own.
module mips_core
  import allmask_pkg::*;
#(
  parameter int unsigned IAW = 8,  // instruction memory address bits (words)
  parameter int unsigned DAW = 8   // data memory address bits (words)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  // instruction fetch
  output logic [IAW-1:0]     imem_addr,
  input  logic [31:0]        imem_rdata,
  // data memory
  output logic               dmem_we,
  output logic [DAW-1:0]     dmem_addr,
  output logic [31:0]        dmem_wdata,
  input  logic [31:0]        dmem_rdata,
  // lock sites
  output logic [N_SITES-1:0] site_f,
  output logic [N_SITES-1:0] site_g,
  input  logic [N_SITES-1:0] site_y,
  // observation of internal nodes
  output logic [31:0]        pc_o,
  output logic [31:0]        regs_o [32]
);

  logic [31:0] pc;
  logic [31:0] rf [32];

  // ------------------------------------------------------------ decode
  logic [31:0] instr;
  logic [5:0]  op, funct;
  logic [4:0]  rs, rt, rd, shamt;
  logic [15:0] imm;

  assign instr = imem_rdata;
  assign op    = instr[31:26];
  assign rs    = instr[25:21];
  assign rt    = instr[20:16];
  assign rd    = instr[15:11];
  assign shamt = instr[10:6];
  assign funct = instr[5:0];
  assign imm   = instr[15:0];

  logic is_rtype, is_sll, is_srl, is_sra, is_shift_fn;
  logic is_beq, is_bne, is_branch, is_j, is_lw, is_sw, is_addiu, is_lui;
  logic is_logic_imm, is_itype_alu, is_itype;
  logic wr_base, sub_base, imm_base;

  always_comb begin
    is_rtype     = (op == OP_RTYPE);
    is_sll       = is_rtype && funct == FN_SLL;
    is_srl       = is_rtype && funct == FN_SRL;
    is_sra       = is_rtype && funct == FN_SRA;
    is_shift_fn  = is_sll | is_srl | is_sra;
    is_beq       = (op == OP_BEQ);
    is_bne       = (op == OP_BNE);
    is_branch    = is_beq | is_bne;
    is_j         = (op == OP_J);
    is_lw        = (op == OP_LW);
    is_sw        = (op == OP_SW);
    is_addiu     = (op == OP_ADDIU);
    is_lui       = (op == OP_LUI);
    is_logic_imm = (op == OP_ANDI) || (op == OP_ORI) || (op == OP_XORI);
    is_itype_alu = (op == OP_ADDI) || is_addiu || (op == OP_SLTI) ||
                   (op == OP_SLTIU) || is_logic_imm || is_lui;
    is_itype     = is_itype_alu | is_lw | is_sw | is_branch;
    wr_base      = is_rtype | is_itype_alu | is_lw;
    sub_base     = (is_rtype && (funct == FN_SUB || funct == FN_SUBU ||
                                 funct == FN_SLT || funct == FN_SLTU)) ||
                   (op == OP_SLTI) || (op == OP_SLTIU) || is_branch;
    imm_base     = is_itype_alu | is_lw | is_sw;
  end

  // ----------------------------------------------------------- lock sites
  logic [31:0] rs_val, rt_val;
  logic eq;

  assign rs_val = rf[rs];
  assign rt_val = rf[rt];

  assign site_f[0] = is_beq;               assign site_g[0] = eq;
  assign site_f[1] = wr_base;              assign site_g[1] = is_sw;
  assign site_f[2] = is_itype;             assign site_g[2] = ~is_logic_imm;
  assign site_f[3] = sub_base;             assign site_g[3] = is_addiu;
  assign site_f[4] = is_rtype;             assign site_g[4] = ~is_shift_fn;
  assign site_f[5] = imm_base;             assign site_g[5] = is_branch;
  assign site_f[6] = rt_val[31];           assign site_g[6] = is_sra;
  assign site_f[7] = is_sll | is_srl;      assign site_g[7] = is_sra;

  logic beq_taken, reg_write, sext, alu_sub, dst_rd, alu_b_imm, fill, shift_op;
  assign beq_taken = site_y[0];
  assign reg_write = site_y[1];
  assign sext      = site_y[2];
  assign alu_sub   = site_y[3];
  assign dst_rd    = site_y[4];
  assign alu_b_imm = site_y[5];
  assign fill      = site_y[6];
  assign shift_op  = site_y[7];

  // ------------------------------------------------------------------ ALU
  logic [31:0] imm_ext, alu_b, sum, logic_res, shift_res, alu_res;
  logic [32:0] sum33;
  logic        slt_s, slt_u;
  logic [31:0] shr_res;

  assign imm_ext = sext ? {{16{imm[15]}}, imm} : {16'h0000, imm};
  assign alu_b   = alu_b_imm ? imm_ext : rt_val;
  assign sum33   = {1'b0, rs_val} + {1'b0, alu_sub ? ~alu_b : alu_b} + {32'd0, alu_sub};
  assign sum     = sum33[31:0];
  // a < b: signed from the sign of a-b corrected for overflow, unsigned from
  // the missing carry of a + ~b + 1
  assign slt_s   = (rs_val[31] != alu_b[31]) ? rs_val[31] : sum[31];
  assign slt_u   = ~sum33[32];
  assign shr_res = 32'({{32{fill}}, rt_val} >> shamt);

  always_comb begin
    logic_res = sum;
    unique case (1'b1)
      (is_rtype && funct == FN_AND) || op == OP_ANDI: logic_res = rs_val & alu_b;
      (is_rtype && funct == FN_OR)  || op == OP_ORI:  logic_res = rs_val | alu_b;
      (is_rtype && funct == FN_XOR) || op == OP_XORI: logic_res = rs_val ^ alu_b;
      (is_rtype && funct == FN_NOR):                  logic_res = ~(rs_val | alu_b);
      (is_rtype && funct == FN_SLT) || op == OP_SLTI: logic_res = {31'd0, slt_s};
      (is_rtype && funct == FN_SLTU)|| op == OP_SLTIU:logic_res = {31'd0, slt_u};
      is_lui:                                         logic_res = {imm, 16'h0000};
      default:                                        logic_res = sum;
    endcase
  end

  assign shift_res = is_sll ? (rt_val << shamt) : shr_res;
  assign alu_res   = shift_op ? shift_res : logic_res;
  assign eq        = (alu_res == 32'd0);

  // ----------------------------------------------------------- next PC
  logic [31:0] pc4, br_target, pc_next;
  logic        taken;

  assign pc4       = pc + 32'd4;
  assign br_target = pc4 + {{14{imm[15]}}, imm, 2'b00};
  assign taken     = beq_taken | (is_bne & ~eq);
  assign pc_next   = is_j  ? {pc4[31:28], instr[25:0], 2'b00} :
                     taken ? br_target : pc4;

  // ------------------------------------------------------------ memory
  assign imem_addr  = pc[IAW+1:2];
  assign dmem_we    = en & is_sw;
  assign dmem_addr  = alu_res[DAW+1:2];
  assign dmem_wdata = rt_val;

  // --------------------------------------------------------- write-back
  logic [4:0]  wr_reg;
  logic [31:0] wr_data;

  assign wr_reg  = dst_rd ? rd : rt;
  assign wr_data = is_lw ? dmem_rdata : alu_res;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc <= 32'd0;
      for (int i = 0; i < 32; i++) rf[i] <= 32'd0;
    end else if (en) begin
      pc <= pc_next;
      if (reg_write && wr_reg != 5'd0) rf[wr_reg] <= wr_data;
    end
  end

  assign pc_o   = pc;
  assign regs_o = rf;

endmodule
