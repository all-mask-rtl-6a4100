// normal_core: the non-rCore, the core that generates the key.
//
// It is mips_core with every lock site closed by its original AND/OR gate,
// so its behaviour is fixed and known to the designer.  Its key output is
// K_BITS internal nodes, single bits of the register file (allmask_pkg
// NODE_REG / NODE_BIT), read live: the key is never stored anywhere else.
// The key changes as the core runs its input instruction sequence (IIS); only
// a designed IIS drives all K_BITS nodes to the values the rCores need at the
// same time.  key[K_BITS-1] is K1 and key[0] is K_BITS, so the example state
// K1..K8 = 0000 1001 is key == 8'b0000_1001.
//
// Timing: key follows the register file, so it is valid one clock after the
// instruction that writes a node.  The memories are outside (see mips_core).
//
// From the paper: a core without rGates whose chosen internal nodes form the
// key.  Which nodes are tapped is this design's choice; they were picked so
// that the paper's 12-instruction example sequence yields its example key.
module normal_core
  import allmask_pkg::*;
#(
  parameter int unsigned IAW = 8,
  parameter int unsigned DAW = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  output logic [IAW-1:0]    imem_addr,
  input  logic [31:0]       imem_rdata,
  output logic              dmem_we,
  output logic [DAW-1:0]    dmem_addr,
  output logic [31:0]       dmem_wdata,
  input  logic [31:0]       dmem_rdata,
  output logic [K_BITS-1:0] key
);

  logic [N_SITES-1:0] site_f, site_g, site_y;
  logic [31:0]        regs [32];
  logic [31:0]        pc_unused;

  mips_core #(.IAW(IAW), .DAW(DAW)) u_core (
    .clk, .rst_n, .en,
    .imem_addr, .imem_rdata,
    .dmem_we, .dmem_addr, .dmem_wdata, .dmem_rdata,
    .site_f, .site_g, .site_y,
    .pc_o   (pc_unused),
    .regs_o (regs)
  );

  // original gates at every site
  always_comb begin
    for (int s = 0; s < N_SITES; s++)
      site_y[s] = repl_original(SITE_REPL[s], site_f[s], site_g[s]);
  end

  // key tap: K(i+1) is key[K_BITS-1-i]
  always_comb begin
    for (int i = 0; i < K_BITS; i++)
      key[K_BITS-1-i] = regs[NODE_REG[i]][NODE_BIT[i]];
  end

endmodule
