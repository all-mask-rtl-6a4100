// rcore: reconfigurable core (rCore), a CPU core locked by rGates.
//
// It is mips_core with each of its N_SITES lock sites closed by an rGate
// whose structure follows the site's replacement policy (allmask_pkg
// SITE_REPL): policies A and C (AND gates) use a type-1 rGate, B and D (OR
// gates) a type-2 rGate.  The rGate's inverted output gives back the AND/OR
// sense the core expects.  A site computes its original gate only when its
// key bit was written as repl_correct_key(policy): 0 for A and B, 1 for C and
// D.  With any other key the core still runs but computes wrong results
// (branches, register writes, immediates, subtraction, destinations,
// operand selection or shifts go astray).
//
// Interface: site_key[s] is the key line of site s, already routed by the
// wire entanglement; fe_wr is the write strobe of the reconfiguring mode and
// samples site_key into all rGates at once.  Memory ports as in mips_core;
// `en` halts the core.  Timing: the new configuration is in effect from the
// clock after fe_wr.
//
// From the paper: rGates replacing gates of a core, the two rGate types and
// the four replacement policies.  Which eight gates are replaced is this
// design's choice (gates of the decoder, off the data critical path).
module rcore
  import allmask_pkg::*;
#(
  parameter int unsigned IAW = 8,
  parameter int unsigned DAW = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               en,
  input  logic               fe_wr,
  input  logic [N_SITES-1:0] site_key,
  output logic [IAW-1:0]     imem_addr,
  input  logic [31:0]        imem_rdata,
  output logic               dmem_we,
  output logic [DAW-1:0]     dmem_addr,
  output logic [31:0]        dmem_wdata,
  input  logic [31:0]        dmem_rdata,
  output logic [31:0]        pc
);

  logic [N_SITES-1:0] site_f, site_g, site_y_n;
  logic [31:0]        regs_unused [32];

  mips_core #(.IAW(IAW), .DAW(DAW)) u_core (
    .clk, .rst_n, .en,
    .imem_addr, .imem_rdata,
    .dmem_we, .dmem_addr, .dmem_wdata, .dmem_rdata,
    .site_f, .site_g,
    .site_y (~site_y_n),
    .pc_o   (pc),
    .regs_o (regs_unused)
  );

  for (genvar s = 0; s < N_SITES; s++) begin : g_site
    rgate #(.TYPE(repl_rgate_type(SITE_REPL[s]))) u_rgate (
      .clk,
      .wr  (fe_wr),
      .k   (site_key[s]),
      .f   (site_f[s]),
      .g   (site_g[s]),
      .y_n (site_y_n[s])
    );
  end

endmodule
