// rgate: FeFET-based reconfigurable logic gate (rGate), digital model.
//
// A CMOS gate computes F' with pull-up F_p and pull-down F_n.  The rGate adds
// a second logic G and a pair of FeFETs whose gate is the key line K:
//   TYPE = RG_TYPE1: G_n in series with F_n, shorted by an n-FeFET; G_p in
//                    parallel with F_p through a p-FeFET.  Output F' when the
//                    n-FeFET is in its low-VT (always-on) state, (FG)' when
//                    it is in its high-VT (always-off) state.
//   TYPE = RG_TYPE2: the dual: F' or (F+G)'.
// The FeFET state is a non-volatile polarization bit `pol`.  It changes only
// in reconfiguring mode, when the supply is at V_R: the key K then sets it
// (K=1 -> n-FeFET low VT, K=0 -> high VT).  At V_WORK it is read only.
//
// Interface: f, g are the two logic inputs, y_n the inverting output.  `wr`
// is the end of a reconfiguration write, a single-cycle strobe raised by the
// supply controller once V_R has been held long enough; `k` must be stable
// then.  The output is combinational in f, g and pol.
//
// Follows the paper: the two structures, their two functions each, and which
// key level gives which function.  This design's own choices: the analog
// write is reduced to a clocked strobe, and the input biasing the paper
// requires during the write (F_n, G_n on for K=1; off for K=0) is taken to be
// provided by the write circuitry, so it is not a condition here.  `pol` has
// no reset, on purpose: a non-volatile device keeps its state across reset
// and power-down, and a fresh chip's state is unknown.
module rgate
  import allmask_pkg::*;
#(
  parameter rgate_type_e TYPE = RG_TYPE1
) (
  input  logic clk,
  input  logic wr,    // write strobe, supply at V_R
  input  logic k,     // key line
  input  logic f,
  input  logic g,
  output logic y_n
);

  logic pol;  // 1: n-FeFET low VT (always on), 0: high VT (always off)

  always_ff @(posedge clk) begin
    if (wr) pol <= k;
  end

  always_comb begin
    if (TYPE == RG_TYPE1) y_n = pol ? ~f : ~(f & g);
    else                  y_n = pol ? ~(f | g) : ~f;
  end

endmodule
