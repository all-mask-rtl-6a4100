// vdd_ctrl: supply-mode controller for reconfiguring the rGates.
//
// The rGates have two modes.  In computing mode the supply sits at V_WORK,
// below the FeFET coercive voltage, and the polarizations only are read.  In
// reconfiguring mode the supply is raised to V_R, above it, and must stay
// there for a write time before the polarizations follow the key lines.
// This block sequences that:
//   VDD_WORK  supply at V_WORK, cores run (core_en = 1).  A raise request is
//             honoured only if licence_ok, the verdict of the chip's PUF
//             authentication, is high.
//   VDD_WRITE supply at V_R (vdd_at_vr = 1), all cores halted so that the key
//             nodes of the normal core stay still.  After T_WRITE cycles at
//             V_R fe_wr pulses for one cycle: every rGate of every rCore
//             takes its key bit in that same cycle.  Dropping the request
//             earlier aborts without writing.
//   VDD_HOLD  still at V_R after the write, until the request drops.
// Each completed write counts against the FeFET endurance; after ENDURANCE
// writes worn_out rises and writes no longer take effect, modelling the
// irreversible failure of worn-out devices.  The wear count is cleared by
// reset here only so that a simulation starts from a known state.
//
// From the paper: the two supply levels and modes, holding V_R "for a period
// of time", PUF-gated supply control, the 10^5..10^10 write endurance
// (ENDURANCE defaults to the low end).  This design's own: the state machine,
// halting the cores during V_R, and T_WRITE = 1000 cycles, i.e. 1 us at the
// 1 GHz clock the paper assumes, the top of the ns..us write-time range it
// quotes.  vdd_at_vr is the request to the (analog) supply.
module vdd_ctrl
  import allmask_pkg::*;
#(
  parameter int unsigned T_WRITE   = 1000,
  parameter int unsigned ENDURANCE = 100000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic raise_req,   // user asks for V_R
  input  logic licence_ok,  // PUF authentication passed
  output logic vdd_at_vr,
  output logic core_en,
  output logic fe_wr,
  output logic worn_out
);

  localparam int unsigned CW = (T_WRITE > 1) ? $clog2(T_WRITE) : 1;
  localparam int unsigned EW = $clog2(ENDURANCE + 1);

  vdd_state_e      state;
  logic [CW-1:0]   cnt;
  logic [EW-1:0]   writes;
  logic            write_done;

  assign write_done = (state == VDD_WRITE) && raise_req && (cnt == CW'(T_WRITE - 1));
  assign worn_out   = (writes >= EW'(ENDURANCE));
  assign fe_wr      = write_done && !worn_out;
  assign vdd_at_vr  = (state != VDD_WORK);
  assign core_en    = (state == VDD_WORK);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= VDD_WORK;
      cnt    <= '0;
      writes <= '0;
    end else begin
      unique case (state)
        VDD_WORK: begin
          cnt <= '0;
          if (raise_req && licence_ok) state <= VDD_WRITE;
        end
        VDD_WRITE: begin
          if (!raise_req) state <= VDD_WORK;
          else if (write_done) begin
            state <= VDD_HOLD;
            if (!worn_out) writes <= writes + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        VDD_HOLD: if (!raise_req) state <= VDD_WORK;
        default:  state <= VDD_WORK;
      endcase
    end
  end

  // the cores never run while the supply is at V_R
  assert property (@(posedge clk) disable iff (!rst_n) vdd_at_vr |-> !core_en);
  // a write happens only at V_R
  assert property (@(posedge clk) disable iff (!rst_n) fe_wr |-> vdd_at_vr);

endmodule
