// allmask_rcpu: ALL-MASK multicore CPU (rCPU), the top of the design.
//
// One normal core and N_RCORES rCores, each with private instruction and
// data memory.  The normal core has no rGates; K_BITS of its register bits
// are the key.  The key reaches the rCores only through the on-chip wire
// entanglement (allmask_pkg KEY_MAP): every key bit drives an rGate in every
// rCore, on a different site in each.  There is no key port, no key
// register and no key memory.
//
// Unlocking, as seen from the pins:
//   1. load programs (prog_*), the normal core's program being the input
//      instruction sequence (IIS), and release reset: all cores run;
//   2. raise the supply (raise_req, honoured only with licence_ok from the
//      PUF authentication): the cores halt, the supply goes to V_R
//      (vdd_at_vr), and after T_WRITE cycles all rGates of all rCores take
//      the key that the normal core's nodes hold at that moment;
//   3. drop raise_req: supply back at V_WORK, all cores resume.
// The rCores then compute correctly only if every key bit was right.
//
// Ports: por_n resets the supply controller (including its wear count) and
// is meant for power-up only; rst_n restarts the cores, which leaves the
// rGate configuration untouched.  prog_core selects the core whose instruction memory prog_we writes
// (0 = normal core, r = rCore r).  out_we/out_addr/out_data show each core's
// data-memory store bus, the visible result of its computation (core 0 is
// the normal core).  The PUF and the analog supply are outside: licence_ok
// comes in, vdd_at_vr goes out.
//
// From the paper: one core generating the key for the other n-1, keys from
// internal nodes, on-chip routing, supply raising for reconfiguration, three
// rCores (Fig. 2, 10).  This design's own: the memories and program load
// port, the store-bus outputs, the routing table.
module allmask_rcpu
  import allmask_pkg::*;
#(
  parameter int unsigned N_RCORES  = 3,
  parameter int unsigned IAW       = 8,
  parameter int unsigned DAW       = 8,
  parameter int unsigned T_WRITE   = 1000,
  parameter int unsigned ENDURANCE = 100000
) (
  input  logic              clk,
  input  logic              por_n,   // power-on reset: supply controller
  input  logic              rst_n,   // core reset: restarts all programs
  // program load
  input  logic              prog_we,
  input  logic [1:0]        prog_core,
  input  logic [IAW-1:0]    prog_addr,
  input  logic [31:0]       prog_data,
  // supply control
  input  logic              raise_req,
  input  logic              licence_ok,
  output logic              vdd_at_vr,
  output logic              worn_out,
  // store buses, core 0 = normal core
  output logic              out_we   [N_RCORES+1],
  output logic [DAW-1:0]    out_addr [N_RCORES+1],
  output logic [31:0]       out_data [N_RCORES+1]
);

  localparam int unsigned NC = N_RCORES + 1;

  if (N_RCORES < 1 || N_RCORES > MAX_RCORES) begin : g_bad_size
    $error("N_RCORES must be 1..%0d: KEY_MAP has that many rows", MAX_RCORES);
  end

  logic core_en, fe_wr;

  vdd_ctrl #(.T_WRITE(T_WRITE), .ENDURANCE(ENDURANCE)) u_vdd (
    .clk, .rst_n(por_n), .raise_req, .licence_ok,
    .vdd_at_vr, .core_en, .fe_wr, .worn_out
  );

  // per-core memories
  logic [IAW-1:0] imem_addr  [NC];
  logic [31:0]    imem_rdata [NC];
  logic [DAW-1:0] dmem_addr  [NC];
  logic [31:0]    dmem_wdata [NC];
  logic [31:0]    dmem_rdata [NC];
  logic           dmem_we    [NC];

  for (genvar c = 0; c < NC; c++) begin : g_mem
    core_ram #(.AW(IAW)) u_imem (
      .clk,
      .we    (prog_we && prog_core == 2'(c)),
      .waddr (prog_addr),
      .wdata (prog_data),
      .raddr (imem_addr[c]),
      .rdata (imem_rdata[c])
    );
    core_ram #(.AW(DAW)) u_dmem (
      .clk,
      .we    (dmem_we[c]),
      .waddr (dmem_addr[c]),
      .wdata (dmem_wdata[c]),
      .raddr (dmem_addr[c]),
      .rdata (dmem_rdata[c])
    );
    assign out_we[c]   = dmem_we[c];
    assign out_addr[c] = dmem_addr[c];
    assign out_data[c] = dmem_wdata[c];
  end

  // key generator
  logic [K_BITS-1:0] key;

  normal_core #(.IAW(IAW), .DAW(DAW)) u_normal (
    .clk, .rst_n,
    .en         (core_en),
    .imem_addr  (imem_addr[0]),
    .imem_rdata (imem_rdata[0]),
    .dmem_we    (dmem_we[0]),
    .dmem_addr  (dmem_addr[0]),
    .dmem_wdata (dmem_wdata[0]),
    .dmem_rdata (dmem_rdata[0]),
    .key
  );

  // wire entanglement and rCores
  for (genvar r = 0; r < N_RCORES; r++) begin : g_rcore
    logic [N_SITES-1:0] site_key;
    logic [31:0]        pc_unused;

    for (genvar s = 0; s < N_SITES; s++) begin : g_route
      assign site_key[s] = key[K_BITS - int'(KEY_MAP[r][s])];
    end

    rcore #(.IAW(IAW), .DAW(DAW)) u_rcore (
      .clk, .rst_n,
      .en         (core_en),
      .fe_wr,
      .site_key,
      .imem_addr  (imem_addr[r+1]),
      .imem_rdata (imem_rdata[r+1]),
      .dmem_we    (dmem_we[r+1]),
      .dmem_addr  (dmem_addr[r+1]),
      .dmem_wdata (dmem_wdata[r+1]),
      .dmem_rdata (dmem_rdata[r+1]),
      .pc         (pc_unused)
    );
  end

endmodule
