// core_ram: word-wide RAM private to one core (instruction or data memory).
//
// One synchronous write port and one combinational read port, as a
// single-cycle core needs.  No reset: software must write a word before
// reading it.  The paper does not describe the cores' memories; this is the
// simplest one that lets a single-cycle core run.
module core_ram #(
  parameter int unsigned AW = 8,
  parameter int unsigned DW = 32
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);

  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];

endmodule
