// tta_imem: instruction memory shared by a group of processing elements.
//
// DEPTH words of 23 bits. Every PE fetches its own instruction, so the memory
// has one combinational read port per PE (NPORTS) and one synchronous write
// port through which a host loads the program. As long as the PEs of a group
// run in lockstep they all read the same address, which is what sharing the
// memory means in the paper; a PE that takes a data-dependent jump can still
// fetch on its own.
// The width is the paper's 23 bits; depth, number of ports, the write port and
// the asynchronous read are this design's own choices (the paper gives no
// memory size). Memory contents are not reset; programs are written before
// the array is started.
module tta_imem
  import tta_pkg::*;
#(
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned NPORTS = 110,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  instr_t        wdata,
  input  logic [AW-1:0] raddr [NPORTS],
  output instr_t        rdata [NPORTS]
);
  instr_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  for (genvar p = 0; p < NPORTS; p++) begin : g_rd
    assign rdata[p] = mem[raddr[p]];
  end
endmodule
